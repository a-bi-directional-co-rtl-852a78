// tb_dw_conv3_ip: self-checking test of the depth-wise 3x3 IP.
// Streams random halo frames of several sizes (including back-to-back
// frames and gaps in the valid stream), then a bypass frame, and compares
// every output with a convolution computed here, including the two-cycle
// latency of a gap-free stream.
module tb_dw_conv3_ip;
  import cd_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [HW_W-1:0] fh, fw;
  logic bypass, relu, in_valid;
  logic [SH_W-1:0] shift;
  wt_t w [9];
  wt_t bias;
  fm_t in_data;
  logic out_valid;
  fm_t out_data;

  dw_conv3_ip dut (.clk, .rst_n, .frame_h(fh), .frame_w(fw), .bypass, .w, .bias,
                   .shift, .relu, .in_valid, .in_data, .out_valid, .out_data);

  int checks = 0, failures = 0;
  fm_t img [18][18];
  fm_t expq [$];
  int  cyc = 0, last_in_cyc = 0, last_out_cyc = 0;
  // inputs change on the falling edge; this sampler runs on the rising one
  always @(posedge clk) begin
    cyc++;
    if (in_valid) last_in_cyc = cyc;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    fm_t e;
    checks++;
    last_out_cyc = cyc;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      if (e !== out_data) begin
        failures++;
        $display("mismatch at cycle %0d: got %0d exp %0d (left %0d)", cyc, out_data, e, expq.size());
      end
    end
  end

  task automatic run_frame(int h, int wd, bit byp, bit gaps);
    acc_t a;
    @(negedge clk);
    fh = HW_W'(h); fw = HW_W'(wd); bypass = byp;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < wd; x++) img[y][x] = fm_t'($urandom_range(0, 255));
    if (byp) begin
      for (int y = 0; y < h; y++) for (int x = 0; x < wd; x++) expq.push_back(img[y][x]);
    end else begin
      for (int y = 0; y < h - 2; y++)
        for (int x = 0; x < wd - 2; x++) begin
          a = acc_t'(bias);
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              a += acc_t'(img[y+ky][x+kx]) * acc_t'(w[ky*3+kx]);
          expq.push_back(requant(a, shift, relu));
        end
    end
    for (int y = 0; y < h; y++)
      for (int x = 0; x < wd; x++) begin
        if (gaps) while ($urandom_range(0, 2) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_data  = img[y][x];
        @(negedge clk);
      end
    in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_data = 0; bypass = 0; relu = 1; shift = 6; fh = 3; fw = 3; bias = 0;
    foreach (w[i]) w[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < 6; t++) begin
      foreach (w[i]) w[i] = wt_t'($urandom_range(0, 400)) - 200;
      bias  = wt_t'($urandom_range(0, 2000)) - 1000;
      relu  = t[0];
      shift = SH_W'(4 + t);
      run_frame(3 + t, 18 - 2 * t, 0, t >= 3);
      repeat (4) @(posedge clk);
      if (t < 3) begin
        // gap-free stream: last output two cycles after the last input beat
        checks++;
        if (last_out_cyc - last_in_cyc != 2) begin
          failures++;
          $display("latency %0d, expected 2", last_out_cyc - last_in_cyc);
        end
      end
    end
    // back-to-back frames without gap
    foreach (w[i]) w[i] = wt_t'($urandom_range(0, 200)) - 100;
    run_frame(5, 6, 0, 0);
    run_frame(5, 6, 0, 0);
    run_frame(4, 5, 1, 0);
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
