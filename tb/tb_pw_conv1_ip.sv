// tb_pw_conv1_ip: self-checking test of the point-wise 1x1 IP.
// Feeds random dot products of 1..5 channel groups (single-beat outputs
// included), with and without gaps between beats, and compares each result
// and its tag with a sum computed here. Checks the two-cycle latency from
// the last beat to the result.
module tb_pw_conv1_ip;
  import cd_pkg::*;
  localparam int L = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [SH_W-1:0] shift;
  logic relu, in_valid, first, last, out_valid;
  fm_t x [L];
  wt_t w [L];
  wt_t bias;
  logic [31:0] tag, out_tag;
  fm_t out_data;

  pw_conv1_ip #(.LANES(L), .TAG_W(32)) dut (.clk, .rst_n, .shift, .relu, .in_valid, .first,
    .last, .x, .w, .bias, .tag, .out_valid, .out_data, .out_tag);

  int checks = 0, failures = 0, cyc = 0, lat_seen = 0;
  int last_cyc [$];
  fm_t exp_d [$];
  logic [31:0] exp_t [$];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (in_valid && last) last_cyc.push_back(cyc);
    if (rst_n && out_valid) begin
      checks++;
      if (exp_d.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        fm_t e; logic [31:0] et;
        e = exp_d.pop_front(); et = exp_t.pop_front();
        if (e !== out_data || et !== out_tag) begin
          failures++;
          $display("mismatch: got %0d/%0h exp %0d/%0h", out_data, out_tag, e, et);
        end
      end
      if (last_cyc.size() > 0 && cyc - last_cyc.pop_front() == 2) lat_seen++;
    end
  end

  task automatic one_output(int groups, bit gaps, int id);
    acc_t a;
    a = acc_t'(bias);
    for (int g = 0; g < groups; g++) begin
      if (gaps) while ($urandom_range(0, 1) == 0) begin in_valid = 0; @(negedge clk); end
      for (int l = 0; l < L; l++) begin
        x[l] = fm_t'($urandom_range(0, 255));
        w[l] = wt_t'($urandom_range(0, 65535));
        a += acc_t'(x[l]) * acc_t'(w[l]);
      end
      in_valid = 1; first = (g == 0); last = (g == groups - 1); tag = 32'(id);
      @(negedge clk);
      in_valid = 0;
    end
    exp_d.push_back(requant(a, shift, relu));
    exp_t.push_back(32'(id));
  endtask

  initial begin
    in_valid = 0; first = 0; last = 0; tag = 0; bias = 0; shift = 12; relu = 0;
    foreach (x[i]) begin x[i] = 0; w[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      bias  = wt_t'($urandom_range(0, 65535));
      if (i % 25 == 0) begin
        // shift and relu are static while results are in flight
        repeat (3) @(negedge clk);
        relu  = i[0] ^ i[3];
        shift = SH_W'(14 + (i % 8));
      end
      one_output(1 + (i % 5), i >= 100, i);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_d.size() != 0) begin failures++; $display("%0d outputs missing", exp_d.size()); end
    checks++;
    if (lat_seen != 200) begin failures++; $display("latency 2 seen %0d times", lat_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
