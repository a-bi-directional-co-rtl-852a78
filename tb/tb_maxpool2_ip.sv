// tb_maxpool2_ip: self-checking test of the 2x2 max-pooling IP.
// Streams random tiles in (y, x, k) order with several channel counts and
// tile sizes, compares the pooled values and their coordinates with a
// reference computed here, then checks bypass mode.
module tb_maxpool2_ip;
  import cd_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bypass, in_valid, out_valid;
  fm_t in_data, out_data;
  logic [HW_W-1:0] in_y, in_x, out_y, out_x;
  logic [DIM_W-1:0] in_k, out_k;

  maxpool2_ip #(.MAX_TW(16), .MAX_C(64)) dut (.clk, .rst_n, .bypass, .in_valid, .in_data,
    .in_y, .in_x, .in_k, .out_valid, .out_data, .out_y, .out_x, .out_k);

  int checks = 0, failures = 0;
  typedef struct { fm_t d; int y, x, k; } res_t;
  res_t expq [$];
  fm_t t [16][16][64];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    res_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      if (e.d !== out_data || e.y != int'(out_y) || e.x != int'(out_x) || e.k != int'(out_k)) begin
        failures++;
        $display("mismatch: got %0d (%0d,%0d,%0d) exp %0d (%0d,%0d,%0d)",
                 out_data, out_y, out_x, out_k, e.d, e.y, e.x, e.k);
      end
    end
  end

  task automatic run_tile(int h, int w, int c, bit byp);
    bypass = byp;
    for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) for (int k = 0; k < c; k++)
      t[y][x][k] = fm_t'($urandom_range(0, 255));
    if (byp) begin
      for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) for (int k = 0; k < c; k++)
        expq.push_back('{t[y][x][k], y, x, k});
    end else begin
      for (int y = 0; y < h; y += 2) for (int x = 0; x < w; x += 2) for (int k = 0; k < c; k++) begin
        fm_t m;
        m = t[y][x][k];
        if (t[y][x+1][k] > m) m = t[y][x+1][k];
        if (t[y+1][x][k] > m) m = t[y+1][x][k];
        if (t[y+1][x+1][k] > m) m = t[y+1][x+1][k];
        expq.push_back('{m, y / 2, x / 2, k});
      end
    end
    for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) for (int k = 0; k < c; k++) begin
      in_valid = 1; in_data = t[y][x][k];
      in_y = HW_W'(y); in_x = HW_W'(x); in_k = DIM_W'(k);
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    @(negedge clk);
  endtask

  initial begin
    bypass = 0; in_valid = 0; in_data = 0; in_y = 0; in_x = 0; in_k = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_tile(4, 4, 1, 0);
    run_tile(16, 16, 3, 0);
    run_tile(6, 10, 64, 0);
    run_tile(2, 16, 17, 0);
    run_tile(3, 5, 2, 1);
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
