// tb_pw_weight_buf: self-checking test of the point-wise parameter buffer.
// Loads a random c_out x c_in weight matrix and c_out biases in the order
// the loader uses (k outer, c inner, then biases) and reads back every
// (k, group) word, checking each lane and the bias one cycle after the read.
module tb_pw_weight_buf;
  import cd_pkg::*;
  localparam int L = 16, MC = 64, G = MC / L;

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, wr_is_bias, rd_en;
  logic [DIM_W-1:0] wr_k, wr_c, rd_k;
  logic [1:0] rd_g;
  wt_t wr_data, rd_bias;
  wt_t rd_w [L];

  pw_weight_buf #(.LANES(L), .MAX_C(MC)) dut (.clk, .wr_en, .wr_is_bias, .wr_k, .wr_c,
    .wr_data, .rd_en, .rd_k, .rd_g, .rd_w, .rd_bias);

  int checks = 0, failures = 0;
  wt_t wm [MC][MC];
  wt_t bm [MC];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_and_check(int cout, int cin);
    for (int k = 0; k < cout; k++) for (int c = 0; c < MC; c++)
      wm[k][c] = (c < cin) ? wt_t'($urandom_range(0, 65535)) : wm[k][c];
    for (int k = 0; k < cout; k++) bm[k] = wt_t'($urandom_range(0, 65535));
    for (int k = 0; k < cout; k++) for (int c = 0; c < cin; c++) begin
      wr_en = 1; wr_is_bias = 0; wr_k = DIM_W'(k); wr_c = DIM_W'(c); wr_data = wm[k][c];
      @(negedge clk);
    end
    for (int k = 0; k < cout; k++) begin
      wr_en = 1; wr_is_bias = 1; wr_k = DIM_W'(k); wr_c = 0; wr_data = bm[k];
      @(negedge clk);
    end
    wr_en = 0;
    for (int k = 0; k < cout; k++) for (int g = 0; g < (cin + L - 1) / L; g++) begin
      rd_en = 1; rd_k = DIM_W'(k); rd_g = 2'(g);
      @(negedge clk);
      rd_en = 0;
      for (int l = 0; l < L; l++) if (g * L + l < cin) begin
        checks++;
        if (rd_w[l] !== wm[k][g * L + l]) begin
          failures++;
          $display("w[%0d][%0d]: got %0d exp %0d", k, g * L + l, rd_w[l], wm[k][g * L + l]);
        end
      end
      checks++;
      if (rd_bias !== bm[k]) begin failures++; $display("bias[%0d] wrong", k); end
    end
  endtask

  initial begin
    wr_en = 0; wr_is_bias = 0; rd_en = 0; wr_k = 0; wr_c = 0; rd_k = 0; rd_g = 0; wr_data = 0;
    @(negedge clk);
    load_and_check(64, 64);
    load_and_check(10, 37);
    load_and_check(48, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
