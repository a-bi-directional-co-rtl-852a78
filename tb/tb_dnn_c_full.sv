// tb_dnn_c_full: full-size run of DNN-C (W11, F8): 11-bit weights on the 16-bit datapath.
//
// Runs every bundle of the network on a random 3x160x360 input image with
// random weights and compares each layer's complete output feature map
// with the reference model of tb_dnn_common.svh. The accelerator keeps all
// its default parameters. Requantisation shifts are chosen here so that the
// random activations neither vanish nor all saturate; the number of
// non-zero outputs is checked as a sanity measure. The cycle count of the
// whole network is checked against the analytic model of the tile pipeline
// (the stages must overlap).
module tb_dnn_c_full;
  import cd_pkg::*;

  localparam int MEMB = 22;
  localparam int ML   = 8;
  localparam int WMAX = 1024;

`include "tb_dnn_common.svh"

  function automatic int pw_shift(int cin);
    return 5 + 4 + ($clog2(cin) + 1) / 2;
  endfunction

  initial begin
    net[0] = '{cin: 3,   cout: 48,  dw: 1, pool: 1, relu_pw: 1, sdw: 7, spw: pw_shift(3)};
    net[1] = '{cin: 48,  cout: 96,  dw: 1, pool: 1, relu_pw: 1, sdw: 7, spw: pw_shift(48)};
    net[2] = '{cin: 96,  cout: 192, dw: 1, pool: 1, relu_pw: 1, sdw: 7, spw: pw_shift(96)};
    net[3] = '{cin: 192, cout: 384, dw: 1, pool: 0, relu_pw: 1, sdw: 7, spw: pw_shift(192)};
    net[4] = '{cin: 384, cout: 512, dw: 1, pool: 0, relu_pw: 1, sdw: 7, spw: pw_shift(384)};
    net[5] = '{cin: 512, cout: 10,  dw: 0, pool: 0, relu_pw: 0, sdw: 0, spw: pw_shift(512)};
    nl = 6;
    foreach (refm[i]) refm[i] = '0;
    build(160, 360);
    for (int l = 0; l < nl; l++) ref_layer(cfg[l]);
    num_layers = ($clog2(ML)+1)'(nl);
    start = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    $display("network finished in %0d cycles, %0d words written", cycles, n_wr);
    $display("stage overlap %0d, DW stall %0d, PW wait %0d cycles",
             overlap_cycles, dw_stall_cycles, pw_wait_cycles);
    check_outputs();
    check_rate();
    checks++;
    $display("%0d non-zero reference outputs", n_nonzero);
    if (n_nonzero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
