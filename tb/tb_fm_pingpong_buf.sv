// tb_fm_pingpong_buf: self-checking test of the two-bank tile buffer.
// Writes random values lane by lane into both banks at random (group,
// pixel) positions, keeps a shadow copy, and reads whole words back while
// writes to the other bank continue, checking the one-cycle read latency
// and that banks, groups and lanes do not alias.
module tb_fm_pingpong_buf;
  import cd_pkg::*;
  localparam int L = 16, G = 4, P = 32;

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, wr_bank, rd_en, rd_bank;
  logic [1:0] wr_group, rd_group;
  logic [4:0] wr_pix, rd_pix;
  logic [3:0] wr_lane;
  fm_t wr_data;
  fm_t rd_data [L];

  fm_pingpong_buf #(.LANES(L), .GROUPS(G), .TPIX(P)) dut (.clk, .wr_en, .wr_bank, .wr_group,
    .wr_pix, .wr_lane, .wr_data, .rd_en, .rd_bank, .rd_group, .rd_pix, .rd_data);

  int checks = 0, failures = 0;
  fm_t shadow [2][G][P][L];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; rd_bank = 0; wr_group = 0; rd_group = 0;
    wr_pix = 0; rd_pix = 0; wr_lane = 0; wr_data = 0;
    @(negedge clk);
    // fill everything once
    for (int b = 0; b < 2; b++) for (int g = 0; g < G; g++) for (int p = 0; p < P; p++)
      for (int l = 0; l < L; l++) begin
        wr_en = 1; wr_bank = 1'(b); wr_group = 2'(g); wr_pix = 5'(p); wr_lane = 4'(l);
        wr_data = fm_t'($urandom_range(0, 255));
        shadow[b][g][p][l] = wr_data;
        @(negedge clk);
      end
    // read bank 0 while rewriting bank 1, then the other way round
    for (int phase = 0; phase < 2; phase++) begin
      for (int i = 0; i < 600; i++) begin
        int rg, rp;
        rg = $urandom_range(0, G - 1); rp = $urandom_range(0, P - 1);
        rd_en = 1; rd_bank = 1'(phase); rd_group = 2'(rg); rd_pix = 5'(rp);
        wr_en = 1; wr_bank = 1'(1 - phase);
        wr_group = 2'($urandom_range(0, G - 1)); wr_pix = 5'($urandom_range(0, P - 1));
        wr_lane = 4'($urandom_range(0, L - 1)); wr_data = fm_t'($urandom_range(0, 255));
        shadow[1 - phase][wr_group][wr_pix][wr_lane] = wr_data;
        @(negedge clk);
        rd_en = 0; wr_en = 0;
        for (int l = 0; l < L; l++) begin
          checks++;
          if (rd_data[l] !== shadow[phase][rg][rp][l]) begin
            failures++;
            $display("bank %0d g %0d p %0d lane %0d: got %0d exp %0d", phase, rg, rp, l,
                     rd_data[l], shadow[phase][rg][rp][l]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
