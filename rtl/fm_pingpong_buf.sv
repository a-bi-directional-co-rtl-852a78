// fm_pingpong_buf: two-bank on-chip feature-map buffer between the
// depth-wise and point-wise stages of the tile pipeline.
//
// While the depth-wise stage writes tile t+1 into one bank, the point-wise
// stage reads tile t from the other; the controller swaps the roles when both
// are done. Inside a bank the tile is stored as words of LANES channels:
// word (group, pix) holds channels group*LANES .. group*LANES+LANES-1 of tile
// pixel pix, so the point-wise IP reads all its lanes in one access.
//
// Interface: the write port stores one channel value (one lane) per cycle;
// the read port returns a whole LANES-wide word one cycle after rd_en
// (synchronous read, as in a block RAM).
//
// The paper shows a single "on-chip memory" shared by the IPs; splitting it
// into banks and this word layout are this design's choices.
module fm_pingpong_buf
  import cd_pkg::*;
#(
  parameter int unsigned LANES  = 16,
  parameter int unsigned GROUPS = CMAX / LANES,
  parameter int unsigned TPIX   = 256   // pixels of the largest tile
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic                      wr_bank,
  input  logic [$clog2(GROUPS)-1:0] wr_group,
  input  logic [$clog2(TPIX)-1:0]   wr_pix,
  input  logic [$clog2(LANES)-1:0]  wr_lane,
  input  fm_t                       wr_data,
  input  logic                      rd_en,
  input  logic                      rd_bank,
  input  logic [$clog2(GROUPS)-1:0] rd_group,
  input  logic [$clog2(TPIX)-1:0]   rd_pix,
  output fm_t                       rd_data [LANES]
);

  localparam int unsigned DEPTH = 2 * GROUPS * TPIX;

  logic [LANES-1:0][FM_W-1:0] mem [DEPTH];

  function automatic int unsigned addr(logic b, int unsigned g, int unsigned p);
    return (int'(b) * GROUPS + g) * TPIX + p;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[addr(wr_bank, 32'(wr_group), 32'(wr_pix))][wr_lane] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int l = 0; l < LANES; l++) rd_data[l] <= fm_t'(mem[addr(rd_bank, 32'(rd_group), 32'(rd_pix))][l]);
  end

endmodule
