// pw_weight_buf: on-chip parameter buffer of the point-wise convolution.
//
// Before a bundle runs, its point-wise weights and biases are copied from
// off-chip memory into this buffer, one value per cycle; the point-wise stage
// then reads, for output channel k and channel group g, the LANES weights
// w[k][g*LANES .. g*LANES+LANES-1] and the bias of k in one access. Weights
// are stored as LANES-wide words at address k*GROUPS+g.
//
// Interface: write one weight (wr_is_bias=0, at (wr_k, wr_c)) or one bias
// (wr_is_bias=1, at wr_k) per cycle. Reads are synchronous: data one cycle
// after rd_en.
//
// The paper places parameters ("Para.") in off-chip memory next to an
// on-chip memory; keeping a whole bundle's PW weights on chip is this
// design's choice.
module pw_weight_buf
  import cd_pkg::*;
#(
  parameter int unsigned LANES  = 16,
  parameter int unsigned MAX_C  = CMAX,
  parameter int unsigned GROUPS = MAX_C / LANES
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic                      wr_is_bias,
  input  logic [DIM_W-1:0]          wr_k,
  input  logic [DIM_W-1:0]          wr_c,
  input  wt_t                       wr_data,
  input  logic                      rd_en,
  input  logic [DIM_W-1:0]          rd_k,
  input  logic [$clog2(GROUPS)-1:0] rd_g,
  output wt_t                       rd_w [LANES],
  output wt_t                       rd_bias
);

  localparam int unsigned LW = $clog2(LANES);
  localparam int unsigned DEPTH = MAX_C * GROUPS;
  localparam int unsigned AWB = $clog2(DEPTH);

  logic [LANES-1:0][W_W-1:0] wmem [DEPTH];
  wt_t                       bmem [MAX_C];

  logic [AWB-1:0] waddr, raddr;
  always_comb begin
    waddr = AWB'(int'(wr_k) * GROUPS + (int'(wr_c) >> LW));
    raddr = AWB'(int'(rd_k) * GROUPS + int'(rd_g));
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_is_bias) bmem[wr_k[$clog2(MAX_C)-1:0]] <= wr_data;
      else            wmem[waddr][wr_c[LW-1:0]] <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int l = 0; l < LANES; l++) rd_w[l] <= wt_t'(wmem[raddr][l]);
      rd_bias <= bmem[rd_k[$clog2(MAX_C)-1:0]];
    end
  end

endmodule
