// maxpool2_ip: 2x2 / stride-2 max-pooling IP of the bundle accelerator.
//
// The point-wise stage delivers its results pixel by pixel, with all output
// channels of one pixel in a row (order y, x, k), each tagged with its tile
// coordinates. A partial-max buffer holds one entry per (x/2, k) pair: the
// top-left pixel of a 2x2 window initialises the entry, the next two fold in
// with max(), and the bottom-right one completes the window and emits the
// result with its pooled coordinates (y/2, x/2, k). Tile heights and widths
// must be even; pixels must arrive in raster order within the tile.
//
// With bypass=1 every input is forwarded with its own coordinates (a bundle
// without pooling). Timing: one cycle from input to output, one value per
// cycle, no back-pressure.
//
// That pooling is a hardware IP in the bundle follows the paper; the
// buffer organisation is this design's own.
module maxpool2_ip
  import cd_pkg::*;
#(
  parameter int unsigned MAX_TW = 16,   // widest tile
  parameter int unsigned MAX_C  = CMAX  // most channels
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             bypass,
  input  logic             in_valid,
  input  fm_t              in_data,
  input  logic [HW_W-1:0]  in_y,
  input  logic [HW_W-1:0]  in_x,
  input  logic [DIM_W-1:0] in_k,
  output logic             out_valid,
  output fm_t              out_data,
  output logic [HW_W-1:0]  out_y,
  output logic [HW_W-1:0]  out_x,
  output logic [DIM_W-1:0] out_k
);

  localparam int unsigned DEPTH = (MAX_TW / 2) * MAX_C;
  localparam int unsigned IW    = $clog2(DEPTH);

  fm_t          part [DEPTH];
  logic [IW-1:0] idx;
  fm_t          cur, mx;

  always_comb begin
    idx = IW'(32'(in_x >> 1) * MAX_C + 32'(in_k));
    cur = part[idx];
    mx  = (in_data > cur) ? in_data : cur;
  end

  always_ff @(posedge clk) begin
    if (in_valid && !bypass && !(in_y[0] && in_x[0]))
      part[idx] <= (!in_y[0] && !in_x[0]) ? in_data : mx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_y     <= '0;
      out_x     <= '0;
      out_k     <= '0;
    end else begin
      out_valid <= in_valid && (bypass || (in_y[0] && in_x[0]));
      if (in_valid) begin
        out_data <= bypass ? in_data : mx;
        out_y    <= bypass ? in_y : in_y >> 1;
        out_x    <= bypass ? in_x : in_x >> 1;
        out_k    <= in_k;
      end
    end
  end

endmodule
