// dw_conv3_ip: depth-wise 3x3 convolution IP of the bundle accelerator.
//
// One channel of a feature-map tile arrives as a raster stream (row by row,
// one pixel per valid beat). The tile carries a one-pixel halo, so a frame of
// frame_h x frame_w input pixels yields (frame_h-2) x (frame_w-2) outputs
// ("valid" convolution over the halo tile = "same" convolution over the
// image). Two line buffers hold the previous two rows and a 3x3 register
// window slides over the stream; nine multipliers and an adder tree form the
// weighted sum, the bias is added, and the result is shifted, optionally
// passed through ReLU and saturated to the feature-map width.
//
// With bypass=1 the unit forwards each input pixel unchanged, which is how a
// bundle without a DW layer (a lone PW-Conv1) passes through the pipeline.
//
// Interface: weights w[ky*3+kx], bias, shift and relu must be stable while a
// frame streams. Row/column counters wrap at the end of a frame, so frames
// may follow each other without a gap. Timing: an output appears two clock
// cycles after the input beat that completes its window; one output per
// cycle at most. No back-pressure.
//
// That the DW convolution is a hardware IP reused for all bundles follows
// the paper; the line-buffer structure, halo handling and requantisation are
// this design's choices.
module dw_conv3_ip
  import cd_pkg::*;
#(
  parameter int unsigned MAX_W = 18  // widest frame (tile width + 2)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [HW_W-1:0]      frame_h,
  input  logic [HW_W-1:0]      frame_w,
  input  logic                 bypass,
  input  wt_t                  w [9],
  input  wt_t                  bias,
  input  logic [SH_W-1:0]      shift,
  input  logic                 relu,
  input  logic                 in_valid,
  input  fm_t                  in_data,
  output logic                 out_valid,
  output fm_t                  out_data
);

  localparam int unsigned CW = $clog2(MAX_W);

  fm_t            lb0 [MAX_W];  // row r-1
  fm_t            lb1 [MAX_W];  // row r-2
  fm_t            win [3][3];   // [row][col], row 0 oldest, col 2 newest
  logic [HW_W-1:0] row, col;
  logic           s1_valid, s1_byp;
  fm_t            s1_data;
  acc_t           mac;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row      <= '0;
      col      <= '0;
      s1_valid <= 1'b0;
      s1_byp   <= 1'b0;
      s1_data  <= '0;
    end else begin
      s1_valid <= 1'b0;
      if (in_valid) begin
        if (bypass) begin
          s1_valid <= 1'b1;
          s1_byp   <= 1'b1;
          s1_data  <= in_data;
        end else begin
          s1_valid <= (row >= 2) && (col >= 2);
          s1_byp   <= 1'b0;
        end
        if (col == frame_w - 1) begin
          col <= '0;
          row <= (row == frame_h - 1) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  // Window and line buffers (no reset needed: windows touching unwritten
  // entries are never marked valid).
  always_ff @(posedge clk) begin
    if (in_valid && !bypass) begin
      for (int i = 0; i < 3; i++) begin
        win[i][0] <= win[i][1];
        win[i][1] <= win[i][2];
      end
      win[0][2]        <= lb1[col[CW-1:0]];
      win[1][2]        <= lb0[col[CW-1:0]];
      win[2][2]        <= in_data;
      lb1[col[CW-1:0]] <= lb0[col[CW-1:0]];
      lb0[col[CW-1:0]] <= in_data;
    end
  end

  always_comb begin
    mac = acc_t'(bias);
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++)
        mac += acc_t'(win[ky][kx]) * acc_t'(w[ky*3+kx]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= s1_valid;
      if (s1_valid) out_data <= s1_byp ? s1_data : requant(mac, shift, relu);
    end
  end

endmodule
