// dw_stage: first stage of the tile pipeline (fetch + depth-wise conv).
//
// For one bundle it walks the input feature map tile by tile (TILE_H x TILE_W
// output pixels, smaller at the right and bottom edges). For each tile and
// each input channel it first reads the channel's nine DW weights and bias
// from off-chip memory, then streams the tile with a one-pixel halo from
// off-chip memory into dw_conv3_ip, substituting zeros for halo pixels that
// fall outside the image (zero "same" padding). The convolved channel is
// written into the free bank of the ping-pong buffer. When all channels of a
// tile are in, the bank is handed to the point-wise stage (tile_done) and the
// next tile goes to the other bank; if that bank is still being read, the
// stage stalls (stall=1) until it is released.
//
// For a bundle without DW layer (cfg.dw_en=0) the tile is streamed without
// halo and the IP is put in bypass, so the buffer receives the raw input.
//
// Interface: start is a one-cycle pulse with cfg stable until all_done.
// Off-chip reads have a fixed latency of one cycle (rd_data valid the cycle
// after rd_en). Throughput: one pixel per cycle while streaming.
// Tiling, halo fetch and the read-weights-per-channel order are this
// design's choices; the paper only states that bundles are computed tile by
// tile in a pipeline on shared IPs.
module dw_stage
  import cd_pkg::*;
#(
  parameter int unsigned TILE_H = 16,
  parameter int unsigned TILE_W = 16,
  parameter int unsigned LANES  = 16,
  parameter int unsigned GROUPS = CMAX / LANES,
  parameter int unsigned TPIX   = TILE_H * TILE_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  layer_cfg_t                cfg,
  input  logic [1:0]                bank_free,
  output logic                      all_done,
  output logic                      busy,
  output logic                      stall,
  // off-chip read port
  output logic                      rd_en,
  output logic [AW-1:0]             rd_addr,
  input  logic [W_W-1:0]            rd_data,
  // hand-over of a finished tile
  output logic                      tile_done,
  output logic                      tile_bank,
  output logic [HW_W-1:0]           tile_y0,
  output logic [HW_W-1:0]           tile_x0,
  output logic [HW_W-1:0]           tile_h,
  output logic [HW_W-1:0]           tile_w,
  // ping-pong buffer write port
  output logic                      buf_wr_en,
  output logic                      buf_wr_bank,
  output logic [$clog2(GROUPS)-1:0] buf_wr_group,
  output logic [$clog2(TPIX)-1:0]   buf_wr_pix,
  output logic [$clog2(LANES)-1:0]  buf_wr_lane,
  output fm_t                       buf_wr_data
);

  localparam int unsigned LW = $clog2(LANES);

  typedef enum logic [2:0] {S_IDLE, S_TILE, S_PARAM, S_STREAM, S_DRAIN, S_NEXT, S_DONE} state_t;
  state_t state;

  logic [HW_W-1:0]  y0, x0, th, tw, r, s;
  logic [DIM_W-1:0] c;
  logic [3:0]       pidx;      // parameter word being requested
  logic             p_pend;    // a parameter read is in flight
  logic [3:0]       p_slot;    // where the in-flight word goes
  logic             wbank;
  logic [AW-1:0]    plane;     // h * w
  logic [$clog2(TPIX+1)-1:0] ocnt;
  wt_t              wreg [9];
  wt_t              breg;
  logic             px_pend, px_pad;

  logic [HW_W-1:0]  fh, fw;
  logic signed [HW_W+1:0] gy, gx;
  logic             pad;
  logic             ip_valid, ip_ovalid;
  fm_t              ip_data, ip_odata;

  always_comb begin
    fh  = cfg.dw_en ? th + 2 : th;
    fw  = cfg.dw_en ? tw + 2 : tw;
    gy  = $signed({2'b0, y0}) + $signed({2'b0, r}) - (cfg.dw_en ? 1 : 0);
    gx  = $signed({2'b0, x0}) + $signed({2'b0, s}) - (cfg.dw_en ? 1 : 0);
    pad = (gy < 0) || (gx < 0) || (gy >= $signed({2'b0, cfg.h})) || (gx >= $signed({2'b0, cfg.w}));
  end

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = '0;
    if (state == S_PARAM && pidx < 10) begin
      rd_en   = 1'b1;
      rd_addr = cfg.dw_base + AW'(c) * 10 + AW'(pidx);
    end else if (state == S_STREAM && !pad) begin
      rd_en   = 1'b1;
      rd_addr = cfg.in_base + AW'(c) * plane + AW'(gy) * AW'(cfg.w) + AW'(gx);
    end
  end

  assign busy  = (state != S_IDLE) && (state != S_DONE);
  assign stall = (state == S_TILE) && !bank_free[wbank];
  assign all_done = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      y0 <= '0; x0 <= '0; th <= '0; tw <= '0; r <= '0; s <= '0;
      c         <= '0;
      pidx      <= '0;
      p_pend    <= 1'b0;
      p_slot    <= '0;
      wbank     <= 1'b0;
      plane     <= '0;
      ocnt      <= '0;
      px_pend   <= 1'b0;
      px_pad    <= 1'b0;
      tile_done <= 1'b0;
      tile_bank <= 1'b0;
      tile_y0 <= '0; tile_x0 <= '0; tile_h <= '0; tile_w <= '0;
      breg      <= '0;
      for (int i = 0; i < 9; i++) wreg[i] <= '0;
    end else begin
      tile_done <= 1'b0;
      // capture parameter words one cycle after their read
      p_pend <= (state == S_PARAM) && (pidx < 10);
      p_slot <= pidx;
      if (p_pend) begin
        if (p_slot < 9) wreg[p_slot] <= wt_t'(rd_data);
        else            breg         <= wt_t'(rd_data);
      end
      // pixel stream: data or padding arrives one cycle after the request
      px_pend <= (state == S_STREAM);
      px_pad  <= pad;
      if (ip_ovalid) ocnt <= ocnt + 1'b1;

      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_TILE;
          y0    <= '0;
          x0    <= '0;
          wbank <= 1'b0;
          plane <= AW'(cfg.h) * AW'(cfg.w);
        end
        S_TILE: if (bank_free[wbank]) begin
          th    <= (cfg.h - y0 < HW_W'(TILE_H)) ? cfg.h - y0 : HW_W'(TILE_H);
          tw    <= (cfg.w - x0 < HW_W'(TILE_W)) ? cfg.w - x0 : HW_W'(TILE_W);
          c     <= '0;
          pidx  <= '0;
          ocnt  <= '0;
          r     <= '0;
          s     <= '0;
          state <= cfg.dw_en ? S_PARAM : S_STREAM;
        end
        S_PARAM: begin
          if (pidx < 10) pidx <= pidx + 1'b1;
          else if (!p_pend) state <= S_STREAM;  // last word captured
        end
        S_STREAM: begin
          if (s == fw - 1) begin
            s <= '0;
            if (r == fh - 1) begin
              r     <= '0;
              state <= S_DRAIN;
            end else r <= r + 1'b1;
          end else s <= s + 1'b1;
        end
        S_DRAIN: if (ocnt == th * tw) begin
          ocnt <= '0;
          pidx <= '0;
          if (c == cfg.c_in - 1) state <= S_NEXT;
          else begin
            c     <= c + 1'b1;
            state <= cfg.dw_en ? S_PARAM : S_STREAM;
          end
        end
        S_NEXT: begin
          tile_done <= 1'b1;
          tile_bank <= wbank;
          tile_y0   <= y0;
          tile_x0   <= x0;
          tile_h    <= th;
          tile_w    <= tw;
          wbank     <= ~wbank;
          if (x0 + tw >= cfg.w) begin
            x0 <= '0;
            if (y0 + th >= cfg.h) state <= S_DONE;
            else begin
              y0    <= y0 + th;
              state <= S_TILE;
            end
          end else begin
            x0    <= x0 + tw;
            state <= S_TILE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign ip_valid = px_pend;
  assign ip_data  = px_pad ? fm_t'(0) : fm_t'(rd_data[FM_W-1:0]);

  dw_conv3_ip #(.MAX_W(TILE_W + 2)) u_dw (
    .clk, .rst_n,
    .frame_h (fh),
    .frame_w (fw),
    .bypass  (!cfg.dw_en),
    .w       (wreg),
    .bias    (breg),
    .shift   (cfg.shift_dw),
    .relu    (cfg.relu_dw),
    .in_valid(ip_valid),
    .in_data (ip_data),
    .out_valid(ip_ovalid),
    .out_data (ip_odata)
  );

  assign buf_wr_en    = ip_ovalid;
  assign buf_wr_bank  = wbank;
  assign buf_wr_group = ($clog2(GROUPS))'(c >> LW);
  assign buf_wr_lane  = c[LW-1:0];
  assign buf_wr_pix   = ($clog2(TPIX))'(ocnt);
  assign buf_wr_data  = ip_odata;

endmodule
