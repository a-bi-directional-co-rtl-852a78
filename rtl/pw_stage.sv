// pw_stage: second stage of the tile pipeline (point-wise conv, pooling,
// write-back).
//
// When the controller hands it a filled bank of the ping-pong buffer, the
// stage visits the tile's pixels in raster order; for each pixel and each
// output channel k it reads ceil(c_in/LANES) channel groups from the bank
// together with the matching weights from the weight buffer and feeds them
// to pw_conv1_ip, masking lanes beyond c_in. Each finished result carries
// its (y, x, k) tile coordinates into maxpool2_ip (bypassed when the bundle
// has no pooling), and every value leaving the pool is written to off-chip
// memory at out_base + k*Ho*Wo + Y*Wo + X, where (Y, X) are image
// coordinates of the (pooled) output map.
//
// Interface: go is a one-cycle pulse with the bank and tile geometry; done
// pulses once the last result of the tile has been written, after which the
// bank may be refilled. Buffers have one cycle read latency; off-chip writes
// are accepted every cycle. Throughput: one channel group per cycle, so a
// tile takes th*tw*c_out*ceil(c_in/LANES) cycles plus a few cycles of
// pipeline drain. This loop order is this design's choice.
module pw_stage
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
  input  layer_cfg_t                cfg,
  input  logic                      go,
  input  logic                      go_bank,
  input  logic [HW_W-1:0]           go_y0,
  input  logic [HW_W-1:0]           go_x0,
  input  logic [HW_W-1:0]           go_h,
  input  logic [HW_W-1:0]           go_w,
  output logic                      busy,
  output logic                      done,
  // ping-pong buffer read port
  output logic                      buf_rd_en,
  output logic                      buf_rd_bank,
  output logic [$clog2(GROUPS)-1:0] buf_rd_group,
  output logic [$clog2(TPIX)-1:0]   buf_rd_pix,
  input  fm_t                       buf_rd_data [LANES],
  // weight buffer read port
  output logic                      w_rd_en,
  output logic [DIM_W-1:0]          w_rd_k,
  output logic [$clog2(GROUPS)-1:0] w_rd_g,
  input  wt_t                       w_rd_w [LANES],
  input  wt_t                       w_rd_bias,
  // off-chip write port
  output logic                      wr_en,
  output logic [AW-1:0]             wr_addr,
  output logic [W_W-1:0]            wr_data
);

  localparam int unsigned LW    = $clog2(LANES);
  localparam int unsigned GW    = $clog2(GROUPS);
  localparam int unsigned TAG_W = 2 * HW_W + DIM_W;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;
  state_t state;

  logic             bank;
  logic [HW_W-1:0]  y0, x0, th, tw, y, x;
  logic [DIM_W-1:0] k;
  logic [GW-1:0]    g;            // current channel group
  logic [GW:0]      ng;           // groups per output (up to GROUPS)
  logic [$clog2(TPIX)-1:0] p;
  logic [AW-1:0]    plane_o;
  logic [HW_W-1:0]  wo;
  logic [2:0]       flush;

  // issued read, data valid next cycle
  logic             s_valid, s_first, s_last;
  logic [GW-1:0]    s_g;
  logic [TAG_W-1:0] s_tag;

  fm_t              xin [LANES];
  logic             pw_ovalid;
  fm_t              pw_odata;
  logic [TAG_W-1:0] pw_otag;
  logic             pl_ovalid;
  fm_t              pl_odata;
  logic [HW_W-1:0]  pl_y, pl_x;
  logic [DIM_W-1:0] pl_k;

  wire last_g   = ({1'b0, g} == ng - 1'b1);
  wire last_k   = (k == cfg.c_out - 1);
  wire last_x   = (x == tw - 1);
  wire last_y   = (y == th - 1);

  assign busy        = (state != S_IDLE);
  assign buf_rd_en   = (state == S_RUN);
  assign buf_rd_bank = bank;
  assign buf_rd_group = g;
  assign buf_rd_pix  = p;
  assign w_rd_en     = (state == S_RUN);
  assign w_rd_k      = k;
  assign w_rd_g      = g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      bank <= 1'b0;
      y0 <= '0; x0 <= '0; th <= '0; tw <= '0; y <= '0; x <= '0;
      k <= '0; g <= '0; ng <= '0; p <= '0;
      plane_o <= '0; wo <= '0;
      flush <= '0;
      done <= 1'b0;
      s_valid <= 1'b0; s_first <= 1'b0; s_last <= 1'b0; s_g <= '0; s_tag <= '0;
    end else begin
      done    <= 1'b0;
      s_valid <= (state == S_RUN);
      s_first <= (g == 0);
      s_last  <= last_g;
      s_g     <= g;
      s_tag   <= {y, x, k};
      unique case (state)
        S_IDLE: if (go) begin
          bank  <= go_bank;
          y0 <= go_y0; x0 <= go_x0; th <= go_h; tw <= go_w;
          y <= '0; x <= '0; k <= '0; g <= '0; p <= '0;
          ng    <= (GW+1)'((32'(cfg.c_in) + LANES - 1) >> LW);
          wo    <= cfg.pool_en ? cfg.w >> 1 : cfg.w;
          plane_o <= cfg.pool_en ? AW'(cfg.h >> 1) * AW'(cfg.w >> 1)
                                 : AW'(cfg.h) * AW'(cfg.w);
          state <= S_RUN;
        end
        S_RUN: begin
          if (!last_g) g <= g + 1'b1;
          else begin
            g <= '0;
            if (!last_k) k <= k + 1'b1;
            else begin
              k <= '0;
              p <= p + 1'b1;
              if (!last_x) x <= x + 1'b1;
              else begin
                x <= '0;
                if (!last_y) y <= y + 1'b1;
                else begin
                  flush <= 3'd5;
                  state <= S_DRAIN;
                end
              end
            end
          end
        end
        S_DRAIN: begin
          // PW IP needs 3 cycles after the last read, the pool one more
          if (flush == 0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else flush <= flush - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // mask lanes beyond the layer's input channel count
  always_comb begin
    for (int l = 0; l < LANES; l++)
      xin[l] = ((int'(s_g) * LANES + l) < int'(cfg.c_in)) ? buf_rd_data[l] : fm_t'(0);
  end

  pw_conv1_ip #(.LANES(LANES), .TAG_W(TAG_W)) u_pw (
    .clk, .rst_n,
    .shift    (cfg.shift_pw),
    .relu     (cfg.relu_pw),
    .in_valid (s_valid),
    .first    (s_first),
    .last     (s_last),
    .x        (xin),
    .w        (w_rd_w),
    .bias     (w_rd_bias),
    .tag      (s_tag),
    .out_valid(pw_ovalid),
    .out_data (pw_odata),
    .out_tag  (pw_otag)
  );

  maxpool2_ip #(.MAX_TW(TILE_W), .MAX_C(CMAX)) u_pool (
    .clk, .rst_n,
    .bypass   (!cfg.pool_en),
    .in_valid (pw_ovalid),
    .in_data  (pw_odata),
    .in_y     (pw_otag[TAG_W-1 -: HW_W]),
    .in_x     (pw_otag[DIM_W +: HW_W]),
    .in_k     (pw_otag[DIM_W-1:0]),
    .out_valid(pl_ovalid),
    .out_data (pl_odata),
    .out_y    (pl_y),
    .out_x    (pl_x),
    .out_k    (pl_k)
  );

  logic [HW_W-1:0] oy0, ox0;
  assign oy0 = cfg.pool_en ? y0 >> 1 : y0;
  assign ox0 = cfg.pool_en ? x0 >> 1 : x0;

  assign wr_en   = pl_ovalid;
  assign wr_addr = cfg.out_base + AW'(pl_k) * plane_o + AW'(oy0 + pl_y) * AW'(wo) + AW'(ox0 + pl_x);
  assign wr_data = W_W'(pl_odata);  // sign-extended

endmodule
