// bundle_accel: folded, tile-pipelined accelerator for bundle-based DNNs.
//
// The networks this accelerator runs are stacks of one building block, a
// "bundle" made of a depth-wise 3x3 convolution, a point-wise 1x1
// convolution and a 2x2 max-pooling layer (the last bundles drop pooling or
// the DW layer). The hardware is folded across bundles: one set of IPs
// (dw_conv3_ip, pw_conv1_ip, maxpool2_ip) computes every bundle in turn,
// with intermediate feature maps kept in off-chip memory. Inside a bundle it
// is unfolded into a two-stage tile pipeline: dw_stage fetches a tile and
// runs the DW convolution into one bank of fm_pingpong_buf while pw_stage
// runs the PW convolution and pooling on the previous tile from the other
// bank and writes the result back.
//
// Operation: the host writes a table of num_layers layer descriptors (cfg)
// and pulses start. For each descriptor the controller
//   1. copies the bundle's PW weights and biases from off-chip memory into
//      pw_weight_buf (c_out*c_in + c_out reads),
//   2. starts dw_stage, and hands every finished tile bank to pw_stage,
//   3. moves on when all tiles have been written back.
// done pulses for one cycle after the last bundle. Off-chip memory is a
// plain word-addressed memory with a read port of one cycle latency and a
// write port; feature maps are stored sign-extended, one value per word.
//
// Performance counters report cycles in which both stages worked at once
// (overlap), the DW stage waited for a free bank (dw_stall) and the PW stage
// waited for a filled bank (pw_wait).
//
// Following the paper: bundle-by-bundle reuse of the same IPs, tile-based
// pipelining of the operations inside a bundle, on-chip memory between the
// IPs and off-chip feature maps and parameters, 16-bit weights with 8-bit
// feature maps. This design's choices: tile size, lane count, buffer
// organisation, the descriptor format and the memory interface.
module bundle_accel
  import cd_pkg::*;
#(
  parameter int unsigned TILE_H     = 16,
  parameter int unsigned TILE_W     = 16,
  parameter int unsigned LANES      = 16,
  parameter int unsigned MAX_LAYERS = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [$clog2(MAX_LAYERS):0]   num_layers,
  input  layer_cfg_t                    cfg [MAX_LAYERS],
  output logic                          busy,
  output logic                          done,
  output logic [$clog2(MAX_LAYERS)-1:0] cur_layer,
  // off-chip memory
  output logic                          mem_rd_en,
  output logic [AW-1:0]                 mem_rd_addr,
  input  logic [W_W-1:0]                mem_rd_data,
  output logic                          mem_wr_en,
  output logic [AW-1:0]                 mem_wr_addr,
  output logic [W_W-1:0]                mem_wr_data,
  // performance counters (cleared by start)
  output logic [31:0]                   overlap_cycles,
  output logic [31:0]                   dw_stall_cycles,
  output logic [31:0]                   pw_wait_cycles
);

  localparam int unsigned GROUPS = CMAX / LANES;
  localparam int unsigned TPIX   = TILE_H * TILE_W;
  localparam int unsigned GW     = $clog2(GROUPS);
  localparam int unsigned PW     = $clog2(TPIX);
  localparam int unsigned LW     = $clog2(LANES);

  typedef enum logic [2:0] {L_IDLE, L_CFG, L_LOADW, L_LOADW_END, L_START, L_RUN} lstate_t;
  lstate_t lstate;

  layer_cfg_t cur;

  // ---------------- PW parameter loader ----------------
  logic [DIM_W-1:0] ld_k, ld_c;
  logic             ld_bias;
  logic             ld_pend, ld_pend_bias;
  logic [DIM_W-1:0] ld_pend_k, ld_pend_c;
  logic [AW-1:0]    ld_addr;

  // ---------------- stage interconnect ----------------
  logic             dw_start, dw_all_done, dw_busy, dw_stall, dw_rd_en;
  logic [AW-1:0]    dw_rd_addr;
  logic             t_done, t_bank;
  logic [HW_W-1:0]  t_y0, t_x0, t_h, t_w;
  logic             fb_wr_en, fb_wr_bank;
  logic [GW-1:0]    fb_wr_group;
  logic [PW-1:0]    fb_wr_pix;
  logic [LW-1:0]    fb_wr_lane;
  fm_t              fb_wr_data;
  logic             fb_rd_en, fb_rd_bank;
  logic [GW-1:0]    fb_rd_group;
  logic [PW-1:0]    fb_rd_pix;
  fm_t              fb_rd_data [LANES];
  logic             wb_rd_en;
  logic [DIM_W-1:0] wb_rd_k;
  logic [GW-1:0]    wb_rd_g;
  wt_t              wb_rd_w [LANES];
  wt_t              wb_rd_bias;

  logic [1:0]       full;
  logic [HW_W-1:0]  bk_y0 [2], bk_x0 [2], bk_h [2], bk_w [2];
  logic             rbank, pw_active, pw_go, pw_busy, pw_done;

  assign busy = (lstate != L_IDLE);

  // read-port owner: loader during L_LOADW, DW stage otherwise
  always_comb begin
    if (lstate == L_LOADW) begin
      mem_rd_en   = 1'b1;
      mem_rd_addr = ld_addr;
    end else begin
      mem_rd_en   = dw_rd_en;
      mem_rd_addr = dw_rd_addr;
    end
  end

  assign ld_addr = ld_bias ? cur.pw_base + AW'(cur.c_out) * AW'(cur.c_in) + AW'(ld_k)
                           : cur.pw_base + AW'(ld_k) * AW'(cur.c_in) + AW'(ld_c);

  assign dw_start = (lstate == L_START);
  assign pw_go    = (lstate == L_RUN) && !pw_active && full[rbank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lstate       <= L_IDLE;
      cur          <= '0;
      cur_layer    <= '0;
      done         <= 1'b0;
      ld_k <= '0; ld_c <= '0; ld_bias <= 1'b0;
      ld_pend <= 1'b0; ld_pend_bias <= 1'b0; ld_pend_k <= '0; ld_pend_c <= '0;
      full         <= '0;
      rbank        <= 1'b0;
      pw_active    <= 1'b0;
      overlap_cycles  <= '0;
      dw_stall_cycles <= '0;
      pw_wait_cycles  <= '0;
      for (int b = 0; b < 2; b++) begin
        bk_y0[b] <= '0; bk_x0[b] <= '0; bk_h[b] <= '0; bk_w[b] <= '0;
      end
    end else begin
      done <= 1'b0;
      ld_pend      <= (lstate == L_LOADW);
      ld_pend_bias <= ld_bias;
      ld_pend_k    <= ld_k;
      ld_pend_c    <= ld_c;

      // bank bookkeeping
      if (t_done) begin
        full[t_bank]  <= 1'b1;
        bk_y0[t_bank] <= t_y0;
        bk_x0[t_bank] <= t_x0;
        bk_h[t_bank]  <= t_h;
        bk_w[t_bank]  <= t_w;
      end
      if (pw_go) pw_active <= 1'b1;
      if (pw_done) begin
        full[rbank] <= 1'b0;
        rbank       <= ~rbank;
        pw_active   <= 1'b0;
      end

      if (lstate == L_RUN) begin
        if (dw_busy && pw_active)            overlap_cycles  <= overlap_cycles + 1;
        if (dw_stall)                        dw_stall_cycles <= dw_stall_cycles + 1;
        if (!pw_active && !full[rbank] && !dw_all_done) pw_wait_cycles <= pw_wait_cycles + 1;
      end

      unique case (lstate)
        L_IDLE: if (start) begin
          cur_layer       <= '0;
          overlap_cycles  <= '0;
          dw_stall_cycles <= '0;
          pw_wait_cycles  <= '0;
          lstate <= (num_layers == 0) ? L_IDLE : L_CFG;
        end
        L_CFG: begin
          cur     <= cfg[cur_layer];
          ld_k    <= '0;
          ld_c    <= '0;
          ld_bias <= 1'b0;
          full    <= '0;
          rbank   <= 1'b0;
          lstate  <= L_LOADW;
        end
        L_LOADW: begin
          if (!ld_bias) begin
            if (ld_c == cur.c_in - 1) begin
              ld_c <= '0;
              if (ld_k == cur.c_out - 1) begin
                ld_k    <= '0;
                ld_bias <= 1'b1;
              end else ld_k <= ld_k + 1'b1;
            end else ld_c <= ld_c + 1'b1;
          end else begin
            if (ld_k == cur.c_out - 1) lstate <= L_LOADW_END;
            else ld_k <= ld_k + 1'b1;
          end
        end
        L_LOADW_END: lstate <= L_START;  // last word lands in the buffer
        L_START: lstate <= L_RUN;
        L_RUN: if (dw_all_done && !t_done && full == 2'b00 && !pw_active && !pw_busy) begin
          if (32'(cur_layer) + 1 >= 32'(num_layers)) begin
            lstate <= L_IDLE;
            done   <= 1'b1;
          end else begin
            cur_layer <= cur_layer + 1'b1;
            lstate    <= L_CFG;
          end
        end
        default: lstate <= L_IDLE;
      endcase
    end
  end

  pw_weight_buf #(.LANES(LANES), .MAX_C(CMAX)) u_wbuf (
    .clk,
    .wr_en     (ld_pend),
    .wr_is_bias(ld_pend_bias),
    .wr_k      (ld_pend_k),
    .wr_c      (ld_pend_c),
    .wr_data   (wt_t'(mem_rd_data)),
    .rd_en     (wb_rd_en),
    .rd_k      (wb_rd_k),
    .rd_g      (wb_rd_g),
    .rd_w      (wb_rd_w),
    .rd_bias   (wb_rd_bias)
  );

  fm_pingpong_buf #(.LANES(LANES), .GROUPS(GROUPS), .TPIX(TPIX)) u_fbuf (
    .clk,
    .wr_en   (fb_wr_en),
    .wr_bank (fb_wr_bank),
    .wr_group(fb_wr_group),
    .wr_pix  (fb_wr_pix),
    .wr_lane (fb_wr_lane),
    .wr_data (fb_wr_data),
    .rd_en   (fb_rd_en),
    .rd_bank (fb_rd_bank),
    .rd_group(fb_rd_group),
    .rd_pix  (fb_rd_pix),
    .rd_data (fb_rd_data)
  );

  dw_stage #(.TILE_H(TILE_H), .TILE_W(TILE_W), .LANES(LANES), .GROUPS(GROUPS), .TPIX(TPIX)) u_dws (
    .clk, .rst_n,
    .start       (dw_start),
    .cfg         (cur),
    .bank_free   (~full),
    .all_done    (dw_all_done),
    .busy        (dw_busy),
    .stall       (dw_stall),
    .rd_en       (dw_rd_en),
    .rd_addr     (dw_rd_addr),
    .rd_data     (mem_rd_data),
    .tile_done   (t_done),
    .tile_bank   (t_bank),
    .tile_y0     (t_y0),
    .tile_x0     (t_x0),
    .tile_h      (t_h),
    .tile_w      (t_w),
    .buf_wr_en   (fb_wr_en),
    .buf_wr_bank (fb_wr_bank),
    .buf_wr_group(fb_wr_group),
    .buf_wr_pix  (fb_wr_pix),
    .buf_wr_lane (fb_wr_lane),
    .buf_wr_data (fb_wr_data)
  );

  pw_stage #(.TILE_H(TILE_H), .TILE_W(TILE_W), .LANES(LANES), .GROUPS(GROUPS), .TPIX(TPIX)) u_pws (
    .clk, .rst_n,
    .cfg         (cur),
    .go          (pw_go),
    .go_bank     (rbank),
    .go_y0       (bk_y0[rbank]),
    .go_x0       (bk_x0[rbank]),
    .go_h        (bk_h[rbank]),
    .go_w        (bk_w[rbank]),
    .busy        (pw_busy),
    .done        (pw_done),
    .buf_rd_en   (fb_rd_en),
    .buf_rd_bank (fb_rd_bank),
    .buf_rd_group(fb_rd_group),
    .buf_rd_pix  (fb_rd_pix),
    .buf_rd_data (fb_rd_data),
    .w_rd_en     (wb_rd_en),
    .w_rd_k      (wb_rd_k),
    .w_rd_g      (wb_rd_g),
    .w_rd_w      (wb_rd_w),
    .w_rd_bias   (wb_rd_bias),
    .wr_en       (mem_wr_en),
    .wr_addr     (mem_wr_addr),
    .wr_data     (mem_wr_data)
  );

  // A bank is only handed to the PW stage after the DW stage has filled it.
  property p_no_overwrite;
    @(posedge clk) disable iff (!rst_n) fb_wr_en |-> !(pw_active && fb_wr_bank == rbank);
  endproperty
  assert property (p_no_overwrite) else $error("DW stage wrote into the bank being read");

endmodule
