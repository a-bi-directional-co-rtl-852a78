// tb_dnn_common.svh: body shared by the full-network testbenches.
// Declares the accelerator, a model of off-chip memory (one-cycle read
// latency), a reference model of one bundle, a task that lays a network's
// input, parameters and feature maps out in memory and fills the layer
// descriptor table, and a task that compares every layer's output with the
// reference. The including module defines MEMB (log2 of the memory size in
// words), ML (descriptor table size, the accelerator default) and WMAX
// (largest weight magnitude, to emulate a narrower weight precision).

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int MEMW = 1 << MEMB;

  logic start, busy, done;
  logic [$clog2(ML):0] num_layers;
  layer_cfg_t cfg [ML];
  logic [$clog2(ML)-1:0] cur_layer;
  logic mem_rd_en, mem_wr_en;
  logic [AW-1:0] mem_rd_addr, mem_wr_addr;
  logic [W_W-1:0] mem_rd_data, mem_wr_data;
  logic [31:0] overlap_cycles, dw_stall_cycles, pw_wait_cycles;

  bundle_accel dut (.clk, .rst_n, .start, .num_layers, .cfg, .busy, .done, .cur_layer,
    .mem_rd_en, .mem_rd_addr, .mem_rd_data, .mem_wr_en, .mem_wr_addr, .mem_wr_data,
    .overlap_cycles, .dw_stall_cycles, .pw_wait_cycles);

  // off-chip memory model: one-cycle read latency
  logic [W_W-1:0] mem [MEMW];
  logic [W_W-1:0] refm [MEMW];
  always_ff @(posedge clk) begin
    if (mem_rd_en) mem_rd_data <= mem[mem_rd_addr[MEMB-1:0]];
    if (mem_wr_en) mem[mem_wr_addr[MEMB-1:0]] <= mem_wr_data;
  end

  int checks = 0, failures = 0;
  int n_sat = 0, n_pad = 0, n_partial = 0, n_pool = 0, n_nopool = 0, n_bypass = 0;
  int n_multigroup = 0, n_mask = 0, n_relu = 0, n_wr = 0, n_nonzero = 0;
  int cycles = 0;
  always @(posedge clk) if (busy) cycles++;
  always @(posedge clk) if (mem_wr_en) n_wr++;

  initial begin
    repeat (100_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- network description ----------------
  typedef struct { int cin, cout; bit dw, pool, relu_pw; int sdw, spw; } lspec_t;
  lspec_t net [8];
  int nl;

  function automatic fm_t rd_fm(int a);
    return fm_t'(refm[a][FM_W-1:0]);
  endfunction

  // reference model of one bundle, reading and writing refm
  task automatic ref_layer(layer_cfg_t c);
    int h, w, ho, wo;
    fm_t dwo [];
    fm_t pwo [];
    acc_t a;
    h = int'(c.h); w = int'(c.w);
    dwo = new[int'(c.c_in) * h * w];
    pwo = new[int'(c.c_out) * h * w];
    for (int ch = 0; ch < int'(c.c_in); ch++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          if (c.dw_en) begin
            a = acc_t'(wt_t'(refm[int'(c.dw_base) + ch * 10 + 9]));
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                int yy, xx;
                yy = y + ky - 1; xx = x + kx - 1;
                if (yy >= 0 && yy < h && xx >= 0 && xx < w)
                  a += acc_t'(rd_fm(int'(c.in_base) + ch * h * w + yy * w + xx)) *
                       acc_t'(wt_t'(refm[int'(c.dw_base) + ch * 10 + ky * 3 + kx]));
                else n_pad++;
              end
            if (saturates(a, c.shift_dw, c.relu_dw)) n_sat++;
            dwo[(ch * h + y) * w + x] = requant(a, c.shift_dw, c.relu_dw);
          end else
            dwo[(ch * h + y) * w + x] = rd_fm(int'(c.in_base) + ch * h * w + y * w + x);
        end
    for (int k = 0; k < int'(c.c_out); k++)
      for (int p = 0; p < h * w; p++) begin
        a = acc_t'(wt_t'(refm[int'(c.pw_base) + int'(c.c_out) * int'(c.c_in) + k]));
        for (int ch = 0; ch < int'(c.c_in); ch++)
          a += acc_t'(dwo[ch * h * w + p]) *
               acc_t'(wt_t'(refm[int'(c.pw_base) + k * int'(c.c_in) + ch]));
        if (saturates(a, c.shift_pw, c.relu_pw)) n_sat++;
        if (c.relu_pw && (a >>> c.shift_pw) < 0) n_relu++;
        pwo[k * h * w + p] = requant(a, c.shift_pw, c.relu_pw);
      end
    ho = c.pool_en ? h / 2 : h;
    wo = c.pool_en ? w / 2 : w;
    for (int k = 0; k < int'(c.c_out); k++)
      for (int y = 0; y < ho; y++)
        for (int x = 0; x < wo; x++) begin
          fm_t m;
          if (c.pool_en) begin
            m = pwo[(k * h + 2 * y) * w + 2 * x];
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++)
                if (pwo[(k * h + 2 * y + dy) * w + 2 * x + dx] > m)
                  m = pwo[(k * h + 2 * y + dy) * w + 2 * x + dx];
          end else m = pwo[(k * h + y) * w + x];
          refm[int'(c.out_base) + (k * ho + y) * wo + x] = W_W'(m);
        end
  endtask

  // place parameters and tensors in memory and fill the descriptor table
  task automatic build(int img_h, int img_w);
    int addr, h, w;
    addr = 0;
    h = img_h; w = img_w;
    cfg[0].in_base = AW'(addr);
    for (int i = 0; i < net[0].cin * h * w; i++)
      refm[addr + i] = W_W'(fm_t'($urandom_range(0, 127)));
    addr += net[0].cin * h * w;
    for (int l = 0; l < nl; l++) begin
      lspec_t s;
      s = net[l];
      cfg[l].c_in = DIM_W'(s.cin);    cfg[l].c_out = DIM_W'(s.cout);
      cfg[l].h = HW_W'(h);            cfg[l].w = HW_W'(w);
      cfg[l].dw_en = s.dw;            cfg[l].pool_en = s.pool;
      cfg[l].relu_dw = 1'b1;          cfg[l].relu_pw = s.relu_pw;
      cfg[l].shift_dw = SH_W'(s.sdw); cfg[l].shift_pw = SH_W'(s.spw);
      if (l > 0) cfg[l].in_base = cfg[l-1].out_base;
      cfg[l].dw_base = AW'(addr);
      for (int i = 0; i < s.cin * 10; i++) refm[addr + i] = W_W'(wt_t'($urandom_range(0, 127)) - 64);
      addr += s.cin * 10;
      cfg[l].pw_base = AW'(addr);
      for (int i = 0; i < s.cout * s.cin; i++) refm[addr + i] = W_W'(wt_t'($urandom_range(0, 2 * WMAX - 1)) - WMAX);
      for (int i = 0; i < s.cout; i++) refm[addr + s.cout * s.cin + i] = W_W'(wt_t'($urandom_range(0, 2047)) - 1024);
      addr += s.cout * s.cin + s.cout;
      cfg[l].out_base = AW'(addr);
      if (s.pool) begin h = h / 2; w = w / 2; end
      addr += s.cout * h * w;
    end
    for (int l = nl; l < ML; l++) cfg[l] = '0;
    for (int i = 0; i < MEMW; i++) mem[i] = refm[i];
  endtask


  // Analytic cycle count of the tile pipeline. Per bundle: the PW parameter
  // load, the DW work of the first tile, then for every tile the longer of
  // its PW work and the DW work of the next tile (the two stages overlap).
  // Also returns the count a non-overlapped (serial) schedule would take.
  task automatic cycle_model(output longint model, output longint serial);
    model = 0; serial = 0;
    for (int l = 0; l < nl; l++) begin
      int h, w, th, tw, g, n;
      longint dw [$];
      longint pw [$];
      h = int'(cfg[l].h); w = int'(cfg[l].w);
      g = (int'(cfg[l].c_in) + 15) / 16;
      for (int y0 = 0; y0 < h; y0 += 16)
        for (int x0 = 0; x0 < w; x0 += 16) begin
          th = (h - y0 < 16) ? h - y0 : 16;
          tw = (w - x0 < 16) ? w - x0 : 16;
          pw.push_back(longint'(th) * tw * cfg[l].c_out * g);
          dw.push_back(cfg[l].dw_en ? longint'(cfg[l].c_in) * ((th + 2) * (tw + 2) + 14)
                                    : longint'(cfg[l].c_in) * (th * tw + 3));
        end
      n = pw.size();
      model  += longint'(cfg[l].c_out) * cfg[l].c_in + cfg[l].c_out + dw[0];
      serial += longint'(cfg[l].c_out) * cfg[l].c_in + cfg[l].c_out;
      for (int t = 0; t < n; t++) begin
        longint nxt;
        nxt = (t + 1 < n) ? dw[t + 1] : 0;
        model  += (pw[t] > nxt) ? pw[t] : nxt;
        serial += pw[t] + dw[t];
      end
    end
  endtask

  // The measured count must be within 1% of the overlapped model.
  task automatic check_rate();
    longint m, ser;
    cycle_model(m, ser);
    $display("cycles %0d, pipeline model %0d, serial schedule would take %0d",
             cycles, m, ser);
    checks++;
    if (longint'(cycles) * 100 < m * 99 || longint'(cycles) * 100 > m * 101) begin
      failures++;
      $display("cycle count differs from the pipeline model by more than 1%%");
    end
  endtask

  task automatic check_outputs();
    for (int l = 0; l < nl; l++) begin
      int n, bad;
      n = int'(cfg[l].c_out) * (cfg[l].pool_en ? int'(cfg[l].h) / 2 * (int'(cfg[l].w) / 2)
                                                : int'(cfg[l].h) * int'(cfg[l].w));
      bad = 0;
      for (int i = 0; i < n; i++) begin
        checks++;
        if (refm[int'(cfg[l].out_base) + i] != 0) n_nonzero++;
        if (mem[int'(cfg[l].out_base) + i] !== refm[int'(cfg[l].out_base) + i]) begin
          failures++;
          if (bad++ < 5) $display("layer %0d word %0d: got %0d exp %0d", l, i,
                                  $signed(mem[int'(cfg[l].out_base) + i]),
                                  $signed(refm[int'(cfg[l].out_base) + i]));
        end
      end
      $display("layer %0d: %0d outputs compared, %0d wrong", l, n, bad);
    end
  endtask

