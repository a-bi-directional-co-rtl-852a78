// cd_pkg: types and constants shared by the bundle accelerator.
//
// The accelerator computes networks built from one repeated "bundle":
// a depth-wise 3x3 convolution, a point-wise 1x1 convolution and a 2x2
// max-pooling layer. The default precisions are those of the fastest
// network variant (16-bit weights, 8-bit feature maps); the widths of the
// accumulator, the address bus and the layer descriptor are this design's
// own choice.
//
// A layer descriptor (layer_cfg_t) tells the shared hardware what one
// bundle looks like: channel counts, input size, which of the DW and pool
// steps are present, requantisation shifts and ReLU enables, and where its
// data and parameters live in off-chip memory.
package cd_pkg;

  // Data precisions (variant A: W16, F8).
  parameter int unsigned W_W   = 16;  // weight / bias / off-chip word width
  parameter int unsigned FM_W  = 8;   // feature-map width
  parameter int unsigned ACC_W = 40;  // accumulator width
  parameter int unsigned AW    = 24;  // off-chip word address width

  // Size limits of the on-chip buffers.
  parameter int unsigned CMAX    = 512;  // max input / output channels
  parameter int unsigned DIM_W   = 10;   // width of channel-count fields
  parameter int unsigned HW_W    = 9;    // width of height / width fields
  parameter int unsigned SH_W    = 5;    // width of shift fields

  typedef logic signed [FM_W-1:0]  fm_t;
  typedef logic signed [W_W-1:0]   wt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // One bundle (layer group) as the hardware executes it.
  typedef struct packed {
    logic [DIM_W-1:0] c_in;      // input channels
    logic [DIM_W-1:0] c_out;     // output channels of the PW convolution
    logic [HW_W-1:0]  h;         // input height
    logic [HW_W-1:0]  w;         // input width
    logic             dw_en;     // 1: DW-Conv3 present, 0: PW-only layer
    logic             pool_en;   // 1: 2x2 max-pooling after the PW conv
    logic             relu_dw;   // ReLU after DW conv
    logic             relu_pw;   // ReLU after PW conv
    logic [SH_W-1:0]  shift_dw;  // arithmetic right shift after DW conv
    logic [SH_W-1:0]  shift_pw;  // arithmetic right shift after PW conv
    logic [AW-1:0]    in_base;   // input FM tensor, layout [c][y][x]
    logic [AW-1:0]    out_base;  // output FM tensor, layout [k][y][x]
    logic [AW-1:0]    dw_base;   // DW params: per channel 9 weights then bias
    logic [AW-1:0]    pw_base;   // PW params: weights [k][c], then c_out biases
  } layer_cfg_t;

  // Requantise an accumulator value to a feature map: arithmetic shift,
  // optional ReLU, saturation to the signed FM range.
  function automatic fm_t requant(acc_t a, logic [SH_W-1:0] sh, logic relu);
    acc_t s;
    s = a >>> sh;
    if (relu && s < 0) s = '0;
    if (s > acc_t'((1 << (FM_W-1)) - 1)) return fm_t'((1 << (FM_W-1)) - 1);
    if (s < -acc_t'(1 << (FM_W-1)))      return fm_t'(-(1 << (FM_W-1)));
    return fm_t'(s);
  endfunction

  // 1 when requant() clips the value (used by testbenches to count saturation).
  function automatic logic saturates(acc_t a, logic [SH_W-1:0] sh, logic relu);
    acc_t s;
    s = a >>> sh;
    if (relu && s < 0) s = '0;
    return (s > acc_t'((1 << (FM_W-1)) - 1)) || (s < -acc_t'(1 << (FM_W-1)));
  endfunction

endpackage
