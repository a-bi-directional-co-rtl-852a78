// pw_conv1_ip: point-wise 1x1 convolution IP of the bundle accelerator.
//
// One output value of a 1x1 convolution is the dot product of a pixel's
// input-channel vector with one filter, plus a bias. The unit takes LANES
// input channels per beat: LANES multipliers and an adder tree form a
// partial dot product (stage 1), which is accumulated over the beats of one
// output (stage 2). The beat flagged `first` starts the sum from `bias`; the
// beat flagged `last` closes it, and the total is shifted, optionally passed
// through ReLU and saturated to the feature-map width. A beat can be both
// first and last when the layer has at most LANES input channels.
//
// Interface: `tag` travels with the `last` beat to the output so the caller
// can attach coordinates to each result. Lanes beyond the layer's channel
// count must be fed with zeros by the caller. Timing: the result appears two
// cycles after its `last` beat; one beat per cycle; no back-pressure.
//
// That PW convolution is a hardware IP reused for all bundles follows the
// paper; the lane count and the two-stage structure are this design's own.
module pw_conv1_ip
  import cd_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned TAG_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SH_W-1:0]  shift,
  input  logic             relu,
  input  logic             in_valid,
  input  logic             first,
  input  logic             last,
  input  fm_t              x [LANES],
  input  wt_t              w [LANES],
  input  wt_t              bias,
  input  logic [TAG_W-1:0] tag,
  output logic             out_valid,
  output fm_t              out_data,
  output logic [TAG_W-1:0] out_tag
);

  acc_t             dot, s1_dot, s1_bias, acc, acc_n;
  logic             s1_valid, s1_first, s1_last;
  logic [TAG_W-1:0] s1_tag;

  always_comb begin
    dot = '0;
    for (int l = 0; l < LANES; l++) dot += acc_t'(x[l]) * acc_t'(w[l]);
  end

  always_comb acc_n = (s1_first ? s1_bias : acc) + s1_dot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_first  <= 1'b0;
      s1_last   <= 1'b0;
      s1_dot    <= '0;
      s1_bias   <= '0;
      s1_tag    <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_tag   <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_first <= first;
        s1_last  <= last;
        s1_dot   <= dot;
        s1_bias  <= acc_t'(bias);
        s1_tag   <= tag;
      end
      out_valid <= s1_valid && s1_last;
      if (s1_valid) begin
        acc <= acc_n;
        if (s1_last) begin
          out_data <= requant(acc_n, shift, relu);
          out_tag  <= s1_tag;
        end
      end
    end
  end

endmodule
