// affine_bound_evaluator: one literal "a . j >= c" or "a . j == c" of a
// control condition, evaluated without a scalar product.
//
// The scanner moves from one iteration to the next by one of DIMS possible
// steps (dimension d incremented, lower dimensions wrapped to 0). The change
// of u = a . j for step d is a constant, precomputed by the compiler and kept
// in a stride look-up table (Stride LUT). The left-hand-side accumulator
// (LHS Acc.) starts at 0, because the first iteration is the zero vector, and
// on every `update` adds stride[step]. The comparator checks lhs >= c or
// lhs == c. For the scanner in this design the stride of step d is
//   stride[d] = a[d] - sum_{k<d} a[k] * last[k]
// where last[k] is the last index of dimension k.
//
// Timing: `lhs` changes in the same clock edge as the scanner's iteration
// register, and `valid` is registered, one cycle after the iteration, like the
// other evaluators. `clear` zeroes the accumulator at the start of a scan.
//
// Configuration: target CFG_AFF_CMP, index INDEX writes the constant
// (data[15:0]) and mode (data[24]: 0 >=, 1 ==); CFG_AFF_STRIDE with sub = d
// writes stride[d] (data[15:0]). Stride LUT, accumulator, adder and the >= / ==
// comparator follow the paper; widths and the clear input are this design's.
module affine_bound_evaluator
  import tcpa_pkg::*;
#(
  parameter int unsigned DIMS   = 4,
  parameter int unsigned INDEX  = 0,
  parameter int unsigned STEP_W = (DIMS > 1) ? $clog2(DIMS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  gc_cfg_t           cfg,
  input  logic              clear,
  input  logic              update,
  input  logic [STEP_W-1:0] step,
  output logic              valid
);

  logic signed [DIMS-1:0][IDX_W-1:0] stride_lut_q;
  logic signed [IDX_W-1:0]           const_q;
  cmp_mode_e                         mode_q;
  logic signed [IDX_W-1:0]           lhs_q;
  logic signed [IDX_W-1:0]           stride;
  logic signed [IDX_W-1:0]           sum;
  logic                              sel_me;

  assign sel_me = cfg.we && 32'(cfg.index) == INDEX;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stride_lut_q <= '0;
      const_q      <= '0;
      mode_q       <= CMP_INEQ;
    end else if (sel_me) begin
      if (cfg.target == CFG_AFF_CMP) begin
        const_q <= cfg.data[CFG_CONST_LSB +: IDX_W];
        mode_q  <= cmp_mode_e'(cfg.data[CFG_MODE_BIT]);
      end
      if (cfg.target == CFG_AFF_STRIDE && 32'(cfg.sub) < DIMS)
        stride_lut_q[cfg.sub[STEP_W-1:0]] <= cfg.data[IDX_W-1:0];
    end
  end

  // Stride LUT and adder.
  assign stride = (32'(step) < DIMS) ? stride_lut_q[step] : '0;
  assign sum    = lhs_q + stride;

  // LHS accumulator.
  always_ff @(posedge clk) begin
    if (!rst_n || clear) lhs_q <= '0;
    else if (update)     lhs_q <= sum;
  end

  // Comparator.
  always_ff @(posedge clk) begin
    if (!rst_n) valid <= 1'b0;
    else        valid <= (mode_q == CMP_EQ) ? (lhs_q == const_q) : (lhs_q >= const_q);
  end

endmodule
