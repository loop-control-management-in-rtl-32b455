// upper_bound_evaluator: one literal of a control condition of the form
// "j_sel <= c" (constant upper bound) or "j_sel == c" (constant equality).
//
// A configurable multiplexer picks loop index `sel` out of the current
// iteration; a comparator checks it against the configured constant. The
// result `valid` is registered, so it belongs to the iteration presented one
// cycle earlier (one pipeline stage, like every GC evaluator).
//
// Configuration (write with target CFG_UP and index INDEX): data[15:0] is the
// constant, data[23:16] the dimension, data[24] the mode (0: <=, 1: ==).
// Multiplexer, comparator and the two modes follow the paper; the register
// layout and the registered output stage are this design's choices.
module upper_bound_evaluator
  import tcpa_pkg::*;
#(
  parameter int unsigned DIMS  = 4,
  parameter int unsigned INDEX = 0
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  gc_cfg_t                    cfg,
  input  logic [DIMS-1:0][IDX_W-1:0] iteration,
  output logic                       valid
);

  logic [7:0]              sel_q;
  logic signed [IDX_W-1:0] const_q;
  cmp_mode_e               mode_q;
  logic signed [IDX_W-1:0] index;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel_q   <= '0;
      const_q <= '0;
      mode_q  <= CMP_INEQ;
    end else if (cfg.we && cfg.target == CFG_UP && 32'(cfg.index) == INDEX) begin
      const_q <= cfg.data[CFG_CONST_LSB +: IDX_W];
      sel_q   <= cfg.data[CFG_SEL_LSB +: 8];
      mode_q  <= cmp_mode_e'(cfg.data[CFG_MODE_BIT]);
    end
  end

  assign index = (32'(sel_q) < DIMS) ? iteration[sel_q] : '0;

  always_ff @(posedge clk) begin
    if (!rst_n) valid <= 1'b0;
    else        valid <= (mode_q == CMP_EQ) ? (index == const_q) : (index <= const_q);
  end

endmodule
