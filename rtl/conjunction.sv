// conjunction: AND of the evaluator outputs selected by a configurable mask.
//
// Each conjunction of the global controller forms one polyhedron of a control
// condition: conj = AND over all literals i with mask[i] = 1. An all-zero mask
// gives 1 (empty conjunction); an unused conjunction is simply not selected by
// any disjunction. The output is registered (one pipeline stage).
//
// Configuration: target CFG_CONJ_MASK, index INDEX, sub = w writes mask bits
// [32w+31:32w]. The masked AND follows the paper; the register stage and the
// word-wise mask writes are this design's choices.
module conjunction
  import tcpa_pkg::*;
#(
  parameter int unsigned N_IN  = 129,
  parameter int unsigned INDEX = 0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  gc_cfg_t         cfg,
  input  logic [N_IN-1:0] literals,
  output logic            conj
);

  localparam int unsigned WORDS = (N_IN + CFG_W - 1) / CFG_W;

  logic [WORDS*CFG_W-1:0] mask_q;

  always_ff @(posedge clk) begin
    if (!rst_n) mask_q <= '0;
    else if (cfg.we && cfg.target == CFG_CONJ_MASK && 32'(cfg.index) == INDEX
             && 32'(cfg.sub) < WORDS)
      mask_q[32'(cfg.sub) * CFG_W +: CFG_W] <= cfg.data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) conj <= 1'b0;
    else        conj <= &(literals | ~mask_q[N_IN-1:0]);
  end

endmodule
