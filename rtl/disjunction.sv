// disjunction: OR of the conjunctions selected by a configurable mask; its
// output is one physical control signal of the TCPA.
//
// cs = OR over all conjunctions i with mask[i] = 1, i.e. the control signal
// is 1 exactly in the union of polyhedra that forms the one domain of its
// control condition. An all-zero mask gives a constant 0. The output is
// registered (one pipeline stage).
//
// Configuration: target CFG_DISJ_MASK, index INDEX, sub = w writes mask bits
// [32w+31:32w]. The masked OR follows the paper; the register stage and the
// word-wise mask writes are this design's choices.
module disjunction
  import tcpa_pkg::*;
#(
  parameter int unsigned N_IN  = 83,
  parameter int unsigned INDEX = 0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  gc_cfg_t         cfg,
  input  logic [N_IN-1:0] conjs,
  output logic            cs
);

  localparam int unsigned WORDS = (N_IN + CFG_W - 1) / CFG_W;

  logic [WORDS*CFG_W-1:0] mask_q;

  always_ff @(posedge clk) begin
    if (!rst_n) mask_q <= '0;
    else if (cfg.we && cfg.target == CFG_DISJ_MASK && 32'(cfg.index) == INDEX
             && 32'(cfg.sub) < WORDS)
      mask_q[32'(cfg.sub) * CFG_W +: CFG_W] <= cfg.data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) cs <= 1'b0;
    else        cs <= |(conjs & mask_q[N_IN-1:0]);
  end

endmodule
