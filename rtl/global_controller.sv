// global_controller: generates the loop-control signals of the whole TCPA.
//
// An iteration space scanner presents the current iteration every II cycles.
// Three banks of evaluators turn it into literals: N_LOW lower-bound
// (j_s >= c, j_s == c), N_UP upper-bound (j_s <= c, j_s == c) and N_AFF affine
// evaluators (a.j >= c, a.j == c). N_CONJ conjunctions AND masked subsets of
// the literals and N_CS disjunctions OR masked subsets of the conjunctions;
// every disjunction is one control signal, 1 exactly in the iterations of the
// one domain of its (unified) control condition.
//
// Literal numbering seen by the conjunction masks:
//   [0, N_LOW)                    lower-bound evaluators
//   [N_LOW, N_LOW+N_UP)           upper-bound evaluators
//   [N_LOW+N_UP, N_LOW+N_UP+N_AFF) affine evaluators
//
// Timing: evaluators, conjunctions and disjunctions are each one register
// stage, so cs belongs to the iteration the scanner showed CS_LATENCY = 3
// cycles earlier; cs_valid is `running` delayed by the same 3 cycles and
// tells the PEs when the loop runs. The compiler accounts for this fixed offset when it sets the
// PE delay latencies.
//
// The structure and the default sizes (4 dimensions, 32/32/65 evaluators, 83
// conjunctions, 18 control signals) follow the paper's 4x4 TCPA. The
// configuration bus, the register stages and start/running/done are this
// design's choices.
module global_controller
  import tcpa_pkg::*;
#(
  parameter int unsigned DIMS   = 4,
  parameter int unsigned N_LOW  = 32,
  parameter int unsigned N_UP   = 32,
  parameter int unsigned N_AFF  = 65,
  parameter int unsigned N_CONJ = 83,
  parameter int unsigned N_CS   = 18,
  parameter int unsigned STEP_W = (DIMS > 1) ? $clog2(DIMS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  gc_cfg_t         cfg,
  input  logic            start,
  output logic [N_CS-1:0] cs,
  output logic            cs_valid,
  output logic            running,
  output logic            done
);

  localparam int unsigned CS_LATENCY = 3;

  localparam int unsigned N_LIT = N_LOW + N_UP + N_AFF;

  logic [DIMS-1:0][IDX_W-1:0] iteration;
  logic                       update;
  logic [STEP_W-1:0]          step;
  logic                       clear;
  logic [N_LIT-1:0]           literals;
  logic [N_CONJ-1:0]          conjs;

  assign clear = start && !running;

  iteration_space_scanner #(.DIMS(DIMS), .STEP_W(STEP_W)) u_scanner (
    .clk, .rst_n, .cfg, .start,
    .iteration, .update, .step, .running, .done
  );

  // `running` delayed to line up with cs: cs_valid marks the cycles in which
  // cs belongs to a scanned iteration.
  logic [CS_LATENCY-1:0] running_pipe_q;
  always_ff @(posedge clk) begin
    if (!rst_n) running_pipe_q <= '0;
    else        running_pipe_q <= {running_pipe_q[CS_LATENCY-2:0], running};
  end
  assign cs_valid = running_pipe_q[CS_LATENCY-1];

  for (genvar i = 0; i < N_LOW; i++) begin : g_low
    lower_bound_evaluator #(.DIMS(DIMS), .INDEX(i)) u_low (
      .clk, .rst_n, .cfg, .iteration, .valid(literals[i])
    );
  end

  for (genvar i = 0; i < N_UP; i++) begin : g_up
    upper_bound_evaluator #(.DIMS(DIMS), .INDEX(i)) u_up (
      .clk, .rst_n, .cfg, .iteration, .valid(literals[N_LOW + i])
    );
  end

  for (genvar i = 0; i < N_AFF; i++) begin : g_aff
    affine_bound_evaluator #(.DIMS(DIMS), .INDEX(i), .STEP_W(STEP_W)) u_aff (
      .clk, .rst_n, .cfg, .clear, .update, .step,
      .valid(literals[N_LOW + N_UP + i])
    );
  end

  for (genvar i = 0; i < N_CONJ; i++) begin : g_conj
    conjunction #(.N_IN(N_LIT), .INDEX(i)) u_conj (
      .clk, .rst_n, .cfg, .literals, .conj(conjs[i])
    );
  end

  for (genvar i = 0; i < N_CS; i++) begin : g_disj
    disjunction #(.N_IN(N_CONJ), .INDEX(i)) u_disj (
      .clk, .rst_n, .cfg, .conjs, .cs(cs[i])
    );
  end

endmodule
