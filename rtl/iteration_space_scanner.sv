// iteration_space_scanner: produces the current loop iteration of the global
// controller (GC).
//
// The intra-tile iteration space is normalised so that the first iteration is
// the all-zero vector and dimension 0 is scanned first (innermost). It is
// configured with the last index of every dimension (a rectangular bounding
// box; non-rectangular domains are expressed by the control conditions) and the
// initiation interval II. After `start`, a new iteration vector is presented
// every II cycles. `update` is high in the cycle before the iteration register
// changes and `step` names the dimension that is incremented then (all lower
// dimensions wrap to 0). `done` pulses in the last cycle of the last iteration.
//
// Timing: iteration (0..0) appears the cycle after `start` and is held for II
// cycles; a scan of P iterations takes P*II cycles.
//
// The outputs iteration/update/step and the normalisation follow the paper.
// The bounding-box configuration, the start/running/done handshake and the II
// counter are this design's choices (the paper omits the GC control logic).
module iteration_space_scanner
  import tcpa_pkg::*;
#(
  parameter int unsigned DIMS   = 4,
  parameter int unsigned STEP_W = (DIMS > 1) ? $clog2(DIMS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  gc_cfg_t                cfg,
  input  logic                   start,
  output logic [DIMS-1:0][IDX_W-1:0] iteration,
  output logic                   update,
  output logic [STEP_W-1:0]      step,
  output logic                   running,
  output logic                   done
);

  logic [DIMS-1:0][IDX_W-1:0] bound_q;
  logic [IDX_W-1:0]           ii_q;
  logic [IDX_W-1:0]           ii_cnt_q;
  logic                       last_iter;
  logic                       ii_end;

  // Configuration registers.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bound_q <= '0;
      ii_q    <= IDX_W'(1);
    end else if (cfg.we) begin
      if (cfg.target == CFG_SCAN_BOUND && 32'(cfg.sub) < DIMS)
        bound_q[cfg.sub[STEP_W-1:0]] <= cfg.data[IDX_W-1:0];
      if (cfg.target == CFG_SCAN_II)
        ii_q <= (cfg.data[IDX_W-1:0] == '0) ? IDX_W'(1) : cfg.data[IDX_W-1:0];
    end
  end

  // Lowest dimension that has not reached its bound is stepped next.
  always_comb begin
    step      = '0;
    last_iter = 1'b1;
    for (int d = DIMS - 1; d >= 0; d--) begin
      if (iteration[d] != bound_q[d]) begin
        step      = STEP_W'(d);
        last_iter = 1'b0;
      end
    end
  end

  assign ii_end = running && (ii_cnt_q == ii_q - IDX_W'(1));
  assign update = ii_end && !last_iter;
  assign done   = ii_end && last_iter;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      iteration <= '0;
      ii_cnt_q  <= '0;
      running   <= 1'b0;
    end else if (start && !running) begin
      iteration <= '0;
      ii_cnt_q  <= '0;
      running   <= 1'b1;
    end else if (running) begin
      ii_cnt_q <= ii_end ? '0 : ii_cnt_q + IDX_W'(1);
      if (done) begin
        running <= 1'b0;
      end else if (update) begin
        for (int d = 0; d < DIMS; d++) begin
          if (d == int'(step))     iteration[d] <= iteration[d] + IDX_W'(1);
          else if (d < int'(step)) iteration[d] <= '0;
        end
      end
    end
  end

  // A new iteration appears exactly every II cycles while scanning.
  a_ii_count: assert property (@(posedge clk) disable iff (!rst_n)
    running |-> (ii_cnt_q < ii_q));
  a_step_only_on_update: assert property (@(posedge clk) disable iff (!rst_n)
    (running && !update) |=> (iteration == $past(iteration)));

endmodule
