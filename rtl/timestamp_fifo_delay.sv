// timestamp_fifo_delay: delays the control-signal vector of a PE by a
// configurable latency, storing only its transitions.
//
// A free-running time counter stamps the input. Whenever the input vector
// differs from the previous cycle's, the pair (time, new vector) is pushed
// into a FIFO. The head entry is released when the counter has advanced by
// exactly `latency` since its stamp; from then on its vector is held on dout
// until the next entry is released. So dout(t) = din(t - latency) as long as no
// more than DEPTH transitions are in flight. Because the control signals change
// rarely compared to the cycle count, the FIFO can be far shorter than the
// latency would need as a shift register, and it maps onto block RAM, which
// makes the cost almost independent of the latency.
//
// Interface: latency = 0 bypasses the unit. `overflow` is a sticky flag, set
// when a transition arrives at a full FIFO (that transition is lost).
// Timing: one transition pushed and one released per cycle at most.
//
// The transition/timestamp encoding follows the paper; the counter width,
// the release rule, the bypass and the overflow flag are this design's
// choices. The FIFO storage has one write port and one synchronous read port,
// as a block RAM offers: the read address is the next head position, and an
// entry written to that very position in the same cycle is forwarded into the
// head register, so the head is always current without an extra cycle.
module timestamp_fifo_delay #(
  parameter int unsigned N_CS    = 18,
  parameter int unsigned MAX_LAT = 4096,
  parameter int unsigned DEPTH   = 4096,
  parameter int unsigned LAT_W   = $clog2(MAX_LAT + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [LAT_W-1:0] latency,
  input  logic [N_CS-1:0]  din,
  output logic [N_CS-1:0]  dout,
  output logic             overflow
);

  localparam int unsigned TS_W  = LAT_W + 1;
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  typedef struct packed {
    logic [TS_W-1:0] ts;
    logic [N_CS-1:0] value;
  } entry_t;

  entry_t          mem [DEPTH];
  logic [PTR_W:0]  wr_ptr_q, rd_ptr_q;
  logic [TS_W-1:0] time_q;
  logic [N_CS-1:0] prev_q, held_q;
  logic            empty, full, push, due;
  entry_t          head, new_entry;
  logic [PTR_W:0]  rd_ptr_next;

  assign empty = (wr_ptr_q == rd_ptr_q);
  assign full  = (wr_ptr_q[PTR_W-1:0] == rd_ptr_q[PTR_W-1:0]) &&
                 (wr_ptr_q[PTR_W] != rd_ptr_q[PTR_W]);
  assign push  = (latency != '0) && (din != prev_q);
  assign new_entry   = '{ts: time_q, value: din};
  assign rd_ptr_next = rd_ptr_q + (PTR_W+1)'(due);
  assign due   = !empty && ((time_q - head.ts) == TS_W'(latency));

  always_comb begin
    if (latency == '0) dout = din;
    else if (due)      dout = head.value;
    else               dout = held_q;
  end

  // Block-RAM style storage: synchronous write, synchronous read.
  always_ff @(posedge clk) begin
    if (push && !full) mem[wr_ptr_q[PTR_W-1:0]] <= new_entry;
  end

  // Head register: the entry at the next read position, with forwarding of a
  // same-cycle write to that position.
  always_ff @(posedge clk) begin
    if (push && !full && wr_ptr_q[PTR_W-1:0] == rd_ptr_next[PTR_W-1:0])
      head <= new_entry;
    else
      head <= mem[rd_ptr_next[PTR_W-1:0]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr_q <= '0;
      rd_ptr_q <= '0;
      time_q   <= '0;
      prev_q   <= '0;
      held_q   <= '0;
      overflow <= 1'b0;
    end else begin
      time_q <= time_q + TS_W'(1);
      prev_q <= din;
      held_q <= dout;
      if (push && !full) wr_ptr_q <= wr_ptr_q + 1'b1;
      if (push && full)  overflow <= 1'b1;
      rd_ptr_q <= rd_ptr_next;
    end
  end

  // The head entry is never overdue: every entry is released in the exact
  // cycle its latency expires (at most one entry per stamp, one release per
  // cycle).
  a_head_not_overdue: assert property (@(posedge clk) disable iff (!rst_n)
    (latency != '0 && !empty) |-> ((time_q - head.ts) <= TS_W'(latency)));

endmodule
