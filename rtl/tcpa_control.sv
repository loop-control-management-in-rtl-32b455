// tcpa_control: loop control of a ROWS x COLS tightly coupled processor array.
//
// One global controller (GC) evaluates the control conditions of the loop for
// every iteration and drives N_CS control signals plus cs_valid. The bundle
// travels through a control network of per-PE delay units: along the top row
// from left to right, each PE delaying it by its configured latency (lambda_1,
// the schedule offset between horizontal neighbours), and down every column,
// each PE delaying it by lambda_0 (the offset between vertical neighbours).
// PE (0,0) next to the GC has no delay unit. So PE (r,c) sees the GC's signals
// c*lambda_1 + r*lambda_0 cycles late, exactly when it runs the iteration the
// GC evaluated. Inside each PE every FU's instruction sequencer picks its
// branch targets from these delayed signals, so loop control costs no cycles.
//
// The FU datapaths, register files, PE interconnect, I/O buffers, address
// generators and the I/O controller are outside this unit: each FU's issued
// instruction (op rd rs0 rs1 with a valid bit) is an output port.
//
// Interface: gc_cfg and pe_cfg are single-cycle configuration writes (see
// tcpa_pkg); `start` launches the loop; PE number = row * COLS + column.
// Timing: cs is valid 3 cycles after the GC scanner shows an iteration; the
// compiler folds that offset into the delay latencies if it matters.
//
// Array size, GC sizes, 18 control signals, timestamp FIFOs of latency up to
// 4096 and the network topology follow the paper's 4x4 design; the number of
// FUs per PE, the program depth and the configuration buses are this design's.
module tcpa_control
  import tcpa_pkg::*;
#(
  parameter int unsigned ROWS       = 4,
  parameter int unsigned COLS       = 4,
  parameter int unsigned DIMS       = 4,
  parameter int unsigned N_LOW      = 32,
  parameter int unsigned N_UP       = 32,
  parameter int unsigned N_AFF      = 65,
  parameter int unsigned N_CONJ     = 83,
  parameter int unsigned N_CS       = 18,
  parameter int unsigned N_FU       = 6,
  parameter int unsigned PROG_DEPTH = 256,
  parameter delay_kind_e DELAY_KIND = DELAY_TIMESTAMP,
  parameter int unsigned MAX_LAT    = 4096,
  parameter int unsigned FIFO_DEPTH = 4096,
  parameter int unsigned PC_W       = (PROG_DEPTH > 1) ? $clog2(PROG_DEPTH) : 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  gc_cfg_t                               gc_cfg,
  input  pe_cfg_t                               pe_cfg,
  input  logic                                  start,
  output logic                                  running,
  output logic                                  done,
  output logic [N_CS-1:0]                       cs,
  output logic [ROWS*COLS-1:0][N_FU-1:0][PC_W-1:0] pc,
  output fu_instr_t [ROWS*COLS-1:0][N_FU-1:0]   fu_instr,
  output logic [ROWS*COLS-1:0][N_FU-1:0]        fu_valid,
  output logic [ROWS*COLS-1:0]                  overflow
);

  logic                                cs_valid;
  logic [ROWS-1:0][COLS-1:0][N_CS:0]   net_in, net_out;

  global_controller #(
    .DIMS(DIMS), .N_LOW(N_LOW), .N_UP(N_UP), .N_AFF(N_AFF),
    .N_CONJ(N_CONJ), .N_CS(N_CS)
  ) u_gc (
    .clk, .rst_n, .cfg(gc_cfg), .start, .cs, .cs_valid, .running, .done
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      // Control network of the array.
      if (r == 0 && c == 0) begin : g_root
        assign net_in[r][c] = {cs_valid, cs};
      end else if (r == 0) begin : g_top
        assign net_in[r][c] = net_out[r][c-1];
      end else begin : g_below
        assign net_in[r][c] = net_out[r-1][c];
      end

      pe_control #(
        .N_CS(N_CS), .N_FU(N_FU), .PROG_DEPTH(PROG_DEPTH),
        .PE_INDEX(r * COLS + c), .HAS_DELAY(!(r == 0 && c == 0)),
        .DELAY_KIND(DELAY_KIND), .MAX_LAT(MAX_LAT), .FIFO_DEPTH(FIFO_DEPTH),
        .PC_W(PC_W)
      ) u_pe (
        .clk, .rst_n, .cfg(pe_cfg),
        .ctrl_in  (net_in[r][c]),
        .ctrl_out (net_out[r][c]),
        .pc       (pc[r * COLS + c]),
        .fu_instr (fu_instr[r * COLS + c]),
        .fu_valid (fu_valid[r * COLS + c]),
        .overflow (overflow[r * COLS + c])
      );
    end
  end

endmodule
