// pe_control: the loop-control part of one processing element (PE).
//
// The control bundle {cs_valid, cs} arriving from the neighbouring PE (or from
// the global controller) is delayed by the PE's configured latency, so that it
// reaches the PE exactly when the PE executes the corresponding iteration
// under the loop schedule; the delayed bundle is also passed on to the next
// PE. Every one of the N_FU function units has its own instruction sequencer
// that reads the delayed control signals; cs_valid, delayed with them, starts
// and stops the sequencers.
//
// HAS_DELAY = 0 builds a PE without delay unit (the PE next to the global
// controller). DELAY_KIND chooses a shift register or a timestamp FIFO.
//
// Configuration (pe_cfg_t, selected by cfg.pe == PE_INDEX): PCFG_LATENCY sets
// the delay, PCFG_CTRL_MEM / PCFG_FU_MEM write word `addr` of FU `fu`.
// Timing: the delay unit adds exactly `latency` cycles (0 = pass-through).
//
// Delay element per PE and shared control signals follow the paper. Carrying
// cs_valid through the delay unit and the number of FUs are this design's
// choices.
module pe_control
  import tcpa_pkg::*;
#(
  parameter int unsigned N_CS        = 18,
  parameter int unsigned N_FU        = 6,
  parameter int unsigned PROG_DEPTH  = 256,
  parameter int unsigned PE_INDEX    = 0,
  parameter bit          HAS_DELAY   = 1'b1,
  parameter delay_kind_e DELAY_KIND  = DELAY_TIMESTAMP,
  parameter int unsigned MAX_LAT     = 4096,
  parameter int unsigned FIFO_DEPTH  = 4096,
  parameter int unsigned PC_W        = (PROG_DEPTH > 1) ? $clog2(PROG_DEPTH) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  pe_cfg_t                  cfg,
  input  logic [N_CS:0]            ctrl_in,   // {cs_valid, cs}
  output logic [N_CS:0]            ctrl_out,  // delayed {cs_valid, cs}
  output logic [N_FU-1:0][PC_W-1:0] pc,
  output fu_instr_t [N_FU-1:0]     fu_instr,
  output logic [N_FU-1:0]          fu_valid,
  output logic                     overflow
);

  localparam int unsigned LAT_W = $clog2(MAX_LAT + 1);

  logic             sel;
  logic [LAT_W-1:0] latency_q;

  assign sel = cfg.we && 32'(cfg.pe) == PE_INDEX;

  always_ff @(posedge clk) begin
    if (!rst_n) latency_q <= '0;
    else if (sel && cfg.target == PCFG_LATENCY) latency_q <= cfg.data[LAT_W-1:0];
  end

  if (!HAS_DELAY) begin : g_no_delay
    assign ctrl_out = ctrl_in;
    assign overflow = 1'b0;
  end else if (DELAY_KIND == DELAY_SHIFT_REG) begin : g_shift
    shift_register_delay #(.N_CS(N_CS + 1), .MAX_LAT(MAX_LAT), .LAT_W(LAT_W)) u_delay (
      .clk, .latency(latency_q), .din(ctrl_in), .dout(ctrl_out)
    );
    assign overflow = 1'b0;
  end else begin : g_fifo
    timestamp_fifo_delay #(.N_CS(N_CS + 1), .MAX_LAT(MAX_LAT), .DEPTH(FIFO_DEPTH),
                           .LAT_W(LAT_W)) u_delay (
      .clk, .rst_n, .latency(latency_q), .din(ctrl_in), .dout(ctrl_out), .overflow
    );
  end

  for (genvar f = 0; f < N_FU; f++) begin : g_fu
    logic sel_fu;
    assign sel_fu = sel && 32'(cfg.fu) == f;
    instruction_sequencer #(.N_CS(N_CS), .DEPTH(PROG_DEPTH), .PC_W(PC_W)) u_seq (
      .clk, .rst_n,
      .run      (ctrl_out[N_CS]),
      .cs       (ctrl_out[N_CS-1:0]),
      .ctrl_we  (sel_fu && cfg.target == PCFG_CTRL_MEM),
      .fu_we    (sel_fu && cfg.target == PCFG_FU_MEM),
      .waddr    (cfg.addr[PC_W-1:0]),
      .wdata    (cfg.data),
      .pc       (pc[f]),
      .fu_instr (fu_instr[f]),
      .fu_valid (fu_valid[f])
    );
  end

endmodule
