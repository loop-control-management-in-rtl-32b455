// instruction_sequencer: program-counter logic of one function unit (FU),
// driven by the TCPA control signals.
//
// The FU program consists of program blocks. Each instruction has a control
// part "bt0 bt1 cs wait", kept in a small asynchronous control-instruction
// memory, and an FU part "op rd rs0 rs1", kept in a synchronous FU-instruction
// memory; both are addressed by the same PC. An instruction occupies 1 + wait
// cycles: it is issued in its first cycle and followed by `wait` idle (nop)
// cycles counted by the wait counter. In the last of these cycles the control
// signal numbered cs selects the next PC: bt0 if it is 1, bt1 otherwise
// (bt0 = bt1 for an unconditional jump or a plain PC+1). The PC update is
// combinational on the fetched control word, so with wait = 0 a new
// instruction issues every cycle and branches cost no cycles.
//
// Interface: `run` low holds the PC at 0 (the first program block starts at
// address 0). `ctrl_we`/`fu_we` with `waddr`/`wdata` load the memories.
// Timing: the FU instruction read in the issue cycle appears on fu_instr one
// cycle later, qualified by fu_valid.
//
// The memories, the cs multiplexer, the wait counter and the bt0/bt1 rule
// follow the paper; memory depth, field widths, `run` and the load port are
// this design's choices.
module instruction_sequencer
  import tcpa_pkg::*;
#(
  parameter int unsigned N_CS  = 18,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned PC_W  = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned CSI_W = (N_CS > 1) ? $clog2(N_CS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            run,
  input  logic [N_CS-1:0] cs,
  input  logic            ctrl_we,
  input  logic            fu_we,
  input  logic [PC_W-1:0] waddr,
  input  logic [31:0]     wdata,
  output logic [PC_W-1:0] pc,
  output fu_instr_t       fu_instr,
  output logic            fu_valid
);

  ctrl_instr_t ctrl_mem [DEPTH];  // asynchronous read
  fu_instr_t   fu_mem   [DEPTH];  // synchronous read

  ctrl_instr_t instr;
  logic [7:0]  wait_cnt_q;
  logic        wait_done;
  logic        cs_sel;
  logic        issue;
  logic [PC_W-1:0] next_pc;

  always_ff @(posedge clk) begin
    if (ctrl_we) ctrl_mem[waddr] <= ctrl_instr_t'(wdata);
    if (fu_we)   fu_mem[waddr]   <= fu_instr_t'(wdata[$bits(fu_instr_t)-1:0]);
  end

  assign instr     = ctrl_mem[pc];
  assign cs_sel    = (32'(instr.cs) < N_CS) ? cs[instr.cs[CSI_W-1:0]] : 1'b0;
  assign next_pc   = cs_sel ? instr.bt0[PC_W-1:0] : instr.bt1[PC_W-1:0];
  assign wait_done = (wait_cnt_q == instr.wait_cycles);
  assign issue     = run && (wait_cnt_q == '0);

  // PC and wait counter.
  always_ff @(posedge clk) begin
    if (!rst_n || !run) begin
      pc         <= '0;
      wait_cnt_q <= '0;
    end else if (wait_done) begin
      pc         <= next_pc;
      wait_cnt_q <= '0;
    end else begin
      wait_cnt_q <= wait_cnt_q + 8'd1;
    end
  end

  // Synchronous FU-instruction memory.
  always_ff @(posedge clk) begin
    if (issue) fu_instr <= fu_mem[pc];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) fu_valid <= 1'b0;
    else        fu_valid <= issue;
  end

endmodule
