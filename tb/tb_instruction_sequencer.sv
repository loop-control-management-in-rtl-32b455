// tb_instruction_sequencer: loads random control and FU programs (random
// branch targets, control-signal numbers and wait counts) and runs them under
// random control signals. A cycle-level reference keeps its own PC and wait
// count: an instruction lasts 1 + wait cycles and in its last cycle branches to
// bt0 if control signal cs is 1, else to bt1. Checked every cycle: the PC,
// fu_valid (the cycle after an issue) and the issued FU instruction. A program
// without waits must issue one instruction in every cycle.
module tb_instruction_sequencer;
  import tcpa_pkg::*;

  localparam int unsigned N_CS = 18;
  localparam int unsigned DEPTH = 256;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0;
  logic [N_CS-1:0] cs = '0;
  logic ctrl_we = 1'b0, fu_we = 1'b0;
  logic [7:0] waddr = '0;
  logic [31:0] wdata = '0;
  logic [7:0] pc;
  fu_instr_t fu_instr;
  logic fu_valid;
  int checks = 0, failures = 0, n_bt0 = 0, n_bt1 = 0, n_wait = 0;

  ctrl_instr_t prog [8];
  fu_instr_t   fprog [8];

  always #5 clk = ~clk;

  instruction_sequencer #(.N_CS(N_CS), .DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic load(input bit no_wait);
    for (int a = 0; a < 8; a++) begin
      prog[a].bt0 = 8'($urandom_range(7));
      prog[a].bt1 = 8'($urandom_range(7));
      prog[a].cs = 8'($urandom_range(N_CS - 1));
      prog[a].wait_cycles = no_wait ? 8'd0 : 8'($urandom_range(3));
      fprog[a] = fu_instr_t'($urandom);
      @(negedge clk);
      ctrl_we = 1'b1; waddr = 8'(a); wdata = prog[a];
      @(negedge clk);
      ctrl_we = 1'b0; fu_we = 1'b1; wdata = 32'(fprog[a]);
      @(negedge clk);
      fu_we = 1'b0;
    end
  endtask

  task automatic exec(input int cycles, output int issued);
    int mpc, mcnt;
    bit missue_q;
    int mop_q;
    mpc = 0; mcnt = 0; missue_q = 0; mop_q = 0; issued = 0;
    @(negedge clk);
    run = 1'b1;
    for (int t = 0; t < cycles; t++) begin
      cs = N_CS'($urandom);
      #1;
      check(int'(pc) == mpc, "pc");
      check(fu_valid == missue_q, "fu_valid");
      if (missue_q) check(fu_instr == fu_instr_t'(mop_q), "fu_instr");
      if (fu_valid) issued++;
      // Reference for this cycle.
      missue_q = (mcnt == 0);
      mop_q = int'(fprog[mpc]);
      if (mcnt == int'(prog[mpc].wait_cycles)) begin
        if (cs[prog[mpc].cs]) begin mpc = int'(prog[mpc].bt0); n_bt0++; end
        else begin mpc = int'(prog[mpc].bt1); n_bt1++; end
        mcnt = 0;
      end else begin
        mcnt++;
        n_wait++;
      end
      @(negedge clk);
    end
    run = 1'b0;
    @(negedge clk);
    check(pc == '0, "pc held at 0 when stopped");
  endtask

  initial begin
    int issued;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 10; n++) begin
      load(n % 3 == 0);
      exec(200, issued);
      if (n % 3 == 0) check(issued == 199, "one issue per cycle without waits");
    end
    check(n_bt0 > 0 && n_bt1 > 0 && n_wait > 0, "branches and waits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
