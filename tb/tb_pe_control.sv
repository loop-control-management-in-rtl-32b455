// tb_pe_control: two PE control units, one with a timestamp-FIFO delay and
// one with a shift-register delay, both configured to latency 9 through the
// PE configuration bus (with writes to another PE number that must be
// ignored). The bundle {cs_valid, cs} is driven with sparse random changes.
// Checked every cycle: ctrl_out equals ctrl_in 9 cycles earlier, and the PC and
// issue stream of both FUs of each PE match a reference sequencer that is fed
// with the delayed bundle, so the FUs start exactly when the delayed cs_valid
// rises.
module tb_pe_control;
  import tcpa_pkg::*;

  localparam int unsigned N_CS = 18;
  localparam int unsigned N_FU = 2;
  localparam int LAT = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  pe_cfg_t cfg = '0;
  logic [N_CS:0] ctrl_in = '0;
  logic [N_CS:0] out_f, out_s;
  logic [N_FU-1:0][7:0] pc_f, pc_s;
  fu_instr_t [N_FU-1:0] fi_f, fi_s;
  logic [N_FU-1:0] fv_f, fv_s;
  logic ovf_f, ovf_s;
  logic [N_CS:0] hist [$];
  int checks = 0, failures = 0, issues = 0;

  ctrl_instr_t prog [N_FU][2];
  fu_instr_t   fprog [N_FU][2];

  always #5 clk = ~clk;

  pe_control #(.N_FU(N_FU), .PE_INDEX(5), .DELAY_KIND(DELAY_TIMESTAMP),
               .MAX_LAT(64), .FIFO_DEPTH(16)) dut_f (
    .clk, .rst_n, .cfg, .ctrl_in, .ctrl_out(out_f), .pc(pc_f), .fu_instr(fi_f),
    .fu_valid(fv_f), .overflow(ovf_f));
  pe_control #(.N_FU(N_FU), .PE_INDEX(6), .DELAY_KIND(DELAY_SHIFT_REG),
               .MAX_LAT(64)) dut_s (
    .clk, .rst_n, .cfg, .ctrl_in, .ctrl_out(out_s), .pc(pc_s), .fu_instr(fi_s),
    .fu_valid(fv_s), .overflow(ovf_s));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int pe, input pe_cfg_target_e t, input int fu, input int addr,
                    input logic [31:0] data);
    @(negedge clk);
    cfg = '{we: 1'b1, target: t, pe: 8'(pe), fu: 4'(fu), addr: 16'(addr), data: data};
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    int mpc [N_FU], mcnt [N_FU];
    bit miss [N_FU];
    fu_instr_t mop [N_FU];
    logic [N_CS:0] d;
    prog[0][0] = '{bt0: 8'd1, bt1: 8'd0, cs: 8'd2, wait_cycles: 8'd0};
    prog[0][1] = '{bt0: 8'd0, bt1: 8'd1, cs: 8'd5, wait_cycles: 8'd2};
    prog[1][0] = '{bt0: 8'd1, bt1: 8'd0, cs: 8'd17, wait_cycles: 8'd1};
    prog[1][1] = '{bt0: 8'd0, bt1: 8'd0, cs: 8'd0, wait_cycles: 8'd0};
    for (int f = 0; f < N_FU; f++)
      for (int a = 0; a < 2; a++) fprog[f][a] = '{op: 6'(10 * f + a + 1), rd: 4'(a), rs0: 4'(f), rs1: 4'd3};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (prog[f, a]) begin
      for (int pe = 5; pe <= 7; pe++) begin
        wr(pe, PCFG_CTRL_MEM, f, a, (pe == 7) ? 32'hffff_ffff : 32'(prog[f][a]));
        wr(pe, PCFG_FU_MEM, f, a, (pe == 7) ? 32'h0 : 32'(fprog[f][a]));
      end
    end
    wr(5, PCFG_LATENCY, 0, 0, LAT);
    wr(6, PCFG_LATENCY, 0, 0, LAT);
    wr(7, PCFG_LATENCY, 0, 0, 3);
    foreach (mpc[f]) begin mpc[f] = 0; mcnt[f] = 0; miss[f] = 0; mop[f] = '0; end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      if (t == 20) ctrl_in[N_CS] = 1'b1;
      if (t == 300) ctrl_in[N_CS] = 1'b0;
      if ($urandom_range(5) == 0) ctrl_in[N_CS-1:0] = N_CS'($urandom);
      hist.push_front(ctrl_in);
      #1;
      d = (t >= LAT) ? hist[LAT] : '0;
      check(out_f == d, "timestamp delay");
      check(out_s == d || t < LAT, "shift-register delay");
      for (int f = 0; f < N_FU; f++) begin
        check(int'(pc_f[f]) == mpc[f] && int'(pc_s[f]) == mpc[f], "pc");
        check(fv_f[f] == miss[f] && fv_s[f] == miss[f], "fu_valid");
        if (miss[f]) begin
          check(fi_f[f] == mop[f] && fi_s[f] == mop[f], "fu_instr");
          issues++;
        end
        // Reference sequencer, driven by the delayed bundle.
        if (!d[N_CS]) begin
          mpc[f] = 0; mcnt[f] = 0; miss[f] = 0;
        end else begin
          miss[f] = (mcnt[f] == 0);
          mop[f] = fprog[f][mpc[f]];
          if (mcnt[f] == int'(prog[f][mpc[f]].wait_cycles)) begin
            mpc[f] = d[prog[f][mpc[f]].cs] ? int'(prog[f][mpc[f]].bt0) : int'(prog[f][mpc[f]].bt1);
            mcnt[f] = 0;
          end else mcnt[f]++;
        end
      end
    end
    check(issues > 100, "FUs issued");
    check(!ovf_f, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
