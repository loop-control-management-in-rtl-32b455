// tb_tcpa_control: end-to-end run of the 4x4 loop control at its default
// sizes (full global controller, timestamp-FIFO delays of up to 4096 cycles).
//
// The global controller is set up for the 2-dimensional iteration space
// 0 <= j0 <= 4, 0 <= j1 <= 5 with II = 2 and four control conditions
//   cs0 = (j0 == 0 & j1 == 4)
//   cs1 = (j0 == 0 & j1 >= 3) | (j0 == 1 & j1 == 0)
//   cs2 = (j0 + j1 == 4)      | (j0 == 4 & j1 >= 5)
//   cs3 = (j0 - j1 >= 1 & j1 <= 2)
// The control network is configured with the GEMM offsets of the paper's
// benchmark table, lambda_0 = 11 (vertical) and lambda_1 = 27 (horizontal),
// so PE (r,c) runs c*27 + r*11 cycles after PE (0,0). FU f of every PE runs a
// two-block program steered by cs f: block A (two instructions) either loops
// or branches to block B (one instruction plus one wait cycle), which loops or
// returns to A. A reference model of every FU, fed with the control formulas
// above at the PE's own start time, predicts PC and issued instruction in every
// cycle for all 96 FUs. The loop is run twice.
//
// Mechanisms counted (each must occur): taken and not-taken branches, wait
// cycles, delayed PE starts, timestamp FIFO releases, each control signal
// being 1, completed scans.
module tb_tcpa_control;
  import tcpa_pkg::*;

  localparam int ROWS = 4, COLS = 4, N_FU = 6, N_CS = 18, NPE = ROWS * COLS;
  localparam int II = 2, NIT = 30, LAMBDA0 = 11, LAMBDA1 = 27, GC_LAT = 3;
  localparam int L = 0, U = 32, A = 64;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  gc_cfg_t gc_cfg = '0;
  pe_cfg_t pe_cfg = '0;
  logic running, done;
  logic [N_CS-1:0] cs;
  logic [NPE-1:0][N_FU-1:0][7:0] pc;
  fu_instr_t [NPE-1:0][N_FU-1:0] fu_instr;
  logic [NPE-1:0][N_FU-1:0] fu_valid;
  logic [NPE-1:0] overflow;
  int checks = 0, failures = 0;
  int n_bt0 = 0, n_bt1 = 0, n_wait = 0, n_delayed = 0, n_done = 0, n_release = 0;
  int n_cs [4];

  ctrl_instr_t prog [3];

  always #5 clk = ~clk;

  tcpa_control dut (.*);

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic gwr(input gc_cfg_target_e t, input int idx, input int sub, input logic [31:0] data);
    @(negedge clk);
    gc_cfg = '{we: 1'b1, target: t, index: 16'(idx), sub: 8'(sub), data: data};
    @(negedge clk);
    gc_cfg = '0;
  endtask

  task automatic pwr(input int pe, input pe_cfg_target_e t, input int fu, input int addr,
                     input logic [31:0] data);
    @(negedge clk);
    pe_cfg = '{we: 1'b1, target: t, pe: 8'(pe), fu: 4'(fu), addr: 16'(addr), data: data};
    @(negedge clk);
    pe_cfg = '0;
  endtask

  function automatic logic [31:0] bound(input int sel, input int c, input bit eq);
    return 32'((int'(eq) << 24) | (sel << 16) | (c & 32'h0000_ffff));
  endfunction

  task automatic mask(input gc_cfg_target_e t, input int idx, input int bits[$]);
    logic [159:0] m = '0;
    foreach (bits[i]) m[bits[i]] = 1'b1;
    for (int w = 0; w < 5; w++) gwr(t, idx, w, m[w*32 +: 32]);
  endtask

  task automatic affine(input int idx, input int a0, input int a1, input int c, input bit eq);
    gwr(CFG_AFF_CMP, idx, 0, 32'((int'(eq) << 24) | (c & 32'h0000_ffff)));
    gwr(CFG_AFF_STRIDE, idx, 0, 32'(a0 & 32'h0000_ffff));
    gwr(CFG_AFF_STRIDE, idx, 1, 32'((a1 - 4 * a0) & 32'h0000_ffff));
  endtask

  function automatic logic [N_FU-1:0] model(input int k);
    int j0 = k % 5, j1 = k / 5;
    model = '0;
    model[0] = (j0 == 0 && j1 == 4);
    model[1] = (j0 == 0 && j1 >= 3) || (j0 == 1 && j1 == 0);
    model[2] = (j0 + j1 == 4) || (j0 == 4 && j1 >= 5);
    model[3] = (j0 - j1 >= 1) && (j1 <= 2);
  endfunction

  function automatic fu_instr_t fprog(input int pe, input int f, input int a);
    return '{op: 6'((pe * 3 + f * 7 + a) % 64), rd: 4'(a), rs0: 4'(f), rs1: 4'(pe % 16)};
  endfunction

  function automatic int pe_delay(input int pe);
    return (pe % COLS) * LAMBDA1 + (pe / COLS) * LAMBDA0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic configure();
    gwr(CFG_SCAN_BOUND, 0, 0, 32'd4);
    gwr(CFG_SCAN_BOUND, 0, 1, 32'd5);
    gwr(CFG_SCAN_II, 0, 0, 32'(II));
    gwr(CFG_LOW, 0, 0, bound(0, 0, 1));
    gwr(CFG_LOW, 1, 0, bound(1, 4, 1));
    gwr(CFG_LOW, 2, 0, bound(1, 3, 0));
    gwr(CFG_LOW, 3, 0, bound(0, 1, 1));
    gwr(CFG_UP, 0, 0, bound(1, 0, 1));
    gwr(CFG_LOW, 4, 0, bound(0, 4, 1));
    gwr(CFG_LOW, 5, 0, bound(1, 5, 0));
    gwr(CFG_UP, 3, 0, bound(1, 2, 0));
    affine(0, 1, 1, 4, 1);
    affine(1, 1, -1, 1, 0);
    mask(CFG_CONJ_MASK, 0, '{L + 0, L + 1});
    mask(CFG_CONJ_MASK, 1, '{L + 0, L + 2});
    mask(CFG_CONJ_MASK, 2, '{L + 3, U + 0});
    mask(CFG_CONJ_MASK, 3, '{A + 0});
    mask(CFG_CONJ_MASK, 4, '{L + 4, L + 5});
    mask(CFG_CONJ_MASK, 5, '{A + 1, U + 3});
    mask(CFG_DISJ_MASK, 0, '{0});
    mask(CFG_DISJ_MASK, 1, '{1, 2});
    mask(CFG_DISJ_MASK, 2, '{3, 4});
    mask(CFG_DISJ_MASK, 3, '{5});
    // Block A = {0, 1}, block B = {2}; FU f branches on cs f.
    for (int pe = 0; pe < NPE; pe++) begin
      if (pe != 0) pwr(pe, PCFG_LATENCY, 0, 0, 32'(pe < COLS ? LAMBDA1 : LAMBDA0));
      for (int f = 0; f < N_FU; f++) begin
        prog[0] = '{bt0: 8'd1, bt1: 8'd1, cs: 8'(f), wait_cycles: 8'd0};
        prog[1] = '{bt0: 8'd2, bt1: 8'd0, cs: 8'(f), wait_cycles: 8'd0};
        prog[2] = '{bt0: 8'd2, bt1: 8'd0, cs: 8'(f), wait_cycles: 8'd1};
        for (int a = 0; a < 3; a++) begin
          pwr(pe, PCFG_CTRL_MEM, f, a, 32'(prog[a]));
          pwr(pe, PCFG_FU_MEM, f, a, 32'(fprog(pe, f, a)));
        end
      end
    end
  endtask

  task automatic run_loop();
    int t0, t, x, first_issue [NPE];
    int mpc [NPE][N_FU], mcnt [NPE][N_FU];
    bit miss [NPE][N_FU];
    fu_instr_t mop [NPE][N_FU];
    logic [N_FU-1:0] c;
    int span = NIT * II + pe_delay(NPE - 1) + GC_LAT + 10;
    for (int p = 0; p < NPE; p++) begin
      first_issue[p] = -1;
      for (int f = 0; f < N_FU; f++) begin mpc[p][f] = 0; mcnt[p][f] = 0; miss[p][f] = 0; end
    end
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    // The scanner shows iteration 0 from this cycle; cs follows GC_LAT later.
    t0 = GC_LAT;
    t = 0;
    repeat (span) begin
      if (done) n_done++;
      for (int i = 0; i < 4; i++) if (cs[i]) n_cs[i]++;
      for (int p = 0; p < NPE; p++) begin
        x = t - t0 - pe_delay(p);  // cycle within this PE's loop execution
        for (int f = 0; f < N_FU; f++) begin
          check(int'(pc[p][f]) == mpc[p][f], "pc");
          check(fu_valid[p][f] == miss[p][f], "fu_valid");
          if (miss[p][f]) check(fu_instr[p][f] == mop[p][f], "fu_instr");
          if (fu_valid[p][f] && first_issue[p] < 0) first_issue[p] = t;
          if (x < 0 || x >= NIT * II) begin
            mpc[p][f] = 0; mcnt[p][f] = 0; miss[p][f] = 0;
          end else begin
            c = model(x / II);
            miss[p][f] = (mcnt[p][f] == 0);
            mop[p][f] = fprog(p, f, mpc[p][f]);
            if (mcnt[p][f] == int'(prog[mpc[p][f]].wait_cycles)) begin
              if (c[f]) begin mpc[p][f] = int'(prog[mpc[p][f]].bt0); n_bt0++; end
              else      begin mpc[p][f] = int'(prog[mpc[p][f]].bt1); n_bt1++; end
              mcnt[p][f] = 0;
            end else begin
              mcnt[p][f]++;
              n_wait++;
            end
          end
        end
      end
      @(negedge clk);
      t++;
    end
    for (int p = 0; p < NPE; p++) begin
      check(first_issue[p] == t0 + pe_delay(p) + 1, "PE start time");
      if (p != 0 && first_issue[p] > first_issue[0]) n_delayed++;
    end
    check(overflow == '0, "no FIFO overflow");
  endtask

  // Timestamp FIFO releases, observed on the delay unit of PE (3,3).
  always @(posedge clk)
    if (dut.g_row[3].g_col[3].u_pe.g_fifo.u_delay.due) n_release++;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    configure();
    run_loop();
    run_loop();
    check(n_bt0 > 0, "taken branches");
    check(n_bt1 > 0, "not-taken branches");
    check(n_wait > 0, "wait cycles");
    check(n_delayed == 2 * (NPE - 1), "delayed PE starts");
    check(n_release > 0, "timestamp FIFO releases");
    check(n_done == 2, "completed scans");
    for (int i = 0; i < 4; i++) check(n_cs[i] > 0, "control signal active");
    $display("mechanisms: bt0=%0d bt1=%0d wait=%0d delayed=%0d release=%0d done=%0d cs=%0d/%0d/%0d/%0d",
             n_bt0, n_bt1, n_wait, n_delayed, n_release, n_done, n_cs[0], n_cs[1], n_cs[2], n_cs[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
