// tb_workloads: runs the loop control at its default sizes with the
// scheduling parameters of six PolyBench kernels reported for a 4x4 array
// (GEMM, TRSM, LU, ATAX, MVT, GESMMV): loop depth, initiation interval II and
// the schedule offsets lambda_0 (vertical) and lambda_1 (horizontal) between
// neighbouring PEs. The intra-tile iteration space is taken as 5 x 5 (x 20 for
// the 3-deep loops), i.e. n = 20 split over 4 x 4 PEs; the real control
// conditions of the kernels are not available, so four typical ones are used:
//   cs0 = (j0 == last0)            end of the innermost loop
//   cs1 = (j0 == 0 & j1 == 0)      first iteration of a row
//   cs2 = (j0 - j1 >= 0)           triangular domain (affine evaluator)
//   cs3 = (j1 <= 1) | (j0 == 2)    union of two polyhedra
// Every FU runs a program whose blocks last exactly II cycles (two
// instructions plus waits, or one instruction plus waits) and branch on its
// control signal. A reference model of all 96 FUs, started at each PE's own
// time c*lambda_1 + r*lambda_0, predicts PC and issued instruction in every
// cycle. A second array with shift-register delay units runs alongside and
// must match the first in every cycle.
module tb_workloads;
  import tcpa_pkg::*;

  localparam int ROWS = 4, COLS = 4, N_FU = 6, N_CS = 18, NPE = ROWS * COLS, GC_LAT = 3;
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

  int ii, lam0, lam1, dims, last [3], nit;
  ctrl_instr_t prog [3];

  always #5 clk = ~clk;

  tcpa_control dut (.*);

  // The same array built with shift-register delay units (long enough for
  // the largest offset, 643); it must behave exactly like the default one.
  logic running_s, done_s;
  logic [N_CS-1:0] cs_s;
  logic [NPE-1:0][N_FU-1:0][7:0] pc_s;
  fu_instr_t [NPE-1:0][N_FU-1:0] fu_instr_s;
  logic [NPE-1:0][N_FU-1:0] fu_valid_s;
  logic [NPE-1:0] overflow_s;
  int sr_mismatch = 0, sr_compared = 0;
  bit comparing = 1'b0;

  tcpa_control #(.DELAY_KIND(DELAY_SHIFT_REG), .MAX_LAT(1024)) dut_sr (
    .clk, .rst_n, .gc_cfg, .pe_cfg, .start, .running(running_s), .done(done_s), .cs(cs_s),
    .pc(pc_s), .fu_instr(fu_instr_s), .fu_valid(fu_valid_s), .overflow(overflow_s));

  always @(negedge clk) if (rst_n && comparing) begin
    sr_compared++;
    if (pc_s != pc || fu_valid_s != fu_valid || cs_s != cs || running_s != running) begin
      sr_mismatch++;
      if (sr_mismatch < 4 || sr_mismatch % 50 == 0) $display("SRMISMATCH cycle %0d pc=%0d fv=%0d cs=%0d run=%0d", sr_compared, pc_s != pc, fu_valid_s != fu_valid, cs_s != cs, running_s != running);
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  function automatic logic [N_FU-1:0] model(input int k);
    int j0 = k % (last[0] + 1), j1 = (k / (last[0] + 1)) % (last[1] + 1);
    model = '0;
    model[0] = (j0 == last[0]);
    model[1] = (j0 == 0 && j1 == 0);
    model[2] = (j0 - j1 >= 0);
    model[3] = (j1 <= 1) || (j0 == 2);
  endfunction

  function automatic fu_instr_t fprog(input int pe, input int f, input int a);
    return '{op: 6'((pe * 5 + f * 3 + a) % 64), rd: 4'(a), rs0: 4'(f), rs1: 4'(pe % 16)};
  endfunction

  function automatic int pe_delay(input int pe);
    return (pe % COLS) * lam1 + (pe / COLS) * lam0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic configure();
    int a [3] = '{1, -1, 0};
    int stride;
    for (int d = 0; d < 4; d++) gwr(CFG_SCAN_BOUND, 0, d, 32'(d < dims ? last[d] : 0));
    gwr(CFG_SCAN_II, 0, 0, 32'(ii));
    gwr(CFG_LOW, 0, 0, bound(0, last[0], 1));  // j0 == last0
    gwr(CFG_LOW, 1, 0, bound(0, 0, 1));        // j0 == 0
    gwr(CFG_UP, 0, 0, bound(1, 0, 1));         // j1 == 0
    gwr(CFG_UP, 1, 0, bound(1, 1, 0));         // j1 <= 1
    gwr(CFG_LOW, 2, 0, bound(0, 2, 1));        // j0 == 2
    gwr(CFG_AFF_CMP, 0, 0, 32'(0));            // j0 - j1 >= 0
    for (int d = 0; d < 4; d++) begin
      stride = (d < 3) ? a[d] : 0;
      for (int k = 0; k < d && k < 3; k++) stride -= a[k] * last[k];
      gwr(CFG_AFF_STRIDE, 0, d, 32'(stride & 32'h0000_ffff));
    end
    mask(CFG_CONJ_MASK, 0, '{L + 0});
    mask(CFG_CONJ_MASK, 1, '{L + 1, U + 0});
    mask(CFG_CONJ_MASK, 2, '{A + 0});
    mask(CFG_CONJ_MASK, 3, '{U + 1});
    mask(CFG_CONJ_MASK, 4, '{L + 2});
    mask(CFG_DISJ_MASK, 0, '{0});
    mask(CFG_DISJ_MASK, 1, '{1});
    mask(CFG_DISJ_MASK, 2, '{2});
    mask(CFG_DISJ_MASK, 3, '{3, 4});
    // Block A = {0, 1} (II >= 2) or {0} (II = 1); block B = {2}.
    if (ii == 1) prog[0] = '{bt0: 8'd2, bt1: 8'd0, cs: 8'd0, wait_cycles: 8'd0};
    else         prog[0] = '{bt0: 8'd1, bt1: 8'd1, cs: 8'd0, wait_cycles: 8'd0};
    prog[1] = '{bt0: 8'd2, bt1: 8'd0, cs: 8'd0, wait_cycles: 8'(ii > 1 ? ii - 2 : 0)};
    prog[2] = '{bt0: 8'd2, bt1: 8'd0, cs: 8'd0, wait_cycles: 8'(ii - 1)};
    for (int pe = 0; pe < NPE; pe++) begin
      if (pe != 0) pwr(pe, PCFG_LATENCY, 0, 0, 32'(pe < COLS ? lam1 : lam0));
      for (int f = 0; f < N_FU; f++)
        for (int ad = 0; ad < 3; ad++) begin
          pwr(pe, PCFG_CTRL_MEM, f, ad, {prog[ad][31:16], 8'(f), prog[ad][7:0]});
          pwr(pe, PCFG_FU_MEM, f, ad, 32'(fprog(pe, f, ad)));
        end
    end
  endtask

  task automatic run_loop(input string name);
    int t, x, issued;
    int mpc [NPE][N_FU], mcnt [NPE][N_FU];
    bit miss [NPE][N_FU];
    fu_instr_t mop [NPE][N_FU];
    logic [N_FU-1:0] c;
    int span = nit * ii + pe_delay(NPE - 1) + GC_LAT + 10;
    int checks0 = checks, failures0 = failures;
    issued = 0;
    for (int p = 0; p < NPE; p++)
      for (int f = 0; f < N_FU; f++) begin mpc[p][f] = 0; mcnt[p][f] = 0; miss[p][f] = 0; end
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    t = 0;
    repeat (span) begin
      for (int p = 0; p < NPE; p++) begin
        x = t - GC_LAT - pe_delay(p);
        for (int f = 0; f < N_FU; f++) begin
          check(int'(pc[p][f]) == mpc[p][f], "pc");
          check(fu_valid[p][f] == miss[p][f], "fu_valid");
          if (miss[p][f]) check(fu_instr[p][f] == mop[p][f], "fu_instr");
          if (fu_valid[p][f]) issued++;
          if (x < 0 || x >= nit * ii) begin
            mpc[p][f] = 0; mcnt[p][f] = 0; miss[p][f] = 0;
          end else begin
            c = model(x / ii);
            miss[p][f] = (mcnt[p][f] == 0);
            mop[p][f] = fprog(p, f, mpc[p][f]);
            if (mcnt[p][f] == int'(prog[mpc[p][f]].wait_cycles)) begin
              mpc[p][f] = c[f] ? int'(prog[mpc[p][f]].bt0) : int'(prog[mpc[p][f]].bt1);
              mcnt[p][f] = 0;
            end else mcnt[p][f]++;
          end
        end
      end
      @(negedge clk);
      t++;
    end
    check(overflow == '0, "no FIFO overflow");
    check(issued > 0, "instructions issued");
    $display("%s: dims=%0d II=%0d lambda0=%0d lambda1=%0d iterations=%0d cycles=%0d issued=%0d failures=%0d of %0d",
             name, dims, ii, lam0, lam1, nit, span, issued, failures - failures0, checks - checks0);
  endtask

  task automatic bench(input string name, input int d, input int ii_, input int l0, input int l1);
    dims = d; ii = ii_; lam0 = l0; lam1 = l1;
    last = '{4, 4, (d == 3) ? 19 : 0};
    nit = 25 * ((d == 3) ? 20 : 1);
    configure();
    // A shift-register delay line keeps its history: raising the latency
    // would replay the previous loop's control signals. Let the idle
    // network flush both arrays before the two are compared.
    repeat (1024) @(negedge clk);
    comparing = 1'b1;
    run_loop(name);
    comparing = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    bench("GEMM",   3,  1,  11,  27);
    bench("TRSM",   3,  6,  11, 151);
    bench("LU",     3, 29, 179, 643);
    bench("ATAX",   2,  3, 131,  38);
    bench("MVT",    2,  3,  23,  71);
    bench("GESMMV", 2,  3,   8,  38);
    check(sr_mismatch == 0 && sr_compared > 1000, "shift-register array matches");
    $display("shift-register array: %0d cycles compared, %0d mismatches", sr_compared, sr_mismatch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
