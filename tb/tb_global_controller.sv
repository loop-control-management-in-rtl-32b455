// tb_global_controller: configures the global controller (default sizes)
// with control conditions of the kind shown in the paper's control-graph
// example, over the iteration space 0 <= j0 <= 4, 0 <= j1 <= 5:
//   cs0 = (j0 == 0 & j1 == 4)
//   cs1 = (j0 == 0 & j1 >= 3) | (j0 == 1 & j1 == 0)
//   cs2 = (j0 + j1 == 4)      | (j0 == 4 & j1 >= 5)
//   cs3 = (j0 - j1 >= 1 & j1 <= 2)
// and checks, in every cycle in which cs_valid is 1, all 18 control signals
// against these formulas evaluated directly for the iteration number
// (cycle / II); unused signals must stay 0. It also checks that cs_valid lasts
// exactly P * II cycles, for II = 3 and II = 1.
module tb_global_controller;
  import tcpa_pkg::*;

  localparam int unsigned N_CS = 18;
  localparam int L = 0, U = 32, A = 64;  // literal number offsets

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  gc_cfg_t cfg = '0;
  logic [N_CS-1:0] cs;
  logic cs_valid, running, done;
  int checks = 0, failures = 0;
  int seen_one [4];

  always #5 clk = ~clk;

  global_controller dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input gc_cfg_target_e t, input int idx, input int sub, input logic [31:0] data);
    @(negedge clk);
    cfg = '{we: 1'b1, target: t, index: 16'(idx), sub: 8'(sub), data: data};
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic logic [31:0] bound(input int sel, input int c, input bit eq);
    return 32'((int'(eq) << 24) | (sel << 16) | (c & 32'h0000_ffff));
  endfunction

  task automatic mask(input gc_cfg_target_e t, input int idx, input int bits[$]);
    logic [159:0] m = '0;
    foreach (bits[i]) m[bits[i]] = 1'b1;
    for (int w = 0; w < 5; w++) wr(t, idx, w, m[w*32 +: 32]);
  endtask

  task automatic affine(input int idx, input int a0, input int a1, input int c, input bit eq);
    wr(CFG_AFF_CMP, idx, 0, 32'((int'(eq) << 24) | (c & 32'h0000_ffff)));
    wr(CFG_AFF_STRIDE, idx, 0, 32'(a0 & 32'h0000_ffff));
    wr(CFG_AFF_STRIDE, idx, 1, 32'((a1 - 4 * a0) & 32'h0000_ffff));
  endtask

  function automatic logic [3:0] model(input int j0, input int j1);
    model[0] = (j0 == 0 && j1 == 4);
    model[1] = (j0 == 0 && j1 >= 3) || (j0 == 1 && j1 == 0);
    model[2] = (j0 + j1 == 4) || (j0 == 4 && j1 >= 5);
    model[3] = (j0 - j1 >= 1) && (j1 <= 2);
  endfunction

  task automatic run(input int ii);
    int cyc = 0, k;
    logic [N_CS-1:0] exp;
    wr(CFG_SCAN_II, 0, 0, 32'(ii));
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!cs_valid) @(negedge clk);
    while (cs_valid) begin
      k = cyc / ii;
      exp = '0;
      exp[3:0] = model(k % 5, k / 5);
      for (int i = 0; i < 4; i++) if (exp[i]) seen_one[i]++;
      checks++;
      if (cs !== exp) begin
        failures++;
        $display("FAIL II=%0d iteration (%0d,%0d) cs=%b exp=%b", ii, k % 5, k / 5, cs, exp);
      end
      cyc++;
      @(negedge clk);
    end
    checks++;
    if (cyc != 30 * ii) begin
      failures++;
      $display("FAIL II=%0d scan took %0d cycles", ii, cyc);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wr(CFG_SCAN_BOUND, 0, 0, 32'd4);
    wr(CFG_SCAN_BOUND, 1, 1, 32'd5);
    wr(CFG_LOW, 0, 0, bound(0, 0, 1));  // j0 == 0
    wr(CFG_LOW, 1, 0, bound(1, 4, 1));  // j1 == 4
    wr(CFG_LOW, 2, 0, bound(1, 3, 0));  // j1 >= 3
    wr(CFG_LOW, 3, 0, bound(0, 1, 1));  // j0 == 1
    wr(CFG_UP, 0, 0, bound(1, 0, 1));   // j1 == 0
    wr(CFG_LOW, 4, 0, bound(0, 4, 1));  // j0 == 4
    wr(CFG_LOW, 5, 0, bound(1, 5, 0));  // j1 >= 5
    wr(CFG_UP, 3, 0, bound(1, 2, 0));   // j1 <= 2
    affine(0, 1, 1, 4, 1);              // j0 + j1 == 4
    affine(1, 1, -1, 1, 0);             // j0 - j1 >= 1
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
    run(3);
    run(1);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (seen_one[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
