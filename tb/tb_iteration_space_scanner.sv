// tb_iteration_space_scanner: checks the scanner against an independent
// mixed-radix count. For several bounds and initiation intervals it checks
// the iteration vector in every cycle, update/step in the cycle before each
// change, the done pulse and the total scan length of P * II cycles.
module tb_iteration_space_scanner;
  import tcpa_pkg::*;

  localparam int unsigned DIMS = 3;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  gc_cfg_t cfg = '0;
  logic [DIMS-1:0][IDX_W-1:0] iteration;
  logic update, running, done;
  logic [1:0] step;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  iteration_space_scanner #(.DIMS(DIMS)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
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

  task automatic write_cfg(input gc_cfg_target_e t, input int sub, input int data);
    @(negedge clk);
    cfg = '{we: 1'b1, target: t, index: '0, sub: 8'(sub), data: 32'(data)};
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic run_scan(input int b0, input int b1, input int b2, input int ii);
    int bnd[3];
    int total, k, rem, exp_it[3], exp_step, cycles;
    bit last;
    bnd = '{b0, b1, b2};
    write_cfg(CFG_SCAN_BOUND, 0, b0);
    write_cfg(CFG_SCAN_BOUND, 1, b1);
    write_cfg(CFG_SCAN_BOUND, 2, b2);
    write_cfg(CFG_SCAN_II, 0, ii);
    total = (b0 + 1) * (b1 + 1) * (b2 + 1);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cycles = 0;
    while (running) begin
      k = cycles / ii;
      rem = k;
      for (int d = 0; d < 3; d++) begin
        exp_it[d] = rem % (bnd[d] + 1);
        rem = rem / (bnd[d] + 1);
      end
      for (int d = 0; d < 3; d++) check(int'(iteration[d]) == exp_it[d], "iteration");
      last = (k == total - 1);
      exp_step = 0;
      for (int d = 2; d >= 0; d--) if (exp_it[d] != bnd[d]) exp_step = d;
      check(update == ((cycles % ii == ii - 1) && !last), "update");
      if (update) check(int'(step) == exp_step, "step");
      check(done == ((cycles % ii == ii - 1) && last), "done");
      cycles++;
      @(negedge clk);
    end
    check(cycles == total * ii, "scan length");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_scan(2, 1, 3, 2);
    run_scan(4, 5, 0, 1);
    run_scan(1, 2, 2, 3);
    run_scan(0, 0, 0, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
