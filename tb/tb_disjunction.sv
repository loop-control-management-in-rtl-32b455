// tb_disjunction: random sparse masks written word by word and random
// conjunction vectors; checks cs == OR of the selected conjunctions (0 for an
// empty mask) one cycle after the inputs are applied.
module tb_disjunction;
  import tcpa_pkg::*;

  localparam int unsigned N = 83;

  logic clk = 1'b0, rst_n = 1'b0;
  gc_cfg_t cfg = '0;
  logic [N-1:0] conjs = '0;
  logic cs;
  int checks = 0, failures = 0, ones = 0;

  always #5 clk = ~clk;

  disjunction #(.N_IN(N), .INDEX(2)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [95:0] mask;
    bit exp;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 60; n++) begin
      mask = '0;
      for (int b = 0; b < (n % 5); b++) mask[$urandom_range(N - 1)] = 1'b1;
      for (int w = 0; w < 3; w++) begin
        @(negedge clk);
        cfg = '{we: 1'b1, target: CFG_DISJ_MASK, index: 16'd2, sub: 8'(w), data: mask[w*32 +: 32]};
        @(negedge clk);
        cfg = '{we: 1'b1, target: CFG_CONJ_MASK, index: 16'd2, sub: 8'(w), data: '1};
      end
      @(negedge clk) cfg = '0;
      for (int t = 0; t < 20; t++) begin
        for (int b = 0; b < N; b++) conjs[b] = ($urandom_range(7) == 0);
        exp = 1'b0;
        for (int b = 0; b < N; b++) if (mask[b] && conjs[b]) exp = 1'b1;
        @(negedge clk);
        checks++;
        if (cs) ones++;
        if (cs !== exp) begin
          failures++;
          $display("FAIL cs=%0b exp=%0b", cs, exp);
        end
      end
    end
    checks++;
    if (ones == 0 || ones == checks - 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
