// tb_lower_bound_evaluator: random configurations (dimension, constant,
// mode) and random iterations; checks that valid equals "index >= c" or
// "index == c" for the iteration applied one cycle earlier.
module tb_lower_bound_evaluator;
  import tcpa_pkg::*;

  localparam int unsigned DIMS = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  gc_cfg_t cfg = '0;
  logic [DIMS-1:0][IDX_W-1:0] iteration = '0;
  logic valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lower_bound_evaluator #(.DIMS(DIMS), .INDEX(5)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sel, c, mode, v;
    bit exp;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 40; n++) begin
      sel = $urandom_range(DIMS - 1);
      c = $urandom_range(12);
      mode = $urandom_range(1);
      @(negedge clk);
      cfg = '{we: 1'b1, target: CFG_LOW, index: 16'd5, sub: '0,
              data: 32'((mode << 24) | (sel << 16) | c)};
      @(negedge clk);
      // A write to another evaluator must be ignored.
      cfg = '{we: 1'b1, target: CFG_LOW, index: 16'd6, sub: '0, data: 32'(1 << 24 | 7)};
      @(negedge clk);
      cfg = '{we: 1'b1, target: CFG_UP, index: 16'd5, sub: '0, data: 32'(1 << 24 | 9)};
      @(negedge clk);
      cfg = '0;
      for (int t = 0; t < 30; t++) begin
        for (int d = 0; d < DIMS; d++) iteration[d] = IDX_W'($urandom_range(12));
        v = int'(iteration[sel]);
        exp = mode ? (v == c) : (v >= c);
        @(negedge clk);
        checks++;
        if (valid !== exp) begin
          failures++;
          $display("FAIL sel=%0d c=%0d mode=%0d idx=%0d valid=%0b", sel, c, mode, v, valid);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
