// tb_affine_bound_evaluator: the testbench walks a 3-dimensional iteration
// space itself (dimension 0 first), drives update/step like the scanner, and
// loads the evaluator's stride table with stride[d] = a[d] - sum_{k<d}
// a[k]*last[k]. Every cycle it checks valid against a.j >= c or a.j == c
// computed directly as a scalar product of the iteration one cycle earlier.
module tb_affine_bound_evaluator;
  import tcpa_pkg::*;

  localparam int unsigned DIMS = 3;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, update = 1'b0;
  logic [1:0] step = '0;
  gc_cfg_t cfg = '0;
  logic valid;
  int checks = 0, failures = 0, n_true = 0;

  always #5 clk = ~clk;

  affine_bound_evaluator #(.DIMS(DIMS), .INDEX(3)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_cfg(input gc_cfg_target_e t, input int idx, input int sub, input int data);
    @(negedge clk);
    cfg = '{we: 1'b1, target: t, index: 16'(idx), sub: 8'(sub), data: 32'(data)};
    @(negedge clk);
    cfg = '0;
  endtask

  initial begin
    int a[3], last[3], j[3], stride, c, mode, u, d;
    bit exp, fin;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 30; n++) begin
      for (int k = 0; k < 3; k++) begin
        a[k] = int'($urandom_range(6)) - 3;
        last[k] = $urandom_range(4);
      end
      c = int'($urandom_range(10)) - 5;
      mode = $urandom_range(1);
      for (int s = 0; s < 3; s++) begin
        stride = a[s];
        for (int k = 0; k < s; k++) stride -= a[k] * last[k];
        write_cfg(CFG_AFF_STRIDE, 3, s, stride & 32'h0000_ffff);
        write_cfg(CFG_AFF_STRIDE, 4, s, 32'h0005);  // other evaluator
      end
      write_cfg(CFG_AFF_CMP, 3, 0, (mode << 24) | (c & 32'h0000_ffff));
      @(negedge clk) clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      j = '{0, 0, 0};
      fin = 1'b0;
      while (!fin) begin
        // Hold each iteration for 1 or 2 cycles; the last cycle updates.
        int hold = $urandom_range(1, 2);
        for (int h = 0; h < hold; h++) begin
          fin = (j[0] == last[0]) && (j[1] == last[1]) && (j[2] == last[2]);
          d = 0;
          for (int k = 2; k >= 0; k--) if (j[k] != last[k]) d = k;
          update = (h == hold - 1) && !fin;
          step = 2'(d);
          u = a[0] * j[0] + a[1] * j[1] + a[2] * j[2];
          exp = mode ? (u == c) : (u >= c);
          @(negedge clk);
          // valid now reflects the accumulator that belonged to j.
          checks++;
          if (valid) n_true++;
          if (valid !== exp) begin
            failures++;
            $display("FAIL j=%0d,%0d,%0d a=%0d,%0d,%0d c=%0d mode=%0d", j[0], j[1], j[2],
                     a[0], a[1], a[2], c, mode);
          end
          if (update) begin
            j[d]++;
            for (int k = 0; k < d; k++) j[k] = 0;
          end
        end
      end
      update = 1'b0;
    end
    checks++;
    if (n_true == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
