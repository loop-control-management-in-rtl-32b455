// tb_shift_register_delay: drives random vectors and checks, for several
// configured latencies including 0 (bypass) and the maximum, that
// dout(t) == din(t - latency) in every cycle once the register is filled.
module tb_shift_register_delay;

  localparam int unsigned N = 18;
  localparam int unsigned MAX_LAT = 64;

  logic clk = 1'b0;
  logic [6:0] latency = '0;
  logic [N-1:0] din = '0, dout;
  logic [N-1:0] hist [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  shift_register_delay #(.N_CS(N), .MAX_LAT(MAX_LAT)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lats[6] = '{0, 1, 2, 7, 33, 64};
    foreach (lats[i]) begin
      latency = 7'(lats[i]);
      hist.delete();
      for (int t = 0; t < 300; t++) begin
        @(negedge clk);
        din = N'($urandom);
        hist.push_front(din);  // hist[k] = din k cycles ago
        #1;
        if (t >= lats[i]) begin
          checks++;
          if (dout !== hist[lats[i]]) begin
            failures++;
            $display("FAIL latency=%0d t=%0d", lats[i], t);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
