// tb_timestamp_fifo_delay: drives sparse random transitions (as control
// signals behave) and checks dout(t) == din(t - latency) every cycle for
// several latencies, many of them far above the FIFO depth. A final phase
// changes the input every cycle with a latency longer than the FIFO and checks
// that the overflow flag is raised.
module tb_timestamp_fifo_delay;

  localparam int unsigned N = 18;
  localparam int unsigned MAX_LAT = 300;
  localparam int unsigned DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [8:0] latency = '0;
  logic [N-1:0] din = '0, dout;
  logic overflow;
  logic [N-1:0] hist [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  timestamp_fifo_delay #(.N_CS(N), .MAX_LAT(MAX_LAT), .DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lats[6] = '{0, 1, 3, 40, 151, 300};
    logic [N-1:0] exp;
    foreach (lats[i]) begin
      rst_n = 1'b0;
      din = '0;
      latency = 9'(lats[i]);
      @(negedge clk);
      @(negedge clk);
      rst_n = 1'b1;
      hist.delete();
      for (int t = 0; t < 1500; t++) begin
        @(negedge clk);
        if ($urandom_range(40) == 0) din = N'($urandom);
        hist.push_front(din);
        #1;
        // Before reset the input was 0.
        exp = (t >= lats[i]) ? hist[lats[i]] : '0;
        checks++;
        if (dout !== exp) begin
          failures++;
          $display("FAIL latency=%0d t=%0d dout=%h exp=%h", lats[i], t, dout, exp);
        end
      end
      checks++;
      if (overflow) begin
        failures++;
        $display("FAIL unexpected overflow latency=%0d", lats[i]);
      end
    end
    // Overflow: more transitions in flight than DEPTH.
    rst_n = 1'b0;
    latency = 9'd100;
    @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      din = ~din;
    end
    checks++;
    if (!overflow) begin
      failures++;
      $display("FAIL overflow not flagged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
