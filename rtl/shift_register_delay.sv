// shift_register_delay: delays the control-signal vector of a PE by a
// configurable number of cycles using a shift register.
//
// The vector is shifted through MAX_LAT register stages every cycle; a
// multiplexer taps stage `latency`, so dout(t) = din(t - latency) for
// 1 <= latency <= MAX_LAT. latency = 0 bypasses the register (dout = din).
// Cost grows linearly with MAX_LAT, which makes this variant the cheap one for
// short latencies.
//
// Following the paper: a configurable shift register per PE. The tap
// multiplexer and the zero-latency bypass are this design's choices. The stages
// are not reset (like an SRL); dout is meaningful `latency` cycles after the
// input has been driven.
module shift_register_delay #(
  parameter int unsigned N_CS    = 18,
  parameter int unsigned MAX_LAT = 4096,
  parameter int unsigned LAT_W   = $clog2(MAX_LAT + 1),
  parameter int unsigned TAP_W   = (MAX_LAT > 1) ? $clog2(MAX_LAT) : 1
) (
  input  logic             clk,
  input  logic [LAT_W-1:0] latency,
  input  logic [N_CS-1:0]  din,
  output logic [N_CS-1:0]  dout
);

  // stage_q[i] holds din from i + 1 cycles ago.
  logic [MAX_LAT-1:0][N_CS-1:0] stage_q;

  if (MAX_LAT > 1) begin : g_chain
    always_ff @(posedge clk) stage_q <= {stage_q[MAX_LAT-2:0], din};
  end else begin : g_single
    always_ff @(posedge clk) stage_q <= din;
  end

  always_comb begin
    if (latency == '0)                 dout = din;
    else if (32'(latency) > MAX_LAT)   dout = stage_q[MAX_LAT-1];
    else                               dout = stage_q[TAP_W'(latency - LAT_W'(1))];
  end

endmodule
