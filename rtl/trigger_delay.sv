// trigger_delay -- delays the trigger input by a number of cycles set at run
// time (Belle2Link subsystem), so that a trigger meets the recorded data of
// its event in the DAQ buffers.
//
// A DEPTH-bit shift register samples trig_in every cycle; trig_out taps it
// at position delay-1, i.e. trig_out follows trig_in by exactly `delay`
// cycles for 1 <= delay <= DEPTH (delay = 0 acts as 1).
module trigger_delay #(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(DEPTH):0]    delay,
  input  logic                      trig_in,
  output logic                      trig_out
);
  logic [DEPTH-1:0] sr;

  always_ff @(posedge clk) begin
    if (!rst_n) sr <= '0;
    else        sr <= {sr[DEPTH-2:0], trig_in};
  end

  always_comb begin
    if (delay == '0)                    trig_out = sr[0];
    else if (int'(delay) > int'(DEPTH)) trig_out = sr[DEPTH-1];
    else                                trig_out = sr[$clog2(DEPTH)'(delay - 1'b1)];
  end
endmodule
