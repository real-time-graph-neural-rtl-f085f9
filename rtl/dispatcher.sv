// dispatcher -- hands every (delayed) trigger to a free DAQ buffer, so that
// new events can be recorded while earlier packets are still being sent
// (Belle2Link subsystem).
//
// On trig the lowest-numbered buffer that is not busy gets a one-cycle start
// pulse together with the running event number, which then increments. If
// all buffers are busy the trigger is dropped and counted in n_dropped
// (the published design does not say what happens then). Latency: start
// in the cycle after trig.
module dispatcher #(
  parameter int unsigned N_BUF = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             trig,
  input  logic [N_BUF-1:0] busy,
  output logic [N_BUF-1:0] start,
  output logic [15:0]      event_no,
  output logic [15:0]      n_events,
  output logic [15:0]      n_dropped
);
  logic [N_BUF-1:0] pick;
  always_comb begin
    pick = '0;
    for (int b = N_BUF - 1; b >= 0; b--)
      if (!busy[b]) pick = N_BUF'(1) << b;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      start <= '0; event_no <= '0; n_events <= '0; n_dropped <= '0;
    end else begin
      start <= '0;
      if (trig) begin
        if (|pick) begin
          start    <= pick;
          event_no <= n_events;
          n_events <= n_events + 1'b1;
        end else begin
          n_dropped <= n_dropped + 1'b1;
        end
      end
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(start));
endmodule
