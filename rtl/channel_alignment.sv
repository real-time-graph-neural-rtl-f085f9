// channel_alignment -- lines up several data streams that carry the same
// events with different latencies (Belle2Link subsystem).
//
// Every channel has its own FIFO. Output starts once each channel has
// delivered its first valid word (self-synchronisation on the first valid
// signal) and from then on one word of every channel is released together
// whenever all channels hold one, so word i of each channel leaves in the
// same cycle. out_synced reports that all channels have started. Latency:
// 1 cycle after the last channel's word arrives. DEPTH must cover the
// largest latency difference between channels; overflow is asserted.
module channel_alignment #(
  parameter int unsigned N_CH  = 2,
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_CH-1:0]         in_valid,
  input  logic [N_CH-1:0][W-1:0]  in_data,
  output logic                    out_valid,
  output logic [N_CH-1:0][W-1:0]  out_data,
  output logic                    out_synced
);
  logic [N_CH-1:0]        empty, started, unused_full;
  logic [N_CH-1:0][W-1:0] dout;
  logic                   all_ready;

  assign all_ready = ~|empty;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [$clog2(DEPTH):0] unused_cnt;
    stream_fifo #(.W(W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .push(in_valid[c]), .din(in_data[c]), .pop(all_ready),
      .dout(dout[c]), .empty(empty[c]), .full(unused_full[c]), .count(unused_cnt));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0; started <= '0; out_data <= '0;
    end else begin
      started   <= started | in_valid;
      out_valid <= all_ready;
      if (all_ready) out_data <= dout;
    end
  end
  assign out_synced = &started;
endmodule
