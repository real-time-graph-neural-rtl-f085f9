// address_generation -- gives every TC of the input stream its TC address.
//
// The upstream trigger module sends the 576 TCs of each 125 ns data window
// in TC-ID order as IN_BEATS beats of IN_LANES TCs (in_last on the final
// beat); this stream layout is an assumption of this implementation, the
// published design only states that this block computes the address of each
// incoming TC for the later sparsity compression. Address = beat * IN_LANES +
// lane (0 .. 575). Latency 1 cycle, one beat per cycle.
module address_generation
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = IN_LANES,
  parameter int unsigned BEATS = IN_BEATS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_last,
  input  tc_raw_t [LANES-1:0]  in_tc,
  output logic                 out_valid,
  output logic                 out_last,
  output tc_t [LANES-1:0]      out_tc
);
  localparam int unsigned BW = $clog2(BEATS);
  logic [BW-1:0] beat;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beat <= '0; out_valid <= 1'b0; out_last <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid) beat <= in_last ? '0 : beat + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      out_tc[l] <= '{id: TC_ID_W'(int'(beat) * LANES + l), hit: in_tc[l].hit,
                     e: in_tc[l].e, t: in_tc[l].t};
  end

  a_window_length: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_last) |-> (beat == BW'(BEATS - 1)));
endmodule
