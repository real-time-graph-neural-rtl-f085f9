// rr_arbiter -- round-robin arbiter for the Belle2Link output (Belle2Link
// subsystem; the published arbiter serves up to 12 senders).
//
// When no grant is held, the first requester after the one served last (in
// cyclic order) receives a one-hot grant, registered, and keeps it until
// `release` (end of its packet). A requester is served at most once per
// round when others are waiting.
module rr_arbiter #(
  parameter int unsigned N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         release_grant,
  output logic [N-1:0] grant
);
  localparam int unsigned IW = N > 1 ? $clog2(N) : 1;
  logic [IW-1:0] last;
  logic          held;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      grant <= '0; held <= 1'b0; last <= IW'(N - 1);
    end else if (held) begin
      if (release_grant) begin grant <= '0; held <= 1'b0; end
    end else begin
      for (int k = N; k >= 1; k--) begin
        int c;
        c = (int'(last) + k) % N;
        if (req[c]) begin
          grant <= N'(1) << c;
          last  <= IW'(c);
          held  <= 1'b1;
        end
      end
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
endmodule
