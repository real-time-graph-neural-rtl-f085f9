// stream_compaction -- compresses the sparse trigger window (576 TC slots,
// few of them hit) into a dense table of at most N_MAX rows.
//
// Two levels, as in the published hierarchical compaction: within a beat,
// a prefix count over the LANES hit flags gives each hit TC its offset;
// across beats, the offsets are added to the number of rows filled so far.
// Rows keep the TC id, energy and time. Hits beyond N_MAX are dropped (the
// first N_MAX in stream order are kept, "truncated without ordering") and
// out_overflow is raised. After the last beat of a window, out_valid pulses
// for one cycle (latency 1) with the table, the number of rows used and the
// total number of hits; unused rows have hit = 0.
module stream_compaction
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = IN_LANES,
  parameter int unsigned NMAX  = N_MAX
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_last,
  input  tc_t [LANES-1:0]   in_tc,
  output logic              out_valid,
  output tc_t [NMAX-1:0]    out_rows,
  output logic [$clog2(NMAX):0] out_count,
  output logic [TC_ID_W:0]  out_nhits,
  output logic              out_overflow
);
  localparam int unsigned CW = $clog2(NMAX) + 1;

  tc_t [NMAX-1:0]   rows, rows_n;
  logic [TC_ID_W:0] nhits, nhits_n;

  always_comb begin
    logic [TC_ID_W:0] off;
    rows_n  = rows;
    off     = nhits;
    for (int l = 0; l < LANES; l++) begin
      if (in_tc[l].hit) begin
        if (int'(off) < NMAX) rows_n[off[CW-1:0]] = in_tc[l];
        off = off + 1'b1;
      end
    end
    nhits_n = off;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rows <= '0; nhits <= '0; out_valid <= 1'b0;
      out_rows <= '0; out_count <= '0; out_nhits <= '0; out_overflow <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (in_last) begin
          out_valid    <= 1'b1;
          out_rows     <= rows_n;
          out_count    <= (int'(nhits_n) > NMAX) ? CW'(NMAX) : CW'(nhits_n);
          out_nhits    <= nhits_n;
          out_overflow <= int'(nhits_n) > NMAX;
          rows         <= '0;
          nhits        <= '0;
        end else begin
          rows  <= rows_n;
          nhits <= nhits_n;
        end
      end
    end
  end
endmodule
