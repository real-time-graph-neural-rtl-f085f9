// stream_fifo -- synchronous first-word-fall-through FIFO that links
// processing elements, used for skip connections and side streams.
//
// The published accelerator connects its PEs by FIFOs sized at design time
// so that the pipeline never stalls; accordingly there is no back-pressure
// here: pushing into a full FIFO or popping an empty one is a design error,
// flagged by assertions. dout shows the oldest word whenever empty = 0.
// Depth must be a power of two. Push and pop may happen in the same cycle.
module stream_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign count = wp - rp;
  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wp[AW-1:0]] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
