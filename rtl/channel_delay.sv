// channel_delay -- ring buffer that delays a stream (valid + data) by a
// number of cycles set at run time (Belle2Link subsystem; used to bring the
// recorded data in step with the trigger).
//
// A write pointer advances every cycle; the output register reads the entry
// written delay-1 cycles before, so out follows in by exactly `delay`
// cycles for 1 <= delay <= DEPTH-1 (delay = 0 acts as 1). Changing delay
// takes effect immediately; words in flight may then be repeated or lost.
module channel_delay #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(DEPTH)-1:0] delay,
  input  logic                     in_valid,
  input  logic [W-1:0]             in_data,
  output logic                     out_valid,
  output logic [W-1:0]             out_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]     mem [DEPTH];
  logic [DEPTH-1:0] vmem;
  logic [AW-1:0]    wp, rp;

  assign rp = wp - (delay - 1'b1);

  always_ff @(posedge clk) mem[wp] <= in_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; vmem <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      wp       <= wp + 1'b1;
      vmem[wp] <= in_valid;
      if (delay <= AW'(1)) begin
        out_valid <= in_valid;
        out_data  <= in_data;
      end else begin
        out_valid <= vmem[rp];
        out_data  <= mem[rp];
      end
    end
  end
endmodule
