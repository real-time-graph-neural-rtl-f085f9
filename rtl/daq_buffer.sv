// daq_buffer -- stores the recorded data of one triggered event and sends it
// as one packet (Belle2Link subsystem).
//
// States: IDLE -> (start) CAPTURE: the next WIN valid words of the delayed,
// aligned data stream are written to memory -> READY: req is raised to the
// arbiter -> (grant) SEND: one header word, then the WIN data words, one
// per cycle, sop on the header and eop on the last word -> IDLE.
// Header (low bits of the word): {event number[15:0], buffer id[7:0],
// payload length[15:0]}, rest zero. The Belle2Link packet format itself is
// not reproduced; this header is this implementation's choice.
// busy = not IDLE, as seen by the dispatcher.
module daq_buffer #(
  parameter int unsigned W      = 64,
  parameter int unsigned WIN    = 32,
  parameter int unsigned BUF_ID = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   event_no,
  input  logic          in_valid,
  input  logic [W-1:0]  in_data,
  output logic          busy,
  output logic          req,
  input  logic          grant,
  output logic          out_valid,
  output logic          out_sop,
  output logic          out_eop,
  output logic [W-1:0]  out_data
);
  typedef enum logic [1:0] {IDLE, CAPTURE, READY, SEND} state_t;
  localparam int unsigned CW = $clog2(WIN + 1);

  state_t        state;
  logic [W-1:0]  mem [WIN];
  logic [CW-1:0] cnt;
  logic [15:0]   evno;
  logic          hdr;

  assign busy = (state != IDLE);
  assign req  = (state == READY);

  always_ff @(posedge clk) begin
    if (state == CAPTURE && in_valid) mem[cnt[$clog2(WIN)-1:0]] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE; cnt <= '0; evno <= '0; hdr <= 1'b0;
      out_valid <= 1'b0; out_sop <= 1'b0; out_eop <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= 1'b0; out_sop <= 1'b0; out_eop <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state <= CAPTURE; cnt <= '0; evno <= event_no;
        end
        CAPTURE: if (in_valid) begin
          if (cnt == CW'(WIN - 1)) begin state <= READY; cnt <= '0; end
          else cnt <= cnt + 1'b1;
        end
        READY: if (grant) begin
          state <= SEND; hdr <= 1'b1; cnt <= '0;
        end
        SEND: begin
          out_valid <= 1'b1;
          if (hdr) begin
            hdr      <= 1'b0;
            out_sop  <= 1'b1;
            out_data <= W'({evno, 8'(BUF_ID), 16'(WIN)});
          end else begin
            out_data <= mem[cnt[$clog2(WIN)-1:0]];
            if (cnt == CW'(WIN - 1)) begin
              out_eop <= 1'b1;
              state   <= IDLE;
            end
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_start_only_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == IDLE);
endmodule
