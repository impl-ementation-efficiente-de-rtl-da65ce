// tap_seq: control shared by the convolution blocks.
//
// A block does one 3x3 convolution per computation cycle of TAPS = 9 clocks,
// one multiply-accumulate per clock. tap_seq steps the tap index and tells
// the datapath when to load or add into its accumulator.
//
// Handshake: ready is high when idle. A clock with start && ready accepts a
// request and is itself the clock of tap 0 (first = 1, mac_en = 1, tap = 0).
// The next TAPS-1 clocks process taps 1..TAPS-1 (busy = 1); the clock of the
// final tap has last = 1, and out_valid is high for the one clock after it.
// So with start in clock 0, out_valid is high in clock 9, and ready is high
// again in that same clock: back-to-back requests give one result every
// 9 clocks. start while busy is ignored. The source must hold the data
// window on the block's inputs from the start clock through the last tap.
//
// Reset (active low, synchronous) clears busy and out_valid.
// The paper names the control logic but does not describe it; the counter,
// the handshake and the timing above are this design's own choices.
module tap_seq #(
  parameter int unsigned TAPS = conv_pkg::TAPS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     ready,
  output logic                     busy,
  output logic                     mac_en,
  output logic                     first,
  output logic                     last,
  output logic [$clog2(TAPS)-1:0]  tap,
  output logic                     out_valid
);
  localparam int unsigned TW = $clog2(TAPS);
  localparam logic [TW-1:0] LAST_TAP = TW'(TAPS - 1);

  logic [TW-1:0] cnt;

  assign ready  = !busy;
  assign first  = start && !busy;
  assign mac_en = first || busy;
  assign tap    = busy ? cnt : '0;
  assign last   = busy && (cnt == LAST_TAP);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= last;
      if (first) begin
        busy <= 1'b1;
        cnt  <= TW'(1);
      end else if (busy) begin
        if (cnt == LAST_TAP) begin
          busy <= 1'b0;
          cnt  <= '0;
        end else begin
          cnt <= cnt + TW'(1);
        end
      end
    end
  end

  // tap index never leaves 0..TAPS-1
  a_tap_range: assert property (@(posedge clk) disable iff (!rst_n) cnt <= LAST_TAP);
  // exactly one out_valid per accepted request, TAPS clocks after it
  a_latency: assert property (@(posedge clk) disable iff (!rst_n)
                              first |-> ##(TAPS) out_valid);
endmodule
