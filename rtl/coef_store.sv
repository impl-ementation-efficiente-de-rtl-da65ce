// coef_store: local store of one 3x3 kernel, loaded serially.
//
// The blocks take their nine coefficients one per clock over a narrow serial
// input and keep them locally, so a kernel costs CW input pins rather than
// 9*CW. The store is a TAPS-deep shift register: each clock with load high
// shifts din in at the top (entry TAPS-1) and every entry moves down by one,
// so after nine loads the first coefficient sent sits in entry 0 (tap 0) and
// the last in entry 8. On an FPGA this maps to a LUT shift register (SRL),
// the distributed memory the blocks are reported to use.
//
// Interface: load/din write; tap selects the entry driven on dout
// (combinational read, no latency). There is no reset: the contents are
// undefined until nine coefficients have been shifted in.
//
// Serial loading and local storage follow the paper; the shift direction,
// the load order and the random-access read port are this design's choices.
module coef_store #(
  parameter int unsigned CW   = 8,
  parameter int unsigned TAPS = conv_pkg::TAPS
) (
  input  logic                      clk,
  input  logic                      load,
  input  logic [CW-1:0]             din,
  input  logic [$clog2(TAPS)-1:0]   tap,
  output logic [CW-1:0]             dout
);
  logic [CW-1:0] k [TAPS];

  always_ff @(posedge clk) begin
    if (load) begin
      for (int i = 0; i < TAPS - 1; i++) k[i] <= k[i+1];
      k[TAPS-1] <= din;
    end
  end

  assign dout = (32'(tap) < TAPS) ? k[tap] : '0;
endmodule
