// conv2: 3x3 fixed-point convolution on a single DSP multiply-accumulate.
//
// Computes result = sum over t = 0..8 of win[t] * k[t], exact, with k the
// kernel in the local serial-loaded store (coef_store) and win the 3x3 window
// presented in parallel (tap t = 3*row + col); the kernel is not flipped.
//
// A multiplier and an accumulator, written behaviourally so synthesis maps
// them to one DSP slice (use_dsp attribute; the accumulator becomes the
// slice's P register). The fabric holds only the kernel store, the tap
// counter and the window multiplexer, so the logic stays small. The window
// is not registered: the source holds it during the computation.
//
// Interface and timing (see tap_seq): start is taken while ready; the window
// must stay on win from the start clock through the 8 following clocks;
// out_valid is high in the 9th clock after start and result holds until the
// next start. coef_load shifts coef_in into the kernel store (tap 0 first)
// and must not be used while a computation runs.
//
// From the paper: one DSP, reduced logic, one convolution per computation
// cycle, serial coefficients, parallel data. Our choices: signed operands,
// exact DW+CW+4-bit result, the 9-clock tap-serial schedule, the handshake.
(* use_dsp = "yes" *)
module conv2 #(
  parameter int unsigned DW   = 8,
  parameter int unsigned CW   = 8,
  parameter int unsigned TAPS = conv_pkg::TAPS,
  localparam int unsigned RW  = conv_pkg::result_width(DW, CW)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          coef_load,
  input  logic [CW-1:0]                 coef_in,
  input  logic                          start,
  output logic                          ready,
  input  logic [TAPS-1:0][DW-1:0]       win,
  output logic                          out_valid,
  output logic signed [RW-1:0]          result
);
  logic                      busy, mac_en, first;
  logic [$clog2(TAPS)-1:0]   tap;
  logic [CW-1:0]             k;
  logic signed [DW+CW-1:0]   prod;
  logic signed [RW-1:0]      acc;

  tap_seq #(.TAPS(TAPS)) u_seq (
    .clk, .rst_n, .start, .ready, .busy, .mac_en, .first, .last(), .tap, .out_valid
  );

  coef_store #(.CW(CW), .TAPS(TAPS)) u_coef (
    .clk, .load(coef_load), .din(coef_in), .tap, .dout(k)
  );

  assign prod = $signed(win[tap]) * $signed(k);

  always_ff @(posedge clk) begin
    if (mac_en) acc <= first ? RW'(prod) : acc + RW'(prod);
  end

  assign result = acc;

  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !coef_load);
  a_win_stable:   assert property (@(posedge clk) disable iff (!rst_n) busy |-> $stable(win));
endmodule
