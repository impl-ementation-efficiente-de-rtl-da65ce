// conv1: 3x3 fixed-point convolution in logic only (no DSP).
//
// Computes result = sum over t = 0..8 of win[t] * k[t], exact, where k is the
// kernel held in the local serial-loaded store (coef_store) and win is the
// 3x3 data window, presented in parallel (tap t = 3*row + col). The sum is a
// correlation, as in CNN layers: the kernel is not flipped.
//
// One multiplier is shared by the nine taps: a computation takes 9 clocks,
// one tap per clock, under tap_seq. The multiplier is written as signed
// shift-and-add partial products (the coefficient's top bit has negative
// weight), which synthesis maps onto LUTs and carry chains; the use_dsp
// attribute keeps it out of DSP slices. The accumulator is a fabric register.
//
// Interface and timing (see tap_seq): start is taken while ready; the window
// must stay on win from the start clock through the 8 following clocks;
// out_valid is high in the 9th clock after start and result holds until the
// next start. coef_load shifts coef_in into the kernel store (tap 0 first)
// and must not be used while a computation runs.
//
// From the paper: no DSP, logic and carry chains, fixed-point operands of
// parametric width, serial coefficient loading, parallel data, one
// convolution per computation cycle. Our choices: signed operands, exact
// DW+CW+4-bit result, the 9-clock tap-serial schedule and the handshake.
(* use_dsp = "no" *)
module conv1 #(
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
  localparam int unsigned PW = DW + CW;

  logic                      busy, mac_en, first;
  logic [$clog2(TAPS)-1:0]   tap;
  logic [CW-1:0]             k;
  logic signed [PW-1:0]      prod;
  logic signed [RW-1:0]      acc;

  tap_seq #(.TAPS(TAPS)) u_seq (
    .clk, .rst_n, .start, .ready, .busy, .mac_en, .first, .last(), .tap, .out_valid
  );

  coef_store #(.CW(CW), .TAPS(TAPS)) u_coef (
    .clk, .load(coef_load), .din(coef_in), .tap, .dout(k)
  );

  // Signed multiply as a sum of shifted partial products.
  function automatic logic signed [PW-1:0] lut_mult(logic [DW-1:0] x, logic [CW-1:0] c);
    logic signed [PW-1:0] xs, sum;
    xs  = PW'($signed(x));
    sum = '0;
    for (int i = 0; i < CW; i++) begin
      if (c[i]) begin
        if (i == CW - 1) sum = sum - (xs <<< i);
        else             sum = sum + (xs <<< i);
      end
    end
    return sum;
  endfunction

  assign prod = lut_mult(win[tap], k);

  always_ff @(posedge clk) begin
    if (mac_en) acc <= first ? RW'(prod) : acc + RW'(prod);
  end

  assign result = acc;

  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !coef_load);
  a_win_stable:   assert property (@(posedge clk) disable iff (!rst_n) busy |-> $stable(win));
endmodule
