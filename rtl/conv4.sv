// conv4: two 3x3 fixed-point convolutions in parallel, one DSP each.
//
// Applies the kernel k held in the local serial-loaded store (coef_store) to
// two windows at once: result_a = sum_t win_a[t]*k[t] and
// result_b = sum_t win_b[t]*k[t], exact (tap t = 3*row + col; the kernel is
// not flipped). Each lane is a multiply-accumulate written so synthesis maps
// it to its own DSP slice; the lanes share the kernel store, the tap counter
// and the control, so two convolutions cost little more logic than one.
//
// Interface and timing (see tap_seq): start is taken while ready; both
// windows must stay on their inputs from the start clock through the 8
// following clocks; out_valid is high in the 9th clock after start and the
// results hold until the next start. coef_load shifts coef_in into the
// kernel store (tap 0 first) and must not be used while a computation runs.
//
// From the paper: two DSPs, two parallel convolutions one per DSP, serial
// coefficients, parallel data. Our choices: the two lanes share one kernel,
// signed operands, exact DW+CW+4-bit results, the 9-clock schedule.
(* use_dsp = "yes" *)
module conv4 #(
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
  input  logic [TAPS-1:0][DW-1:0]       win_a,
  input  logic [TAPS-1:0][DW-1:0]       win_b,
  output logic                          out_valid,
  output logic signed [RW-1:0]          result_a,
  output logic signed [RW-1:0]          result_b
);
  logic                      busy, mac_en, first;
  logic [$clog2(TAPS)-1:0]   tap;
  logic [CW-1:0]             k;
  logic signed [DW+CW-1:0]   prod_a, prod_b;
  logic signed [RW-1:0]      acc_a, acc_b;

  tap_seq #(.TAPS(TAPS)) u_seq (
    .clk, .rst_n, .start, .ready, .busy, .mac_en, .first, .last(), .tap, .out_valid
  );

  coef_store #(.CW(CW), .TAPS(TAPS)) u_coef (
    .clk, .load(coef_load), .din(coef_in), .tap, .dout(k)
  );

  assign prod_a = $signed(win_a[tap]) * $signed(k);
  assign prod_b = $signed(win_b[tap]) * $signed(k);

  always_ff @(posedge clk) begin
    if (mac_en) begin
      acc_a <= first ? RW'(prod_a) : acc_a + RW'(prod_a);
      acc_b <= first ? RW'(prod_b) : acc_b + RW'(prod_b);
    end
  end

  assign result_a = acc_a;
  assign result_b = acc_b;

  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !coef_load);
  a_win_stable:   assert property (@(posedge clk) disable iff (!rst_n)
                                   busy |-> ($stable(win_a) && $stable(win_b)));
endmodule
