// conv3: two 3x3 fixed-point convolutions in parallel on ONE DSP multiplier.
//
// Applies the kernel k in the local serial-loaded store (coef_store) to two
// windows: result_a = sum_t win_a[t]*k[t], result_b = sum_t win_b[t]*k[t],
// exact (tap t = 3*row + col; the kernel is not flipped).
//
// Both lanes share one multiplier by operand packing. Each clock the data
// words of the current tap are packed into one wide operand
//     P = xa * 2^S + xb        (xa, xb sign-extended)
// and multiplied by the shared coefficient k, so one product holds
// xa*k*2^S + xb*k. Nine such products are accumulated in one register:
//     acc = A * 2^S + B,   A = sum xa*k,   B = sum xb*k.
// With S = DW + CW + 3, B always fits in S signed bits (|B| <= 9*2^(DW+CW-2)
// < 2^(S-1)), so B is the low S bits read as signed and A = (acc - B) / 2^S
// exactly; the borrow a negative B takes from the high field is undone by
// the subtraction. The packed operand has S + DW + 1 bits (the +1 holds the
// carry of xa*2^S + xb when both are most negative). At DW = CW = 8 the two
// lanes take 2 x 19 = 38 bits of accumulator, inside the 48-bit accumulator
// of a DSP slice, and the product is 28 x 8 bits; wider operands would no
// longer fit one slice, which is why operands are limited to 8 bits (checked
// at elaboration).
//
// Interface and timing (see tap_seq): start is taken while ready; both
// windows must stay on their inputs from the start clock through the 8
// following clocks; out_valid is high in the 9th clock after start and the
// results hold until the next start. coef_load shifts coef_in into the
// kernel store (tap 0 first) and must not be used while a computation runs.
//
// From the paper: one DSP, two parallel convolutions, operands up to 8 bits,
// serial coefficients, parallel data. How the DSP is shared is not given:
// the packing scheme above, the shared kernel, signed operands and the
// 9-clock schedule are this design's choices.
(* use_dsp = "yes" *)
module conv3 #(
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
  localparam int unsigned S  = DW + CW + 3;     // lane offset = lane width
  localparam int unsigned OW = S + DW + 1;      // packed operand width
  localparam int unsigned AW = 2 * S;           // accumulator width

  if (DW > 8 || CW > 8) begin : g_width_check
    $error("conv3: data and coefficient widths are limited to 8 bits");
  end

  logic                      busy, mac_en, first;
  logic [$clog2(TAPS)-1:0]   tap;
  logic [CW-1:0]             k;
  logic signed [OW-1:0]      packed_op;
  logic signed [OW+CW-1:0]   prod;
  logic signed [AW-1:0]      acc;
  logic signed [S-1:0]       lane_b;
  logic signed [S-1:0]       hi_part;

  tap_seq #(.TAPS(TAPS)) u_seq (
    .clk, .rst_n, .start, .ready, .busy, .mac_en, .first, .last(), .tap, .out_valid
  );

  coef_store #(.CW(CW), .TAPS(TAPS)) u_coef (
    .clk, .load(coef_load), .din(coef_in), .tap, .dout(k)
  );

  assign packed_op = (OW'($signed(win_a[tap])) <<< S) + OW'($signed(win_b[tap]));
  assign prod      = packed_op * $signed(k);

  always_ff @(posedge clk) begin
    if (mac_en) acc <= first ? AW'(prod) : acc + AW'(prod);
  end

  // Unpack: low lane is the low S bits as signed, high lane is the rest.
  assign lane_b   = acc[S-1:0];
  assign hi_part  = S'((acc - AW'(lane_b)) >>> S);
  assign result_b = RW'(lane_b);
  assign result_a = RW'(hi_part);

  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !coef_load);
  a_win_stable:   assert property (@(posedge clk) disable iff (!rst_n)
                                   busy |-> ($stable(win_a) && $stable(win_b)));
endmodule
