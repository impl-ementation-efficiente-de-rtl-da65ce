// conv_bank: a bank of convolution blocks filling an FPGA, the top level.
//
// The four convolution blocks trade logic for DSP slices differently:
// conv1 uses no DSP, conv2 one DSP per convolution, conv3 two convolutions on
// one DSP (operands up to 8 bits), conv4 two convolutions on two DSPs. A
// layer is mapped onto a device by choosing how many of each to instantiate.
// The defaults are the mix predicted to use about 80 % of the LUTs and DSPs
// of a Zynq UltraScale+ ZCU104 at 8-bit precision: 1380 conv1, 284 conv2,
// 800 conv3 and 150 conv4 blocks, i.e. 1380 + 284 + 2*800 + 2*150 = 3564
// convolutions evaluated at once.
//
// Numbering. Blocks are numbered 0..NBLK-1 in the order conv1, conv2, conv3,
// conv4. Convolutions (window inputs and results) are numbered
// 0..NCONV-1 in the same order; a conv3 or conv4 block j of its kind owns two
// consecutive slots, lane a the even one and lane b the odd one.
//
// Interface. coef_in is one serial coefficient bus broadcast to every block;
// coef_load[b] shifts it into block b's kernel store, so kernels are loaded
// one block (or any group of blocks sharing a kernel) at a time, 9 clocks per
// kernel, tap 0 first. start[b]/ready[b] are block b's handshake. win[i] is
// the 3x3 window of convolution i (tap t = 3*row + col), to be held from the
// start clock through the 8 clocks after it; out_valid[i] pulses in the 9th
// clock after its block's start and result[i] holds until the next start.
// Every block takes 9 clocks per convolution.
//
// The block mix is the paper's; the bank structure, the broadcast
// coefficient bus and the numbering are this design's choices.
module conv_bank #(
  parameter int unsigned DW = 8,
  parameter int unsigned CW = 8,
  parameter int unsigned N1 = 1380,
  parameter int unsigned N2 = 284,
  parameter int unsigned N3 = 800,
  parameter int unsigned N4 = 150,
  localparam int unsigned TAPS  = conv_pkg::TAPS,
  localparam int unsigned RW    = conv_pkg::result_width(DW, CW),
  localparam int unsigned NBLK  = N1 + N2 + N3 + N4,
  localparam int unsigned NCONV = N1 + N2 + 2 * N3 + 2 * N4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [CW-1:0]                coef_in,
  input  logic [NBLK-1:0]              coef_load,
  input  logic [NBLK-1:0]              start,
  output logic [NBLK-1:0]              ready,
  input  logic [TAPS-1:0][DW-1:0]      win       [NCONV],
  output logic [NCONV-1:0]             out_valid,
  output logic signed [RW-1:0]         result    [NCONV]
);
  // first block and first convolution slot of each kind
  localparam int unsigned B2 = N1, B3 = N1 + N2, B4 = N1 + N2 + N3;
  localparam int unsigned C2 = N1, C3 = N1 + N2, C4 = N1 + N2 + 2 * N3;

  for (genvar j = 0; j < N1; j++) begin : g_conv1
    conv1 #(.DW(DW), .CW(CW)) u_conv (
      .clk, .rst_n,
      .coef_load (coef_load[j]), .coef_in,
      .start     (start[j]),     .ready (ready[j]),
      .win       (win[j]),
      .out_valid (out_valid[j]), .result (result[j])
    );
  end

  for (genvar j = 0; j < N2; j++) begin : g_conv2
    conv2 #(.DW(DW), .CW(CW)) u_conv (
      .clk, .rst_n,
      .coef_load (coef_load[B2+j]), .coef_in,
      .start     (start[B2+j]),     .ready (ready[B2+j]),
      .win       (win[C2+j]),
      .out_valid (out_valid[C2+j]), .result (result[C2+j])
    );
  end

  for (genvar j = 0; j < N3; j++) begin : g_conv3
    logic valid;
    conv3 #(.DW(DW), .CW(CW)) u_conv (
      .clk, .rst_n,
      .coef_load (coef_load[B3+j]), .coef_in,
      .start     (start[B3+j]),     .ready (ready[B3+j]),
      .win_a     (win[C3+2*j]),     .win_b (win[C3+2*j+1]),
      .out_valid (valid),
      .result_a  (result[C3+2*j]),  .result_b (result[C3+2*j+1])
    );
    assign out_valid[C3+2*j]   = valid;
    assign out_valid[C3+2*j+1] = valid;
  end

  for (genvar j = 0; j < N4; j++) begin : g_conv4
    logic valid;
    conv4 #(.DW(DW), .CW(CW)) u_conv (
      .clk, .rst_n,
      .coef_load (coef_load[B4+j]), .coef_in,
      .start     (start[B4+j]),     .ready (ready[B4+j]),
      .win_a     (win[C4+2*j]),     .win_b (win[C4+2*j+1]),
      .out_valid (valid),
      .result_a  (result[C4+2*j]),  .result_b (result[C4+2*j+1])
    );
    assign out_valid[C4+2*j]   = valid;
    assign out_valid[C4+2*j+1] = valid;
  end
endmodule
