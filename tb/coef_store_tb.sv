// coef_store_tb: self-checking test of the serial-loaded kernel store.
//
// Shifts random kernels in, one coefficient per clock, and reads every tap
// back: after nine loads tap t must hold the t-th coefficient sent. It then
// shifts in three more and checks that the store moved down by three (old
// taps 3..8 now at 0..5, the new ones at 6..8), and that clocks without load
// leave the contents alone.
module coef_store_tb;
  localparam int unsigned CW = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          load = 1'b0;
  logic [CW-1:0] din = '0;
  logic [3:0]    tap = '0;
  logic [CW-1:0] dout;
  int checks = 0, failures = 0;
  logic [CW-1:0] model [9];

  coef_store #(.CW(CW)) dut (.clk, .load, .din, .tap, .dout);

  task automatic shift_in(input logic [CW-1:0] v);
    @(negedge clk);
    load = 1'b1;
    din  = v;
    @(negedge clk);
    load = 1'b0;
    for (int i = 0; i < 8; i++) model[i] = model[i+1];
    model[8] = v;
  endtask

  task automatic check_all(input string what);
    for (int t = 0; t < 9; t++) begin
      tap = 4'(t);
      #1;
      checks++;
      if (dout !== model[t]) begin
        failures++;
        $display("FAIL %s tap %0d: got %h expected %h", what, t, dout, model[t]);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 9; i++) model[i] = '0;
    for (int rep = 0; rep < 20; rep++) begin
      for (int t = 0; t < 9; t++) shift_in(CW'($urandom));
      check_all("full load");
      for (int t = 0; t < 3; t++) shift_in(CW'($urandom));
      check_all("partial shift");
      repeat (5) @(negedge clk);
      check_all("hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
