// tap_seq_tb: self-checking test of the tap sequencer.
//
// Checks clock by clock that an accepted start gives tap 0 with first = 1 in
// the start clock, taps 1..8 in the next 8 clocks (busy, ready low), last in
// the clock of tap 8, out_valid exactly 9 clocks after start, that a start
// while busy is ignored, that back-to-back requests run every 9 clocks, and
// that reset returns the sequencer to idle.
module tap_seq_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, start = 1'b0;
  logic ready, busy, mac_en, first, last, out_valid;
  logic [3:0] tap;
  int checks = 0, failures = 0;

  tap_seq dut (.clk, .rst_n, .start, .ready, .busy, .mac_en, .first, .last, .tap, .out_valid);

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  // One request: start is raised in the current clock (we are just after a
  // negedge); checks every clock of the computation. If noisy, start is
  // kept high while busy to check it is ignored.
  task automatic one_request(input bit noisy, input bit back_to_back_next);
    start = 1'b1;
    #1;
    expect_eq("ready at start", ready, 1);
    expect_eq("first at start", first, 1);
    expect_eq("mac_en at start", mac_en, 1);
    expect_eq("tap at start", tap, 0);
    for (int t = 1; t < 9; t++) begin
      @(negedge clk);
      start = noisy;
      #1;
      expect_eq("busy", busy, 1);
      expect_eq("ready low", ready, 0);
      expect_eq("first low", first, 0);
      expect_eq("mac_en", mac_en, 1);
      expect_eq("tap", tap, t);
      expect_eq("last", last, t == 8);
      expect_eq("out_valid low", out_valid, 0);
    end
    @(negedge clk);
    start = back_to_back_next;
    #1;
    expect_eq("out_valid after 9 clocks", out_valid, 1);
    expect_eq("ready again", ready, 1);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    #1;
    expect_eq("busy in reset", busy, 0);
    rst_n = 1'b1;
    @(negedge clk);
    #1;
    expect_eq("idle mac_en", mac_en, 0);
    expect_eq("idle out_valid", out_valid, 0);
    // single requests, some with start held high while busy
    for (int r = 0; r < 6; r++) begin
      one_request(r[0], 1'b0);
      if (r[0]) begin  // start already low now: check one pulse only
        @(negedge clk);
        #1;
        expect_eq("single out_valid pulse", out_valid, 0);
        expect_eq("no spurious request", busy, 0);
      end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    // back-to-back: three requests chained at the out_valid clock
    @(negedge clk);
    one_request(1'b0, 1'b1);
    one_request(1'b0, 1'b1);
    one_request(1'b0, 1'b0);
    // reset in the middle of a computation
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    #1;
    expect_eq("reset clears busy", busy, 0);
    repeat (10) begin
      @(negedge clk);
      #1;
      expect_eq("no out_valid after reset", out_valid, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
