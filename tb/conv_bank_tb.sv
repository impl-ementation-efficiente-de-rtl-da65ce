// conv_bank_tb: end-to-end self-checking test of conv_bank on a reduced bank (3 conv1, 2 conv2, 3 conv3, 2 conv4).
//
// Works like a layer controller driving the bank: it loads kernels through
// the broadcast serial coefficient bus (first one kernel into every block at
// once, then a different random kernel into each block), then
//  - starts every block in the same clock with random windows and checks all
//    results and that each out_valid comes exactly 9 clocks after start;
//  - runs 3000 clocks of random traffic in which blocks start at random
//    times, chain a new request in the clock their result appears
//    (back-to-back), and see start pulses while busy, which must be ignored.
// Every result is compared with a 3x3 sum of products computed here from the
// kernel and window the test sent. The test counts how often each mechanism
// happened (broadcast and per-block kernel loads, parallel start, random
// start, back-to-back request, ignored start, results of each block kind,
// conv3 results whose low lane is negative so the packed accumulator borrows
// from the high lane) and fails if one never happened.
module conv_bank_tb;
  localparam int unsigned DW = 8, CW = 8, RW = DW + CW + 4;
  localparam int unsigned N1 = 3, N2 = 2, N3 = 3, N4 = 2;
  localparam int unsigned NBLK  = N1 + N2 + N3 + N4;
  localparam int unsigned NCONV = N1 + N2 + 2 * N3 + 2 * N4;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic [CW-1:0]              coef_in = '0;
  logic [NBLK-1:0]            coef_load = '0, start = '0, ready;
  logic [8:0][DW-1:0]         win [NCONV];
  logic [NCONV-1:0]           out_valid;
  logic signed [RW-1:0]       result [NCONV];

  conv_bank #(.DW(DW), .CW(CW), .N1(N1), .N2(N2), .N3(N3), .N4(N4)) dut (
    .clk, .rst_n, .coef_in, .coef_load, .start, .ready, .win, .out_valid, .result
  );

  int checks = 0, failures = 0;
  logic [CW-1:0] kern [NBLK][9];
  int   due   [NBLK];       // cycle at which the block's result is due, -1 if idle
  int   cycle = 0;
  int   n_bcast = 0, n_indiv = 0, n_parallel = 0, n_random = 0, n_b2b = 0;
  int   n_ignored = 0, n_borrow = 0;
  int   n_kind [4] = '{0, 0, 0, 0};

  // kind of block b (0..3) and its first convolution slot
  function automatic int kind_of(input int b);
    if (b < N1) return 0;
    if (b < N1 + N2) return 1;
    if (b < N1 + N2 + N3) return 2;
    return 3;
  endfunction
  function automatic int slot_of(input int b);
    case (kind_of(b))
      0: return b;
      1: return b;
      2: return N1 + N2 + 2 * (b - N1 - N2);
      default: return N1 + N2 + 2 * N3 + 2 * (b - N1 - N2 - N3);
    endcase
  endfunction
  function automatic int lanes_of(input int b);
    return kind_of(b) >= 2 ? 2 : 1;
  endfunction

  function automatic int conv_ref(input int b, input int c);
    int s = 0;
    for (int t = 0; t < 9; t++) s += int'($signed(win[c][t])) * int'($signed(kern[b][t]));
    return s;
  endfunction

  task automatic fail(input string msg);
    failures++;
    $display("FAIL cycle %0d: %s", cycle, msg);
  endtask

  // advance one clock; all stimulus changes just after the negedge
  task automatic tick();
    @(negedge clk);
    cycle++;
  endtask

  task automatic new_windows(input int b);
    for (int l = 0; l < lanes_of(b); l++)
      for (int t = 0; t < 9; t++) begin
        case ($urandom_range(0, 5))
          0: win[slot_of(b) + l][t] = 8'h80;
          1: win[slot_of(b) + l][t] = 8'h7f;
          default: win[slot_of(b) + l][t] = 8'($urandom);
        endcase
      end
  endtask

  // compare outputs with the scoreboard in the current clock
  task automatic check_outputs();
    for (int b = 0; b < NBLK; b++) begin
      bit expect_valid;
      expect_valid = (due[b] == cycle);
      checks++;
      if (ready[b] !== (due[b] < 0 || due[b] == cycle))
        fail($sformatf("block %0d ready %0d", b, ready[b]));
      for (int l = 0; l < lanes_of(b); l++) begin
        int c, e;
        c = slot_of(b) + l;
        checks++;
        if (out_valid[c] !== expect_valid) fail($sformatf("conv %0d out_valid %0d expected %0d", c, out_valid[c], expect_valid));
        if (expect_valid) begin
          e = conv_ref(b, c);
          checks++;
          if (int'(result[c]) != e) fail($sformatf("conv %0d result %0d expected %0d", c, result[c], e));
          n_kind[kind_of(b)]++;
          if (kind_of(b) == 2 && l == 1 && e < 0) n_borrow++;
        end
      end
      if (expect_valid) due[b] = -1;
    end
  endtask

  task automatic load_kernel(input logic [NBLK-1:0] which, input logic [CW-1:0] k [9]);
    for (int t = 0; t < 9; t++) begin
      coef_load = which;
      coef_in   = k[t];
      tick();
    end
    coef_load = '0;
    for (int b = 0; b < NBLK; b++) if (which[b]) kern[b] = k;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [CW-1:0] k [9];
    for (int c = 0; c < NCONV; c++) win[c] = '0;
    for (int b = 0; b < NBLK; b++) due[b] = -1;
    repeat (3) tick();
    rst_n = 1'b1;
    tick();

    // 1. one kernel broadcast to every block, all blocks started together
    for (int t = 0; t < 9; t++) k[t] = 8'($urandom);
    load_kernel('1, k);
    n_bcast++;
    for (int round = 0; round < 2; round++) begin
      for (int b = 0; b < NBLK; b++) begin
        new_windows(b);
        start[b] = 1'b1;
        due[b] = cycle + 9;
      end
      n_parallel++;
      tick();
      start = '0;
      repeat (8) begin check_outputs(); tick(); end
      check_outputs();
      for (int b = 0; b < NBLK; b++) if (due[b] >= 0) fail("result missing after parallel start");
      if (round == 0) begin
        // 2. a different kernel into each block, one block at a time
        for (int b = 0; b < NBLK; b++) begin
          logic [NBLK-1:0] one;
          one = '0;
          one[b] = 1'b1;
          for (int t = 0; t < 9; t++) k[t] = 8'($urandom);
          load_kernel(one, k);
          n_indiv++;
        end
      end
    end

    // 3. random traffic: random starts, back-to-back chains, starts while busy
    repeat (3000) begin
      tick();
      check_outputs();
      for (int b = 0; b < NBLK; b++) begin
        if (due[b] < 0) begin
          if ($urandom_range(0, 3) == 0) begin
            new_windows(b);
            start[b] = 1'b1;
            // a block whose result is in this clock is ready again at once
            if (out_valid[slot_of(b)]) n_b2b++; else n_random++;
            due[b] = cycle + 9;
          end else start[b] = 1'b0;
        end else begin
          start[b] = ($urandom_range(0, 3) == 0);
          if (start[b]) n_ignored++;
        end
      end
    end
    tick();
    start = '0;
    repeat (10) begin check_outputs(); tick(); end

    $display("broadcast loads %0d, per-block loads %0d, parallel starts %0d, random starts %0d",
             n_bcast, n_indiv, n_parallel, n_random);
    $display("back-to-back %0d, ignored starts %0d, conv3 borrows %0d", n_b2b, n_ignored, n_borrow);
    $display("results conv1 %0d conv2 %0d conv3 %0d conv4 %0d", n_kind[0], n_kind[1], n_kind[2], n_kind[3]);
    checks++;
    if (n_bcast == 0 || n_indiv == 0 || n_parallel == 0 || n_random == 0 || n_b2b == 0 ||
        n_ignored == 0 || n_borrow == 0 || n_kind[0] == 0 || n_kind[1] == 0 ||
        n_kind[2] == 0 || n_kind[3] == 0)
      fail("a mechanism never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
