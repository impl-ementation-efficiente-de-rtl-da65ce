// conv1_tb: self-checking test of conv1 (logic-only convolution).
//
// Loads random and corner-case kernels through the serial coefficient input,
// runs convolutions on random and extreme windows and compares every result
// with a sum of products computed here in plain integer arithmetic. It also
// checks the timing: out_valid exactly 9 clocks after start, one result every
// 9 clocks when requests are chained back to back, and a start while busy
// ignored. A second instance at DW = 16, CW = 12 checks other widths.
module conv1_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;
  int n_b2b = 0, n_ignored = 0;

  // ---------------------------------------------------------------- DUT 0
  localparam int unsigned DW = 8, CW = 8, RW = DW + CW + 4;
  localparam int unsigned DW2 = 16, CW2 = 12, RW2 = DW2 + CW2 + 4;
  localparam int unsigned L = 1;

  logic            coef_load = 1'b0, start = 1'b0, ready, out_valid;
  logic [15:0]     coef_in = '0;     // wide enough for both instances
  logic [8:0][DW-1:0]   win  [L];
  logic [8:0][DW2-1:0]  win2 [L];
  logic signed [RW-1:0]  res  [L];
  logic signed [RW2-1:0] res2 [L];
  logic ready2, out_valid2;
  logic [15:0] kern [9];
  localparam int unsigned CWMAX = (CW > CW2) ? CW : CW2, CWMIN = (CW > CW2) ? CW2 : CW;

  conv1 #(.DW(DW), .CW(CW)) dut (
    .clk, .rst_n, .coef_load, .coef_in(coef_in[CW-1:0]), .start, .ready,
    .win(win[0]), .out_valid, .result(res[0]));
  conv1 #(.DW(DW2), .CW(CW2)) dut2 (
    .clk, .rst_n, .coef_load, .coef_in(coef_in[CW2-1:0]), .start, .ready(ready2),
    .win(win2[0]), .out_valid(out_valid2), .result(res2[0]));

  function automatic longint conv_ref(input logic [8:0][DW2-1:0] w, input int dw, input int cw);
    longint s = 0;
    for (int t = 0; t < 9; t++) begin
      longint x, k;
      x = longint'(w[t]);
      if (x >= (longint'(1) << (dw - 1))) x -= (longint'(1) << dw);
      k = longint'(kern[t]) & ((longint'(1) << cw) - 1);
      if (k >= (longint'(1) << (cw - 1))) k -= (longint'(1) << cw);
      s += x * k;
    end
    return s;
  endfunction

  function automatic logic [DW2-1:0] rand_word(input int dw, input int mode);
    case (mode)
      0: return DW2'(1) << (dw - 1);                      // most negative
      1: return (DW2'(1) << (dw - 1)) - DW2'(1);          // most positive
      default: return DW2'($urandom) & ((DW2'(1) << dw) - DW2'(1));
    endcase
  endfunction

  task automatic load_kernel(input int mode);
    for (int t = 0; t < 9; t++) begin
      // each instance reads the low CW / CW2 bits; the corner patterns are
      // the most negative / most positive value in both slices at once
      logic [15:0] neg, pos, v;
      neg = (16'(1) << (CW - 1)) | (16'(1) << (CW2 - 1));
      pos = ((16'(1) << (CWMAX - 1)) - 16'(1)) & ~(16'(1) << (CWMIN - 1));
      case (mode)
        0: v = neg;
        1: v = pos;
        2: v = (t % 2 != 0) ? neg : pos;
        default: v = 16'($urandom);
      endcase
      kern[t] = v;
      @(negedge clk);
      coef_load = 1'b1;
      coef_in   = v;
    end
    @(negedge clk);
    coef_load = 1'b0;
  endtask

  task automatic set_windows(input int mode);
    for (int l = 0; l < L; l++)
      for (int t = 0; t < 9; t++) begin
        int md;
        md = (mode == 3) ? int'($urandom_range(0, 2)) : mode;
        win2[l][t] = rand_word(DW2, md);
        win[l][t]  = DW'(rand_word(DW, md));
      end
  endtask

  task automatic check_results();
    for (int l = 0; l < L; l++) begin
      longint e1, e2;
      begin
        logic [8:0][DW2-1:0] ww;
        for (int t = 0; t < 9; t++) ww[t] = DW2'(win[l][t]);
        e1 = conv_ref(ww, DW, CW);
      end
      e2 = conv_ref(win2[l], DW2, CW2);
      checks += 2;
      if (longint'(res[l]) != e1) begin
        failures++;
        $display("FAIL lane %0d result %0d expected %0d", l, res[l], e1);
      end
      if (longint'(res2[l]) != e2) begin
        failures++;
        $display("FAIL wide lane %0d result %0d expected %0d", l, res2[l], e2);
      end
    end
  endtask

  // Issue one request now (just after a negedge) and wait for its result.
  // Returns with the clock of out_valid current (start already dropped).
  task automatic run_one(input bit noisy, input bit chain_next, output int lat);
    start = 1'b1;
    lat = 0;
    do begin
      @(negedge clk);
      lat++;
      start = noisy && (lat < 8);
      if (noisy && lat == 4) n_ignored++;
    end while (!out_valid && lat < 50);
    checks += 2;
    if (lat != 9) begin
      failures++;
      $display("FAIL latency %0d, expected 9", lat);
    end
    if (out_valid2 !== out_valid) begin
      failures++;
      $display("FAIL second instance out of step");
    end
    check_results();
    if (noisy) begin
      @(negedge clk);
      checks++;
      if (out_valid || !ready) begin
        failures++;
        $display("FAIL start while busy was not ignored");
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    for (int l = 0; l < L; l++) begin
      win[l] = '0;
      win2[l] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int kmode = 0; kmode < 8; kmode++) begin
      load_kernel(kmode);
      for (int wmode = 0; wmode < 6; wmode++) begin
        set_windows(wmode > 3 ? 3 : wmode);
        run_one(wmode == 5, 1'b0, lat);
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      // back-to-back chain: new window and start in the out_valid clock
      set_windows(3);
      start = 1'b1;
      lat = 0;
      for (int r = 0; r < 4; r++) begin
        lat = 0;
        do begin
          @(negedge clk);
          lat++;
          start = 1'b0;
        end while (!out_valid && lat < 50);
        checks++;
        if (lat != 9) begin
          failures++;
          $display("FAIL back-to-back period %0d, expected 9", lat);
        end
        check_results();
        n_b2b++;
        if (r < 3) begin
          set_windows(3);
          start = 1'b1;
        end
      end
      @(negedge clk);
    end
    checks++;
    if (n_b2b == 0 || n_ignored == 0) begin
      failures++;
      $display("FAIL a mechanism was not exercised");
    end
    $display("back-to-back results %0d, ignored starts %0d", n_b2b, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
