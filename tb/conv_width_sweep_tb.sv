// conv_width_sweep_tb: every block at every data/coefficient width pair.
//
// The block library is characterised over data widths DW = 3..16 and
// coefficient widths CW = 3..16, 196 configurations per block (conv3 only
// up to 8 bits, 36 configurations). This test instantiates conv1, conv2 and
// conv4 at all 196 pairs and conv3 at its 36 pairs, 624 blocks in all,
// feeds them the same kernel and windows (each block takes the low DW / CW
// bits of them) and checks every result against a sum of products computed
// here, with extreme values (most negative / most positive) mixed into the
// random data, and the 9-clock latency of every block.
module conv_width_sweep_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, coef_load = 1'b0, start = 1'b0, check_now = 1'b0;
  logic [15:0]       coef_in = '0;
  logic [8:0][15:0]  wa = '0, wb = '0;
  logic [15:0]       kern [9];
  int checks = 0, failures = 0, n_configs = 0;

  // low w bits of v, sign-extended
  function automatic longint sx(input logic [15:0] v, input int w);
    longint x;
    x = longint'(v) & ((longint'(1) << w) - 1);
    if (x >= (longint'(1) << (w - 1))) x -= (longint'(1) << w);
    return x;
  endfunction

  function automatic longint conv_ref(input logic [8:0][15:0] w, input int dw, input int cw);
    longint s = 0;
    for (int t = 0; t < 9; t++) s += sx(w[t], dw) * sx(kern[t], cw);
    return s;
  endfunction

  task automatic report(input string blk, input int dw, input int cw, input string lane,
                        input logic valid, input longint got, input longint exp);
    checks += 2;
    if (!valid) begin
      failures++;
      $display("FAIL %s DW=%0d CW=%0d: out_valid low after 9 clocks", blk, dw, cw);
    end
    if (got != exp) begin
      failures++;
      $display("FAIL %s DW=%0d CW=%0d lane %s: %0d expected %0d", blk, dw, cw, lane, got, exp);
    end
  endtask

  for (genvar d = 3; d <= 16; d++) begin : g_d
    for (genvar c = 3; c <= 16; c++) begin : g_c
      localparam int unsigned RW = d + c + 4;
      logic [8:0][d-1:0] xa, xb;
      logic signed [RW-1:0] r1, r2, r4a, r4b;
      logic v1, v2, v4, rd1, rd2, rd4;
      for (genvar t = 0; t < 9; t++) begin : g_t
        assign xa[t] = wa[t][d-1:0];
        assign xb[t] = wb[t][d-1:0];
      end
      conv1 #(.DW(d), .CW(c)) u1 (.clk, .rst_n, .coef_load, .coef_in(coef_in[c-1:0]), .start,
        .ready(rd1), .win(xa), .out_valid(v1), .result(r1));
      conv2 #(.DW(d), .CW(c)) u2 (.clk, .rst_n, .coef_load, .coef_in(coef_in[c-1:0]), .start,
        .ready(rd2), .win(xa), .out_valid(v2), .result(r2));
      conv4 #(.DW(d), .CW(c)) u4 (.clk, .rst_n, .coef_load, .coef_in(coef_in[c-1:0]), .start,
        .ready(rd4), .win_a(xa), .win_b(xb), .out_valid(v4), .result_a(r4a), .result_b(r4b));
      always @(posedge check_now) begin
        longint ea, eb;
        ea = conv_ref(wa, d, c);
        eb = conv_ref(wb, d, c);
        report("conv1", d, c, "a", v1, longint'(r1), ea);
        report("conv2", d, c, "a", v2, longint'(r2), ea);
        report("conv4", d, c, "a", v4, longint'(r4a), ea);
        report("conv4", d, c, "b", v4, longint'(r4b), eb);
        n_configs += 3;
      end
      if (d <= 8 && c <= 8) begin : g_conv3
        logic signed [RW-1:0] r3a, r3b;
        logic v3, rd3;
        conv3 #(.DW(d), .CW(c)) u3 (.clk, .rst_n, .coef_load, .coef_in(coef_in[c-1:0]), .start,
          .ready(rd3), .win_a(xa), .win_b(xb), .out_valid(v3), .result_a(r3a), .result_b(r3b));
        always @(posedge check_now) begin
          report("conv3", d, c, "a", v3, longint'(r3a), conv_ref(wa, d, c));
          report("conv3", d, c, "b", v3, longint'(r3b), conv_ref(wb, d, c));
          n_configs++;
        end
      end
    end
  end

  function automatic logic [15:0] pick();
    case ($urandom_range(0, 4))
      0: return 16'h8080 | 16'h0404 | 16'h2020;   // sign bit set at several widths
      1: return 16'h7f7f & 16'hfbfb;
      default: return 16'($urandom);
    endcase
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 24; round++) begin
      if (round % 4 == 0) begin
        for (int t = 0; t < 9; t++) begin
          kern[t] = pick();
          @(negedge clk);
          coef_load = 1'b1;
          coef_in   = kern[t];
        end
        @(negedge clk);
        coef_load = 1'b0;
      end
      for (int t = 0; t < 9; t++) begin
        wa[t] = pick();
        wb[t] = pick();
      end
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      repeat (8) @(negedge clk);
      check_now = 1'b1;
      #1;
      check_now = 1'b0;
      @(negedge clk);
    end
    $display("block configurations checked: %0d (x rounds)", n_configs);
    checks++;
    if (n_configs != 24 * (3 * 196 + 36)) begin
      failures++;
      $display("FAIL expected %0d configuration checks", 24 * (3 * 196 + 36));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
