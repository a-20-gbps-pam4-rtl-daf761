// tb_clock_divider: self-checking test of the triplicated clock divider.
//
// Counts the cycles between strobes at both rates (UI strobe every 8
// cycles; bit strobe every cycle or every 2nd; word strobe every 8 or 16,
// always on a UI and bit strobe), then flips the count of one copy at a
// time, as a single event upset would, and checks that no strobe moves.
`timescale 1ns/1ps
module tb_clock_divider;
  import gbs20_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  rate_e rate = RATE_FULL;
  logic ui_en, bit_en, word_en;
  int checks = 0, failures = 0;

  clock_divider dut (.clk, .rst_n, .rate, .ui_en, .bit_en, .word_en);

  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, what);
    end
  endtask

  // Observe n cycles; phase counts cycles since the last UI strobe.
  task automatic observe(input int n, input int word_per);
    int ui_last, word_last, bit_last, cyc, n_ui, n_word;
    ui_last = -1; word_last = -1; bit_last = -1; n_ui = 0; n_word = 0;
    for (cyc = 0; cyc < n; cyc++) begin
      @(posedge clk);
      #0.1;
      if (ui_en) begin
        if (ui_last >= 0) check(cyc - ui_last == 8, "UI strobe period");
        ui_last = cyc; n_ui++;
      end
      if (bit_en) begin
        if (bit_last >= 0) check(cyc - bit_last == word_per / 8, "bit strobe period");
        bit_last = cyc;
      end
      if (word_en) begin
        check(ui_en && bit_en, "word strobe without UI/bit strobe");
        if (word_last >= 0) check(cyc - word_last == word_per, "word strobe period");
        word_last = cyc; n_word++;
      end
    end
    check(n_ui >= n / 8 - 1, "too few UI strobes");
    check(n_word >= n / word_per - 1, "too few word strobes");
  endtask

  int k;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    observe(200, 8);
    rate = RATE_HALF;
    @(posedge clk);
    observe(200, 16);
    rate = RATE_FULL;
    // Upsets: corrupt one copy at a time, the others keep the strobes.
    for (k = 0; k < 30; k++) begin
      @(negedge clk);
      dut.cnt_q[k % 3] = 4'($urandom);
      observe(40, 8);
    end
    rate = RATE_HALF;
    for (k = 0; k < 30; k++) begin
      @(negedge clk);
      dut.cnt_q[k % 3] = 4'($urandom);
      observe(48, 16);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
