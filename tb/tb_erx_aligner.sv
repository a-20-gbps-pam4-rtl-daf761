// tb_erx_aligner: self-checking test of the phase aligner.
//
// The 16 phase samples of a random 1.28 Gbps channel are generated with the
// data edge at a chosen phase e: samples k >= e see the new bit, samples
// k < e the previous one; 20% of the UIs have their edge one phase late, as
// jitter. For every e the scan must end exactly 16*DWELL+1 UI strobes after
// automatic mode is switched on, choose phase (e + 8) mod 16, raise
// `locked`, and then deliver the channel bit by bit. Manual mode is checked
// with random phases.
`timescale 1ns/1ps
module tb_erx_aligner;
  import gbs20_pkg::*;
  localparam int unsigned DWELL = 128;

  logic clk = 1'b0, rst_n = 1'b0, ui_en = 1'b0, auto_en = 1'b0;
  logic [15:0] taps = '0;
  logic [3:0] manual_phase = '0;
  logic data, locked;
  logic [3:0] phase;
  int checks = 0, failures = 0;

  erx_aligner #(.DWELL(DWELL)) dut (.clk, .rst_n, .ui_en, .taps, .auto_en,
                                    .manual_phase, .data, .phase, .locked);

  always #1 clk = ~clk;

  initial begin
    #2000000;
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

  bit b_prev, b_cur;
  int e_cur;
  logic exp_data;

  // One UI: present the samples, strobe, and return the bit a sampling
  // phase p should now deliver.
  task automatic ui(input int e, input bit jitter);
    int ee;
    ee = e;
    if (jitter && e >= 1 && e <= 14 && ($urandom_range(0, 4) == 0)) ee = e + 1;
    b_prev = b_cur;
    b_cur  = 1'($urandom);
    for (int k = 0; k < 16; k++) taps[k] <= (k >= ee) ? b_cur : b_prev;
    e_cur = ee;
    repeat (2) @(posedge clk);
    ui_en <= 1'b1;
    @(posedge clk);
    ui_en <= 1'b0;
    @(posedge clk);
  endtask

  int n_strobes;
  int p, sel;
  initial begin
    b_cur = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int e = 0; e < 16; e++) begin
      auto_en <= 1'b0;
      repeat (3) ui(e, 0);
      check(!locked, "locked in manual mode");
      auto_en <= 1'b1;
      n_strobes = 0;
      while (!locked && n_strobes < 16 * DWELL + 20) begin
        ui(e, 1);
        n_strobes++;
      end
      check(n_strobes == 16 * DWELL + 1, $sformatf("scan took %0d UIs", n_strobes));
      check(phase == 4'((e + 8) % 16), $sformatf("edge %0d: phase %0d", e, phase));
      // data check over 100 UIs
      sel = phase;
      for (int n = 0; n < 100; n++) begin
        ui(e, 1);
        // data now holds the sample of the UI just strobed at phase sel
        exp_data = (sel >= e_cur) ? b_cur : b_prev;
        #0.1;
        check(data === exp_data, $sformatf("edge %0d: data", e));
        check(locked, "lock lost");
      end
    end
    // manual mode
    auto_en <= 1'b0;
    for (int n = 0; n < 200; n++) begin
      p = $urandom_range(0, 15);
      manual_phase <= 4'(p);
      ui(3, 0);
      #0.1;
      check(phase == 4'(p), "manual phase");
      exp_data = (p >= e_cur) ? b_cur : b_prev;
      check(data === exp_data, "manual data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
