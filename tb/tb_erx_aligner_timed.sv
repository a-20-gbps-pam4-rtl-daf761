// tb_erx_aligner_timed: the phase aligner behind a timed model of the
// delay-line front end.
//
// A 1.28 Gbps random channel is sent with its transitions at an arbitrary
// offset (in ps) from the 1.28 GHz clock, with +-10 ps sampling jitter.
// The front-end model latches it at 16 phases 48.8 ps apart; the aligner
// scans and locks. For 40 random offsets, the chosen sampling instant,
// phase*48.8 ps, must lie at least 0.35 UI from the data transitions, and
// the re-timed data must then be error-free over 300 UIs.
`timescale 1ps/1fs
module tb_erx_aligner_timed;
  import gbs20_pkg::*;
  localparam real UI_PS = 781.25;
  localparam int unsigned DWELL = 32;

  logic clk = 1'b0, rst_n = 1'b0, auto_en = 1'b0, din = 1'b0;
  logic [15:0] taps;
  logic data, locked;
  logic [3:0] phase;
  int checks = 0, failures = 0;

  vcdl_model #(.JITTER_PS(10.0)) u_fe (.clk_ui(clk), .din, .taps);
  erx_aligner #(.DWELL(DWELL)) dut (.clk, .rst_n, .ui_en(1'b1), .taps, .auto_en,
                                    .manual_phase(4'd0), .data, .phase, .locked);

  // 1.28 GHz clock: 390.625 ps high and low
  always #390.625 clk = ~clk;

  initial begin
    #2000000000;
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

  // Data source: a new random bit every UI, offset_ps after each clock edge.
  real offset_ps = 0.0;
  bit  sent [$];
  always @(posedge clk) begin
    fork
      begin
        bit b;
        b = 1'($urandom);
        #(offset_ps);
        din = b;
        sent.push_back(b);
      end
    join_none
  end

  real d_ps, ts;
  int  base, best_err, errs;
  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      offset_ps = real'($urandom_range(0, 7800)) / 10.0;
      auto_en = 1'b0;
      repeat (8) @(posedge clk);
      auto_en = 1'b1;
      repeat (16 * DWELL + 4) @(posedge clk);
      check(locked, "no lock");
      // sampling instant of the chosen phase against the transitions
      ts   = real'(phase) * UI_PS / 16.0;
      d_ps = ts - offset_ps;
      while (d_ps < 0.0) d_ps += UI_PS;
      while (d_ps >= UI_PS) d_ps -= UI_PS;
      if (d_ps > UI_PS / 2.0) d_ps = UI_PS - d_ps;
      check(d_ps >= 0.35 * UI_PS,
            $sformatf("offset %.1f ps: phase %0d samples %.1f ps from the edge", offset_ps, phase, d_ps));
      // data: the output must follow the sent bits at some fixed delay
      begin
        bit got [$];
        got.delete();
        for (int n = 0; n < 300; n++) begin
          @(posedge clk);
          #1;
          got.push_back(data);
        end
        best_err = 1000;
        for (int d = 0; d < 6; d++) begin
          errs = 0;
          base = sent.size() - 300 - d - 1;
          for (int n = 0; n < 300; n++) if (got[n] != sent[base + n]) errs++;
          if (errs < best_err) best_err = errs;
        end
        check(best_err == 0, $sformatf("offset %.1f ps: %0d bit errors", offset_ps, best_err));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
