// clock_divider: triplicated divider that derives the bit, word and UI
// strobes from the serial clock.
//
// The core runs on one serial clock at the 10.24 Gbps bit rate. A 4-bit
// cycle counter, kept in three copies, is majority-voted every cycle and
// each copy reloads the voted value plus one, so an upset in one copy is
// out-voted at once and scrubbed on the next edge. The strobes are decoded
// from the voted count:
//   ui_en   every 8 cycles (1.28 GHz, the aligners' UI rate),
//   bit_en  every cycle at RATE_FULL, every 2nd cycle at RATE_HALF,
//   word_en every 8 bit slots: every 8 cycles at RATE_FULL, 16 at RATE_HALF.
// word_en and ui_en fall on the same cycle (count 7 or 15), which is also a
// bit_en cycle.
//
// From the paper: the 1.28/2.56/5.12 GHz clock plan and TMR in the clock
// divider. Modelling divided clocks as enables of one clock, the counter
// width and the decoding are this design's own choices.
module clock_divider
  import gbs20_pkg::*;
(
  input  logic  clk,      // serial clock
  input  logic  rst_n,    // synchronous, active low
  input  rate_e rate,
  output logic  ui_en,
  output logic  bit_en,
  output logic  word_en
);

  logic [3:0] cnt_q [3];
  logic [3:0] cnt_v;

  tmr_voter #(.WIDTH(4)) u_vote (.a(cnt_q[0]), .b(cnt_q[1]), .c(cnt_q[2]), .y(cnt_v));

  for (genvar i = 0; i < 3; i++) begin : g_copy
    always_ff @(posedge clk) begin
      if (!rst_n) cnt_q[i] <= '0;
      else        cnt_q[i] <= cnt_v + 4'd1;
    end
  end

  always_comb begin
    ui_en   = (cnt_v[2:0] == 3'd7);
    bit_en  = (rate == RATE_FULL) ? 1'b1 : cnt_v[0];
    word_en = (rate == RATE_FULL) ? (cnt_v[2:0] == 3'd7) : (cnt_v == 4'd15);
  end

endmodule
