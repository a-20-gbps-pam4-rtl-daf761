// encoder: 2^7-1 PRBS scrambler for one 8-bit data group.
//
// A free-running PRBS7 generator (x^7 + x^6 + 1) advances eight steps per
// word. In ENC_SCRAMBLE mode each data bit is XORed with its PRBS bit
// (additive scrambling, so the receiver descrambles with the same generator
// once it is in step). In ENC_PRBS mode the PRBS is sent on its own: it is
// the test pattern and the known sequence a receiver locks its word and
// generator phase to (frame alignment).
//
// Bit 0 of a word pairs with the first of the word's eight PRBS bits and is
// the first bit the serializer sends. The generator restarts from SEED on
// reset; its state is held in a triplicated, majority-voted register.
//
// Timing: one word per `en` strobe; `dout` is registered, one word of latency.
//
// From the paper: one encoder per group, a 2^7-1 PRBS used for scrambling,
// test patterns and frame alignment. The polynomial, the additive scrambler
// structure, the seed and the bit order are this design's own choices, as
// is triplicating the state (the paper applies TMR to "other digital
// parts" without naming them).
module encoder
  import gbs20_pkg::*;
#(
  parameter int unsigned     WIDTH = GROUP_W,
  parameter logic [6:0]      SEED  = 7'h7F
) (
  input  logic             clk,
  input  logic             rst_n,   // synchronous, active low
  input  logic             en,      // word strobe
  input  enc_mode_e        mode,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  logic [PRBS_ORDER-1:0] state_q;
  logic [PRBS_ORDER-1:0] state_next;
  logic [WIDTH-1:0]      prbs_word;

  // Eight (WIDTH) steps of the generator; each step's new bit is one PRBS bit.
  always_comb begin
    state_next = state_q;
    for (int i = 0; i < WIDTH; i++) begin
      state_next   = prbs7_step(state_next);
      prbs_word[i] = state_next[0];
    end
  end

  // The generator state is triplicated: an upset would otherwise shift the
  // PRBS for good and break descrambling at the receiver.
  tmr_reg #(.WIDTH(PRBS_ORDER), .RESET(SEED)) u_state (
    .clk, .rst_n, .en,
    .d (state_next),
    .q (state_q)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)  dout <= '0;
    else if (en) dout <= (mode == ENC_PRBS) ? prbs_word : (din ^ prbs_word);
  end

endmodule
