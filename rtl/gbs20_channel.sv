// gbs20_channel: one of the two 8-channel groups (LSB or MSB).
//
// Eight phase aligners re-time the eight 1.28 Gbps inputs of the group;
// their bits form an 8-bit word (channel k of the group is bit k) that the
// encoder scrambles with the PRBS and the serializer sends bit 0 first.
// The aligners run every UI; the encoder and serializer take a word on
// `word_en`, i.e. every UI at 10.24 Gbps and every second UI at 5.12 Gbps,
// when each input channel carries 0.64 Gbps.
//
// Latency from the taps of a UI to its bit on `sout`: one UI in the
// aligner, one word in the encoder, one word until the serializer loads it,
// plus one serial-clock cycle.
module gbs20_channel
  import gbs20_pkg::*;
#(
  parameter int unsigned DWELL = 128
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 ui_en,
  input  logic                                 bit_en,
  input  logic                                 word_en,
  input  logic [GROUP_W-1:0][N_PHASES-1:0]     taps,
  input  logic                                 align_auto,
  input  logic [GROUP_W-1:0][PHASE_W-1:0]      manual_phase,
  input  enc_mode_e                            enc_mode,
  output logic                                 sout,
  output logic [GROUP_W-1:0]                   locked,
  output logic [GROUP_W-1:0][PHASE_W-1:0]      phase
);

  logic [GROUP_W-1:0] word;
  logic [GROUP_W-1:0] enc_word;

  for (genvar k = 0; k < GROUP_W; k++) begin : g_align
    erx_aligner #(.DWELL(DWELL)) u_align (
      .clk, .rst_n, .ui_en,
      .taps         (taps[k]),
      .auto_en      (align_auto),
      .manual_phase (manual_phase[k]),
      .data         (word[k]),
      .phase        (phase[k]),
      .locked       (locked[k])
    );
  end

  encoder #(.WIDTH(GROUP_W)) u_enc (
    .clk, .rst_n,
    .en   (word_en),
    .mode (enc_mode),
    .din  (word),
    .dout (enc_word)
  );

  serializer #(.WIDTH(GROUP_W)) u_ser (
    .clk, .rst_n, .bit_en,
    .load (word_en),
    .din  (enc_word),
    .sout
  );

endmodule
