// gbs20_top: digital core of the GBS20 20.48 Gbps PAM4 transmitter, with
// the output combiner as a behavioural model.
//
// Sixteen 1.28 Gbps user channels enter as `taps`: for each channel, the 16
// samples that the analog delay-line front end takes at 16 phases of every
// unit interval. Channels 7..0 form the LSB group and 15..8 the MSB group;
// each group is phase-aligned, scrambled with a 2^7-1 PRBS and serialized
// 8:1 (gbs20_channel). The two serial streams, `ser_lsb` and `ser_msb`,
// leave in step (same clock, same latency) and the combiner model adds them
// with weights 1 and 2 into the PAM4 output current `dout_ma`.
//
// Clocks: `clk_ser` is the serial bit clock (10.24 GHz, one bit per cycle
// at full rate); the triplicated clock divider derives the 1.28 GHz UI
// strobe, the bit strobe and the word strobe from it, and the UI strobe is
// also brought out as the 1.28 GHz test clock. `clk_ref` (40 MHz) runs the
// I2C target and the configuration registers. The configuration is static
// while data flows and crosses to `clk_ser` through two register stages;
// the aligner status crosses back the same way. `rst_n` is active low and
// held for several cycles of both clocks.
//
// The PLL, the line receivers, the delay line and the limiting amplifiers
// are analog and sit outside: their clocks and samples are ports here.
module gbs20_top
  import gbs20_pkg::*;
#(
  parameter int unsigned DWELL    = 128,    // aligner dwell per phase, UIs
  parameter logic [6:0]  I2C_ADDR = 7'h2A
) (
  input  logic                           clk_ser,    // serial clock from the PLL
  input  logic                           clk_ref,    // 40 MHz reference clock
  input  logic                           rst_n,
  input  logic [N_CH-1:0][N_PHASES-1:0]  taps,       // phase samples of DataIn[15:0]
  output logic                           test_clk,   // 1.28 GHz UI strobe
  input  logic                           scl,
  input  logic                           sda_in,
  output logic                           sda_oe,
  input  logic                           hv_supply,  // combiner on 2.5 V
  output logic                           ser_lsb,
  output logic                           ser_msb,
  output real                            dout_ma
);

  // ---------------- reset synchronizers ----------------
  logic [1:0] rst_ser_q, rst_ref_q;
  always_ff @(posedge clk_ser) rst_ser_q <= {rst_ser_q[0], rst_n};
  always_ff @(posedge clk_ref) rst_ref_q <= {rst_ref_q[0], rst_n};
  logic rst_ser_n, rst_ref_n;
  assign rst_ser_n = rst_ser_q[1] & rst_n;
  assign rst_ref_n = rst_ref_q[1] & rst_n;

  // ---------------- configuration (clk_ref) ----------------
  cfg_t       cfg_ref;
  status_t    status_ser, status_ref_q1, status_ref_q2;
  logic       wr_en;
  logic [7:0] wr_addr, wr_data, rd_addr, rd_data;

  i2c_target #(.ADDR(I2C_ADDR)) u_i2c (
    .clk (clk_ref), .rst_n (rst_ref_n),
    .scl, .sda_in, .sda_oe,
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data
  );

  gbs20_regs u_regs (
    .clk (clk_ref), .rst_n (rst_ref_n),
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
    .status (status_ref_q2),
    .cfg    (cfg_ref)
  );

  always_ff @(posedge clk_ref) begin
    status_ref_q1 <= status_ser;
    status_ref_q2 <= status_ref_q1;
  end

  // ---------------- serial clock domain ----------------
  cfg_t cfg_q1, cfg;
  always_ff @(posedge clk_ser) begin
    cfg_q1 <= cfg_ref;
    cfg    <= cfg_q1;
  end

  logic ui_en, bit_en, word_en;

  clock_divider u_div (
    .clk (clk_ser), .rst_n (rst_ser_n),
    .rate (cfg.rate),
    .ui_en, .bit_en, .word_en
  );
  assign test_clk = ui_en;

  gbs20_channel #(.DWELL(DWELL)) u_lsb (
    .clk (clk_ser), .rst_n (rst_ser_n),
    .ui_en, .bit_en, .word_en,
    .taps         (taps[GROUP_W-1:0]),
    .align_auto   (cfg.align_auto),
    .manual_phase (cfg.manual_phase[GROUP_W-1:0]),
    .enc_mode     (cfg.enc_mode_lsb),
    .sout         (ser_lsb),
    .locked       (status_ser.locked[GROUP_W-1:0]),
    .phase        (status_ser.phase[GROUP_W-1:0])
  );

  gbs20_channel #(.DWELL(DWELL)) u_msb (
    .clk (clk_ser), .rst_n (rst_ser_n),
    .ui_en, .bit_en, .word_en,
    .taps         (taps[N_CH-1:GROUP_W]),
    .align_auto   (cfg.align_auto),
    .manual_phase (cfg.manual_phase[N_CH-1:GROUP_W]),
    .enc_mode     (cfg.enc_mode_msb),
    .sout         (ser_msb),
    .locked       (status_ser.locked[N_CH-1:GROUP_W]),
    .phase        (status_ser.phase[N_CH-1:GROUP_W])
  );

  // ---------------- limiting amplifiers + PAM4 combiner ----------------
  pam4_combiner u_comb (
    .lsb       (ser_lsb),
    .msb       (ser_msb),
    .la_en_lsb (cfg.la_en_lsb),
    .la_en_msb (cfg.la_en_msb),
    .i_lsb     (cfg.i_lsb),
    .i_msb     (cfg.i_msb),
    .ctle_lsb  (cfg.ctle_lsb),
    .ctle_msb  (cfg.ctle_msb),
    .cap_load  (cfg.cap_load),
    .hv_supply,
    .dout_ma
  );

endmodule
