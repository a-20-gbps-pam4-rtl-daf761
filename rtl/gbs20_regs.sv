// gbs20_regs: configuration and status registers behind the I2C target.
//
// Byte-wide register map (addresses in hex):
//   00 CTRL    [0] rate (1 = 10.24 Gbps per serializer, 0 = 5.12 Gbps)
//              [1] LSB encoder mode (0 scramble, 1 PRBS pattern)
//              [2] MSB encoder mode
//              [3] LSB limiting amplifier on   [4] MSB limiting amplifier on
//              [5] aligners in automatic (scan) mode
//   01 CTLE    [2:0] LSB CTLE code, [5:3] MSB CTLE code
//   02 CAP     [4:0] programmable capacitive load code
//   03 ILSB    LSB tail-current code       04 IMSB  MSB tail-current code
//   10..1F     [3:0] manual aligner phase of channel 0..15
//   20..2F     read only: [7] channel locked, [3:0] phase in use
// Unlisted addresses read as zero. Reset values: full rate, scrambling,
// both amplifiers on, automatic alignment, MSB tail code twice the LSB one.
//
// The configuration is held in a triplicated register with majority
// voting (tmr_reg), so an upset in one copy neither changes a setting nor
// survives the next clock edge.
//
// Timing: a write takes effect the cycle after `wr_en`; reads are
// combinational.
//
// From the paper: the fields themselves (rate, PRBS patterns, LA on/off,
// 3-bit CTLE, 5-bit capacitive load, separately adjustable tail currents
// with a nominal 1:2 ratio, programmable aligner phase). Addresses, bit
// positions, the 8-bit current codes, reset values and the triplication
// of the whole register set are this design's own.
module gbs20_regs
  import gbs20_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,     // synchronous, active low
  input  logic       wr_en,
  input  logic [7:0] wr_addr,
  input  logic [7:0] wr_data,
  input  logic [7:0] rd_addr,
  output logic [7:0] rd_data,
  input  status_t    status,
  output cfg_t       cfg
);

  localparam cfg_t CFG_RESET = '{
    rate:         RATE_FULL,
    enc_mode_lsb: ENC_SCRAMBLE,
    enc_mode_msb: ENC_SCRAMBLE,
    la_en_lsb:    1'b1,
    la_en_msb:    1'b1,
    align_auto:   1'b1,
    i_lsb:        8'd64,
    i_msb:        8'd128,
    default:      '0
  };

  cfg_t cfg_q, cfg_d;

  // Next value: the current one with the written field replaced.
  always_comb begin
    cfg_d = cfg_q;
    if (wr_addr[7:4] == 4'h1) begin
      cfg_d.manual_phase[wr_addr[3:0]] = wr_data[PHASE_W-1:0];
    end else begin
      unique case (wr_addr)
        8'h00: begin
          cfg_d.rate         = rate_e'(wr_data[0]);
          cfg_d.enc_mode_lsb = enc_mode_e'(wr_data[1]);
          cfg_d.enc_mode_msb = enc_mode_e'(wr_data[2]);
          cfg_d.la_en_lsb    = wr_data[3];
          cfg_d.la_en_msb    = wr_data[4];
          cfg_d.align_auto   = wr_data[5];
        end
        8'h01: {cfg_d.ctle_msb, cfg_d.ctle_lsb} = wr_data[5:0];
        8'h02: cfg_d.cap_load = wr_data[4:0];
        8'h03: cfg_d.i_lsb    = wr_data;
        8'h04: cfg_d.i_msb    = wr_data;
        default: ;
      endcase
    end
  end

  // The configuration is triplicated against single event upsets.
  tmr_reg #(.WIDTH($bits(cfg_t)), .RESET(CFG_RESET)) u_cfg (
    .clk, .rst_n,
    .en (wr_en),
    .d  (cfg_d),
    .q  (cfg_q)
  );

  always_comb begin
    rd_data = '0;
    unique case (rd_addr[7:4])
      4'h0: unique case (rd_addr[3:0])
        4'h0: rd_data = {2'b00, cfg_q.align_auto, cfg_q.la_en_msb, cfg_q.la_en_lsb,
                         cfg_q.enc_mode_msb, cfg_q.enc_mode_lsb, cfg_q.rate};
        4'h1: rd_data = {2'b00, cfg_q.ctle_msb, cfg_q.ctle_lsb};
        4'h2: rd_data = {3'b000, cfg_q.cap_load};
        4'h3: rd_data = cfg_q.i_lsb;
        4'h4: rd_data = cfg_q.i_msb;
        default: rd_data = '0;
      endcase
      4'h1: rd_data = 8'(cfg_q.manual_phase[rd_addr[3:0]]);
      4'h2: rd_data = {status.locked[rd_addr[3:0]], 3'b000, status.phase[rd_addr[3:0]]};
      default: rd_data = '0;
    endcase
  end

  assign cfg = cfg_q;

endmodule
