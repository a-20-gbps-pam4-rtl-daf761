// gbs20_pkg: types and constants shared by the GBS20 transmitter core.
//
// The chip takes sixteen 1.28 Gbps user channels, splits them into an LSB
// group (channels 7..0) and an MSB group (channels 15..8), scrambles each
// group with a 2^7-1 PRBS, serializes each group 8:1 and adds the two NRZ
// streams into one PAM4 signal. Channel count, group width, the 16 aligner
// phases and the PRBS length are the chip's own numbers; the PRBS taps, the
// register map and the I2C address are choices of this implementation.
package gbs20_pkg;

  localparam int unsigned N_CH        = 16;  // user input channels
  localparam int unsigned GROUP_W     = 8;   // channels per group = serializer ratio
  localparam int unsigned N_PHASES    = 16;  // VCDL stages / 16:1 phase mux
  localparam int unsigned PHASE_W     = $clog2(N_PHASES);
  localparam int unsigned PRBS_ORDER  = 7;   // 2^7-1 sequence

  // Encoder modes: scrambled user data, or the bare PRBS as test pattern and
  // frame-alignment pattern.
  typedef enum logic {
    ENC_SCRAMBLE = 1'b0,
    ENC_PRBS     = 1'b1
  } enc_mode_e;

  // Line rate of each serializer: 10.24 Gbps (20.48 Gbps PAM4) or
  // 5.12 Gbps (10.24 Gbps PAM4).
  typedef enum logic {
    RATE_HALF = 1'b0,
    RATE_FULL = 1'b1
  } rate_e;

  // Static configuration written through I2C.
  typedef struct packed {
    rate_e                    rate;
    enc_mode_e                enc_mode_lsb;
    enc_mode_e                enc_mode_msb;
    logic                     la_en_lsb;      // LSB limiting amplifier on
    logic                     la_en_msb;      // MSB limiting amplifier on
    logic                     align_auto;     // aligners scan for the best phase
    logic [N_CH-1:0][PHASE_W-1:0] manual_phase; // phase used when align_auto = 0
    logic [2:0]               ctle_lsb;       // CTLE resistor code, LSB branch
    logic [2:0]               ctle_msb;       // CTLE resistor code, MSB branch
    logic [4:0]               cap_load;       // programmable capacitive load
    logic [7:0]               i_lsb;          // LSB tail-current code
    logic [7:0]               i_msb;          // MSB tail-current code
  } cfg_t;

  // Status read back through I2C.
  typedef struct packed {
    logic [N_CH-1:0]              locked;
    logic [N_CH-1:0][PHASE_W-1:0] phase;
  } status_t;

  // One step of the 2^7-1 generator x^7 + x^6 + 1 (state bit 6 is oldest).
  function automatic logic [PRBS_ORDER-1:0] prbs7_step(input logic [PRBS_ORDER-1:0] s);
    return {s[5:0], s[6] ^ s[5]};
  endfunction

endpackage
