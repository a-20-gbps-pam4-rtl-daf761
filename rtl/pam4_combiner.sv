// pam4_combiner: behavioural model (not synthesizable logic) of the two
// limiting-amplifier outputs and the PAM4 combiner that drives the VCSEL.
//
// In silicon the combiner is two differential pairs sharing one pair of
// 50 ohm loads; the MSB pair's tail current is nominally twice the LSB
// pair's, so the summed output current takes four levels. Here each branch
// adds +I or -I to the differential output current, I being its tail-current
// code times I_STEP_MA; a branch whose limiting amplifier is off adds
// nothing, which leaves the other branch's NRZ signal alone on the output
// (the chip's way of checking one serializer at a time). With the reset
// codes (64 and 128) the levels are -4.5, -1.5, +1.5 and +4.5 mA.
//
// The CTLE, capacitive-load and supply settings shape the analog frequency
// response and swing only; they are carried on the ports so the model has
// the real block's controls, but they do not change the DC levels modelled.
// `hv_supply` selects the 2.5 V supply, which allows up to 12 mA; in the
// 1.2 V low-power mode the current is clipped at I_MAX_LP_MA.
//
// Timing: zero delay; the two amplifier chains are matched, so LSB and MSB
// bits that leave the serializers together are combined together.
//
// From the paper: the 1:2 tail-current ratio, separately adjustable tail
// currents, LA on/off, 3-bit CTLE, 5-bit load, 12 mA at 2.5 V. The
// current-per-code step and the low-power limit are this design's own.
module pam4_combiner #(
  parameter real I_STEP_MA   = 0.0234375,  // mA per tail-current code step
  parameter real I_MAX_MA    = 12.0,       // 2.5 V supply
  parameter real I_MAX_LP_MA = 6.0         // 1.2 V low-power supply
) (
  input  logic       lsb,          // LSB serializer bit
  input  logic       msb,          // MSB serializer bit
  input  logic       la_en_lsb,
  input  logic       la_en_msb,
  input  logic [7:0] i_lsb,        // tail-current codes
  input  logic [7:0] i_msb,
  input  logic [2:0] ctle_lsb,
  input  logic [2:0] ctle_msb,
  input  logic [4:0] cap_load,
  input  logic       hv_supply,    // 1: combiner on 2.5 V, 0: 1.2 V
  output real        dout_ma       // differential output current, mA
);

  real i_l, i_m, sum, lim;

  always_comb begin
    i_l = la_en_lsb ? real'(i_lsb) * I_STEP_MA : 0.0;
    i_m = la_en_msb ? real'(i_msb) * I_STEP_MA : 0.0;
    sum = (msb ? i_m : -i_m) + (lsb ? i_l : -i_l);
    lim = hv_supply ? I_MAX_MA : I_MAX_LP_MA;
    if (sum > lim)       dout_ma = lim;
    else if (sum < -lim) dout_ma = -lim;
    else                 dout_ma = sum;
  end

  // The response-shaping controls have no effect on the levels modelled.
  logic unused_ok;
  assign unused_ok = ^{ctle_lsb, ctle_msb, cap_load};

endmodule
