// vcdl_model: behavioural model of the analog phase-sampling front end of
// one input channel (not synthesizable).
//
// A 16-stage delay line spreads the 1.28 GHz clock into 16 phases, STEP_PS
// apart (781.25 ps / 16 = 48.8 ps); phase k latches the channel at
// k*STEP_PS after the clock edge. On the next clock edge the 16 samples of
// the past UI are handed over together as `taps`, in the clock's domain.
// An optional random jitter of up to +-JITTER_PS is added to each sample
// instant.
`timescale 1ps/1fs
module vcdl_model #(
  parameter int unsigned STAGES    = 16,
  parameter real         STEP_PS   = 48.828125,
  parameter real         JITTER_PS = 0.0
) (
  input  logic              clk_ui,   // 1.28 GHz clock
  input  logic              din,      // channel as it arrives
  output logic [STAGES-1:0] taps      // samples of the previous UI
);

  logic [STAGES-1:0] s;

  initial begin
    s    = '0;
    taps = '0;
  end

  always @(posedge clk_ui) begin
    taps <= s;
    for (int k = 0; k < STAGES; k++) begin
      fork
        automatic int kk = k;
        begin
          real t;
          t = kk * STEP_PS + JITTER_PS * (2.0 * real'($urandom_range(0, 1000)) / 1000.0 - 1.0);
          if (t < 0.0) t = 0.0;
          #(t);
          s[kk] = din;
        end
      join_none
    end
  end

endmodule
