// serializer: 8:1 parallel-to-serial converter for one group.
//
// A shift register loads a word on `load` and shifts it out bit 0 first, one
// bit per `bit_en`. The block runs on the serial clock; `bit_en` is high on
// every cycle at 10.24 Gbps and on every second cycle at 5.12 Gbps (the
// clock divider supplies both strobes), so at the lower rate each bit is
// held for two cycles of the serial clock. `load` must coincide with a
// `bit_en` and come every WIDTH bit slots.
//
// Timing: the first bit of a word appears on `sout` the cycle after the
// load; `sout` is registered.
//
// From the paper: 8:1 ratio, 5.12/10.24 Gbps. Single-edge clocking at the
// bit rate (rather than the chip's 5.12 GHz clock on both edges), the bit
// order and the strobes are this design's own choices.
module serializer #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,   // synchronous, active low
  input  logic             bit_en,  // one strobe per serial bit
  input  logic             load,    // take din (together with bit_en)
  input  logic [WIDTH-1:0] din,
  output logic             sout
);

  logic [WIDTH-1:0] shreg_q;
  logic             sout_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shreg_q <= '0;
      sout_q  <= 1'b0;
    end else if (bit_en) begin
      if (load) begin
        sout_q  <= din[0];
        shreg_q <= {1'b0, din[WIDTH-1:1]};
      end else begin
        sout_q  <= shreg_q[0];
        shreg_q <= {1'b0, shreg_q[WIDTH-1:1]};
      end
    end
  end

  assign sout = sout_q;

endmodule
