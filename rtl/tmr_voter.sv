// tmr_voter: bitwise two-out-of-three majority of three copies of a word.
// Used wherever state is triplicated against single event upsets: an upset
// in any one copy is out-voted by the other two. Purely combinational.
module tmr_voter #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic [WIDTH-1:0] c,
  output logic [WIDTH-1:0] y
);
  assign y = (a & b) | (b & c) | (a & c);
endmodule
