// tmr_reg: register kept in three copies with a majority-voted output.
//
// Each copy loads `d` when `en` is high and otherwise reloads the voted
// value, so an upset in one copy never reaches `q` and is scrubbed on the
// next clock edge. Synchronous active-low reset loads RESET into all three
// copies. `q` is the vote of the copies, valid the cycle after a load.
module tmr_reg #(
  parameter int unsigned        WIDTH = 1,
  parameter logic [WIDTH-1:0]   RESET = '0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  logic [WIDTH-1:0] copy_q [3];

  tmr_voter #(.WIDTH(WIDTH)) u_vote (.a(copy_q[0]), .b(copy_q[1]), .c(copy_q[2]), .y(q));

  for (genvar i = 0; i < 3; i++) begin : g_copy
    always_ff @(posedge clk) begin
      if (!rst_n)  copy_q[i] <= RESET;
      else if (en) copy_q[i] <= d;
      else         copy_q[i] <= q;
    end
  end

endmodule
