// tb_serializer: self-checking test of the 8:1 serializer.
//
// Random words are loaded every 8 bit slots, first with a bit strobe on
// every cycle (10.24 Gbps), then on every second cycle (5.12 Gbps). The
// output is checked on every cycle against the expected bit, including
// that the first bit appears one cycle after the load and that at the low
// rate each bit lasts exactly two cycles.
`timescale 1ns/1ps
module tb_serializer;
  logic clk = 1'b0, rst_n = 1'b0, bit_en = 1'b0, load = 1'b0;
  logic [7:0] din = '0;
  logic sout;
  int checks = 0, failures = 0;

  serializer #(.WIDTH(8)) dut (.clk, .rst_n, .bit_en, .load, .din, .sout);

  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int div, input int words);
    logic [7:0] cur;
    int slot;
    cur  = '0;
    slot = 0;
    for (int c = 0; c < words * 8 * div; c++) begin
      bit_en <= ((c % div) == div - 1);
      load   <= ((c % (8 * div)) == 8 * div - 1);
      if ((c % (8 * div)) == 8 * div - 1) din <= 8'($urandom);
      @(posedge clk);
      #0.1;
      // after this edge: if it was a load, bit 0 of din is out
      if ((c % (8 * div)) == 8 * div - 1) begin
        cur  = din;
        slot = 0;
      end else if ((c % div) == div - 1) begin
        slot++;
      end
      if (c >= 8 * div) begin
        checks++;
        if (sout !== cur[slot]) begin
          failures++;
          if (failures < 10) $display("div %0d cycle %0d: sout %b expected %b", div, c, sout, cur[slot]);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run(1, 200);
    run(2, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
