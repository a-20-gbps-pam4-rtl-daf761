// tb_i2c_target: self-checking test of the I2C target.
//
// A bit-banged I2C controller (SCL half period 20 target clocks) writes
// random bytes to random registers of a 256-byte register model, both one
// byte per transfer and in auto-incrementing bursts, reads them back with
// "pointer write, repeated START, read" sequences, and checks that a
// transfer to another address is not acknowledged and changes nothing.
`timescale 1ns/1ps
module tb_i2c_target;
  localparam logic [6:0] ADDR = 7'h2A;
  localparam int HALF = 40;   // ns, SCL half period

  logic clk = 1'b0, rst_n = 1'b0;
  logic scl = 1'b1, sda_m = 1'b1;   // controller: 0 drives SDA low
  logic sda_oe, sda;
  logic wr_en;
  logic [7:0] wr_addr, wr_data, rd_addr, rd_data;
  logic [7:0] regs [256];
  logic [7:0] shadow [256];
  int checks = 0, failures = 0;

  assign sda = sda_m & ~sda_oe;

  i2c_target #(.ADDR(ADDR)) dut (.clk, .rst_n, .scl, .sda_in(sda), .sda_oe,
                                 .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  always #1 clk = ~clk;

  always_ff @(posedge clk) if (wr_en) regs[wr_addr] <= wr_data;
  assign rd_data = regs[rd_addr];

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, what);
    end
  endtask

  task automatic start();
    sda_m = 1'b1; #HALF; scl = 1'b1; #HALF;
    sda_m = 1'b0; #HALF; scl = 1'b0; #HALF;
  endtask
  task automatic stop();
    sda_m = 1'b0; #HALF; scl = 1'b1; #HALF;
    sda_m = 1'b1; #HALF;
  endtask
  task automatic send_byte(input logic [7:0] b, output bit ack);
    for (int i = 7; i >= 0; i--) begin
      sda_m = b[i]; #HALF; scl = 1'b1; #HALF; scl = 1'b0;
    end
    sda_m = 1'b1; #HALF; scl = 1'b1; #(HALF/2); ack = ~sda; #(HALF/2); scl = 1'b0;
  endtask
  task automatic recv_byte(input bit ack, output logic [7:0] b);
    sda_m = 1'b1;
    for (int i = 7; i >= 0; i--) begin
      #HALF; scl = 1'b1; #(HALF/2); b[i] = sda; #(HALF/2); scl = 1'b0;
    end
    sda_m = ~ack; #HALF; scl = 1'b1; #HALF; scl = 1'b0; sda_m = 1'b1;
  endtask

  task automatic write_regs(input logic [7:0] ptr, input int n, input logic [6:0] a);
    bit ack;
    logic [7:0] v;
    start();
    send_byte({a, 1'b0}, ack);
    check(ack == (a == ADDR), "address ACK on write");
    send_byte(ptr, ack);
    for (int i = 0; i < n; i++) begin
      v = 8'($urandom);
      send_byte(v, ack);
      if (a == ADDR) begin
        check(ack, "data ACK");
        shadow[8'(ptr + i)] = v;
      end
    end
    stop();
  endtask

  task automatic read_regs(input logic [7:0] ptr, input int n);
    bit ack;
    logic [7:0] v;
    start();
    send_byte({ADDR, 1'b0}, ack);
    check(ack, "address ACK");
    send_byte(ptr, ack);
    check(ack, "pointer ACK");
    start();                       // repeated START
    send_byte({ADDR, 1'b1}, ack);
    check(ack, "address ACK on read");
    for (int i = 0; i < n; i++) begin
      recv_byte(i != n - 1, v);
      check(v === shadow[8'(ptr + i)],
            $sformatf("read %h: %h expected %h", 8'(ptr + i), v, shadow[8'(ptr + i)]));
    end
    stop();
  endtask

  initial begin
    for (int i = 0; i < 256; i++) begin regs[i] = '0; shadow[i] = '0; end
    #20;
    rst_n = 1'b1;
    #200;
    for (int t = 0; t < 40; t++) begin
      int p, n;
      p = $urandom_range(0, 255);
      n = $urandom_range(1, 4);
      write_regs(8'(p), n, ADDR);
      read_regs(8'(p), n);
    end
    // another address: no ACK, no write
    write_regs(8'h10, 3, 7'h55);
    for (int i = 0; i < 256; i++) check(regs[i] === shadow[i], "register model");
    read_regs(8'h00, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
