// tb_gbs20_prbs_ber: bit-error test of the whole core with PRBS7 traffic,
// at 20.48 Gbps and at 10.24 Gbps PAM4.
//
// Each of the 16 input channels carries its own 2^7-1 sequence (as a
// pattern generator would send), with its data edge at a random phase and
// one phase of random jitter on 30% of the UIs. After the aligners have
// scanned and locked, a receiver model in this testbench:
//   1. switches the encoders to PRBS mode and finds the PRBS phase of the
//      serial streams (the frame-alignment use of the pattern);
//   2. switches to scrambled data, descrambles both streams with that
//      phase, splits each into 8 lanes, and checks on every lane that the
//      bits obey the PRBS7 recurrence b[n] = b[n-7] ^ b[n-6]. Any bit error
//      breaks the recurrence. Whatever the word boundary, each lane is one
//      input channel.
// The same is done at half rate, where every channel bit lasts two UIs.
// Both runs must check at least BITS bits per lane with no error, and the
// eight lanes of a group must carry eight different channels.
`timescale 1ns/1ps
module tb_gbs20_prbs_ber;
  import gbs20_pkg::*;

  localparam int HALF_SCL = 4096;
  localparam int BITS     = 100000;  // bits checked per lane and rate

  logic clk_ser = 1'b0, clk_ref = 1'b0, rst_n = 1'b0;
  logic [N_CH-1:0][N_PHASES-1:0] taps = '0;
  logic test_clk, scl = 1'b1, sda_m = 1'b1, sda_oe, sda, hv_supply = 1'b1;
  logic ser_lsb, ser_msb;
  real  dout_ma;
  int   checks = 0, failures = 0;

  assign sda = sda_m & ~sda_oe;

  gbs20_top dut (.clk_ser, .clk_ref, .rst_n, .taps, .test_clk, .scl,
                 .sda_in(sda), .sda_oe, .hv_supply, .ser_lsb, .ser_msb, .dout_ma);

  always #1   clk_ser = ~clk_ser;
  always #256 clk_ref = ~clk_ref;

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("%t: %s", $time, what);
    end
  endtask

  // ---------------- I2C controller (writes only) ----------------
  task automatic i2c_send(input logic [7:0] b, output bit ack);
    for (int i = 7; i >= 0; i--) begin
      sda_m = b[i]; #HALF_SCL; scl = 1'b1; #HALF_SCL; scl = 1'b0;
    end
    sda_m = 1'b1; #HALF_SCL; scl = 1'b1; #(HALF_SCL/2); ack = ~sda; #(HALF_SCL/2); scl = 1'b0;
  endtask
  task automatic reg_write(input logic [7:0] a, input logic [7:0] v);
    bit ack;
    sda_m = 1'b1; #HALF_SCL; scl = 1'b1; #HALF_SCL; sda_m = 1'b0; #HALF_SCL; scl = 1'b0; #HALF_SCL;
    i2c_send({7'h2A, 1'b0}, ack); check(ack, "I2C address ACK");
    i2c_send(a, ack);
    i2c_send(v, ack); check(ack, "I2C data ACK");
    sda_m = 1'b0; #HALF_SCL; scl = 1'b1; #HALF_SCL; sda_m = 1'b1; #HALF_SCL;
    repeat (4) @(posedge clk_ref);
  endtask

  // ---------------- PRBS7 sources, one per channel ----------------
  int              edge_ph [N_CH];
  logic [6:0]      src_state [N_CH];
  logic [N_CH-1:0] b_cur = '0, b_prev = '0;
  bit              half_src = 1'b0;
  int              ui_idx = 0;

  always @(posedge clk_ser) begin
    if (test_clk) begin
      ui_idx++;
      b_prev = b_cur;
      if (!half_src || (ui_idx % 2 == 0))
        for (int ch = 0; ch < N_CH; ch++) begin
          src_state[ch] = prbs7_step(src_state[ch]);
          b_cur[ch]     = src_state[ch][0];
        end
      for (int ch = 0; ch < N_CH; ch++) begin
        int e;
        e = edge_ph[ch];
        if (e >= 1 && e <= 14 && $urandom_range(0, 9) < 3)
          e = ($urandom_range(0, 1) == 0) ? e - 1 : e + 1;
        for (int k = 0; k < N_PHASES; k++)
          taps[ch][k] <= (k >= e) ? b_cur[ch] : b_prev[ch];
      end
    end
  end

  // ---------------- receiver model ----------------
  bit prbs [127];
  bit cap_l [$], cap_m [$];   // capture for the PRBS phase search
  bit capturing = 1'b0;
  longint cyc = 0;

  function automatic int find_phase(input bit s [$], input int start, input int step);
    for (int k = 0; k < 127; k++) begin
      bit ok;
      ok = 1;
      for (int i = 0; i < 300 && ok; i++)
        if (s[start + i * step] != prbs[(i + k) % 127]) ok = 0;
      if (ok) return k;
    end
    return -1;
  endfunction

  // lane checkers: 8 lanes per group, 7-bit history each
  logic [6:0] hist [2][8];
  int         nhist [2][8];
  int         lane_bits [2][8];
  int         lane_err [2][8];
  bit         checking = 1'b0;
  int         step = 1;           // serial cycles per bit
  int         q = 0;              // parity of the first cycle of a bit
  int         pidx = 0;           // PRBS index of the next descrambled bit
  int         lane = 0;
  longint     c_start = 0;

  // one process numbers the cycles, captures and checks, so all three
  // agree on the cycle number
  always @(negedge clk_ser) begin
    cyc++;
    if (capturing) begin cap_l.push_back(ser_lsb); cap_m.push_back(ser_msb); end
    if (checking && ((cyc - c_start) % longint'(step)) == 0) begin
      logic d [2];
      d[0] = ser_lsb ^ prbs[pidx];
      d[1] = ser_msb ^ prbs[pidx];
      pidx = (pidx + 1) % 127;
      for (int g = 0; g < 2; g++) begin
        if (nhist[g][lane] >= 7) begin
          lane_bits[g][lane]++;
          if (d[g] != (hist[g][lane][6] ^ hist[g][lane][5])) lane_err[g][lane]++;
        end
        hist[g][lane]  = {hist[g][lane][5:0], d[g]};
        nhist[g][lane]++;
      end
      lane = (lane + 1) % 8;
    end
  end

  task automatic run_rate(input bit full);
    int k_l, k_m, first;
    longint c_cap;
    // 1. PRBS mode: find the phase
    reg_write(8'h00, full ? 8'h3F : 8'h3E);
    repeat (40) @(posedge clk_ser);
    @(posedge clk_ser);
    cap_l = {}; cap_m = {};
    capturing = 1'b1;
    c_cap = cyc + 1;          // cycle number of cap_l[0]
    repeat (1400) @(posedge clk_ser);
    capturing = 1'b0;
    first = 0;
    if (!full) begin
      for (int i = 0; i < 600; i++) if (cap_l[2 * i] != cap_l[2 * i + 1]) first = 1;
    end
    k_l = find_phase(cap_l, first, full ? 1 : 2);
    k_m = find_phase(cap_m, first, full ? 1 : 2);
    check(k_l >= 0 && k_l == k_m, $sformatf("PRBS phase LSB %0d MSB %0d", k_l, k_m));
    // 2. scrambled PRBS7 traffic: start checking on a bit boundary
    reg_write(8'h00, full ? 8'h39 : 8'h38);
    repeat (100) @(posedge clk_ser);
    @(posedge clk_ser);
    // cyc changes only on negative edges; the next one is cyc + 1
    step = full ? 1 : 2;
    begin
      longint c0, nb;
      c0 = c_cap + first;
      nb = (cyc + 1 - c0 + step - 1) / step;
      c_start = c0 + nb * step;
      pidx = int'((nb + k_l) % 127);
    end
    for (int g = 0; g < 2; g++)
      for (int l = 0; l < 8; l++) begin
        nhist[g][l] = 0; lane_bits[g][l] = 0; lane_err[g][l] = 0;
      end
    lane = 0;
    checking = 1'b1;
    repeat ((BITS + 10) * 8 * step) @(posedge clk_ser);
    checking = 1'b0;
    for (int g = 0; g < 2; g++)
      for (int l = 0; l < 8; l++) begin
        check(lane_bits[g][l] >= BITS, "too few bits checked");
        check(lane_err[g][l] == 0,
              $sformatf("%s rate, group %0d lane %0d: %0d errors in %0d bits",
                        full ? "full" : "half", g, l, lane_err[g][l], lane_bits[g][l]));
      end
    // lanes are distinct channels: no two lanes of a group may hold the
    // same recent history
    for (int g = 0; g < 2; g++)
      for (int a = 0; a < 8; a++)
        for (int b = a + 1; b < 8; b++)
          check(hist[g][a] != hist[g][b], $sformatf("group %0d lanes %0d and %0d carry the same channel", g, a, b));
    $display("%s rate: %0d bits checked per lane, errors LSB %0d MSB %0d",
             full ? "20.48 Gbps" : "10.24 Gbps", lane_bits[0][0],
             lane_err[0].sum(), lane_err[1].sum());
  endtask

  initial begin
    begin
      bit h [$];
      for (int i = 0; i < 7; i++) h.push_back(1'b1);
      for (int n = 0; n < 127; n++) begin
        h.push_back(h[h.size()-7] ^ h[h.size()-6]);
        prbs[n] = h[h.size()-1];
      end
    end
    // channel ch starts 7*ch steps further along the sequence (plus a common
    // random offset), so any two channels differ by far more than the one
    // UI by which the aligners' latencies can differ
    begin
      logic [6:0] st;
      st = 7'h7F;
      repeat ($urandom_range(0, 126)) st = prbs7_step(st);
      for (int ch = 0; ch < N_CH; ch++) begin
        edge_ph[ch]   = $urandom_range(0, 15);
        src_state[ch] = st;
        repeat (7) st = prbs7_step(st);
      end
    end
    repeat (4) @(posedge clk_ref);
    rst_n <= 1'b1;
    repeat (16 * 128 * 8 + 200) @(posedge clk_ser);
    check(&dut.status_ser.locked, "not all channels locked");
    run_rate(1'b1);
    half_src = 1'b1;
    run_rate(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
