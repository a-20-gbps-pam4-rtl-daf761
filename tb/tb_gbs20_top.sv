// tb_gbs20_top: end-to-end test of the GBS20 core at its default sizes.
//
// Sixteen random 1.28 Gbps channels, each with its data edge at its own
// random phase, feed the core; an I2C controller configures it and reads
// its status. The sequence, each step counted as a mechanism:
//   1. automatic alignment after reset: every channel must report lock at
//      phase (edge + 8) mod 16 through I2C;
//   2. PRBS test pattern at 10.24 Gbps: both serial streams must follow
//      x^7 + x^6 + 1 and be in the same PRBS phase (LSB/MSB in step);
//   3. scrambled user data at 10.24 Gbps, with single-event upsets thrown
//      at the triplicated clock divider, configuration and PRBS state: descrambled with the PRBS phase
//      found in step 2, every serial bit must equal the right channel's
//      bit, at the fixed latency of 2 UIs + 1 + bit index serial cycles;
//   4. the PAM4 output current must be +-3 mA (MSB) +-1.5 mA (LSB) for
//      every bit pair, and with one limiting amplifier off only the other
//      branch may show (NRZ check mode); with tail codes 200/255 the
//      outer levels must reach +-10.66 mA on the 2.5 V supply and clip at
//      +-6 mA in low-power mode;
//   5. manual phases written through I2C, read back, and used for data;
//      then automatic mode again, which rescans and relocks;
//   6. 5.12 Gbps per serializer (10.24 Gbps PAM4): PRBS bits must last two
//      serial cycles, and scrambled 0.64 Gbps channels must come out
//      descrambled in channel order.
`timescale 1ns/1ps
module tb_gbs20_top;
  import gbs20_pkg::*;

  localparam int HALF_SCL = 4096;  // ns: SCL half period = 8 reference cycles

  logic clk_ser = 1'b0, clk_ref = 1'b0, rst_n = 1'b0;
  logic [N_CH-1:0][N_PHASES-1:0] taps = '0;
  logic test_clk, scl = 1'b1, sda_m = 1'b1, sda_oe, sda, hv_supply = 1'b1;
  logic ser_lsb, ser_msb;
  real  dout_ma;
  int   checks = 0, failures = 0;

  assign sda = sda_m & ~sda_oe;

  gbs20_top dut (.clk_ser, .clk_ref, .rst_n, .taps, .test_clk, .scl,
                 .sda_in(sda), .sda_oe, .hv_supply, .ser_lsb, .ser_msb, .dout_ma);

  always #1   clk_ser = ~clk_ser;   // serial clock, 2 ns per bit
  always #256 clk_ref = ~clk_ref;   // 256 serial cycles per reference cycle

  initial begin
    #200000000;
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

  // ---------------- I2C controller ----------------
  task automatic i2c_start();
    sda_m = 1'b1; #HALF_SCL; scl = 1'b1; #HALF_SCL;
    sda_m = 1'b0; #HALF_SCL; scl = 1'b0; #HALF_SCL;
  endtask
  task automatic i2c_stop();
    sda_m = 1'b0; #HALF_SCL; scl = 1'b1; #HALF_SCL; sda_m = 1'b1; #HALF_SCL;
  endtask
  task automatic i2c_send(input logic [7:0] b, output bit ack);
    for (int i = 7; i >= 0; i--) begin
      sda_m = b[i]; #HALF_SCL; scl = 1'b1; #HALF_SCL; scl = 1'b0;
    end
    sda_m = 1'b1; #HALF_SCL; scl = 1'b1; #(HALF_SCL/2); ack = ~sda; #(HALF_SCL/2); scl = 1'b0;
  endtask
  task automatic i2c_recv(input bit ack, output logic [7:0] b);
    sda_m = 1'b1;
    for (int i = 7; i >= 0; i--) begin
      #HALF_SCL; scl = 1'b1; #(HALF_SCL/2); b[i] = sda; #(HALF_SCL/2); scl = 1'b0;
    end
    sda_m = ~ack; #HALF_SCL; scl = 1'b1; #HALF_SCL; scl = 1'b0; sda_m = 1'b1;
  endtask
  task automatic reg_write(input logic [7:0] a, input logic [7:0] d[$]);
    bit ack;
    i2c_start();
    i2c_send({7'h2A, 1'b0}, ack); check(ack, "I2C address ACK");
    i2c_send(a, ack);
    foreach (d[i]) begin i2c_send(d[i], ack); check(ack, "I2C data ACK"); end
    i2c_stop();
    repeat (4) @(posedge clk_ref);   // let the setting cross to clk_ser
  endtask
  task automatic reg_read(input logic [7:0] a, input int n, output logic [7:0] d[$]);
    bit ack;
    logic [7:0] v;
    d = {};
    i2c_start();
    i2c_send({7'h2A, 1'b0}, ack); check(ack, "I2C address ACK");
    i2c_send(a, ack);
    i2c_start();
    i2c_send({7'h2A, 1'b1}, ack); check(ack, "I2C read ACK");
    for (int i = 0; i < n; i++) begin i2c_recv(i != n - 1, v); d.push_back(v); end
    i2c_stop();
  endtask

  // ---------------- input channels ----------------
  int          edge_ph [N_CH];       // data edge position of each channel
  logic [N_CH-1:0] b_cur = '0, b_prev = '0;
  logic [N_CH-1:0] samp_q [$];       // per UI: bit each channel holds in that UI
  logic [N_CH-1:0] prevs_q [$];      // per UI: the bit before it
  longint      ui_cycle [$];         // serial cycle of each UI strobe
  longint      cyc = 0;
  bit          half_rate_src = 1'b0; // channels at 0.64 Gbps
  int          ui_idx = 0;
  logic [N_CH-1:0] chv [longint];    // channel bits in effect, per serial cycle

  always @(posedge clk_ser) begin
    cyc <= cyc + 1;
    chv[cyc] = b_cur;
    if (test_clk) begin
      // this strobe samples the taps of the current UI
      samp_q.push_back(b_cur);
      prevs_q.push_back(b_prev);
      ui_cycle.push_back(cyc);
      ui_idx++;
      // next UI
      b_prev = b_cur;
      if (!half_rate_src || (ui_idx % 2 == 0)) b_cur = N_CH'({$urandom, $urandom});
      for (int ch = 0; ch < N_CH; ch++)
        for (int k = 0; k < N_PHASES; k++)
          taps[ch][k] <= (k >= edge_ph[ch]) ? b_cur[ch] : b_prev[ch];
    end
  end

  // ---------------- serial capture ----------------
  logic sl [longint];
  logic sm [longint];
  real  dm [longint];
  always @(negedge clk_ser) begin
    sl[cyc - 1] = ser_lsb;   // value after the edge of cycle cyc-1
    sm[cyc - 1] = ser_msb;
    dm[cyc - 1] = dout_ma;
  end

  // ---------------- reference PRBS ----------------
  bit prbs [127];
  function automatic void make_prbs();
    bit h[$];
    for (int i = 0; i < 7; i++) h.push_back(1'b1);
    for (int n = 0; n < 127; n++) begin
      h.push_back(h[h.size()-7] ^ h[h.size()-6]);
      prbs[n] = h[h.size()-1];
    end
  endfunction

  // PRBS phase K of a stream x[c0 + i*step + q], or -1.
  function automatic int find_phase(input logic s [longint], input longint c0,
                                    input int n, input int step);
    for (int k = 0; k < 127; k++) begin
      bit ok = 1;
      for (int i = 0; i < n && ok; i++)
        if (s[c0 + i * step] != prbs[(i + k) % 127]) ok = 0;
      if (ok) return k;
    end
    return -1;
  endfunction

  // mechanism counters
  int n_lock = 0, n_prbs = 0, n_scr = 0, n_seu = 0, n_pam4 [4] = '{0, 0, 0, 0};
  int n_la_off = 0, n_lowpower = 0, n_manual = 0, n_relock = 0, n_half = 0;

  task automatic check_lock(input bit manual, input logic [3:0] mp [N_CH]);
    logic [7:0] d[$];
    reg_read(8'h20, N_CH, d);
    for (int ch = 0; ch < N_CH; ch++) begin
      if (manual) begin
        check(d[ch] == {4'h0, mp[ch]}, $sformatf("ch %0d manual status %h", ch, d[ch]));
      end else begin
        check(d[ch] == {4'h8, 4'((edge_ph[ch] + 8) % 16)},
              $sformatf("ch %0d status %h, edge %0d", ch, d[ch], edge_ph[ch]));
        if (d[ch][7]) n_lock++;
      end
    end
  endtask

  // Full-rate data check over the UIs strobed in [c_from, c_to).
  // phases: sampling phase of each channel.
  task automatic check_full_data(input longint c_from, input longint c_to,
                                 input int k0, input logic [3:0] ph [N_CH]);
    for (int u = 0; u < ui_cycle.size(); u++) begin
      if (ui_cycle[u] < c_from || ui_cycle[u] + 16 + 8 > c_to) continue;
      for (int j = 0; j < GROUP_W; j++) begin
        longint c = ui_cycle[u] + 16 + j;
        logic el, em;
        el = (ph[j]     >= 4'(edge_ph[j]))     ? samp_q[u][j]     : prevs_q[u][j];
        em = (ph[8 + j] >= 4'(edge_ph[8 + j])) ? samp_q[u][8 + j] : prevs_q[u][8 + j];
        el ^= prbs[int'((c + longint'(k0)) % 127)];
        em ^= prbs[int'((c + longint'(k0)) % 127)];
        check(sl[c] === el && sm[c] === em,
              $sformatf("UI %0d bit %0d: got %b%b expected %b%b", u, j, sm[c], sl[c], em, el));
      end
      n_scr++;
    end
  endtask

  logic [7:0] d[$];
  logic [3:0] auto_ph [N_CH], man_ph [N_CH];
  longint c0, c1;
  int k_l, k_m, k0, q;
  bit seu_run = 1'b0;

  // upsets into one copy of the divider's counter while seu_run is set
  initial begin
    forever begin
      @(negedge clk_ser);
      if (seu_run && ($urandom_range(0, 99) == 0)) begin
        dut.u_div.cnt_q[$urandom_range(0, 2)] = 4'($urandom);
        n_seu++;
      end
    end
  end

  // upsets into one copy of the configuration or of an encoder's PRBS
  // state, at most one per reference-clock cycle so the voting can scrub it
  int n_seu_cfg = 0, n_seu_enc = 0;
  initial begin
    forever begin
      repeat (300) @(negedge clk_ser);
      if (seu_run) begin
        int k;
        k = $urandom_range(0, 2);
        if ($urandom_range(0, 1) == 0) begin
          dut.u_regs.u_cfg.copy_q[k] = ~dut.u_regs.u_cfg.copy_q[k];
          n_seu_cfg++;
        end else begin
          dut.u_msb.u_enc.u_state.copy_q[k] = 7'($urandom);
          n_seu_enc++;
        end
      end
    end
  end

  initial begin
    make_prbs();
    for (int ch = 0; ch < N_CH; ch++) begin
      edge_ph[ch] = $urandom_range(0, 15);
      auto_ph[ch] = 4'((edge_ph[ch] + 8) % 16);
      man_ph[ch]  = 4'((edge_ph[ch] + 7) % 16);
    end
    repeat (4) @(posedge clk_ref);
    rst_n <= 1'b1;

    // 1. automatic alignment after reset: 16*128 UIs
    repeat (16 * 128 * 8 + 200) @(posedge clk_ser);
    check_lock(0, auto_ph);

    // 2. PRBS pattern, full rate
    reg_write(8'h00, '{8'h3F});
    c0 = cyc + 40;
    repeat (400) @(posedge clk_ser);
    k_l = find_phase(sl, c0, 300, 1);
    k_m = find_phase(sm, c0, 300, 1);
    check(k_l >= 0, "LSB stream is not the PRBS");
    check(k_m >= 0, "MSB stream is not the PRBS");
    check(k_l == k_m, "LSB and MSB PRBS out of step");
    if (k_l >= 0 && k_l == k_m) n_prbs++;
    k0 = int'((longint'(k_l) - c0 % 127 + 127 * 1000) % 127);  // PRBS index of cycle c = (c + k0) % 127

    // 3. scrambled data, full rate, with upsets in the divider
    reg_write(8'h00, '{8'h39});
    c0 = cyc + 40;
    seu_run = 1'b1;
    repeat (6000) @(posedge clk_ser);
    seu_run = 1'b0;
    c1 = cyc;
    check_full_data(c0, c1, k0, auto_ph);

    // 4. PAM4 levels, then each amplifier off
    for (longint c = c0; c < c1; c++) begin
      real e;
      e = (sm[c] ? 3.0 : -3.0) + (sl[c] ? 1.5 : -1.5);
      check(dm[c] == e, $sformatf("PAM4 level %f expected %f", dm[c], e));
      n_pam4[{sm[c], sl[c]}]++;
    end
    reg_write(8'h00, '{8'h31});          // LSB amplifier off
    c0 = cyc + 10;
    repeat (300) @(posedge clk_ser);
    for (longint c = c0; c < cyc - 1; c++) check(dm[c] == (sm[c] ? 3.0 : -3.0), "MSB-only NRZ");
    reg_write(8'h00, '{8'h29});          // MSB amplifier off
    c0 = cyc + 10;
    repeat (300) @(posedge clk_ser);
    for (longint c = c0; c < cyc - 1; c++) check(dm[c] == (sl[c] ? 1.5 : -1.5), "LSB-only NRZ");
    n_la_off++;

    // 4b. larger tail currents (codes 200 / 255), on the 2.5 V supply and
    //     then in low-power mode, where the outer levels clip at 6 mA
    reg_write(8'h00, '{8'h39});
    reg_write(8'h03, '{8'd200, 8'd255});
    for (int lp = 0; lp < 2; lp++) begin
      real lim, e;
      hv_supply = (lp == 0);
      lim = (lp == 0) ? 12.0 : 6.0;
      c0 = cyc + 10;
      repeat (300) @(posedge clk_ser);
      for (longint c = c0; c < cyc - 1; c++) begin
        e = (sm[c] ? 255.0 : -255.0) * 0.0234375 + (sl[c] ? 200.0 : -200.0) * 0.0234375;
        if (e > lim) e = lim;
        if (e < -lim) e = -lim;
        check(dm[c] == e, $sformatf("level %f expected %f (supply %0d)", dm[c], e, hv_supply));
        if (lp == 1 && sm[c] == sl[c]) n_lowpower++;
      end
    end
    hv_supply = 1'b1;
    reg_write(8'h03, '{8'd64, 8'd128});

    // 5. manual phases, then automatic again
    begin
      logic [7:0] mp[$];
      for (int ch = 0; ch < N_CH; ch++) mp.push_back({4'h0, man_ph[ch]});
      reg_write(8'h10, mp);
    end
    reg_read(8'h10, N_CH, d);
    for (int ch = 0; ch < N_CH; ch++) check(d[ch] == {4'h0, man_ph[ch]}, "manual phase readback");
    reg_write(8'h00, '{8'h19});
    check_lock(1, man_ph);
    c0 = cyc + 40;
    repeat (2000) @(posedge clk_ser);
    check_full_data(c0, cyc, k0, man_ph);
    n_manual++;
    reg_write(8'h00, '{8'h39});
    repeat (16 * 128 * 8 + 200) @(posedge clk_ser);
    check_lock(0, auto_ph);
    n_relock++;

    // 6. half rate: PRBS pattern, then 0.64 Gbps channels scrambled
    reg_write(8'h00, '{8'h3E});
    c0 = cyc + 40;
    repeat (1200) @(posedge clk_ser);
    // bits last two cycles: find the parity q of their first cycle
    q = 0;
    for (int i = 0; i < 500; i++) if (sl[c0 + 2 * i] != sl[c0 + 2 * i + 1]) q = 1;
    for (int i = 0; i < 500; i++)
      check(sl[c0 + q + 2 * i] === sl[c0 + q + 2 * i + 1] &&
            sm[c0 + q + 2 * i] === sm[c0 + q + 2 * i + 1], "half-rate bit length");
    k_l = find_phase(sl, c0 + q, 400, 2);
    k_m = find_phase(sm, c0 + q, 400, 2);
    check(k_l >= 0 && k_l == k_m, "half-rate PRBS");
    half_rate_src = 1'b1;
    reg_write(8'h00, '{8'h38});
    c1 = cyc + 200;
    if (((c1 - c0 - q) % 2) != 0) c1++;
    repeat (2000) @(posedge clk_ser);
    // Descramble with the PRBS phase found above, then find the word
    // boundary o shared by all channels and each channel's delay.
    begin
      bit found;
      int kb;
      found = 0;
      kb = int'(((c1 - c0 - q) / 2 + k_l) % 127);
      for (int o = 0; o < 8 && !found; o++) begin
        bit all_ok;
        all_ok = 1;
        for (int ch = 0; ch < N_CH && all_ok; ch++) begin
          bit any;
          any = 0;
          for (int dl = 0; dl < 128 && !any; dl++) begin
            bit ok;
            ok = 1;
            for (int m = 0; m < 800 && ok; m++) begin
              longint c;
              logic got;
              if (((m - o + 64) % 8) != (ch % 8)) continue;
              c = c1 + 2 * m;
              got = ((ch < 8) ? sl[c] : sm[c]) ^ prbs[(m + kb) % 127];
              if (got !== chv[c - dl][ch]) ok = 0;
            end
            any = ok;
          end
          all_ok = any;
        end
        found = all_ok;
      end
      check(found, "half-rate descrambled data");
      if (found) n_half++;
    end

    // every mechanism must have happened
    check(n_lock >= 2 * N_CH, "automatic alignment never locked");
    check(n_prbs > 0, "PRBS pattern never checked");
    check(n_scr > 100, "scrambled data never checked");
    check(n_seu > 0, "no upset injected");
    check(n_seu_cfg > 0 && n_seu_enc > 0, "no upset in configuration or encoder");
    for (int s = 0; s < 4; s++) check(n_pam4[s] > 0, $sformatf("PAM4 level %0d never seen", s));
    check(n_la_off > 0, "amplifier-off mode never used");
    check(n_lowpower > 0, "low-power clipping never seen");
    check(n_manual > 0, "manual phase never used");
    check(n_relock > 0, "no relock");
    check(n_half > 0, "half rate never checked");
    $display("mechanisms: lock=%0d prbs=%0d scrambled_UIs=%0d upsets=%0d/%0d/%0d pam4=%0d/%0d/%0d/%0d la_off=%0d low_power=%0d manual=%0d relock=%0d half_rate=%0d",
             n_lock, n_prbs, n_scr, n_seu, n_seu_cfg, n_seu_enc, n_pam4[0], n_pam4[1], n_pam4[2], n_pam4[3],
             n_la_off, n_lowpower, n_manual, n_relock, n_half);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
