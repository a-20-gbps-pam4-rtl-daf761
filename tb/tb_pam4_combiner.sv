// tb_pam4_combiner: self-checking test of the combiner model.
//
// For random tail-current codes and all four bit pairs the output current
// must be +-I_msb +-I_lsb; with the reset codes the four levels must be
// equally spaced and in the order 00 < 01 < 10 < 11. With one amplifier off
// the output must carry only the other branch (two levels). The 2.5 V
// supply must allow 12 mA and the 1.2 V supply clip lower.
`timescale 1ns/1ps
module tb_pam4_combiner;
  localparam real STEP = 0.0234375;
  logic lsb = 0, msb = 0, la_en_lsb = 1, la_en_msb = 1, hv_supply = 1;
  logic [7:0] i_lsb = 8'd64, i_msb = 8'd128;
  logic [2:0] ctle_lsb = '0, ctle_msb = '0;
  logic [4:0] cap_load = '0;
  real dout_ma;
  int checks = 0, failures = 0;

  pam4_combiner dut (.lsb, .msb, .la_en_lsb, .la_en_msb, .i_lsb, .i_msb,
                     .ctle_lsb, .ctle_msb, .cap_load, .hv_supply, .dout_ma);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("%s", what);
    end
  endtask

  function automatic bit near(input real a, input real b);
    return (a - b < 1e-9) && (b - a < 1e-9);
  endfunction

  real lv[4];
  real expd, il, im;
  initial begin
    // nominal codes: equally spaced levels
    for (int s = 0; s < 4; s++) begin
      {msb, lsb} = 2'(s);
      #1;
      lv[s] = dout_ma;
    end
    check(near(lv[0], -4.5) && near(lv[3], 4.5), "outer levels");
    check(near(lv[1] - lv[0], lv[2] - lv[1]) && near(lv[2] - lv[1], lv[3] - lv[2]), "equal spacing");
    check(lv[0] < lv[1] && lv[1] < lv[2] && lv[2] < lv[3], "level order");
    // random codes, amplifiers on/off
    for (int n = 0; n < 500; n++) begin
      i_lsb = 8'($urandom); i_msb = 8'($urandom);
      {la_en_msb, la_en_lsb, msb, lsb} = 4'($urandom);
      ctle_lsb = 3'($urandom); ctle_msb = 3'($urandom); cap_load = 5'($urandom);
      hv_supply = 1'b1;
      #1;
      il = la_en_lsb ? i_lsb * STEP : 0.0;
      im = la_en_msb ? i_msb * STEP : 0.0;
      expd = (msb ? im : -im) + (lsb ? il : -il);
      check(near(dout_ma, expd), $sformatf("level %f expected %f", dout_ma, expd));
    end
    // full scale at 2.5 V, clipped at 1.2 V
    i_lsb = 8'd255; i_msb = 8'd255; la_en_lsb = 1; la_en_msb = 1; msb = 1; lsb = 1;
    hv_supply = 1; #1;
    check(near(dout_ma, 11.953125), "full scale at 2.5 V");
    hv_supply = 0; #1;
    check(near(dout_ma, 6.0), "clipped at 1.2 V");
    msb = 0; lsb = 0; #1;
    check(near(dout_ma, -6.0), "clipped at 1.2 V, negative");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
