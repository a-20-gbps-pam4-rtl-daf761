// tb_encoder: self-checking test of the PRBS7 encoder.
//
// A bit-serial reference generator (x^7 + x^6 + 1, the output bit being
// the XOR of the bits 7 and 6 positions back) predicts the PRBS bits one at
// a time; words are driven with random data and random gaps in `en`, in
// both modes, while single-event upsets are thrown at one copy of the
// triplicated generator state at a time. It also checks that the bare PRBS
// has period 127 bits.
`timescale 1ns/1ps
module tb_encoder;
  import gbs20_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  enc_mode_e mode = ENC_SCRAMBLE;
  logic [7:0] din = '0, dout;
  int checks = 0, failures = 0, n_seu = 0;

  encoder dut (.clk, .rst_n, .en, .mode, .din, .dout);

  always #1 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: history of PRBS bits, seeded as the generator state is.
  bit hist[$];
  function automatic bit ref_next();
    bit b;
    b = hist[hist.size()-7] ^ hist[hist.size()-6];
    hist.push_back(b);
    return b;
  endfunction

  logic [7:0] exp_word;
  bit first[$];
  initial begin
    // state 7'h7F: bits s6..s0 were produced oldest first
    for (int i = 6; i >= 0; i--) hist.push_back(1'b1);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int w = 0; w < 600; w++) begin
      // random idle cycles
      repeat ($urandom_range(0, 2)) begin
        en <= 1'b0; @(posedge clk);
      end
      // every few words, an upset in one copy of the generator state
      if (w % 5 == 2) begin
        @(negedge clk);
        dut.u_state.copy_q[w % 3] = 7'($urandom);
        n_seu++;
      end
      mode = (w < 300) ? ENC_SCRAMBLE : ((w < 450) ? ENC_PRBS : ENC_SCRAMBLE);
      din  <= 8'($urandom);
      en   <= 1'b1;
      @(posedge clk);
      en <= 1'b0;
      for (int i = 0; i < 8; i++) exp_word[i] = ref_next();
      if (mode == ENC_SCRAMBLE) exp_word ^= din;
      #0.1;
      checks++;
      if (dout !== exp_word) begin
        failures++;
        if (failures < 10) $display("word %0d: dout %h expected %h", w, dout, exp_word);
      end
    end
    checks++;
    if (n_seu < 100) failures++;
    // period of the sequence is 127
    for (int n = 7 + 127; n < hist.size(); n++) begin
      checks++;
      if (hist[n] != hist[n-127]) failures++;
    end
    checks++;
    for (int p = 1; p < 127; p++) begin
      bit same;
      same = 1;
      for (int n = 7 + 127; n < 7 + 254; n++) if (hist[n] != hist[n-p]) same = 0;
      if (same) begin failures++; $display("period %0d shorter than 127", p); break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
