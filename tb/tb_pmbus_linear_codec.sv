// tb_pmbus_linear_codec - checks the LINEAR16 encoder/decoder (exponent -12)
// against real-number arithmetic over every millivolt value up to 6 V plus
// random words, and the LINEAR11 decoder against m * 2^e * 1000 computed with
// reals for every exponent and random mantissas.
`timescale 1ns/1ps
module tb_pmbus_linear_codec;
  logic        [15:0] enc_mv, enc_word, dec_word, dec_mv, l11_word;
  logic signed [15:0] l11_milli;

  pmbus_linear_codec dut (.enc_mv, .enc_word, .dec_word, .dec_mv, .l11_word, .l11_milli);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real r;
    longint e_ref;
    // LINEAR16 encode: round(mv / 1000 * 4096)
    for (int mv = 0; mv <= 6000; mv++) begin
      enc_mv = 16'(mv);
      #1;
      r = mv * 4.096;
      e_ref = longint'($floor(r + 0.5));
      check(enc_word == 16'(e_ref), $sformatf("enc %0d mV -> %h, want %0d", mv, enc_word, e_ref));
    end
    enc_mv = 16'd900; #1;
    check(enc_word == 16'h0E66, "0.9 V encodes to 0x0E66");
    enc_mv = 16'hFFFF; #1;
    check(enc_word == 16'hFFFF, "saturation");
    // LINEAR16 decode: round(w * 1000 / 4096)
    for (int i = 0; i < 3000; i++) begin
      dec_word = (i < 1000) ? 16'(i * 7) : 16'($urandom);
      #1;
      r = real'(dec_word) * 1000.0 / 4096.0;
      e_ref = longint'($floor(r + 0.5));
      check(dec_mv == 16'(e_ref), $sformatf("dec %h -> %0d, want %0d", dec_word, dec_mv, e_ref));
    end
    // LINEAR11 decode: floor(m * 2^e * 1000), saturated to 16-bit signed
    for (int ex = -16; ex < 16; ex++) begin
      for (int k = 0; k < 40; k++) begin
        int m;
        m = $urandom_range(0, 2047) - 1024;
        l11_word = {5'(ex), 11'(m)};
        #1;
        r = real'(m) * 1000.0 * (2.0 ** ex);
        e_ref = longint'($floor(r));
        if (e_ref > 32767) e_ref = 32767;
        if (e_ref < -32768) e_ref = -32768;
        check(l11_milli == 16'(e_ref), $sformatf("l11 e=%0d m=%0d -> %0d, want %0d", ex, m, l11_milli, e_ref));
      end
    end
    l11_word = 16'hD280; #1;
    check(l11_milli == 16'sd10000, "0xD280 is 10.000 A");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
