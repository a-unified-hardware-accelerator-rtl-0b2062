// tb_twiddle_rom: reads every ROM word through both ports and compares it with
// values computed here: round(cos(2*pi*e/512)*2^30) and
// round(-sin(2*pi*e/512)*2^30) for the FFT part, 1753^brv8(k) mod 8380417 and
// 17^brv7(k) mod 3329 (in both halves) for the NTT parts, zero elsewhere.
module tb_twiddle_rom;
  import uacc_pkg::*;
  logic       clk = 1'b0;
  logic [9:0] a1, a2;
  word_t      d1, d2;
  twiddle_rom dut (.clk, .addr1_i(a1), .addr2_i(a2), .data1_o(d1), .data2_o(d2));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic longint unsigned brv(longint unsigned x, int n);
    longint unsigned r = 0;
    for (int i = 0; i < n; i++) r = (r << 1) | ((x >> i) & 1);
    return r;
  endfunction
  function automatic longint unsigned pw(longint unsigned b, longint unsigned e, longint unsigned q);
    longint unsigned r = 1;
    for (longint unsigned i = 0; i < e; i++) r = (r * b) % q;
    return r;
  endfunction
  function automatic word_t expect_word(int i);
    real ang;
    if (i < 256) begin
      ang = 2.0 * 3.14159265358979323846 * i / 512.0;
      return 32'($rtoi($floor($cos(ang) * 1073741824.0 + 0.5)));
    end else if (i < 512) begin
      ang = 2.0 * 3.14159265358979323846 * (i - 256) / 512.0;
      return 32'($rtoi($floor(-$sin(ang) * 1073741824.0 + 0.5)));
    end else if (i < 768) begin
      return 32'(pw(1753, brv(i - 512, 8), 8380417));
    end else if (i < 896) begin
      return {2{16'(pw(17, brv(i - 768, 7), 3329))}};
    end
    return '0;
  endfunction
  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      a1 = 10'(i);
      a2 = 10'(1023 - i);
      @(posedge clk);
      #1;
      checks += 2;
      if (d1 != expect_word(i)) begin
        failures++;
        if (failures < 6) $display("word %0d: %h expected %h", i, d1, expect_word(i));
      end
      if (d2 != expect_word(1023 - i)) begin
        failures++;
        if (failures < 6) $display("port 2 word %0d: %h expected %h", 1023 - i, d2, expect_word(1023 - i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
