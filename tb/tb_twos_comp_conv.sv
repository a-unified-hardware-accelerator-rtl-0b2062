// tb_twos_comp_conv: checks the conditional two's complement converter at
// 32 and 64 bits: negation when enabled with the sign input set (including
// the most negative number), pass-through otherwise.
module tb_twos_comp_conv;
  logic        clk = 1'b0;
  logic        en, neg;
  logic [31:0] x32, y32;
  logic [63:0] x64, y64;
  twos_comp_conv #(.W(32)) dut32 (.en_i(en), .neg_i(neg), .x_i(x32), .y_o(y32));
  twos_comp_conv #(.W(64)) dut64 (.en_i(en), .neg_i(neg), .x_i(x64), .y_o(y64));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      en = 1'($urandom); neg = 1'($urandom);
      x32 = (i % 9 == 0) ? 32'h8000_0000 : $urandom;
      x64 = {$urandom, $urandom};
      #1;
      checks++;
      if (y32 != ((en && neg) ? 32'(-$signed(x32)) : x32)) begin
        failures++; $display("32-bit: en %b neg %b x %h y %h", en, neg, x32, y32);
      end
      checks++;
      if (y64 != ((en && neg) ? 64'(0 - x64) : x64)) begin
        failures++; $display("64-bit: en %b neg %b x %h y %h", en, neg, x64, y64);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
