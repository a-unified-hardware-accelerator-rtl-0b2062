// tb_mod_kyber_mul: checks the Barrett reduction mod 3329 against the %
// operator: every product of the form k*3329 + r near the range ends, all
// products (q-1)*y, and random 12 x 12-bit products.
module tb_mod_kyber_mul;
  logic        clk = 1'b0;
  logic [24:0] x;
  logic [11:0] r;
  mod_kyber_mul dut (.x_i(x), .r_o(r));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 12000; i++) begin
      @(negedge clk);
      if (i < 4096)      x = 25'(3328 * i);
      else if (i < 6000) x = 25'(3329 * (i - 4096)) + 25'($urandom_range(1)) * 25'(3328);
      else               x = 25'($urandom_range(4095)) * 25'($urandom_range(4095));
      #1;
      checks++;
      if (r != 12'(x % 3329)) begin
        failures++;
        if (failures < 5) $display("%0d mod 3329: got %0d", x, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
