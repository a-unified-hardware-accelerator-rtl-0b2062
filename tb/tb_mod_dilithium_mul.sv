// tb_mod_dilithium_mul: checks the Barrett reduction mod 8380417 against the
// % operator on products of two residues: random ones, (q-1)^2, multiples of
// q and multiples of q minus one.
module tb_mod_dilithium_mul;
  logic        clk = 1'b0;
  logic [47:0] x;
  logic [22:0] r;
  mod_dilithium_mul dut (.x_i(x), .r_o(r));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam longint unsigned Q = 8380417;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 12000; i++) begin
      @(negedge clk);
      case (i % 4)
        0: x = 48'((Q - 1) * (Q - 1));
        1: x = 48'(Q * longint'($urandom_range(8380416)));
        2: x = 48'(Q * longint'($urandom_range(8380416)) - 1);
        default: x = 48'(longint'($urandom_range(8380416)) * longint'($urandom_range(8380416)));
      endcase
      #1;
      checks++;
      if (r != 23'(x % Q)) begin
        failures++;
        if (failures < 5) $display("%0d mod q: got %0d", x, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
