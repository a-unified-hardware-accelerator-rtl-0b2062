// tb_mod_dilithium_sub: check of the modular correction after the
// butterfly's subtraction: for operands a, t in [0, q) (corner values, sums equal to q
// and random ones) the unit, fed the raw 25-bit subtraction result, must return (a - t) mod q.
module tb_mod_dilithium_sub;
  logic          clk = 1'b0;
  logic [24:0]   s;
  logic [22:0]   r;
  mod_dilithium_sub dut (.d_i(s), .r_o(r));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam longint Q = 8380417;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    longint a, t, e;
    for (int i = 0; i < 10000; i++) begin
      @(negedge clk);
      case (i % 5)
        0: begin a = Q - 1; t = longint'($urandom_range(Q - 1)); end
        1: begin a = longint'($urandom_range(Q - 1)); t = Q - 1; end
        2: begin a = 0; t = longint'($urandom_range(Q - 1)); end
        3: begin t = longint'($urandom_range(Q - 1, 1)); a = Q - t; end
        default: begin a = longint'($urandom_range(Q - 1)); t = longint'($urandom_range(Q - 1)); end
      endcase
      s = 25'(a - t);
      e = (a - t + Q) % Q;
      #1;
      checks++;
      if (longint'(r) != e) begin
        failures++;
        if (failures < 5) $display("a=%0d t=%0d: got %0d expected %0d", a, t, r, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
