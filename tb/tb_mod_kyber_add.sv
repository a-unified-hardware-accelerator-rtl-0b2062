// tb_mod_kyber_add: check of the modular correction after the
// butterfly's addition: for operands a, t in [0, q) (corner values, sums equal to q
// and random ones) the unit, fed the raw 13-bit addition result, must return (a + t) mod q.
module tb_mod_kyber_add;
  logic          clk = 1'b0;
  logic [12:0]   s;
  logic [11:0]   r;
  mod_kyber_add dut (.s_i(s), .r_o(r));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam longint Q = 3329;
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
      s = 13'(a + t);
      e = (a + t + Q) % Q;
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
