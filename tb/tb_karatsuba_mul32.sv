// tb_karatsuba_mul32: checks the Karatsuba multiplier against the plain
// 64-bit product, and its 16 x 16 partial products, on random and corner
// operands fed one per cycle; the product must appear exactly 2 cycles and the
// partial products 1 cycle after the operands.
module tb_karatsuba_mul32;
  logic        clk = 1'b0;
  logic [31:0] a, b, hh, ll;
  logic [63:0] p;
  karatsuba_mul32 dut (.clk, .a_i(a), .b_i(b), .hh_o(hh), .ll_o(ll), .p_o(p));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [31:0] ah [3];
  logic [31:0] bh [3];
  initial begin
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      case (i % 6)
        0: begin a = 32'hffff_ffff; b = 32'hffff_ffff; end
        1: begin a = 32'h8000_0000; b = 32'hffff_0001; end
        2: begin a = 32'h0000_ffff; b = 32'hffff_0000; end
        default: begin a = $urandom; b = $urandom; end
      endcase
      ah[2] = ah[1]; ah[1] = ah[0]; ah[0] = a;
      bh[2] = bh[1]; bh[1] = bh[0]; bh[0] = b;
      @(posedge clk);
      #1;
      if (i >= 1) begin
        checks++;
        if (hh != ah[0][31:16] * bh[0][31:16] || ll != ah[0][15:0] * bh[0][15:0]) begin
          failures++;
          if (failures < 5) $display("partial products wrong for %h * %h", ah[0], bh[0]);
        end
      end
      if (i >= 2) begin
        checks++;
        if (p != 64'(ah[1]) * 64'(bh[1])) begin
          failures++;
          if (failures < 5) $display("%h * %h: got %h", ah[1], bh[1], p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
