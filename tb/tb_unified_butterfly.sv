// tb_unified_butterfly: self-checking test of the 9-stage unified butterfly.
//
// Streams random operand sets, one per cycle and with the mode changing from
// set to set, and compares each result, 9 cycles later, with a reference
// computed here: for ML-KEM four butterflies (a +/- z*b) mod 3329 on 16-bit
// halves, for ML-DSA two butterflies mod 8380417, for the FFT the complex
// Q16.15 x Q1.30 butterfly with each product floored to Q16.15 and 32-bit
// wrap-around. Corner operands (0, q-1, -2^31, +-1.0 twiddles) are mixed in.
// The latency is checked by requiring valid_o exactly 9 cycles after valid_i.
module tb_unified_butterfly;
  import uacc_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  mode_e mode;
  logic  vin, vout;
  word_t a, b, c, d, z1, z2, ao, bo, co, dout;

  unified_butterfly dut (
    .clk, .rst_n, .mode_i(mode), .valid_i(vin),
    .a_i(a), .b_i(b), .c_i(c), .d_i(d), .z1_i(z1), .z2_i(z2),
    .valid_o(vout), .a_o(ao), .b_o(bo), .c_o(co), .d_o(dout)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    word_t a, b, c, d;
  } res_t;

  res_t exp_q [$];

  function automatic logic [15:0] kbf(logic [15:0] x, logic [15:0] y, logic [15:0] z, bit plus);
    longint unsigned t, r;
    t = (longint'(y) * longint'(z)) % 3329;
    r = plus ? (longint'(x) + t) % 3329 : (longint'(x) + 3329 - t) % 3329;
    return 16'(r);
  endfunction

  function automatic word_t dbf(word_t x, word_t y, word_t z, bit plus);
    longint unsigned t, r;
    t = (longint'(y) * longint'(z)) % 8380417;
    r = plus ? (longint'(x) + t) % 8380417 : (longint'(x) + 8380417 - t) % 8380417;
    return 32'(r);
  endfunction

  function automatic word_t mq(word_t x, word_t w);
    logic signed [63:0] p;
    p = 64'($signed(x)) * 64'($signed(w));
    return 32'(p >>> 30);
  endfunction

  function automatic res_t model(mode_e m, word_t a, word_t b, word_t c, word_t d,
                                 word_t z1, word_t z2);
    res_t r;
    word_t tr, ti;
    case (m)
      MODE_KYBER: begin
        r.a = {kbf(a[31:16], b[31:16], z1[31:16], 1), kbf(a[15:0], b[15:0], z1[15:0], 1)};
        r.b = {kbf(a[31:16], b[31:16], z1[31:16], 0), kbf(a[15:0], b[15:0], z1[15:0], 0)};
        r.c = {kbf(c[31:16], d[31:16], z2[31:16], 1), kbf(c[15:0], d[15:0], z2[15:0], 1)};
        r.d = {kbf(c[31:16], d[31:16], z2[31:16], 0), kbf(c[15:0], d[15:0], z2[15:0], 0)};
      end
      MODE_DIL: begin
        r.a = dbf(a, b, z1, 1);
        r.b = dbf(a, b, z1, 0);
        r.c = dbf(c, d, z2, 1);
        r.d = dbf(c, d, z2, 0);
      end
      default: begin
        tr = mq(b, z1) - mq(d, z2);
        ti = mq(b, z2) + mq(d, z1);
        r.a = a + tr;
        r.b = a - tr;
        r.c = c + ti;
        r.d = c - ti;
      end
    endcase
    return r;
  endfunction

  function automatic logic [15:0] rk(int i);
    case (i % 5)
      0: return 16'd0;
      1: return 16'd3328;
      default: return 16'($urandom_range(3328));
    endcase
  endfunction

  function automatic word_t rd(int i);
    case (i % 5)
      0: return 32'd0;
      1: return 32'd8380416;
      default: return 32'($urandom_range(8380416));
    endcase
  endfunction

  function automatic word_t rf(int i);
    case (i % 7)
      0: return 32'h8000_0000;
      1: return 32'h7fff_ffff;
      default: return $urandom;
    endcase
  endfunction

  function automatic word_t rw(int i);
    case (i % 6)
      0: return 32'h4000_0000;      // +1.0
      1: return 32'hc000_0000;      // -1.0
      default: return 32'($signed($urandom_range(32'h8000_0000)) - 32'sh4000_0000);
    endcase
  endfunction

  int sent = 0, got = 0;
  int lat_err = 0;
  logic [15:0] vhist;
  int nmode [3];

  // compare outputs
  always @(posedge clk) begin
    if (rst_n) begin
      vhist <= {vhist[14:0], vin};
      if (vout !== vhist[8]) lat_err++;
      if (vout) begin
        res_t e;
        e = exp_q.pop_front();
        checks++;
        got++;
        if ({ao, bo, co, dout} !== {e.a, e.b, e.c, e.d}) begin
          failures++;
          if (failures < 6)
            $display("mismatch: got %h %h %h %h exp %h %h %h %h",
                     ao, bo, co, dout, e.a, e.b, e.c, e.d);
        end
      end
    end else vhist <= '0;
  end

  initial begin
    vin = 0; mode = MODE_FFT;
    {a, b, c, d, z1, z2} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      vin = ($urandom_range(7) != 0);
      case ($urandom_range(2))
        0: mode = MODE_FFT;
        1: mode = MODE_KYBER;
        default: mode = MODE_DIL;
      endcase
      case (mode)
        MODE_KYBER: begin
          logic [15:0] zz1, zz2;
          zz1 = rk(i + 3); zz2 = rk(i + 4);
          a = {rk(i), rk(i + 1)}; b = {rk(i + 2), rk(i)};
          c = {rk(i + 1), rk(i + 2)}; d = {rk(i + 3), rk(i + 2)};
          z1 = {zz1, zz1}; z2 = {zz2, zz2};
        end
        MODE_DIL: begin
          a = rd(i); b = rd(i + 1); c = rd(i + 2); d = rd(i + 3);
          z1 = rd(i + 4); z2 = rd(i + 2);
        end
        default: begin
          a = rf(i); b = rf(i + 1); c = rf(i + 2); d = rf(i + 3);
          z1 = rw(i); z2 = rw(i + 2);
        end
      endcase
      if (vin) begin
        exp_q.push_back(model(mode, a, b, c, d, z1, z2));
        sent++;
        nmode[int'(mode) % 3]++;
      end
    end
    @(negedge clk);
    vin = 0;
    repeat (12) @(posedge clk);
    checks++;
    if (got != sent) begin
      failures++;
      $display("sent %0d got %0d", sent, got);
    end
    checks++;
    if (lat_err != 0) begin
      failures++;
      $display("valid_o not 9 cycles after valid_i (%0d cycles)", lat_err);
    end
    $display("sets per mode: FFT %0d, ML-KEM %0d, ML-DSA %0d", nmode[0], nmode[1], nmode[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
