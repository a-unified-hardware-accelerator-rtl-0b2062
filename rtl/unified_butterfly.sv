// unified_butterfly: shared Cooley-Tukey butterfly for complex FFT, ML-KEM NTT
// and ML-DSA NTT, pipelined over nine register stages.
//
// Operands are twelve 16-bit halves, presented as six 32-bit words a, b, c, d,
// z1, z2 (a = {a1, a0} and so on, upper half first). Results are eight 16-bit
// halves, presented as four 32-bit words. For every mode
//     a_o = a + t1,  b_o = a - t1,  c_o = c + t2,  d_o = c - t2
// where t1, t2 and the arithmetic depend on the mode:
//   FFT (1 butterfly): a = Re(x), c = Im(x), b = Re(y), d = Im(y), z1 = Re(w),
//     z2 = Im(w); t1 = Re(w*y) = b*z1 - d*z2, t2 = Im(w*y) = b*z2 + d*z1.
//     Data are Q16.15 two's complement, twiddles Q1.30; each product is
//     truncated (floor) to Q16.15 by taking bits [61:30]; sums wrap modulo 2^32.
//   ML-DSA (2 butterflies, q = 8380417): t1 = b*z1 mod q, t2 = d*z2 mod q on
//     23-bit residues zero-padded to 32 bits; outputs are reduced mod q.
//   ML-KEM (4 butterflies, q = 3329): each 16-bit half is its own butterfly,
//     t1 = {b1*z11, b0*z10} mod q, t2 = {d1*z21, d0*z20} mod q on 12-bit residues
//     zero-padded to 16 bits; outputs are reduced mod q.
//
// Resource sharing follows the paper: four 32-bit Karatsuba multipliers
// (b*z1, d*z2, b*z2, d*z1) with 32-bit two's complement converters before and
// 64-bit ones after them, used for signed FFT products only; ML-DSA uses the
// first two 64-bit products, ML-KEM the 16 x 16 partial products of those same
// two multipliers. Every 32-bit add/subtract is a pair of 16-bit units whose
// carry/borrow link is cut in ML-KEM mode. Only the Barrett reductions
// (mod_kyber_mul, mod_dilithium_mul) and the conditional corrections
// (mod_*_add/sub) are NTT-only.
//
// Pipeline (register after each step; latency 9 cycles, one new operand set
// per cycle, no stall): R1 input registers; R2 two's complement converters;
// R3 16x16 products and pre-adds; R4 17x17 product; R5 Karatsuba combination;
// R6 64-bit converters and truncation (FFT) or Barrett reduction (NTT);
// R7 low halves of the FFT product sum/difference; R8 high halves; R9 final
// add/subtract with modular correction and output select. The paper gives nine
// stages and draws their boundaries; the exact placement here is this design's.
// mode_i and valid_i travel with the data, so the mode may change between
// consecutive operand sets.
module unified_butterfly
  import uacc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  mode_e       mode_i,
  input  logic        valid_i,
  input  word_t       a_i, b_i, c_i, d_i,
  input  word_t       z1_i, z2_i,
  output logic        valid_o,
  output word_t       a_o, b_o, c_o, d_o
);
  // Side-band carried along the pipeline.
  typedef struct packed {
    logic  v;
    mode_e m;
    word_t a;
    word_t c;
  } side_t;

  // ---------------- R1: input registers ----------------
  side_t s1;
  word_t b1, d1, z11, z21;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1 <= '0;
    else        s1 <= '{v: valid_i, m: mode_i, a: a_i, c: c_i};
  end
  always_ff @(posedge clk) begin
    b1   <= b_i;
    d1   <= d_i;
    z11  <= z1_i;
    z21  <= z2_i;
  end

  // ---------------- R2: 32-bit two's complement converters ----------------
  logic  fft1;
  word_t mb, md, mz1, mz2;
  assign fft1 = (s1.m != MODE_KYBER) && (s1.m != MODE_DIL);
  twos_comp_conv #(.W(32)) u_b_2c  (.en_i(fft1), .neg_i(b1[31]),  .x_i(b1),  .y_o(mb));
  twos_comp_conv #(.W(32)) u_d_2c  (.en_i(fft1), .neg_i(d1[31]),  .x_i(d1),  .y_o(md));
  twos_comp_conv #(.W(32)) u_z1_2c (.en_i(fft1), .neg_i(z11[31]), .x_i(z11), .y_o(mz1));
  twos_comp_conv #(.W(32)) u_z2_2c (.en_i(fft1), .neg_i(z21[31]), .x_i(z21), .y_o(mz2));

  side_t s2;
  word_t mb2, md2, mz12, mz22;
  logic [3:0] neg2;   // product signs: b*z1, d*z2, b*z2, d*z1
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2 <= '0;
    else        s2 <= s1;
  end
  always_ff @(posedge clk) begin
    mb2  <= mb;
    md2  <= md;
    mz12 <= mz1;
    mz22 <= mz2;
    neg2 <= {d1[31] ^ z11[31], b1[31] ^ z21[31], d1[31] ^ z21[31], b1[31] ^ z11[31]};
  end

  // ---------------- R3..R5: Karatsuba multipliers ----------------
  // Each multiplier holds its own R3 and R4 registers; R5 is below.
  logic [31:0] hh [4];
  logic [31:0] ll [4];
  logic [63:0] pp [4];
  karatsuba_mul32 u_mul_bz1 (.clk, .a_i(mb2), .b_i(mz12), .hh_o(hh[0]), .ll_o(ll[0]), .p_o(pp[0]));
  karatsuba_mul32 u_mul_dz2 (.clk, .a_i(md2), .b_i(mz22), .hh_o(hh[1]), .ll_o(ll[1]), .p_o(pp[1]));
  karatsuba_mul32 u_mul_bz2 (.clk, .a_i(mb2), .b_i(mz22), .hh_o(hh[2]), .ll_o(ll[2]), .p_o(pp[2]));
  karatsuba_mul32 u_mul_dz1 (.clk, .a_i(md2), .b_i(mz12), .hh_o(hh[3]), .ll_o(ll[3]), .p_o(pp[3]));

  side_t s3, s4, s5;
  logic [3:0] neg3, neg4, neg5;
  // ML-KEM products: b1*z11, b0*z10, d1*z21, d0*z20 (taken after R3, held in R4, R5)
  logic [24:0] kp4 [4];
  logic [24:0] kp5 [4];
  logic [63:0] p5  [4];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3 <= '0;
      s4 <= '0;
      s5 <= '0;
    end else begin
      s3 <= s2;
      s4 <= s3;
      s5 <= s4;
    end
  end
  always_ff @(posedge clk) begin
    neg3 <= neg2;
    neg4 <= neg3;
    neg5 <= neg4;
    kp4[0] <= hh[0][24:0];
    kp4[1] <= ll[0][24:0];
    kp4[2] <= hh[1][24:0];
    kp4[3] <= ll[1][24:0];
    kp5 <= kp4;
    p5  <= pp;
  end

  // ---------------- R6: 64-bit converters / Barrett reduction ----------------
  logic        fft5;
  logic [63:0] sp [4];
  logic [22:0] dil_t [2];
  logic [11:0] kyb_t [4];
  assign fft5 = (s5.m != MODE_KYBER) && (s5.m != MODE_DIL);
  for (genvar i = 0; i < 4; i++) begin : g_post2c
    twos_comp_conv #(.W(64)) u_p_2c (.en_i(fft5), .neg_i(neg5[i]), .x_i(p5[i]), .y_o(sp[i]));
    mod_kyber_mul u_mod_kyber_mul (.x_i(kp5[i]), .r_o(kyb_t[i]));
  end
  mod_dilithium_mul u_mod_dil_mul1 (.x_i(p5[0][47:0]), .r_o(dil_t[0]));
  mod_dilithium_mul u_mod_dil_mul2 (.x_i(p5[1][47:0]), .r_o(dil_t[1]));

  side_t s6;
  word_t x6 [4];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s6 <= '0;
    else        s6 <= s5;
  end
  always_ff @(posedge clk) begin
    case (s5.m)
      MODE_KYBER: begin
        x6[0] <= {4'd0, kyb_t[0], 4'd0, kyb_t[1]};
        x6[1] <= {4'd0, kyb_t[2], 4'd0, kyb_t[3]};
        x6[2] <= '0;
        x6[3] <= '0;
      end
      MODE_DIL: begin
        x6[0] <= {9'd0, dil_t[0]};
        x6[1] <= {9'd0, dil_t[1]};
        x6[2] <= '0;
        x6[3] <= '0;
      end
      default: begin
        for (int i = 0; i < 4; i++) x6[i] <= sp[i][TW_FRAC +: 32];
      end
    endcase
  end

  // ---------------- R7: low halves of t1 = x0 - x1, t2 = x2 + x3 (FFT) --------
  side_t s7;
  logic [16:0] lo_r7, lo_i7;
  word_t x7 [4];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s7 <= '0;
    else        s7 <= s6;
  end
  always_ff @(posedge clk) begin
    lo_r7 <= {1'b0, x6[0][15:0]} + {1'b0, ~x6[1][15:0]} + 17'd1;
    lo_i7 <= {1'b0, x6[2][15:0]} + {1'b0,  x6[3][15:0]};
    x7    <= x6;
  end

  // ---------------- R8: high halves, select t1/t2 ----------------
  side_t s8;
  word_t t1_8, t2_8;
  logic  fft7;
  logic [15:0] hi_r7, hi_i7;
  assign fft7  = (s7.m != MODE_KYBER) && (s7.m != MODE_DIL);
  assign hi_r7 = x7[0][31:16] + ~x7[1][31:16] + 16'(lo_r7[16]);
  assign hi_i7 = x7[2][31:16] +  x7[3][31:16] + 16'(lo_i7[16]);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s8 <= '0;
    else        s8 <= s7;
  end
  always_ff @(posedge clk) begin
    t1_8 <= fft7 ? {hi_r7, lo_r7[15:0]} : x7[0];
    t2_8 <= fft7 ? {hi_i7, lo_i7[15:0]} : x7[1];
  end

  // ---------------- R9: a +/- t1, c +/- t2, modular correction ----------------
  // 32-bit add/subtract as two 16-bit units; the carry link is cut for ML-KEM.
  function automatic word_t split_add(word_t x, word_t y, logic link);
    logic [16:0] lo;
    logic [15:0] hi;
    lo = {1'b0, x[15:0]} + {1'b0, y[15:0]};
    hi = x[31:16] + y[31:16] + 16'(link & lo[16]);
    return {hi, lo[15:0]};
  endfunction
  function automatic word_t split_sub(word_t x, word_t y, logic link);
    logic [16:0] lo;
    logic [15:0] hi;
    lo = {1'b0, x[15:0]} + {1'b0, ~y[15:0]} + 17'd1;
    hi = x[31:16] + ~y[31:16] + 16'(link ? lo[16] : 1'b1);
    return {hi, lo[15:0]};
  endfunction

  logic  link8;
  word_t sum_a, dif_a, sum_c, dif_c;
  assign link8 = (s8.m != MODE_KYBER);
  assign sum_a = split_add(s8.a, t1_8, link8);
  assign dif_a = split_sub(s8.a, t1_8, link8);
  assign sum_c = split_add(s8.c, t2_8, link8);
  assign dif_c = split_sub(s8.c, t2_8, link8);

  // ML-DSA corrections
  logic [22:0] da_add, da_sub, dc_add, dc_sub;
  mod_dilithium_add u_dil_add_a (.s_i(sum_a[24:0]), .r_o(da_add));
  mod_dilithium_sub u_dil_sub_a (.d_i(dif_a[24:0]), .r_o(da_sub));
  mod_dilithium_add u_dil_add_c (.s_i(sum_c[24:0]), .r_o(dc_add));
  mod_dilithium_sub u_dil_sub_c (.d_i(dif_c[24:0]), .r_o(dc_sub));

  // ML-KEM corrections, one per 16-bit half: index 1 = upper half, 0 = lower
  logic [11:0] ka_add [2], ka_sub [2], kc_add [2], kc_sub [2];
  for (genvar h = 0; h < 2; h++) begin : g_kyb
    mod_kyber_add u_kyb_add_a (.s_i(sum_a[16*h +: 13]), .r_o(ka_add[h]));
    mod_kyber_sub u_kyb_sub_a (.d_i(dif_a[16*h +: 13]), .r_o(ka_sub[h]));
    mod_kyber_add u_kyb_add_c (.s_i(sum_c[16*h +: 13]), .r_o(kc_add[h]));
    mod_kyber_sub u_kyb_sub_c (.d_i(dif_c[16*h +: 13]), .r_o(kc_sub[h]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= s8.v;
  end
  always_ff @(posedge clk) begin
    case (s8.m)
      MODE_KYBER: begin
        a_o <= {4'd0, ka_add[1], 4'd0, ka_add[0]};
        b_o <= {4'd0, ka_sub[1], 4'd0, ka_sub[0]};
        c_o <= {4'd0, kc_add[1], 4'd0, kc_add[0]};
        d_o <= {4'd0, kc_sub[1], 4'd0, kc_sub[0]};
      end
      MODE_DIL: begin
        a_o <= {9'd0, da_add};
        b_o <= {9'd0, da_sub};
        c_o <= {9'd0, dc_add};
        d_o <= {9'd0, dc_sub};
      end
      default: begin
        a_o <= sum_a;
        b_o <= dif_a;
        c_o <= sum_c;
        d_o <= dif_c;
      end
    endcase
  end
endmodule
