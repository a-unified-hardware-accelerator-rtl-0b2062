// twiddle_rom: 1024 x 32-bit dual-port twiddle factor ROM.
//
// Both ports read on every cycle and return the addressed word on the next
// clock edge. In FFT mode port 1 supplies Re(w) and port 2 Im(w) of the same
// twiddle; in the NTT modes each port supplies the twiddle of one butterfly.
// Contents (layout is this design's choice; sizes follow the paper's 1024 x 32):
//   0   + e  (e = 0..255): cos(2*pi*e/512)  in Q1.30
//   256 + e  (e = 0..255): -sin(2*pi*e/512) in Q1.30  (w = exp(-2*pi*j*e/512))
//   512 + k  (k = 0..255): ML-DSA zetas[k] = 1753^brv8(k) mod 8380417
//   768 + k  (k = 0..127): ML-KEM zetas[k] = 17^brv7(k) mod 3329, stored in
//                          both 16-bit halves (one per ML-KEM butterfly)
//   896..1023: zero.
// The paper says a 512-point FFT needs 512 twiddles; the in-place
// Cooley-Tukey schedule used here reads only w^e for e < 256, which leaves
// room for the NTT tables in the same 1024 words.
// The table is computed at elaboration: FFT twiddles by repeated complex
// multiplication by w^1 in Q1.62 (w^1 = (round(cos(2*pi/512)*2^62),
// round(-sin(2*pi/512)*2^62))), rounded to Q1.30; zetas by modular
// exponentiation.
module twiddle_rom
  import uacc_pkg::*;
(
  input  logic       clk,
  input  logic [9:0] addr1_i,
  input  logic [9:0] addr2_i,
  output word_t      data1_o,
  output word_t      data2_o
);
  typedef word_t rom_t [1024];

  function automatic int unsigned bitrev(int unsigned x, int unsigned n);
    int unsigned r = 0;
    for (int unsigned i = 0; i < n; i++) r = (r << 1) | ((x >> i) & 1);
    return r;
  endfunction

  function automatic longint unsigned powmod(longint unsigned b, int unsigned e,
                                             longint unsigned q);
    longint unsigned r = 1;
    for (int unsigned i = 0; i < e; i++) r = (r * b) % q;
    return r;
  endfunction

  function automatic rom_t gen_rom();
    rom_t r;
    localparam longint W1_RE = 64'sd4611338766951757312;
    localparam longint W1_IM = -64'sd56592481536850976;
    logic signed [63:0]  cr, ci, nr, ni;
    logic signed [127:0] t;
    for (int i = 0; i < 1024; i++) r[i] = '0;
    cr = 64'sd1 <<< 62;
    ci = '0;
    for (int e = 0; e < 256; e++) begin
      t = (128'(cr) + (128'sd1 <<< 31)) >>> 32;
      r[ROM_FFT_RE + e] = t[31:0];
      t = (128'(ci) + (128'sd1 <<< 31)) >>> 32;
      r[ROM_FFT_IM + e] = t[31:0];
      t  = (128'(cr) * 128'(W1_RE) - 128'(ci) * 128'(W1_IM) + (128'sd1 <<< 61)) >>> 62;
      nr = t[63:0];
      t  = (128'(cr) * 128'(W1_IM) + 128'(ci) * 128'(W1_RE) + (128'sd1 <<< 61)) >>> 62;
      ni = t[63:0];
      cr = nr;
      ci = ni;
    end
    for (int unsigned k = 0; k < 256; k++)
      r[ROM_DIL + k] = 32'(powmod(ZETA_DIL, bitrev(k, 8), Q_DIL));
    for (int unsigned k = 0; k < 128; k++) begin
      logic [15:0] z;
      z = 16'(powmod(ZETA_KYBER, bitrev(k, 7), Q_KYBER));
      r[ROM_KYBER + k] = {z, z};
    end
    return r;
  endfunction

  localparam rom_t ROM = gen_rom();

  always_ff @(posedge clk) begin
    data1_o <= ROM[addr1_i];
    data2_o <= ROM[addr2_i];
  end
endmodule
