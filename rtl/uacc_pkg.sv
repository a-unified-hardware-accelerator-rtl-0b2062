// uacc_pkg: types and constants shared by the unified FFT/NTT accelerator.
//
// The accelerator runs one of three transforms, chosen by a 2-bit mode input:
// a 512-point complex fixed-point FFT, the ML-KEM (Kyber) NTT (q = 3329) and
// the ML-DSA (Dilithium) NTT (q = 8380417). The moduli, transform sizes and the
// Q16.15 / Q1.30 fixed-point formats follow the paper; the mode encoding, the
// twiddle ROM layout and the per-stage cycle overhead are this design's own
// choices and are documented next to each constant.
package uacc_pkg;

  // Operating mode (2-bit external input). Encoding is this design's choice.
  typedef enum logic [1:0] {
    MODE_FFT   = 2'd0,   // 512-point complex FFT, 1 butterfly per cycle
    MODE_KYBER = 2'd1,   // ML-KEM NTT, 4 butterflies per cycle
    MODE_DIL   = 2'd2,   // ML-DSA NTT, 2 butterflies per cycle
    MODE_RSVD  = 2'd3    // reserved: treated as FFT by the datapath, refused by start
  } mode_e;

  // Moduli and reduction constants.
  localparam int unsigned Q_KYBER = 3329;
  localparam int unsigned Q_DIL   = 8380417;
  // Barrett constants: m = floor(2^k / q).
  localparam int unsigned BK_KYBER = 26;
  localparam longint unsigned BM_KYBER = (64'd1 << BK_KYBER) / 64'(Q_KYBER);   // 20158
  localparam int unsigned BK_DIL   = 48;
  localparam longint unsigned BM_DIL   = (64'd1 << BK_DIL) / 64'(Q_DIL);       // 33587228

  // Roots of unity used for the NTT twiddle tables (2N-th roots, FIPS 203/204).
  localparam int unsigned ZETA_KYBER = 17;     // 256-th root mod 3329
  localparam int unsigned ZETA_DIL   = 1753;   // 512-th root mod 8380417 (1753^2 = 3073009)

  // Fixed-point formats: data Q16.15, twiddles Q1.30.
  localparam int unsigned TW_FRAC = 30;

  // Twiddle ROM layout (1024 x 32 bits). FFT: cos and -sin of 2*pi*e/512 for
  // e = 0..255; ML-DSA: zetas[1..255]; ML-KEM: zetas[1..127] packed twice.
  localparam int unsigned ROM_FFT_RE = 0;
  localparam int unsigned ROM_FFT_IM = 256;
  localparam int unsigned ROM_DIL    = 512;
  localparam int unsigned ROM_KYBER  = 768;

  // Latency of the unified butterfly (pipeline registers from input to output).
  localparam int unsigned BFLY_LAT = 9;
  // Clock cycles each transform stage takes beyond its butterfly issue cycles.
  // Chosen so that stages*(issue+14) equals the cycle counts of Table I:
  // 7*(32+14) = 322, 8*(64+14) = 624, 9*(256+14) = 2430.
  localparam int unsigned STAGE_OVERHEAD = 14;

  // 32-bit element of a data bank lane: two 16-bit halves.
  typedef logic [31:0] word_t;

  // Position of an element in the data bank: one of four 32-bit lanes, 256 rows.
  typedef struct packed {
    logic [1:0] lane;
    logic [7:0] row;
  } bank_loc_t;

  // Number of stages, log2 of the element count, and issue cycles per stage.
  function automatic int unsigned mode_stages(mode_e m);
    case (m)
      MODE_KYBER: return 7;
      MODE_DIL:   return 8;
      default:    return 9;
    endcase
  endfunction

  function automatic int unsigned mode_issue(mode_e m);
    case (m)
      MODE_KYBER: return 32;
      MODE_DIL:   return 64;
      default:    return 256;
    endcase
  endfunction

  // Parity of a 9-bit index.
  function automatic logic par9(logic [8:0] x);
    return ^x;
  endfunction

  // Where element x of the current mode lives in the bank.
  //  FFT:    x[9] = 0 real / 1 imaginary, x[8:0] point index.
  //          lane = {x[9], parity(point)}, row = point[8:1].
  //  ML-DSA: x[7:0] coefficient index.  lane = {x[7], parity(x[7:0])}, row = x[6:1].
  //  ML-KEM: x[6:0] word index (coefficients 2w and 2w+1 as {hi, lo}).
  //          lane = {x[6], parity(x[6:0])}, row = x[5:1].
  // The two lane bits separate every element read in one cycle (see README).
  function automatic bank_loc_t elem_loc(mode_e m, logic [9:0] x);
    bank_loc_t l;
    case (m)
      MODE_KYBER: begin
        l.lane = {x[6], ^x[6:0]};
        l.row  = {3'd0, x[5:1]};
      end
      MODE_DIL: begin
        l.lane = {x[7], ^x[7:0]};
        l.row  = {2'd0, x[6:1]};
      end
      default: begin
        l.lane = {x[9], ^x[8:0]};
        l.row  = x[8:1];
      end
    endcase
    return l;
  endfunction

endpackage
