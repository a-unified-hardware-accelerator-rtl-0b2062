// uacc_controller: stage sequencing and address computation for the unified
// FFT/NTT accelerator (the paper's "Control Logic and Address Computation").
//
// A transform is S stages of in-place Cooley-Tukey butterflies (FFT: 9 stages
// of 256 butterflies, one per cycle; ML-DSA: 8 stages, two butterflies per
// cycle; ML-KEM: 7 stages on 128 coefficient-pair words, two word-butterflies
// = four coefficient butterflies per cycle). In stage st the butterfly span is
// 2^s with s = n-1-st (n = 9, 8, 7 bits of element index), and butterfly k
// joins elements top = k with a 0 inserted at bit s, and bot = top + 2^s.
//   FFT:   k = issue counter; a/c = Re/Im of top, b/d = Re/Im of bot;
//          twiddle exponent e = bitrev8(k >> s), ROM words e and 256+e.
//          Natural-order input, bit-reversed output.
//   NTT:   butterflies k and k + N/4 run together (ports a,b and c,d);
//          zeta index = 2^st + (top >> (s+1)), ROM word base + index.
//          This is the FIPS 203/204 forward NTT loop, output in the standard
//          bit-reversed NTT order.
// Per stage the controller issues for `issue` cycles (256, 64 or 32) and then
// waits STAGE_OVERHEAD = 14 cycles, so a transform takes S*(issue+14) cycles:
// 2430 (FFT), 624 (ML-DSA), 322 (ML-KEM), the counts of the paper's Table I.
// Only 11 of the 14 cycles are needed to empty the read-butterfly-write
// pipeline before the next stage reads; the rest is idle. The paper gives the
// cycle counts and the in-place flow, not the schedule; the schedule, the
// element-to-lane map and the butterfly pairing are this design's.
//
// Timing: go_i starts the transform in the next cycle. rd_* (bank read
// enables/rows, lane per port) and rom_addr* are registered outputs, valid one
// cycle after the issue decision; bank data arrive one cycle later together
// with the ROM words, so the butterfly's valid input is rd_valid delayed by
// one (bf_valid_o). wr_* come out BFLY_LAT+1 cycles after rd_*, in the cycle
// the butterfly results are present. finish_o pulses in the last cycle of the
// last stage. stage_o / busy_o are for observation.
module uacc_controller
  import uacc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       go_i,
  input  mode_e      mode_i,        // latched mode from the status register
  // bank read side
  output logic       rd_valid_o,
  output logic [3:0] rd_en_o,
  output logic [7:0] rd_row_o [4],  // per lane
  output logic [1:0] rd_sel_o [4],  // lane of port a, b, c, d
  output logic [9:0] rom_addr1_o,
  output logic [9:0] rom_addr2_o,
  output logic       bf_valid_o,    // butterfly operands present this cycle
  // bank write side
  output logic       wr_valid_o,
  output logic [3:0] wr_en_o,
  output logic [7:0] wr_row_o [4],  // per lane
  output logic [1:0] wr_sel_o [4],  // lane of port a, b, c, d
  output logic       finish_o,
  output logic       busy_o,
  output logic [3:0] stage_o
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_e;

  typedef struct packed {
    logic            v;
    bank_loc_t [3:0] loc;   // ports d, c, b, a (index 0 = a)
  } acc_t;

  state_e      state;
  logic [3:0]  stage;
  logic [7:0]  cnt;
  logic [4:0]  dcnt;
  logic [3:0]  last_stage;
  logic [7:0]  last_issue;

  assign last_stage = 4'(mode_stages(mode_i) - 1);
  assign last_issue = 8'(mode_issue(mode_i) - 1);

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      stage    <= '0;
      cnt      <= '0;
      dcnt     <= '0;
      finish_o <= 1'b0;
    end else begin
      finish_o <= 1'b0;
      case (state)
        S_IDLE: if (go_i) begin
          state <= S_ISSUE;
          stage <= '0;
          cnt   <= '0;
        end
        S_ISSUE: begin
          cnt <= cnt + 8'd1;
          if (cnt == last_issue) begin
            state <= S_DRAIN;
            dcnt  <= '0;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 5'd1;
          if (dcnt == 5'(STAGE_OVERHEAD - 2) && stage == last_stage) finish_o <= 1'b1;
          if (dcnt == 5'(STAGE_OVERHEAD - 1)) begin
            cnt <= '0;
            if (stage == last_stage) begin
              state <= S_IDLE;
            end else begin
              state <= S_ISSUE;
              stage <= stage + 4'd1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy_o  = (state != S_IDLE);
  assign stage_o = stage;

  // ---------------- address computation ----------------
  function automatic logic [8:0] insert0(logic [8:0] k, int unsigned s);
    logic [8:0] lo_mask;
    lo_mask = (9'd1 << s) - 9'd1;
    return ((k & ~lo_mask) << 1) | (k & lo_mask);
  endfunction

  function automatic logic [7:0] bitrev8(logic [7:0] x);
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[i] = x[7-i];
    return r;
  endfunction

  acc_t        acc;
  logic [9:0]  za1, za2;
  always_comb begin
    int unsigned n, s;
    logic [8:0]  k1, k2, top1, bot1, top2, bot2;
    logic [8:0]  g1, g2;
    n   = (mode_i == MODE_KYBER) ? 7 : (mode_i == MODE_DIL) ? 8 : 9;
    s   = n - 1 - int'(stage);
    acc.v = (state == S_ISSUE);
    if (mode_i == MODE_KYBER || mode_i == MODE_DIL) begin
      k1   = {1'b0, cnt};
      k2   = {1'b0, cnt} + (9'd1 << (n - 2));
      top1 = insert0(k1, s);
      top2 = insert0(k2, s);
      bot1 = top1 | (9'd1 << s);
      bot2 = top2 | (9'd1 << s);
      g1   = (9'd1 << stage) + (top1 >> (s + 1));
      g2   = (9'd1 << stage) + (top2 >> (s + 1));
      acc.loc[0] = elem_loc(mode_i, {1'b0, top1});
      acc.loc[1] = elem_loc(mode_i, {1'b0, bot1});
      acc.loc[2] = elem_loc(mode_i, {1'b0, top2});
      acc.loc[3] = elem_loc(mode_i, {1'b0, bot2});
      if (mode_i == MODE_KYBER) begin
        za1 = 10'(ROM_KYBER) + {1'b0, g1};
        za2 = 10'(ROM_KYBER) + {1'b0, g2};
      end else begin
        za1 = 10'(ROM_DIL) + {1'b0, g1};
        za2 = 10'(ROM_DIL) + {1'b0, g2};
      end
    end else begin
      k1   = {1'b0, cnt};
      k2   = '0;
      top1 = insert0(k1, s);
      bot1 = top1 | (9'd1 << s);
      top2 = '0;
      bot2 = '0;
      g1   = k1 >> s;
      g2   = '0;
      acc.loc[0] = elem_loc(MODE_FFT, {1'b0, top1});
      acc.loc[1] = elem_loc(MODE_FFT, {1'b0, bot1});
      acc.loc[2] = elem_loc(MODE_FFT, {1'b1, top1});
      acc.loc[3] = elem_loc(MODE_FFT, {1'b1, bot1});
      za1 = 10'(ROM_FFT_RE) + {2'b0, bitrev8(g1[7:0])};
      za2 = 10'(ROM_FFT_IM) + {2'b0, bitrev8(g1[7:0])};
    end
  end

  // ---------------- read stage (registered) ----------------
  logic                 rd_v;
  bank_loc_t [3:0]      rd_loc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_v <= 1'b0;
    else        rd_v <= acc.v;
  end
  always_ff @(posedge clk) begin
    rd_loc      <= acc.loc;
    rom_addr1_o <= za1;
    rom_addr2_o <= za2;
  end

  // per-lane read rows from the per-port locations
  always_comb begin
    for (int l = 0; l < 4; l++) rd_row_o[l] = '0;
    for (int p = 0; p < 4; p++) begin
      rd_sel_o[p] = rd_loc[p].lane;
      rd_row_o[rd_loc[p].lane] = rd_loc[p].row;
    end
    rd_en_o    = {4{rd_v}};
    rd_valid_o = rd_v;
  end

  // ---------------- write-back delay line ----------------
  localparam int unsigned WB_DELAY = BFLY_LAT + 1;   // RAM read + butterfly
  logic [WB_DELAY-1:0]  wb_v;
  bank_loc_t [3:0]      wb_loc [WB_DELAY];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb_v <= '0;
    else        wb_v <= {wb_v[WB_DELAY-2:0], rd_v};
  end
  always_ff @(posedge clk) begin
    wb_loc[0] <= rd_loc;
    for (int i = 1; i < int'(WB_DELAY); i++) wb_loc[i] <= wb_loc[i-1];
  end

  assign bf_valid_o = wb_v[0];

  always_comb begin
    for (int l = 0; l < 4; l++) wr_row_o[l] = '0;
    for (int p = 0; p < 4; p++) begin
      wr_sel_o[p] = wb_loc[WB_DELAY-1][p].lane;
      wr_row_o[wb_loc[WB_DELAY-1][p].lane] = wb_loc[WB_DELAY-1][p].row;
    end
    wr_valid_o = wb_v[WB_DELAY-1];
    wr_en_o    = {4{wr_valid_o}};
  end

  // A new stage must not read before the previous stage's last write.
  a_drained: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_ISSUE && cnt == 8'd0) |-> (wb_v == '0 && !rd_v));
endmodule
