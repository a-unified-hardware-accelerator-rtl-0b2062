// tb_uacc_controller: runs the controller in each mode and checks its
// schedule against the Cooley-Tukey loop written out here:
//  - every cycle with rd_valid the four ports name four different lanes, and
//    decoding (lane, row) back to element indices gives butterfly pairs
//    (top, top + 2^s) with bit s of top clear, s = n-1-stage;
//  - every element is read exactly once per stage;
//  - the twiddle ROM addresses are the stage's twiddles: for the FFT exponent
//    brv_st(g) * 2^(8-st) (g = top >> (s+1)) at 0 and 256 + exponent, for the
//    NTTs zeta index 2^st + g at 512 (ML-DSA) or 768 (ML-KEM);
//  - the same locations come back on the write side exactly 10 cycles later;
//  - the transform is busy for stages*(issue+14) cycles and finish pulses in
//    the last of them.
module tb_uacc_controller;
  import uacc_pkg::*;
  logic       clk = 1'b0, rst_n = 1'b0;
  logic       go;
  mode_e      mode;
  logic       rd_valid, bf_valid, wr_valid, finish, busy;
  logic [3:0] rd_en, wr_en, stage;
  logic [7:0] rd_row [4];
  logic [7:0] wr_row [4];
  logic [1:0] rd_sel [4];
  logic [1:0] wr_sel [4];
  logic [9:0] ra1, ra2;
  uacc_controller dut (.clk, .rst_n, .go_i(go), .mode_i(mode),
    .rd_valid_o(rd_valid), .rd_en_o(rd_en), .rd_row_o(rd_row), .rd_sel_o(rd_sel),
    .rom_addr1_o(ra1), .rom_addr2_o(ra2), .bf_valid_o(bf_valid),
    .wr_valid_o(wr_valid), .wr_en_o(wr_en), .wr_row_o(wr_row), .wr_sel_o(wr_sel),
    .finish_o(finish), .busy_o(busy), .stage_o(stage));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int brv(int x, int n);
    int r = 0;
    for (int i = 0; i < n; i++) r = (r << 1) | ((x >> i) & 1);
    return r;
  endfunction

  // element index from (lane, row), per mode (the inverse of the bank map)
  function automatic int decode(mode_e m, logic [1:0] lane, logic [7:0] row);
    int x;
    case (m)
      MODE_KYBER: begin x = (int'(lane[1]) << 6) | (int'(row[4:0]) << 1); x |= int'(lane[0] ^ (^x[6:1])); end
      MODE_DIL:   begin x = (int'(lane[1]) << 7) | (int'(row[5:0]) << 1); x |= int'(lane[0] ^ (^x[7:1])); end
      default:    begin x = (int'(lane[1]) << 9) | (int'(row) << 1);      x |= int'(lane[0] ^ (^x[8:1])); end
    endcase
    return x;
  endfunction

  typedef struct { logic [7:0] row [4]; logic [1:0] sel [4]; } locs_t;
  locs_t wq [$];
  logic [15:0] vhist;
  int rd_cycles;
  int seen [1024];
  int cur_stage;

  // per-cycle checks on the read side
  always @(posedge clk) if (rst_n) begin
    vhist <= {vhist[14:0], rd_valid};
    if (wr_valid || vhist[9]) chk(wr_valid == vhist[9], "write 10 cycles after read");
    if (wr_valid) begin
      locs_t e;
      e = wq.pop_front();
      for (int p = 0; p < 4; p++) begin
        chk(wr_sel[p] == e.sel[p], "write lane");
        chk(wr_row[wr_sel[p]] == e.row[e.sel[p]], "write row");
      end
      chk(wr_en == 4'hf, "write enables");
    end
    if (rd_valid) begin
      int n, s, st, x [4], g, expa1, expa2;
      locs_t l;
      logic [3:0] lanes;
      st = cur_stage;
      n = (mode == MODE_KYBER) ? 7 : (mode == MODE_DIL) ? 8 : 9;
      s = n - 1 - st;
      lanes = '0;
      for (int p = 0; p < 4; p++) begin
        lanes[rd_sel[p]] = 1'b1;
        x[p] = decode(mode, rd_sel[p], rd_row[rd_sel[p]]);
        l.sel[p] = rd_sel[p];
        l.row[p] = rd_row[p];
      end
      wq.push_back(l);
      chk(lanes == 4'hf && rd_en == 4'hf, "four distinct lanes");
      if (mode == MODE_FFT) begin
        chk(x[2] == x[0] + 512 && x[3] == x[1] + 512, "FFT re/im pairing");
        chk(x[1] == x[0] + (1 << s) && ((x[0] >> s) & 1) == 0, "FFT butterfly pair");
        g = x[0] >> (s + 1);
        expa1 = brv(g, st) << (8 - st);
        chk(ra1 == 10'(expa1) && ra2 == 10'(256 + expa1), "FFT twiddle address");
        for (int p = 0; p < 4; p++) seen[x[p]]++;
      end else begin
        for (int h = 0; h < 2; h++) begin
          chk(x[2*h+1] == x[2*h] + (1 << s) && ((x[2*h] >> s) & 1) == 0, "NTT butterfly pair");
          g = x[2*h] >> (s + 1);
          expa1 = ((mode == MODE_KYBER) ? 768 : 512) + (1 << st) + g;
          chk((h == 0 ? ra1 : ra2) == 10'(expa1), "NTT zeta address");
        end
        for (int p = 0; p < 4; p++) seen[x[p]]++;
      end
      rd_cycles++;
    end
  end

  initial begin
    mode_e modes [4] = '{MODE_KYBER, MODE_DIL, MODE_FFT, MODE_KYBER};
    go = 0; mode = MODE_FFT; vhist = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (modes[mi]) begin
      int S, B, n, busy_cnt, fin_at;
      mode = modes[mi];
      S = (mode == MODE_KYBER) ? 7 : (mode == MODE_DIL) ? 8 : 9;
      B = (mode == MODE_KYBER) ? 32 : (mode == MODE_DIL) ? 64 : 256;
      n = (mode == MODE_KYBER) ? 128 : (mode == MODE_DIL) ? 256 : 1024;
      @(negedge clk);
      go = 1;
      @(negedge clk);
      go = 0;
      busy_cnt = 0; fin_at = -1;
      for (int st = 0; st < S; st++) begin
        cur_stage = st;
        for (int i = 0; i < 1024; i++) seen[i] = 0;
        rd_cycles = 0;
        for (int c = 0; c < B + 14; c++) begin
          if (busy) busy_cnt++;
          if (finish) fin_at = busy_cnt;
          chk(stage == 4'(st), "stage number");
          @(negedge clk);
        end
        for (int i = 0; i < n; i++) chk(seen[i] == 1, "element read once per stage");
        chk(rd_cycles == B, "issue cycles per stage");
      end
      chk(!busy, "idle after stages*(issue+14) cycles");
      chk(busy_cnt == S * (B + 14), "busy cycles");
      chk(fin_at == S * (B + 14), "finish in last cycle");
      $display("mode %0d: %0d cycles", mode, busy_cnt);
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
