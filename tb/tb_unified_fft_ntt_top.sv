// tb_unified_fft_ntt_top: end-to-end test of the unified FFT/NTT accelerator at
// its default (full) size.
//
// For each mode the test loads random data through the host port, starts the
// transform, checks the cycle count against stages*(issue+14) (2430 / 624 /
// 322, the paper's Table I), unloads the result and compares it with golden
// values computed here independently of the design:
//   ML-KEM: f^[2i+b] = sum_j f[2j+b] * 17^((2*brv7(i)+1)*j) mod 3329
//   ML-DSA: w^[i]    = sum_j w[j] * 1753^((2*brv8(i)+1)*j) mod 8380417
//   FFT:    a bit-exact model of the radix-2 fixed-point schedule (floor after
//           each Q1.30 product), and a double-precision DFT with a tolerance
//           of 1024 LSBs of Q16.15 (the flooring of
//           two products per butterfly biases each stage by up to 2 LSB, and
//           later stages double it: 2*(1+2+...+256) < 1024). Output X[k] is read at point bitrev9(k).
// It also exercises and counts the mechanisms of the design: mode switches,
// negative FFT operands through the two's complement converters, the modular
// corrections of both NTTs, the ML-KEM split of the 32-bit adders, a start
// refused while busy and a start refused for the reserved mode. A mechanism
// that never happens counts as a failure.
// At every stage boundary the data bank is also read row by row and compared
// with the expected contents after that stage (FIPS 203/204 loops for the
// NTTs, the fixed-point model for the FFT), so an error is pinned to its stage.
module tb_unified_fft_ntt_top;
  import uacc_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b1;
  logic [1:0]  mode;
  logic        start;
  logic        busy, done;
  logic [4:0]  status;
  logic [3:0]  stage;
  logic        host_en, host_we;
  logic [9:0]  host_addr;
  logic [31:0] host_wdata, host_rdata;
  logic        host_rvalid;

  unified_fft_ntt_top dut (
    .clk, .rst_n,
    .mode_i(mode), .start_i(start), .busy_o(busy), .done_o(done),
    .status_o(status), .stage_o(stage),
    .host_en_i(host_en), .host_we_i(host_we), .host_addr_i(host_addr),
    .host_wdata_i(host_wdata), .host_rdata_o(host_rdata), .host_rvalid_o(host_rvalid)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // cycles with busy high = cycles from the accepted start to done
  int busy_cycles = 0;
  always @(posedge clk) if (busy) busy_cycles <= busy_cycles + 1;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters (observed inside the design) --------
  int n_neg_fft = 0, n_kyb_wrap = 0, n_dil_add_corr = 0, n_dil_sub_corr = 0;
  int n_kyb_add_corr = 0, n_busy_reject = 0, n_rsvd_reject = 0, n_mode_switch = 0;
  always @(posedge clk) begin
    if (dut.u_bfly.s1.v && dut.u_bfly.s1.m == MODE_FFT && (dut.u_bfly.b1[31] || dut.u_bfly.d1[31]))
      n_neg_fft++;
    if (dut.u_bfly.s8.v && dut.u_bfly.s8.m == MODE_KYBER) begin
      if (dut.u_bfly.dif_a[12] || dut.u_bfly.dif_c[12]) n_kyb_wrap++;
      if (dut.u_bfly.sum_a[12:0] >= 13'(Q_KYBER)) n_kyb_add_corr++;
    end
    if (dut.u_bfly.s8.v && dut.u_bfly.s8.m == MODE_DIL) begin
      if (dut.u_bfly.sum_a[24:0] >= 25'(Q_DIL)) n_dil_add_corr++;
      if (dut.u_bfly.dif_a[24]) n_dil_sub_corr++;
    end
  end


  // ---------------- per-stage check of the data bank ----------------
  // Expected contents after every stage (by element index) are filled in by
  // the test tasks from a reference model of the in-place loop; at each stage
  // boundary the bank is read row by row and compared with them.
  logic [31:0] gold [9][1024];
  int          gold_elems = 0;
  mode_e       gold_mode = MODE_FFT;
  int          n_stage_checked = 0;
  logic [15:0] snap [4][2][256];
  logic [3:0]  prev_stage = '0;
  logic        prev_busy = 1'b0;

  task automatic check_stage(input int st);
    bank_loc_t   loc;
    logic [31:0] got;
    int          bad = 0;
    snap[0][0] = dut.u_bank.g_lane[0].g_half[0].u_ram.mem;
    snap[0][1] = dut.u_bank.g_lane[0].g_half[1].u_ram.mem;
    snap[1][0] = dut.u_bank.g_lane[1].g_half[0].u_ram.mem;
    snap[1][1] = dut.u_bank.g_lane[1].g_half[1].u_ram.mem;
    snap[2][0] = dut.u_bank.g_lane[2].g_half[0].u_ram.mem;
    snap[2][1] = dut.u_bank.g_lane[2].g_half[1].u_ram.mem;
    snap[3][0] = dut.u_bank.g_lane[3].g_half[0].u_ram.mem;
    snap[3][1] = dut.u_bank.g_lane[3].g_half[1].u_ram.mem;
    for (int i = 0; i < gold_elems; i++) begin
      loc = elem_loc(gold_mode, 10'(i));
      got = {snap[loc.lane][1][loc.row], snap[loc.lane][0][loc.row]};
      checks++;
      if (got != gold[st][i]) begin
        failures++;
        if (bad++ < 2) $display("mode %0d stage %0d element %0d: bank %h expected %h",
                                gold_mode, st, i, got, gold[st][i]);
      end
    end
    n_stage_checked++;
  endtask

  always @(negedge clk) begin
    if (prev_busy && busy && stage != prev_stage) check_stage(int'(prev_stage));
    if (prev_busy && !busy) check_stage(int'(prev_stage));
    prev_busy  <= busy;
    prev_stage <= stage;
  end

  // ---------------- host port helpers ----------------
  task automatic host_write(input logic [9:0] a, input logic [31:0] d);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b1; host_addr = a; host_wdata = d;
    @(negedge clk);
    host_en = 1'b0; host_we = 1'b0;
  endtask

  task automatic host_read(input logic [9:0] a, output logic [31:0] d);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b0; host_addr = a;
    @(negedge clk);
    host_en = 1'b0;
    if (!host_rvalid) begin
      failures++;
      $display("host read: no rvalid");
    end
    d = host_rdata;
  endtask

  // Start a transform and return the cycles from the accepted start to done.
  mode_e last_mode = MODE_RSVD;
  task automatic run(input mode_e m, output int cycles);
    if (last_mode != MODE_RSVD && last_mode != m) n_mode_switch++;
    last_mode = m;
    @(negedge clk);
    mode = m; start = 1'b1;
    busy_cycles = 0;
    @(negedge clk);
    start = 1'b0;
    // a second start while busy must be refused
    @(negedge clk);
    start = 1'b1;
    mode = (m == MODE_FFT) ? MODE_DIL : MODE_FFT;
    @(negedge clk);
    start = 1'b0;
    mode = m;
    checks++;
    if (!status[4] || !busy) begin
      failures++;
      $display("start while busy was not refused");
    end else n_busy_reject++;
    while (!done) @(negedge clk);
    cycles = busy_cycles;
  endtask

  // ---------------- modular helpers ----------------
  function automatic longint unsigned brv(longint unsigned x, int n);
    longint unsigned r = 0;
    for (int i = 0; i < n; i++) r = (r << 1) | ((x >> i) & 1);
    return r;
  endfunction

  // ---------------- ML-KEM ----------------
  task automatic test_kyber();
    longint unsigned f [256];
    longint unsigned pw [256];
    longint unsigned e0, acc0, acc1;
    logic [31:0] d;
    int cycles, bad;
    pw[0] = 1;
    for (int i = 1; i < 256; i++) pw[i] = (pw[i-1] * 17) % 3329;
    for (int i = 0; i < 256; i++) f[i] = $urandom_range(3328);
    f[0] = 3328; f[1] = 0;
    // stage-by-stage reference: the FIPS 203 forward NTT loop
    begin
      longint unsigned g [256];
      longint unsigned z, t;
      int zi = 1, st = 0;
      for (int i = 0; i < 256; i++) g[i] = f[i];
      for (int len = 128; len >= 2; len /= 2) begin
        for (int s0 = 0; s0 < 256; s0 += 2 * len) begin
          z = pw[brv(zi, 7)];
          zi++;
          for (int j = s0; j < s0 + len; j++) begin
            t = (z * g[j + len]) % 3329;
            g[j + len] = (g[j] + 3329 - t) % 3329;
            g[j] = (g[j] + t) % 3329;
          end
        end
        for (int w = 0; w < 128; w++) gold[st][w] = {4'd0, 12'(g[2*w+1]), 4'd0, 12'(g[2*w])};
        st++;
      end
      gold_mode = MODE_KYBER; gold_elems = 128;
    end
    mode = MODE_KYBER;
    for (int w = 0; w < 128; w++) host_write(10'(w), {4'd0, 12'(f[2*w+1]), 4'd0, 12'(f[2*w])});
    // read back before the run: checks the host path and the element map
    for (int w = 0; w < 128; w++) begin
      host_read(10'(w), d);
      checks++;
      if (d != {4'd0, 12'(f[2*w+1]), 4'd0, 12'(f[2*w])}) begin
        failures++;
        $display("ML-KEM load word %0d: read back %h", w, d);
      end
    end
    run(MODE_KYBER, cycles);
    checks++;
    if (cycles != 322) begin
      failures++;
      $display("ML-KEM cycles %0d, expected 322", cycles);
    end
    bad = 0;
    for (int i = 0; i < 128; i++) begin
      e0 = 2 * brv(i, 7) + 1;
      acc0 = 0; acc1 = 0;
      for (int j = 0; j < 128; j++) begin
        acc0 = (acc0 + f[2*j]   * pw[(e0 * j) % 256]) % 3329;
        acc1 = (acc1 + f[2*j+1] * pw[(e0 * j) % 256]) % 3329;
      end
      host_read(10'(i), d);
      checks++;
      if (d != {4'd0, 12'(acc1), 4'd0, 12'(acc0)}) begin
        failures++;
        if (bad++ < 4) $display("ML-KEM word %0d: got %h expected %h", i, d, {4'd0, 12'(acc1), 4'd0, 12'(acc0)});
      end
    end
    $display("ML-KEM NTT: %0d cycles", cycles);
  endtask

  // ---------------- ML-DSA ----------------
  task automatic test_dil();
    longint unsigned w [256];
    longint unsigned pw [512];
    longint unsigned e0, acc;
    logic [31:0] d;
    int cycles, bad;
    pw[0] = 1;
    for (int i = 1; i < 512; i++) pw[i] = (pw[i-1] * 1753) % 8380417;
    for (int i = 0; i < 256; i++) w[i] = $urandom_range(8380416);
    w[0] = 8380416; w[1] = 0;
    // stage-by-stage reference: the FIPS 204 forward NTT loop
    begin
      longint unsigned g [256];
      longint unsigned z, t;
      int zi = 1, st = 0;
      for (int i = 0; i < 256; i++) g[i] = w[i];
      for (int len = 128; len >= 1; len /= 2) begin
        for (int s0 = 0; s0 < 256; s0 += 2 * len) begin
          z = pw[brv(zi, 8)];
          zi++;
          for (int j = s0; j < s0 + len; j++) begin
            t = (z * g[j + len]) % 8380417;
            g[j + len] = (g[j] + 8380417 - t) % 8380417;
            g[j] = (g[j] + t) % 8380417;
          end
        end
        for (int i = 0; i < 256; i++) gold[st][i] = 32'(g[i]);
        st++;
      end
      gold_mode = MODE_DIL; gold_elems = 256;
    end
    mode = MODE_DIL;
    for (int i = 0; i < 256; i++) host_write(10'(i), 32'(w[i]));
    run(MODE_DIL, cycles);
    checks++;
    if (cycles != 624) begin
      failures++;
      $display("ML-DSA cycles %0d, expected 624", cycles);
    end
    bad = 0;
    for (int i = 0; i < 256; i++) begin
      e0 = 2 * brv(i, 8) + 1;
      acc = 0;
      for (int j = 0; j < 256; j++) acc = (acc + w[j] * pw[(e0 * j) % 512]) % 8380417;
      host_read(10'(i), d);
      checks++;
      if (d != 32'(acc)) begin
        failures++;
        if (bad++ < 4) $display("ML-DSA coef %0d: got %h expected %h", i, d, 32'(acc));
      end
    end
    $display("ML-DSA NTT: %0d cycles", cycles);
  endtask

  // ---------------- FFT ----------------
  function automatic logic signed [31:0] mulq(logic signed [31:0] x, logic signed [31:0] w);
    logic signed [63:0] p;
    p = 64'(x) * 64'(w);
    return 32'(p >>> 30);
  endfunction

  task automatic test_fft(input int amp);
    logic signed [31:0] re [512];
    logic signed [31:0] im [512];
    logic signed [31:0] mr [512];
    logic signed [31:0] mi [512];
    logic signed [31:0] wr [256];
    logic signed [31:0] wi [256];
    logic [31:0] d, dr, di;
    real xr, xi, ang, err, maxerr;
    int cycles, bad, s, top, bot, e;
    logic signed [31:0] tr, ti, ar, ai, br_, bi_;
    for (int i = 0; i < 512; i++) begin
      re[i] = $signed($urandom_range(2 * amp)) - amp;
      im[i] = $signed($urandom_range(2 * amp)) - amp;
      mr[i] = re[i];
      mi[i] = im[i];
    end
    // twiddles, Q1.30 rounded
    for (int k = 0; k < 256; k++) begin
      wr[k] = 32'($rtoi($floor($cos(2.0 * 3.14159265358979323846 * k / 512.0) * 1073741824.0 + 0.5)));
      wi[k] = 32'($rtoi($floor(-$sin(2.0 * 3.14159265358979323846 * k / 512.0) * 1073741824.0 + 0.5)));
    end
    // bit-exact model of the in-place schedule
    for (int st = 0; st < 9; st++) begin
      s = 8 - st;
      for (int k = 0; k < 256; k++) begin
        top = ((k >> s) << (s + 1)) | (k & ((1 << s) - 1));
        bot = top + (1 << s);
        e   = int'(brv(k >> s, 8));
        ar = mr[top]; ai = mi[top]; br_ = mr[bot]; bi_ = mi[bot];
        tr = mulq(br_, wr[e]) - mulq(bi_, wi[e]);
        ti = mulq(br_, wi[e]) + mulq(bi_, wr[e]);
        mr[top] = ar + tr; mi[top] = ai + ti;
        mr[bot] = ar - tr; mi[bot] = ai - ti;
      end
      for (int p = 0; p < 512; p++) begin
        gold[st][p]       = mr[p];
        gold[st][512 + p] = mi[p];
      end
    end
    gold_mode = MODE_FFT; gold_elems = 1024;
    mode = MODE_FFT;
    for (int i = 0; i < 512; i++) begin
      host_write({1'b0, 9'(i)}, re[i]);
      host_write({1'b1, 9'(i)}, im[i]);
    end
    run(MODE_FFT, cycles);
    checks++;
    if (cycles != 2430) begin
      failures++;
      $display("FFT cycles %0d, expected 2430", cycles);
    end
    bad = 0;
    maxerr = 0.0;
    for (int k = 0; k < 512; k++) begin
      int p;
      p = int'(brv(k, 9));
      host_read({1'b0, 9'(p)}, dr);
      host_read({1'b1, 9'(p)}, di);
      checks++;
      if (dr != mr[p] || di != mi[p]) begin
        failures++;
        if (bad++ < 4) $display("FFT X[%0d]: got %h %h, model %h %h", k, dr, di, mr[p], mi[p]);
      end
      xr = 0.0; xi = 0.0;
      for (int m = 0; m < 512; m++) begin
        ang = -2.0 * 3.14159265358979323846 * real'((m * k) % 512) / 512.0;
        xr += real'(re[m]) * $cos(ang) - real'(im[m]) * $sin(ang);
        xi += real'(re[m]) * $sin(ang) + real'(im[m]) * $cos(ang);
      end
      err = (xr - real'($signed(dr)) > 0.0) ? xr - real'($signed(dr)) : real'($signed(dr)) - xr;
      if (err > maxerr) maxerr = err;
      err = (xi - real'($signed(di)) > 0.0) ? xi - real'($signed(di)) : real'($signed(di)) - xi;
      if (err > maxerr) maxerr = err;
    end
    checks++;
    if (maxerr > 1024.0) begin
      failures++;
      $display("FFT differs from the DFT by %f LSB", maxerr);
    end
    $display("FFT: %0d cycles, largest error against the DFT %0.2f LSB", cycles, maxerr);
  endtask

  initial begin
    int cycles;
    mode = 2'd0; start = 1'b0; host_en = 1'b0; host_we = 1'b0;
    host_addr = '0; host_wdata = '0;
    #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset at once
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // reserved mode must be refused
    @(negedge clk);
    mode = 2'd3; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    checks++;
    if (busy || !status[4]) begin
      failures++;
      $display("reserved mode was not refused");
    end else n_rsvd_reject++;
    mode = 2'd1;

    test_kyber();
    test_dil();
    test_fft(1 << 20);
    test_kyber();
    test_fft(1 << 12);

    // every mechanism must have happened
    checks++; if (n_neg_fft == 0)      begin failures++; $display("no negative FFT operand"); end
    checks++; if (n_kyb_wrap == 0)     begin failures++; $display("no ML-KEM negative difference"); end
    checks++; if (n_kyb_add_corr == 0) begin failures++; $display("no ML-KEM sum correction"); end
    checks++; if (n_dil_add_corr == 0) begin failures++; $display("no ML-DSA sum correction"); end
    checks++; if (n_dil_sub_corr == 0) begin failures++; $display("no ML-DSA difference correction"); end
    checks++; if (n_busy_reject == 0)  begin failures++; $display("no start refused while busy"); end
    checks++; if (n_rsvd_reject == 0)  begin failures++; $display("no reserved mode refused"); end
    checks++; if (n_mode_switch < 3)   begin failures++; $display("too few mode switches"); end
    // every stage of every transform was compared: 7 + 8 + 9 + 7 + 9
    checks++; if (n_stage_checked != 40) begin failures++; $display("stages checked %0d, expected 40", n_stage_checked); end
    $display("mechanisms: negFFT=%0d kybWrap=%0d kybAddCorr=%0d dilAddCorr=%0d dilSubCorr=%0d busyReject=%0d rsvdReject=%0d modeSwitch=%0d stagesChecked=%0d",
             n_neg_fft, n_kyb_wrap, n_kyb_add_corr, n_dil_add_corr, n_dil_sub_corr,
             n_busy_reject, n_rsvd_reject, n_mode_switch, n_stage_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
