// unified_fft_ntt_top: unified accelerator for the 512-point complex FFT and
// the ML-KEM / ML-DSA number theoretic transforms.
//
// Blocks (as in the paper's top-level figure): a status register holding the
// mode, control logic and address computation, a data RAM bank of eight
// 256 x 16-bit true-dual-port RAMs, a 1024 x 32-bit dual-port twiddle ROM, and
// the 9-stage pipelined unified butterfly. A lane crossbar routes the four bank
// lanes to the butterfly ports and back. Data flow is in place: every stage
// reads four 32-bit words per cycle, and the results are written back to the
// rows they came from, BFLY_LAT+1 = 10 cycles later.
//
// Use: while idle, load the data through the host port (host_addr_i is the
// element index in the current mode_i, see below), pulse start_i with mode_i
// set, wait for done_o (busy_o falls in the same cycle), unload through the
// host port. A transform takes stages*(issue+14) cycles from the accepted
// start to done: 2430 (FFT), 624 (ML-DSA), 322 (ML-KEM), as in the paper's
// Table I.
// Host element index, per mode:
//   FFT:    {im, point[8:0]}: im = 0 real part, 1 imaginary part, Q16.15.
//           Output X[k] is found at point = bitrev9(k).
//   ML-DSA: coefficient index [7:0], value < 8380417 zero-padded to 32 bits.
//           Output is the standard NTT (FIPS 204 order).
//   ML-KEM: word index [6:0]; word w holds {f[2w+1], f[2w]}, each < 3329
//           zero-padded to 16 bits. Output is the standard NTT (FIPS 203 order).
// Host reads return data one cycle later with host_rvalid_o. Host requests
// while busy are ignored. The host port, the mode encoding and the status
// layout are this design's; the paper connects the accelerator to a test
// harness it does not detail.
module unified_fft_ntt_top
  import uacc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // control
  input  logic [1:0]  mode_i,        // 0 FFT, 1 ML-KEM, 2 ML-DSA
  input  logic        start_i,
  output logic        busy_o,
  output logic        done_o,
  output logic [4:0]  status_o,      // {start rejected, done, busy, mode[1:0]}
  output logic [3:0]  stage_o,
  // host data port (idle only)
  input  logic        host_en_i,
  input  logic        host_we_i,
  input  logic [9:0]  host_addr_i,
  input  logic [31:0] host_wdata_i,
  output logic [31:0] host_rdata_o,
  output logic        host_rvalid_o
);
  mode_e mode_pin, mode_run;
  assign mode_pin = mode_e'(mode_i);

  // ---------------- status register ----------------
  logic go, finish, run_busy;
  status_register u_status (
    .clk, .rst_n,
    .start_i (start_i),
    .mode_i  (mode_pin),
    .finish_i(finish),
    .go_o    (go),
    .mode_o  (mode_run),
    .busy_o  (run_busy),
    .done_o  (done_o),
    .status_o(status_o)
  );
  assign busy_o = run_busy;

  // ---------------- control logic and address computation ----------------
  logic       c_rd_valid, c_bf_valid, c_wr_valid, c_busy;
  logic [3:0] c_rd_en, c_wr_en;
  logic [7:0] c_rd_row [4];
  logic [7:0] c_wr_row [4];
  logic [1:0] c_rd_sel [4];
  logic [1:0] c_wr_sel [4];
  logic [9:0] rom_a1, rom_a2;
  uacc_controller u_ctrl (
    .clk, .rst_n,
    .go_i       (go),
    .mode_i     (mode_run),
    .rd_valid_o (c_rd_valid),
    .rd_en_o    (c_rd_en),
    .rd_row_o   (c_rd_row),
    .rd_sel_o   (c_rd_sel),
    .rom_addr1_o(rom_a1),
    .rom_addr2_o(rom_a2),
    .bf_valid_o (c_bf_valid),
    .wr_valid_o (c_wr_valid),
    .wr_en_o    (c_wr_en),
    .wr_row_o   (c_wr_row),
    .wr_sel_o   (c_wr_sel),
    .finish_o   (finish),
    .busy_o     (c_busy),
    .stage_o    (stage_o)
  );

  // ---------------- host access path ----------------
  bank_loc_t  hloc;
  logic       host_ok;
  logic [1:0] hlane_q;
  assign hloc    = elem_loc(mode_pin, host_addr_i);
  assign host_ok = host_en_i && !run_busy && !c_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rvalid_o <= 1'b0;
      hlane_q       <= '0;
    end else begin
      host_rvalid_o <= host_ok && !host_we_i;
      hlane_q       <= hloc.lane;
    end
  end

  // ---------------- data RAM bank ----------------
  logic [3:0] b_rd_en, b_wr_en;
  logic [7:0] b_rd_row [4];
  logic [7:0] b_wr_row [4];
  word_t      b_rd_data [4];
  word_t      b_wr_data [4];
  word_t      xb_wdata  [4];
  always_comb begin
    b_rd_en   = c_rd_en;
    b_rd_row  = c_rd_row;
    b_wr_en   = c_wr_en;
    b_wr_row  = c_wr_row;
    b_wr_data = xb_wdata;
    if (host_ok) begin
      if (host_we_i) begin
        b_wr_en[hloc.lane]   = 1'b1;
        b_wr_row[hloc.lane]  = hloc.row;
        b_wr_data[hloc.lane] = host_wdata_i;
      end else begin
        b_rd_en[hloc.lane]  = 1'b1;
        b_rd_row[hloc.lane] = hloc.row;
      end
    end
  end
  assign host_rdata_o = b_rd_data[hlane_q];

  data_ram_bank u_bank (
    .clk,
    .rd_en  (b_rd_en),
    .rd_row (b_rd_row),
    .rd_data(b_rd_data),
    .wr_en  (b_wr_en),
    .wr_row (b_wr_row),
    .wr_data(b_wr_data)
  );

  // ---------------- twiddle factor ROM ----------------
  word_t z1, z2;
  twiddle_rom u_rom (
    .clk,
    .addr1_i(rom_a1),
    .addr2_i(rom_a2),
    .data1_o(z1),
    .data2_o(z2)
  );

  // ---------------- crossbar and unified butterfly ----------------
  // The read selection is used one cycle after the controller issues it,
  // when the bank data arrive.
  logic [1:0] rd_sel_q [4];
  always_ff @(posedge clk) rd_sel_q <= c_rd_sel;

  word_t port_rd [4];
  word_t port_wr [4];
  logic  bf_valid_o;
  lane_crossbar u_xbar (
    .clk,
    .rd_valid_i  (c_bf_valid),
    .rd_sel_i    (rd_sel_q),
    .lane_rdata_i(b_rd_data),
    .port_rdata_o(port_rd),
    .wr_valid_i  (c_wr_valid),
    .wr_sel_i    (c_wr_sel),
    .port_wdata_i(port_wr),
    .lane_wdata_o(xb_wdata)
  );

  unified_butterfly u_bfly (
    .clk, .rst_n,
    .mode_i (mode_run),
    .valid_i(c_bf_valid),
    .a_i    (port_rd[0]),
    .b_i    (port_rd[1]),
    .c_i    (port_rd[2]),
    .d_i    (port_rd[3]),
    .z1_i   (z1),
    .z2_i   (z2),
    .valid_o(bf_valid_o),
    .a_o    (port_wr[0]),
    .b_o    (port_wr[1]),
    .c_o    (port_wr[2]),
    .d_o    (port_wr[3])
  );

  // The write-back schedule must line up with the butterfly's results.
  a_wb_align: assert property (@(posedge clk) disable iff (!rst_n)
    bf_valid_o == c_wr_valid);
endmodule
