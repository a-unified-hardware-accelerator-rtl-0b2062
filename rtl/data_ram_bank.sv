// data_ram_bank: the accelerator's data memory, eight 256 x 16-bit
// true-dual-port RAMs (4 KB), as the paper specifies.
//
// The eight RAMs are paired into four 32-bit lanes: lane L is RAM 2L (bits
// [15:0]) and RAM 2L+1 (bits [31:16]), 256 rows each. A 32-bit FFT element,
// a zero-padded 23-bit ML-DSA coefficient or a pair of zero-padded 12-bit
// ML-KEM coefficients occupies one row of one lane, so the same memory holds
// every mode's data (the paper's memory organisation). Per lane and cycle,
// port A reads one row and port B writes one row, which lets the butterfly
// read four words and write four words every cycle. Which element sits in
// which lane is decided by the controller (see uacc_pkg::elem_loc).
// Timing: read data one cycle after rd_en/rd_row; writes take effect on the
// clock edge. The lane pairing and the port roles are this design's choice.
module data_ram_bank
  import uacc_pkg::*;
(
  input  logic       clk,
  input  logic [3:0] rd_en,
  input  logic [7:0] rd_row  [4],
  output word_t      rd_data [4],
  input  logic [3:0] wr_en,
  input  logic [7:0] wr_row  [4],
  input  word_t      wr_data [4]
);
  for (genvar l = 0; l < 4; l++) begin : g_lane
    for (genvar h = 0; h < 2; h++) begin : g_half
      logic [15:0] unused_b;
      tdp_ram #(.DEPTH(256), .WIDTH(16)) u_ram (
        .clk,
        .a_en   (rd_en[l]),
        .a_we   (1'b0),
        .a_addr (rd_row[l]),
        .a_wdata(16'd0),
        .a_rdata(rd_data[l][16*h +: 16]),
        .b_en   (wr_en[l]),
        .b_we   (wr_en[l]),
        .b_addr (wr_row[l]),
        .b_wdata(wr_data[l][16*h +: 16]),
        .b_rdata(unused_b)
      );
    end
  end
endmodule
