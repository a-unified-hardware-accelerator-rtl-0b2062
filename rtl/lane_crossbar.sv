// lane_crossbar: interconnect between the four data bank lanes and the four
// 32-bit butterfly operand/result ports a, b, c, d.
//
// Each cycle the controller names, for every butterfly port, the lane its
// element lives in (rd_sel for the words being read, wr_sel for the results
// being written back, which are the same assignment delayed by the pipeline).
// The read side forwards lane rd_sel[p] to port p; the write side forwards to
// lane L the result of the port p whose wr_sel[p] equals L. The element-to-
// lane mapping guarantees that the four ports of one cycle use four different
// lanes, so both sides are permutations; an assertion checks this whenever the
// corresponding valid is high. Combinational. The paper draws this routing as
// multiplexed buses between the Data Bank and the butterfly unit without
// detailing it; the permutation scheme is this design's.
module lane_crossbar
  import uacc_pkg::*;
(
  input  logic       clk,          // only used by the assertions
  // read side: lanes -> ports
  input  logic       rd_valid_i,
  input  logic [1:0] rd_sel_i  [4],
  input  word_t      lane_rdata_i [4],
  output word_t      port_rdata_o [4],
  // write side: ports -> lanes
  input  logic       wr_valid_i,
  input  logic [1:0] wr_sel_i  [4],
  input  word_t      port_wdata_i [4],
  output word_t      lane_wdata_o [4]
);
  always_comb begin
    for (int p = 0; p < 4; p++) port_rdata_o[p] = lane_rdata_i[rd_sel_i[p]];
  end

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      lane_wdata_o[l] = '0;
      for (int p = 0; p < 4; p++)
        if (wr_sel_i[p] == 2'(l)) lane_wdata_o[l] = port_wdata_i[p];
    end
  end

  function automatic logic is_perm(logic [1:0] s0, logic [1:0] s1,
                                   logic [1:0] s2, logic [1:0] s3);
    logic [3:0] seen;
    seen = '0;
    seen[s0] = 1'b1;
    seen[s1] = 1'b1;
    seen[s2] = 1'b1;
    seen[s3] = 1'b1;
    return &seen;
  endfunction

  a_rd_perm: assert property (@(posedge clk)
    rd_valid_i |-> is_perm(rd_sel_i[0], rd_sel_i[1], rd_sel_i[2], rd_sel_i[3]));
  a_wr_perm: assert property (@(posedge clk)
    wr_valid_i |-> is_perm(wr_sel_i[0], wr_sel_i[1], wr_sel_i[2], wr_sel_i[3]));
endmodule
