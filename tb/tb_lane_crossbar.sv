// tb_lane_crossbar: drives random permutations on both sides of the crossbar
// and checks that port p receives lane sel[p] on the read side and that lane
// sel[p] receives port p on the write side.
module tb_lane_crossbar;
  import uacc_pkg::*;
  logic       clk = 1'b0;
  logic       rv, wv;
  logic [1:0] rs [4];
  logic [1:0] ws [4];
  word_t      lr [4];
  word_t      pr [4];
  word_t      pw [4];
  word_t      lw [4];
  lane_crossbar dut (.clk, .rd_valid_i(rv), .rd_sel_i(rs), .lane_rdata_i(lr), .port_rdata_o(pr),
                     .wr_valid_i(wv), .wr_sel_i(ws), .port_wdata_i(pw), .lane_wdata_o(lw));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic perm(output logic [1:0] s [4]);
    logic [1:0] t;
    int j;
    for (int i = 0; i < 4; i++) s[i] = 2'(i);
    for (int i = 3; i > 0; i--) begin
      j = $urandom_range(i);
      t = s[i]; s[i] = s[j]; s[j] = t;
    end
  endtask
  initial begin
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      rv = 1'b1; wv = 1'b1;
      perm(rs);
      perm(ws);
      for (int k = 0; k < 4; k++) begin lr[k] = $urandom; pw[k] = $urandom; end
      #1;
      for (int p = 0; p < 4; p++) begin
        checks += 2;
        if (pr[p] != lr[rs[p]]) begin failures++; $display("read port %0d wrong", p); end
        if (lw[ws[p]] != pw[p]) begin failures++; $display("write lane %0d wrong", ws[p]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
