// tb_data_ram_bank: checks the four-lane data bank against an array model:
// every cycle each lane reads one random row and writes another (full 32-bit
// words, so both 16-bit RAMs of a lane are covered); read data must match the
// model one cycle later.
module tb_data_ram_bank;
  import uacc_pkg::*;
  logic       clk = 1'b0;
  logic [3:0] rd_en, wr_en;
  logic [7:0] rd_row [4];
  logic [7:0] wr_row [4];
  word_t      rd_data [4];
  word_t      wr_data [4];
  data_ram_bank dut (.clk, .rd_en, .rd_row, .rd_data, .wr_en, .wr_row, .wr_data);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  word_t model [4][256];
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    word_t e [4];
    logic [3:0] ce;
    rd_en = '0;
    for (int r = 0; r < 256; r++) begin
      @(negedge clk);
      wr_en = '1;
      for (int l = 0; l < 4; l++) begin
        wr_row[l] = 8'(r); wr_data[l] = $urandom; model[l][r] = wr_data[l];
      end
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        rd_en[l] = 1'($urandom); rd_row[l] = $urandom;
        wr_en[l] = 1'($urandom); wr_row[l] = $urandom; wr_data[l] = $urandom;
        if (wr_row[l] == rd_row[l]) wr_en[l] = 1'b0;
        e[l] = model[l][rd_row[l]];
        if (wr_en[l]) model[l][wr_row[l]] = wr_data[l];
      end
      ce = rd_en;
      @(posedge clk);
      #1;
      for (int l = 0; l < 4; l++) if (ce[l]) begin
        checks++;
        if (rd_data[l] != e[l]) begin
          failures++;
          if (failures < 5) $display("lane %0d read %h expected %h", l, rd_data[l], e[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
