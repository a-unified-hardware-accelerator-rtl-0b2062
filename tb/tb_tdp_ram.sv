// tb_tdp_ram: checks the true-dual-port RAM against an array model: random
// reads and writes on both ports every cycle (never both writing one address),
// one-cycle registered read latency, read-first behaviour on a port that
// writes, and a write on one port seen by the other port one cycle later.
module tb_tdp_ram;
  logic        clk = 1'b0;
  logic        a_en, a_we, b_en, b_we;
  logic [7:0]  a_addr, b_addr;
  logic [15:0] a_wdata, b_wdata, a_rdata, b_rdata;
  tdp_ram dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
               .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] model [256];
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [15:0] ea, eb;
    logic        ca, cb;
    // fill through port B
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      a_en = 0; a_we = 0; b_en = 1; b_we = 1; b_addr = 8'(i); b_wdata = $urandom;
      model[i] = b_wdata;
    end
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      a_en = 1'($urandom); a_we = 1'($urandom); a_addr = $urandom; a_wdata = $urandom;
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = $urandom; b_wdata = $urandom;
      if (a_addr == b_addr) b_we = 0;
      ca = a_en; cb = b_en;
      ea = model[a_addr]; eb = model[b_addr];
      if (a_en && a_we) model[a_addr] = a_wdata;
      if (b_en && b_we) model[b_addr] = b_wdata;
      @(posedge clk);
      #1;
      if (ca) begin
        checks++;
        if (a_rdata != ea) begin failures++; $display("port A read %h expected %h", a_rdata, ea); end
      end
      if (cb) begin
        checks++;
        if (b_rdata != eb) begin failures++; $display("port B read %h expected %h", b_rdata, eb); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
