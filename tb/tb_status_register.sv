// tb_status_register: checks that a start is accepted only when idle and with
// a defined mode, that the mode is latched at the accepted start and held
// while busy, that finish ends busy and sets done, and that refused starts set
// the rejected flag until the next accepted start.
module tb_status_register;
  import uacc_pkg::*;
  logic       clk = 1'b0, rst_n = 1'b0;
  logic       start, finish, go, busy, done;
  mode_e      mode, mode_o;
  logic [4:0] status;
  status_register dut (.clk, .rst_n, .start_i(start), .mode_i(mode), .finish_i(finish),
                       .go_o(go), .mode_o, .busy_o(busy), .done_o(done), .status_o(status));
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
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    logic  m_busy, m_done, m_rej;
    mode_e m_mode;
    start = 0; finish = 0; mode = MODE_FFT;
    repeat (2) @(posedge clk);
    rst_n = 1;
    m_busy = 0; m_done = 0; m_rej = 0; m_mode = MODE_FFT;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      start  = ($urandom_range(3) == 0);
      finish = m_busy && ($urandom_range(5) == 0);
      mode   = mode_e'($urandom_range(3));
      #1;
      chk(go == (start && !m_busy && mode != MODE_RSVD), "go");
      @(posedge clk);
      if (start && !m_busy && mode != MODE_RSVD) begin
        m_busy = 1; m_done = 0; m_rej = 0; m_mode = mode;
      end else begin
        if (start) m_rej = 1;
        if (finish) begin m_busy = 0; m_done = 1; end
      end
      #1;
      chk(busy == m_busy && done == m_done && mode_o == m_mode, "state");
      chk(status == {m_rej, m_done, m_busy, m_mode}, "status word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
