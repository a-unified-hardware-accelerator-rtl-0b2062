// status_register: mode and run state of the accelerator.
//
// The paper's top-level figure shows a status register that passes the
// operating mode to the butterfly unit and to the control logic. Here it
// latches the 2-bit mode input when a start request is accepted, so the mode
// pins may change while a transform runs, and keeps the busy and done flags.
// A start is accepted only when idle and when the mode is one of the three
// defined ones; otherwise it is ignored and counted in rejected_o (a sticky
// flag cleared by the next accepted start). done is sticky from the end of a
// transform until the next accepted start. status_o packs
// {rejected, done, busy, mode}. Flag set and encoding are this design's
// choice; the paper only names the register. Asynchronous active-low reset.
module status_register
  import uacc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start_i,
  input  mode_e      mode_i,
  input  logic       finish_i,     // controller: last stage written
  output logic       go_o,         // accepted start, one cycle
  output mode_e      mode_o,
  output logic       busy_o,
  output logic       done_o,
  output logic [4:0] status_o
);
  logic rejected;

  always_comb go_o = start_i && !busy_o && (mode_i != MODE_RSVD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_o   <= MODE_FFT;
      busy_o   <= 1'b0;
      done_o   <= 1'b0;
      rejected <= 1'b0;
    end else begin
      if (go_o) begin
        mode_o   <= mode_i;
        busy_o   <= 1'b1;
        done_o   <= 1'b0;
        rejected <= 1'b0;
      end else begin
        if (start_i) rejected <= 1'b1;
        if (finish_i) begin
          busy_o <= 1'b0;
          done_o <= 1'b1;
        end
      end
    end
  end

  assign status_o = {rejected, done_o, busy_o, mode_o};
endmodule
