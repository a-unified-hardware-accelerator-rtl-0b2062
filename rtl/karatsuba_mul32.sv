// karatsuba_mul32: 32 x 32 -> 64-bit unsigned multiplier in Karatsuba form.
//
// The operands are split into 16-bit halves. Two 16 x 16 multipliers form
// hh = a[31:16]*b[31:16] and ll = a[15:0]*b[15:0]; two 16-bit adders form the
// 17-bit sums of the halves, and a 17 x 17 multiplier forms their product mid.
// The result is combined as (hh << 32) - ((hh + ll) << 16) + (mid << 16) + ll,
// the arrangement of shifters, subtractor and adders drawn in the paper's
// Karatsuba figure (bit fields [31:16], [15:0], [16:0], [33:0], << 32, << 16).
// Three small multipliers replace four 16 x 16 ones, which is how the paper
// reaches three DSP blocks per 32-bit multiplier.
//
// The two 16 x 16 partial products are also brought out on hh_o and ll_o: the
// unified butterfly uses them directly as the 12 x 12 ML-KEM products, as the
// paper's detailed architecture figure does ([31:16] x [31:16] -> mod_kyber_mul).
//
// Timing: registers after the first multiplier level (hh_o, ll_o valid one
// cycle after a_i/b_i) and after the middle multiplier; the final combination
// is combinational, so p_o is valid two cycles after a_i/b_i. This placement
// of pipeline registers is this design's choice, guided by the figure's
// pipeline-stage lines. No reset: the datapath carries no control state.
module karatsuba_mul32 (
  input  logic        clk,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] hh_o,   // a[31:16]*b[31:16], 1 cycle after inputs
  output logic [31:0] ll_o,   // a[15:0]*b[15:0],   1 cycle after inputs
  output logic [63:0] p_o     // a*b,               2 cycles after inputs
);
  // stage 1: high and low products, sums of halves
  logic [31:0] hh1, ll1;
  logic [16:0] sa1, sb1;
  always_ff @(posedge clk) begin
    hh1 <= a_i[31:16] * b_i[31:16];
    ll1 <= a_i[15:0]  * b_i[15:0];
    sa1 <= {1'b0, a_i[31:16]} + {1'b0, a_i[15:0]};
    sb1 <= {1'b0, b_i[31:16]} + {1'b0, b_i[15:0]};
  end
  assign hh_o = hh1;
  assign ll_o = ll1;

  // stage 2: middle product and hh + ll
  logic [33:0] mid2;
  logic [32:0] sum2;
  logic [31:0] hh2, ll2;
  always_ff @(posedge clk) begin
    mid2 <= sa1 * sb1;
    sum2 <= {1'b0, hh1} + {1'b0, ll1};
    hh2  <= hh1;
    ll2  <= ll1;
  end

  // combination: ((hh<<32) - (sum<<16)) + ((mid<<16) + ll)
  logic [63:0] upper, lower;
  always_comb begin
    upper = ({hh2, 32'd0}) - ({15'd0, sum2, 16'd0});
    lower = ({14'd0, mid2, 16'd0}) + {32'd0, ll2};
    p_o   = upper + lower;
  end
endmodule
