// complex_fu: the FP32 "sum of two multipliers" functional unit of an SP,
// result = A*B + C*D, built in the FPGA from two DSP blocks.
//
// Port muxes in front of A, B, C and D turn it into each FP operation:
//   MUL       A=ra B=rb     C=0     D=0        ra*rb
//   ADD       A=ra B=1      C=1     D=rb       ra+rb
//   SUB       A=ra B=1      C=1     D=-rb      ra-rb (sign bit of D inverted)
//   MUL_REAL  A=ra B=tw_re  C=tw_im D=-rb      ra*tw_re - rb*tw_im
//   MUL_IMAG  A=ra B=tw_im  C=tw_re D=rb       ra*tw_im + rb*tw_re
// tw_re/tw_im come from the coefficient cache.  The multiply, add and
// subtract routings and the two complex formulas are the paper's; which
// operand goes to which port in the complex modes is this design's choice.
// Timing: inputs are registered into A..D at one edge, the two products at
// the next, the rounded sum at the third, so result follows the inputs by
// three edges, one result per cycle.  Each product and the sum are rounded
// to FP32 separately (see fp32_pkg).
module complex_fu
  import egpu_pkg::*;
  import fp32_pkg::*;
(
  input  logic        clk,
  input  fu_mode_e    mode,
  input  logic [31:0] ra,
  input  logic [31:0] rb,
  input  logic [31:0] tw_re,
  input  logic [31:0] tw_im,
  output logic [31:0] result
);

  logic [31:0] a_in, b_in, c_in, d_in;
  logic [31:0] a_q, b_q, c_q, d_q;
  logic [31:0] p1_q, p2_q;

  always_comb begin
    a_in = ra;
    b_in = rb;
    c_in = 32'd0;
    d_in = 32'd0;
    case (mode)
      FU_MUL: begin
        b_in = rb;
      end
      FU_ADD: begin
        b_in = FP_ONE;
        c_in = FP_ONE;
        d_in = rb;
      end
      FU_SUB: begin
        b_in = FP_ONE;
        c_in = FP_ONE;
        d_in = fp_neg(rb);
      end
      FU_MUL_REAL: begin
        b_in = tw_re;
        c_in = tw_im;
        d_in = fp_neg(rb);
      end
      FU_MUL_IMAG: begin
        b_in = tw_im;
        c_in = tw_re;
        d_in = rb;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    a_q    <= a_in;
    b_q    <= b_in;
    c_q    <= c_in;
    d_q    <= d_in;
    p1_q   <= fp_mul(a_q, b_q);
    p2_q   <= fp_mul(c_q, d_q);
    result <= fp_add(p1_q, p2_q);
  end

endmodule
