// fenn_lane: one 16-bit SIMD lane of the FeNN vector ALU.
//
// Every vector lane holds one of these, and all 32 execute the same operation on
// their own element in the single execute cycle.  Operations:
//   add / sub  : two's complement, either wrapping or saturating to [-32768, 32767];
//                saturation is what keeps neuron state from wrapping when inputs
//                leave the calibrated fixed-point range.
//   mul        : fixed-point multiply y = ((a*b) + R) >>> N, the 32-bit product taken
//                from a DSP-style multiplier, then an N-bit (0..15) arithmetic barrel
//                shift, result truncated to 16 bits.  R selects the rounding mode:
//                0 rounds toward minus infinity ("round-to-zero" truncation of the
//                shift), 1<<(N-1) rounds to nearest, and the low N bits of the lane's
//                random number give stochastic rounding.
//   sel        : y = sel ? b : a
//   pass       : y = b (used for fill and random-vector instructions)
//   cmp        : signed compare a ? b, presented on cmp every cycle, independent of fn.
// The multiply-add-shift rounding scheme follows the published design; the choice
// of compare operations, select polarity and truncation of products is this
// implementation's own.
// Purely combinational: inputs to outputs in the same cycle.
module fenn_lane
  import fenn_pkg::*;
(
  input  lane_op_t    op,
  input  logic [15:0] a,
  input  logic [15:0] b,
  input  logic [15:0] rnd,
  input  logic        sel,
  output logic [15:0] y,
  output logic        cmp
);

  logic signed [16:0] addsub;
  logic signed [31:0] prod;
  logic signed [31:0] rterm;
  logic signed [31:0] acc;
  logic signed [31:0] shifted;
  logic        [15:0] lowmask;

  always_comb begin
    if (op.fn == LF_SUB) addsub = 17'($signed(a)) - 17'($signed(b));
    else                 addsub = 17'($signed(a)) + 17'($signed(b));

    lowmask = 16'((32'd1 << op.shift) - 32'd1);
    unique case (op.rnd)
      RND_NEAREST: rterm = (op.shift == 4'd0) ? 32'sd0 : (32'sd1 <<< (op.shift - 4'd1));
      RND_STOCH:   rterm = 32'($unsigned(rnd & lowmask));
      default:     rterm = 32'sd0;
    endcase
    prod    = $signed(a) * $signed(b);
    acc     = prod + rterm;
    shifted = acc >>> op.shift;

    unique case (op.fn)
      LF_ADD, LF_SUB: begin
        if (op.sat && (addsub > 17'sd32767))       y = 16'h7fff;
        else if (op.sat && (addsub < -17'sd32768)) y = 16'h8000;
        else                                       y = addsub[15:0];
      end
      LF_MUL:  y = shifted[15:0];
      LF_SEL:  y = sel ? b : a;
      default: y = b;
    endcase

    unique case (op.cmp)
      CMP_EQ:  cmp = (a == b);
      CMP_NE:  cmp = (a != b);
      CMP_LT:  cmp = ($signed(a) <  $signed(b));
      default: cmp = ($signed(a) >= $signed(b));
    endcase
  end

endmodule
