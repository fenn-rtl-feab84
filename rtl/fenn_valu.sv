// fenn_valu: the FeNN vector ALU, 32 fenn_lane instances working in lock step.
//
// Lane i takes bits [16i+15:16i] of each 512-bit operand and of the random vector,
// and bit i of the 32-bit select mask.  The 32 compare outputs are gathered into a
// 32-bit mask, bit i from lane i, which is returned to a scalar register; 32 lanes
// is what lets a whole vector's mask fit one RISC-V register (published design).
// Bit ordering of lanes is this implementation's choice.
// Purely combinational.
module fenn_valu
  import fenn_pkg::*;
#(
  parameter int unsigned NLANES = fenn_pkg::LANES
) (
  input  lane_op_t              op,
  input  logic [NLANES*16-1:0]  va,
  input  logic [NLANES*16-1:0]  vb,
  input  logic [NLANES*16-1:0]  vrnd,
  input  logic [NLANES-1:0]     mask_in,
  output logic [NLANES*16-1:0]  vy,
  output logic [NLANES-1:0]     mask_out
);

  for (genvar i = 0; i < NLANES; i++) begin : g_lane
    fenn_lane u_lane (
      .op  (op),
      .a   (va[16*i +: 16]),
      .b   (vb[16*i +: 16]),
      .rnd (vrnd[16*i +: 16]),
      .sel (mask_in[i]),
      .y   (vy[16*i +: 16]),
      .cmp (mask_out[i])
    );
  end

endmodule
