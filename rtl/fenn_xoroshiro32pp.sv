// fenn_xoroshiro32pp: one step of a Xoroshiro32++ generator (combinational).
//
// State is two 16-bit words s0, s1.  Output and next state:
//   out = rotl(s0 + s1, D) + s0
//   t   = s1 ^ s0
//   s0' = rotl(s0, A) ^ t ^ (t << B)
//   s1' = rotl(t, C)
// Only adders, XORs, fixed rotations and a shift, so it costs a few LUTs per lane.
// The generator is the one the published design names; the constants
// [A,B,C,D] = [13,5,10,9] are those of the Propeller 2 microcontroller's
// implementation and are this implementation's choice.
module fenn_xoroshiro32pp #(
  parameter int unsigned ROT_A = 13,
  parameter int unsigned SHL_B = 5,
  parameter int unsigned ROT_C = 10,
  parameter int unsigned ROT_D = 9
) (
  input  logic [15:0] s0,
  input  logic [15:0] s1,
  output logic [15:0] out,
  output logic [15:0] s0_next,
  output logic [15:0] s1_next
);

  function automatic logic [15:0] rotl(input logic [15:0] x, input int unsigned k);
    return (x << k) | (x >> (16 - k));
  endfunction

  logic [15:0] sum;
  logic [15:0] t;

  always_comb begin
    sum     = s0 + s1;
    out     = rotl(sum, ROT_D) + s0;
    t       = s1 ^ s0;
    s0_next = rotl(s0, ROT_A) ^ t ^ (t << SHL_B);
    s1_next = rotl(t, ROT_C);
  end

endmodule
