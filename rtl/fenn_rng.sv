// fenn_rng: per-lane Xoroshiro32++ random number generators of FeNN.
//
// A standard register-register instruction could not read 32 and write 48 bits of
// generator state per lane, so the state lives in two dedicated 512-bit registers
// outside the vector register file (published design): register 0 holds s0 of
// every lane and register 1 holds s1, lane i at bits [16i+15:16i] (this
// implementation's layout).  Both registers are loaded from vector memory by the
// VLOADR0 / VLOADR1 variants of the vector load.
//
// Interface and timing: rnd is the output of every lane for the current state,
// combinational.  step=1 advances every lane at the clock edge.  load_en[k]=1 writes
// load_data into state register k at the edge (a writeback-stage load); a load and a
// step in the same cycle behave as load-then-step, i.e. the loaded value is
// forwarded to the generator, mirroring the vector register bypass.
// Reset clears the state.
module fenn_rng
  import fenn_pkg::*;
#(
  parameter int unsigned NLANES = fenn_pkg::LANES,
  parameter int unsigned ROT_A  = 13,
  parameter int unsigned SHL_B  = 5,
  parameter int unsigned ROT_C  = 10,
  parameter int unsigned ROT_D  = 9
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [1:0]            load_en,
  input  logic [NLANES*16-1:0]  load_data,
  input  logic                  step,
  output logic [NLANES*16-1:0]  rnd
);

  logic [NLANES*16-1:0] s0_q, s1_q;
  logic [NLANES*16-1:0] s0_eff, s1_eff;
  logic [NLANES*16-1:0] s0_nxt, s1_nxt;

  assign s0_eff = load_en[0] ? load_data : s0_q;
  assign s1_eff = load_en[1] ? load_data : s1_q;

  for (genvar i = 0; i < NLANES; i++) begin : g_lane
    fenn_xoroshiro32pp #(
      .ROT_A(ROT_A), .SHL_B(SHL_B), .ROT_C(ROT_C), .ROT_D(ROT_D)
    ) u_gen (
      .s0      (s0_eff[16*i +: 16]),
      .s1      (s1_eff[16*i +: 16]),
      .out     (rnd[16*i +: 16]),
      .s0_next (s0_nxt[16*i +: 16]),
      .s1_next (s1_nxt[16*i +: 16])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0_q <= '0;
      s1_q <= '0;
    end else if (step) begin
      s0_q <= s0_nxt;
      s1_q <= s1_nxt;
    end else begin
      s0_q <= s0_eff;
      s1_q <= s1_eff;
    end
  end

endmodule
