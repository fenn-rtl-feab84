// fenn_execute: FeNN execute stage.
//
// Holds one committed instruction (the execute pipeline register, loaded from the
// decode stage) and completes it in one cycle:
//   * reads its vector operands from the register file's two read ports, replacing
//     either with the writeback stage's data when writeback is about to write the
//     same register (the writeback-to-execute bypass of read-after-write hazards);
//   * runs the 32-lane vector ALU, with operand b taken from the register file, a
//     broadcast of scalar rs1 (VFILL) or the RNG output (VRNG, stochastic VMUL);
//   * steps the RNG for instructions that consume random numbers;
//   * computes the vector memory address and issues the access (fenn_loadstore);
//   * forms the scalar result: a compare mask, or one lane for VEXTRACT.
// Everything leaves for writeback at the clock edge in which writeback can take it
// (wb_ready); otherwise the instruction waits here and issues nothing, so memory
// and RNG side effects happen exactly once.  bypass_a/bypass_b flag the cycles in
// which a bypass was used.
// Single-cycle execution and the bypass follow the published design; how VSEL and
// VEXTRACT use the ports is this implementation's choice.
module fenn_execute
  import fenn_pkg::*;
#(
  parameter int unsigned AW = fenn_pkg::VMEM_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  // from decode
  input  logic          d_valid,
  input  ex_req_t       d_req,
  output logic          d_ready,
  // vector register file read ports
  output reg_idx_t      ra_addr,
  input  vec_t          ra_data,
  output reg_idx_t      rb_addr,
  input  vec_t          rb_data,
  // bypass from writeback
  input  logic          byp_valid,
  input  reg_idx_t      byp_vd,
  input  vec_t          byp_data,
  // RNG
  input  vec_t          rnd,
  output logic          rng_step,
  // vector memory
  output logic          mem_en,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output vec_t          mem_wdata,
  // to writeback
  output logic          wb_valid,
  output wb_req_t       wb_req,
  input  logic          wb_ready,
  // observation
  output logic          bypass_a,
  output logic          bypass_b
);

  logic    ex_valid;
  ex_req_t ex_q;
  uop_t    u;
  logic    fire;
  vec_t    opa, opb, vb_alu, vy;
  logic [LANES-1:0] mask;
  logic [15:0] elem;

  assign u       = ex_q.uop;
  assign d_ready = !ex_valid || wb_ready;
  assign fire    = ex_valid && wb_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_valid <= 1'b0;
      ex_q     <= '0;
    end else if (d_ready) begin
      ex_valid <= d_valid;
      if (d_valid) ex_q <= d_req;
    end
  end

  assign ra_addr  = u.ra;
  assign rb_addr  = u.rb;
  assign bypass_a = ex_valid && byp_valid && (byp_vd == u.ra);
  assign bypass_b = ex_valid && byp_valid && (byp_vd == u.rb);
  assign opa      = bypass_a ? byp_data : ra_data;
  assign opb      = bypass_b ? byp_data : rb_data;

  always_comb begin
    unique case (u.bsrc)
      BSRC_FILL: vb_alu = {LANES{ex_q.rs1v[15:0]}};
      BSRC_RNG:  vb_alu = rnd;
      default:   vb_alu = opb;
    endcase
  end

  fenn_valu #(.NLANES(LANES)) u_valu (
    .op       (u.lop),
    .va       (opa),
    .vb       (vb_alu),
    .vrnd     (rnd),
    .mask_in  (ex_q.rs1v),
    .vy       (vy),
    .mask_out (mask)
  );

  fenn_loadstore #(.AW(AW)) u_ls (
    .fire       (fire),
    .unit       (u.unit),
    .base       (ex_q.rs1v),
    .imm        (u.imm),
    .store_data (opb),
    .mem_en     (mem_en),
    .mem_we     (mem_we),
    .mem_addr   (mem_addr),
    .mem_wdata  (mem_wdata)
  );

  assign rng_step = fire && u.rng_step;
  assign elem     = opa[16*ex_q.rs2v[4:0] +: 16];

  always_comb begin
    wb_valid        = fire;
    wb_req.id       = ex_q.id;
    wb_req.xwe      = u.xwe;
    wb_req.rd       = u.rd;
    wb_req.xdata    = (u.unit == U_CMP) ? xword_t'(mask) : {{16{elem[15]}}, elem};
    wb_req.vwe      = u.vwe;
    wb_req.vd       = u.vd;
    wb_req.from_mem = (u.unit == U_LOAD);
    wb_req.rng_load = u.rng_load;
    wb_req.vdata    = vy;
  end

endmodule
