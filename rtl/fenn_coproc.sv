// fenn_coproc: the FeNN vector co-processor.
//
// A three-stage pipeline that runs beside the scalar RISC-V core's own pipeline and
// is tied to it by the core's eXtension interface (XIF):
//   decode    - takes instructions from the core's decode stage (XIF issue) and
//               holds each until the core commits it (XIF commit);
//   execute   - one cycle for every instruction: vector ALU, RNG step, address
//               calculation and vector memory access, with a bypass from writeback;
//   writeback - writes vector registers, RNG state or loaded data and returns a
//               result to the core's writeback stage (XIF result).
// Around it: the 32 x 512-bit vector register file (2 read, 1 write port) and the
// two RNG state registers.  The vector memory is outside, on the mem_* port:
// address and write data in the execute cycle, read data back one cycle later.
// With commits arriving one cycle after issue and results accepted at once, the
// pipeline completes one instruction per cycle; an instruction issued in cycle t
// returns its result in cycle t+3.
module fenn_coproc
  import fenn_pkg::*;
#(
  parameter int unsigned AW = fenn_pkg::VMEM_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  // XIF issue
  input  logic          x_issue_valid,
  output logic          x_issue_ready,
  input  x_issue_req_t  x_issue_req,
  output x_issue_resp_t x_issue_resp,
  // XIF commit
  input  logic          x_commit_valid,
  input  x_commit_t     x_commit,
  // XIF result
  output logic          x_result_valid,
  input  logic          x_result_ready,
  output x_result_t     x_result,
  // vector memory
  output logic          mem_en,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output vec_t          mem_wdata,
  input  vec_t          mem_rdata
);

  logic     d_valid, d_ready;
  ex_req_t  d_req;
  reg_idx_t ra_addr, rb_addr;
  vec_t     ra_data, rb_data;
  logic     byp_valid;
  reg_idx_t byp_vd;
  vec_t     byp_data;
  vec_t     rnd;
  logic     rng_step;
  logic [1:0] rng_load_en;
  vec_t     rng_load_data;
  logic     wb_valid, wb_ready;
  wb_req_t  wb_req;
  logic     vrf_we;
  reg_idx_t vrf_wa;
  vec_t     vrf_wd;
  logic     bypass_a, bypass_b;

  fenn_decode_stage u_decode (
    .clk          (clk),
    .rst_n        (rst_n),
    .issue_valid  (x_issue_valid),
    .issue_ready  (x_issue_ready),
    .issue_req    (x_issue_req),
    .issue_resp   (x_issue_resp),
    .commit_valid (x_commit_valid),
    .commit       (x_commit),
    .d_valid      (d_valid),
    .d_req        (d_req),
    .d_ready      (d_ready)
  );

  fenn_execute #(.AW(AW)) u_execute (
    .clk       (clk),
    .rst_n     (rst_n),
    .d_valid   (d_valid),
    .d_req     (d_req),
    .d_ready   (d_ready),
    .ra_addr   (ra_addr),
    .ra_data   (ra_data),
    .rb_addr   (rb_addr),
    .rb_data   (rb_data),
    .byp_valid (byp_valid),
    .byp_vd    (byp_vd),
    .byp_data  (byp_data),
    .rnd       (rnd),
    .rng_step  (rng_step),
    .mem_en    (mem_en),
    .mem_we    (mem_we),
    .mem_addr  (mem_addr),
    .mem_wdata (mem_wdata),
    .wb_valid  (wb_valid),
    .wb_req    (wb_req),
    .wb_ready  (wb_ready),
    .bypass_a  (bypass_a),
    .bypass_b  (bypass_b)
  );

  fenn_writeback u_writeback (
    .clk           (clk),
    .rst_n         (rst_n),
    .in_valid      (wb_valid),
    .in_req        (wb_req),
    .wb_ready      (wb_ready),
    .mem_rdata     (mem_rdata),
    .vrf_we        (vrf_we),
    .vrf_wa        (vrf_wa),
    .vrf_wd        (vrf_wd),
    .rng_load_en   (rng_load_en),
    .rng_load_data (rng_load_data),
    .byp_valid     (byp_valid),
    .byp_vd        (byp_vd),
    .byp_data      (byp_data),
    .result_valid  (x_result_valid),
    .result_ready  (x_result_ready),
    .result        (x_result)
  );

  fenn_vrf #(.NREGS(NVREGS), .VW(VW)) u_vrf (
    .clk     (clk),
    .ra_addr (ra_addr),
    .ra_data (ra_data),
    .rb_addr (rb_addr),
    .rb_data (rb_data),
    .we      (vrf_we),
    .wa      (vrf_wa),
    .wd      (vrf_wd)
  );

  fenn_rng #(.NLANES(LANES)) u_rng (
    .clk       (clk),
    .rst_n     (rst_n),
    .load_en   (rng_load_en),
    .load_data (rng_load_data),
    .step      (rng_step),
    .rnd       (rnd)
  );

endmodule
