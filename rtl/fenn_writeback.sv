// fenn_writeback: FeNN writeback stage and the XIF result handshake.
//
// Holds the instruction that left execute in the previous cycle.  Its vector data
// is the ALU result registered at that edge or, for loads, the vector memory's read
// data, which arrives in this cycle because the memory has a 1-cycle latency.  The
// stage returns one XIF result per instruction (we=1 and the data for those that
// write a scalar register) and, in the cycle the core accepts it (result_ready),
// writes the vector register file or one of the two RNG state registers.  While the
// result is not accepted the stage, and behind it execute, stall.  The data it is
// about to write is offered to execute as a bypass (byp_*).
// Writing loaded data in writeback follows the published design; returning a
// result for every instruction is this implementation's reading of the XIF.
module fenn_writeback
  import fenn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // from execute
  input  logic       in_valid,
  input  wb_req_t    in_req,
  output logic       wb_ready,
  // vector memory read data
  input  vec_t       mem_rdata,
  // vector register file write port
  output logic       vrf_we,
  output reg_idx_t   vrf_wa,
  output vec_t       vrf_wd,
  // RNG state load
  output logic [1:0] rng_load_en,
  output vec_t       rng_load_data,
  // bypass to execute
  output logic       byp_valid,
  output reg_idx_t   byp_vd,
  output vec_t       byp_data,
  // XIF result
  output logic       result_valid,
  input  logic       result_ready,
  output x_result_t  result
);

  logic    v;
  wb_req_t q;
  logic    done;
  vec_t    data;

  assign wb_ready = !v || result_ready;
  assign done     = v && result_ready;
  assign data     = q.from_mem ? mem_rdata : q.vdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= 1'b0;
      q <= '0;
    end else if (wb_ready) begin
      v <= in_valid;
      if (in_valid) q <= in_req;
    end
  end

  assign vrf_we        = done && q.vwe;
  assign vrf_wa        = q.vd;
  assign vrf_wd        = data;
  assign rng_load_en   = done ? q.rng_load : 2'b00;
  assign rng_load_data = data;
  assign byp_valid     = v && q.vwe;
  assign byp_vd        = q.vd;
  assign byp_data      = data;

  assign result_valid  = v;
  assign result.id     = q.id;
  assign result.data   = q.xwe ? q.xdata : '0;
  assign result.rd     = q.rd;
  assign result.we     = q.xwe;

endmodule
