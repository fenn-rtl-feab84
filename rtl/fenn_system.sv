// fenn_system: one FeNN core as placed on the FPGA, without the scalar core.
//
// Holds the FeNN vector co-processor, its vector data memory (eight parallel
// UltraRAM chains, one 512-bit vector per cycle) and the scalar core's instruction
// and data block RAMs.  The scalar RISC-V core (a CV32E40X, a third-party design)
// connects to the XIF ports and to port A of the two BRAMs; the host processor's
// AXI BRAM controllers connect to port B of the BRAMs, through which the host loads
// a program and initial state, and its reset line is rst_n.  The host then releases
// reset and polls until the program signals that it has finished.
// Timing is that of the parts: BRAM and vector memory reads return one cycle after
// the request; the co-processor's XIF behaviour is described in fenn_coproc.
// The set of parts and their connections follow the published block diagram and
// system description.  This design's own choices are the memory depths (32768
// vectors, the whole UltraRAM of the target device; 4096 words per BRAM), byte
// write enables, a read-only fetch port, and having no direct path between the
// BRAMs and the vector memory: vector data enters and leaves through FeNN
// instructions.
module fenn_system
  import fenn_pkg::*;
#(
  parameter int unsigned VMEM_DEPTH = 32768,
  parameter int unsigned IM_DEPTH   = 4096,
  parameter int unsigned DM_DEPTH   = 4096,
  localparam int unsigned VAW = $clog2(VMEM_DEPTH),
  localparam int unsigned IAW = $clog2(IM_DEPTH),
  localparam int unsigned DAW = $clog2(DM_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // XIF to the scalar core
  input  logic           x_issue_valid,
  output logic           x_issue_ready,
  input  x_issue_req_t   x_issue_req,
  output x_issue_resp_t  x_issue_resp,
  input  logic           x_commit_valid,
  input  x_commit_t      x_commit,
  output logic           x_result_valid,
  input  logic           x_result_ready,
  output x_result_t      x_result,
  // instruction BRAM, scalar core fetch port (read only)
  input  logic           im_a_en,
  input  logic [IAW-1:0] im_a_addr,
  output logic [31:0]    im_a_rdata,
  // instruction BRAM, host port
  input  logic           im_b_en,
  input  logic [3:0]     im_b_we,
  input  logic [IAW-1:0] im_b_addr,
  input  logic [31:0]    im_b_wdata,
  output logic [31:0]    im_b_rdata,
  // data BRAM, scalar core load/store port
  input  logic           dm_a_en,
  input  logic [3:0]     dm_a_we,
  input  logic [DAW-1:0] dm_a_addr,
  input  logic [31:0]    dm_a_wdata,
  output logic [31:0]    dm_a_rdata,
  // data BRAM, host port
  input  logic           dm_b_en,
  input  logic [3:0]     dm_b_we,
  input  logic [DAW-1:0] dm_b_addr,
  input  logic [31:0]    dm_b_wdata,
  output logic [31:0]    dm_b_rdata
);

  logic           vm_en, vm_we;
  logic [VAW-1:0] vm_addr;
  vec_t           vm_wdata, vm_rdata;

  fenn_coproc #(.AW(VAW)) u_fenn (
    .clk            (clk),
    .rst_n          (rst_n),
    .x_issue_valid  (x_issue_valid),
    .x_issue_ready  (x_issue_ready),
    .x_issue_req    (x_issue_req),
    .x_issue_resp   (x_issue_resp),
    .x_commit_valid (x_commit_valid),
    .x_commit       (x_commit),
    .x_result_valid (x_result_valid),
    .x_result_ready (x_result_ready),
    .x_result       (x_result),
    .mem_en         (vm_en),
    .mem_we         (vm_we),
    .mem_addr       (vm_addr),
    .mem_wdata      (vm_wdata),
    .mem_rdata      (vm_rdata)
  );

  fenn_vmem #(.BANKS(VW / 64), .DEPTH(VMEM_DEPTH)) u_vmem (
    .clk   (clk),
    .en    (vm_en),
    .we    (vm_we),
    .addr  (vm_addr),
    .wdata (vm_wdata),
    .rdata (vm_rdata)
  );

  fenn_bram #(.DEPTH(IM_DEPTH)) u_imem (
    .clk     (clk),
    .a_en    (im_a_en),
    .a_we    (4'b0000),
    .a_addr  (im_a_addr),
    .a_wdata (32'h0),
    .a_rdata (im_a_rdata),
    .b_en    (im_b_en),
    .b_we    (im_b_we),
    .b_addr  (im_b_addr),
    .b_wdata (im_b_wdata),
    .b_rdata (im_b_rdata)
  );

  fenn_bram #(.DEPTH(DM_DEPTH)) u_dmem (
    .clk     (clk),
    .a_en    (dm_a_en),
    .a_we    (dm_a_we),
    .a_addr  (dm_a_addr),
    .a_wdata (dm_a_wdata),
    .a_rdata (dm_a_rdata),
    .b_en    (dm_b_en),
    .b_we    (dm_b_we),
    .b_addr  (dm_b_addr),
    .b_wdata (dm_b_wdata),
    .b_rdata (dm_b_rdata)
  );

endmodule
