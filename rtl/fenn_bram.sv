// fenn_bram: 32-bit true dual-port block RAM for the scalar core's instructions
// or data.
//
// Port A faces the scalar RISC-V core, port B the host processor's AXI BRAM
// controller, through which the host copies programs and initial state in and
// reads results out.  Both ports are synchronous: an access with en=1 writes the
// bytes selected by we[3:0] and/or reads at the rising edge; read data appears one
// cycle later (read-first: a read and write of the same port and word return the
// old word).  Writing the same word from both ports in one cycle is not allowed
// (the result is undefined, as in a real BRAM).  The byte enables and the depth
// are this implementation's choices.
module fenn_bram #(
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic [3:0]    a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [31:0]   a_wdata,
  output logic [31:0]   a_rdata,
  input  logic          b_en,
  input  logic [3:0]    b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  output logic [31:0]   b_rdata
);

  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      for (int i = 0; i < 4; i++)
        if (a_we[i]) mem[a_addr][8*i +: 8] <= a_wdata[8*i +: 8];
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      for (int i = 0; i < 4; i++)
        if (b_we[i]) mem[b_addr][8*i +: 8] <= b_wdata[8*i +: 8];
    end
  end

endmodule
