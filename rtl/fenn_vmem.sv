// fenn_vmem: FeNN vector data memory ("URAM").
//
// Eight parallel 64-bit banks, each a chain of UltraRAMs, side by side so that a
// whole 512-bit vector is read or written in one access (published design).  Bank
// k holds bits [64k+63:64k] of every vector, i.e. lanes 4k..4k+3.
// Timing: en/we/addr/wdata are sampled at the rising edge; a read's data is on
// rdata in the next cycle (1-cycle latency, which is why FeNN's loads compute the
// address in execute and write the register in writeback).  rdata holds its value
// between reads.  DEPTH (vectors) is this implementation's assumption: 32768
// vectors = 2 MiB, all 64 UltraRAMs of the XCK26 device chained 8 deep per set.
module fenn_vmem #(
  parameter int unsigned BANKS = 8,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic                 we,
  input  logic [AW-1:0]        addr,
  input  logic [BANKS*64-1:0]  wdata,
  output logic [BANKS*64-1:0]  rdata
);

  for (genvar k = 0; k < BANKS; k++) begin : g_bank
    fenn_uram_bank #(.DW(64), .DEPTH(DEPTH)) u_bank (
      .clk   (clk),
      .en    (en),
      .we    (we),
      .addr  (addr),
      .wdata (wdata[64*k +: 64]),
      .rdata (rdata[64*k +: 64])
    );
  end

endmodule
