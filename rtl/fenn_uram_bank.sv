// fenn_uram_bank: one chained set of UltraRAM blocks, as one deep 64-bit memory.
//
// Single port, synchronous: an access with en=1 reads (we=0) or writes (we=1) at
// the clock edge, and read data appears on rdata one cycle later and holds until
// the next read.  An UltraRAM is 72 bits wide; FeNN uses 64 of them per set so
// that eight sets make one 512-bit vector, and the spare 8 bits are not modelled.
// Written as an array so that synthesis can map it onto cascaded UltraRAMs.
// The 72-bit width, the chaining and the one-cycle latency are those of the
// published design; the default depth and the output holding its value between
// reads are this design's choices.
module fenn_uram_bank #(
  parameter int unsigned DW    = 64,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
