// fenn_vrf: FeNN vector register file, 32 registers of 512 bits.
//
// Three ports as in the published design: two combinational (asynchronous) read
// ports, as distributed LUT RAM provides, and one write port written at the
// rising clock edge.  A read in the same cycle as a write to the same register
// returns the old contents; the execute stage's bypass covers that case.
// Contents are not reset (distributed RAM has no reset); software initialises
// the registers it reads.
module fenn_vrf #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned VW    = 512,
  localparam int unsigned AW   = $clog2(NREGS)
) (
  input  logic          clk,
  input  logic [AW-1:0] ra_addr,
  output logic [VW-1:0] ra_data,
  input  logic [AW-1:0] rb_addr,
  output logic [VW-1:0] rb_data,
  input  logic          we,
  input  logic [AW-1:0] wa,
  input  logic [VW-1:0] wd
);

  logic [VW-1:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (we) regs[wa] <= wd;
  end

  assign ra_data = regs[ra_addr];
  assign rb_data = regs[rb_addr];

endmodule
