// fenn_loadstore: FeNN vector load/store address unit.
//
// In the execute cycle it adds the sign-extended 12-bit immediate to the scalar
// base register and drives the vector memory port: loads (VLOAD and the RNG-state
// loads VLOADR0/1) issue a read whose data returns in the next, writeback, cycle;
// stores write the vector from register port B at once.  Addresses are byte
// addresses and the low 6 bits are ignored, so a vector occupies 64 aligned bytes
// (this implementation's choice).  fire qualifies the access: it is high only in the
// cycle the instruction leaves execute.  Purely combinational.
module fenn_loadstore
  import fenn_pkg::*;
#(
  parameter int unsigned AW = fenn_pkg::VMEM_AW
) (
  input  logic          fire,
  input  unit_e         unit,
  input  xword_t        base,
  input  logic [11:0]   imm,
  input  vec_t          store_data,
  output logic          mem_en,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output vec_t          mem_wdata
);

  xword_t ea;

  always_comb begin
    ea        = base + {{20{imm[11]}}, imm};
    mem_addr  = ea[6 +: AW];
    mem_en    = fire && ((unit == U_LOAD) || (unit == U_STORE));
    mem_we    = fire && (unit == U_STORE);
    mem_wdata = store_data;
  end

endmodule
