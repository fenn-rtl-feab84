// fenn_pkg: types and constants shared by the FeNN vector co-processor.
//
// FeNN works on vectors of 32 lanes of 16-bit fixed-point values (512 bits), keeps
// them in a 32-entry vector register file, and is driven instruction by instruction
// from a 32-bit RISC-V scalar core through that core's eXtension interface (XIF).
// The lane count, element width, register count and the use of the RISC-V opcode
// quadrant whose two low bits are 2'b10 follow the published design.  The encoding
// inside that quadrant, the XIF subset and the field widths below are this
// implementation's own choices.
//
// Instruction encoding (bits[1:0] = 2'b10, RISC-V register field positions):
//   [31:25] funct7  [24:20] rs2  [19:15] rs1  [14:12] funct3  [11:7] rd  [6:2] group
//   group 0 VALU : funct3 0 VADD vd=vs1+vs2, 1 VSUB vd=vs1-vs2, 2 VMUL vd=(vs1*vs2+R)>>>N
//                  VADD/VSUB: funct7[0]=1 saturates.  VMUL: funct7[3:0]=N, funct7[5:4]=rounding
//                  (0 to zero, 1 to nearest, 2 stochastic).
//   group 1 VTST : x[rd] = mask, bit i = (vs1[i] op vs2[i]); funct3 0 EQ, 1 NE, 2 LT, 3 GE (signed)
//   group 2 VSEL : vd[i] = x[rs1][i] ? vs2[i] : vd[i]
//   group 3 VMEM : funct3 0 VLOAD vd, 1 VLOADR0, 2 VLOADR1 from M[x[rs1]+imm_i];
//                  funct3 4 VSTORE vs2 to M[x[rs1]+imm_s]  (byte address, 64-byte aligned)
//   group 4 VMOV : funct3 0 VFILL vd[i] = x[rs1][15:0]; funct3 1 VEXTRACT x[rd] = sext(vs1[x[rs2][4:0]])
//   group 5 VRNG : vd[i] = next random number of lane i
package fenn_pkg;

  localparam int unsigned LANES      = 32;
  localparam int unsigned EW         = 16;
  localparam int unsigned VW         = LANES * EW;
  localparam int unsigned NVREGS     = 32;
  localparam int unsigned XLEN       = 32;
  localparam int unsigned X_ID_WIDTH = 4;
  localparam int unsigned VMEM_AW    = 15;   // 32768 vectors of 512 bits

  typedef logic [VW-1:0]         vec_t;
  typedef logic [EW-1:0]         elem_t;
  typedef logic [XLEN-1:0]       xword_t;
  typedef logic [X_ID_WIDTH-1:0] xid_t;
  typedef logic [4:0]            reg_idx_t;

  // Major opcode groups, instruction bits [6:2]
  localparam logic [4:0] OPG_VALU = 5'd0;
  localparam logic [4:0] OPG_VTST = 5'd1;
  localparam logic [4:0] OPG_VSEL = 5'd2;
  localparam logic [4:0] OPG_VMEM = 5'd3;
  localparam logic [4:0] OPG_VMOV = 5'd4;
  localparam logic [4:0] OPG_VRNG = 5'd5;

  typedef enum logic [2:0] {
    LF_ADD  = 3'd0,
    LF_SUB  = 3'd1,
    LF_MUL  = 3'd2,
    LF_SEL  = 3'd3,
    LF_PASS = 3'd4    // y = b (fill and random vectors are presented on b)
  } lane_fn_e;

  typedef enum logic [1:0] {
    RND_ZERO    = 2'd0,
    RND_NEAREST = 2'd1,
    RND_STOCH   = 2'd2
  } round_e;

  typedef enum logic [1:0] {
    CMP_EQ = 2'd0,
    CMP_NE = 2'd1,
    CMP_LT = 2'd2,
    CMP_GE = 2'd3
  } cmp_e;

  typedef struct packed {
    lane_fn_e   fn;
    logic       sat;
    logic [3:0] shift;
    round_e     rnd;
    cmp_e       cmp;
  } lane_op_t;

  // Which unit produces the instruction's result
  typedef enum logic [2:0] {
    U_VALU    = 3'd0,   // vector ALU result to vd (add, sub, mul, sel, fill, rng)
    U_CMP     = 3'd1,   // mask to x[rd]
    U_LOAD    = 3'd2,   // memory to vd or RNG state
    U_STORE   = 3'd3,   // vs2 to memory
    U_EXTRACT = 3'd4    // one lane to x[rd]
  } unit_e;

  typedef enum logic [1:0] {
    BSRC_VREG = 2'd0,   // ALU operand b from read port B
    BSRC_FILL = 2'd1,   // broadcast of x[rs1][15:0]
    BSRC_RNG  = 2'd2    // random vector
  } bsrc_e;

  typedef struct packed {
    unit_e      unit;
    lane_op_t   lop;
    bsrc_e      bsrc;
    logic       vwe;        // writes vector register vd
    logic       xwe;        // returns a scalar result to x[rd]
    reg_idx_t   vd;
    reg_idx_t   ra;         // read port A address
    reg_idx_t   rb;         // read port B address
    reg_idx_t   rd;         // scalar destination
    logic [1:0] rng_load;   // VLOADR0 / VLOADR1
    logic       rng_step;   // consumes one random number per lane
    logic [11:0] imm;
    logic [1:0] need_rs;    // scalar operands rs1 / rs2 are used
  } uop_t;

  // Instruction as held between decode and execute
  typedef struct packed {
    uop_t   uop;
    xword_t rs1v;
    xword_t rs2v;
    xid_t   id;
  } ex_req_t;

  // Instruction as held between execute and writeback
  typedef struct packed {
    xid_t       id;
    logic       xwe;
    reg_idx_t   rd;
    xword_t     xdata;
    logic       vwe;
    reg_idx_t   vd;
    logic       from_mem;
    logic [1:0] rng_load;
    vec_t       vdata;
  } wb_req_t;

  // Subset of the CV32E40X eXtension interface
  typedef struct packed {
    logic [31:0]         instr;
    xid_t                id;
    logic [1:0][XLEN-1:0] rs;
    logic [1:0]          rs_valid;
  } x_issue_req_t;

  typedef struct packed {
    logic accept;
    logic writeback;
  } x_issue_resp_t;

  typedef struct packed {
    xid_t id;
    logic commit_kill;
  } x_commit_t;

  typedef struct packed {
    xid_t     id;
    xword_t   data;
    reg_idx_t rd;
    logic     we;
  } x_result_t;

  // Decoder: maps a 32-bit word to a micro-operation; valid is 0 for anything that
  // is not a defined FeNN instruction.
  function automatic logic decode(input logic [31:0] instr, output uop_t u);
    logic [4:0] grp;
    logic [2:0] f3;
    logic [5:0] f7;
    logic       ok;
    grp = instr[6:2];
    f3  = instr[14:12];
    f7  = instr[30:25];
    u = '0;
    u.vd  = instr[11:7];
    u.rd  = instr[11:7];
    u.ra  = instr[19:15];
    u.rb  = instr[24:20];
    u.imm = instr[31:20];
    u.lop.fn = LF_ADD;
    ok = 1'b0;
    if (instr[1:0] == 2'b10) begin
      unique case (grp)
        OPG_VALU: begin
          u.unit = U_VALU;
          u.vwe  = 1'b1;
          unique case (f3)
            3'd0: begin u.lop.fn = LF_ADD; u.lop.sat = f7[0]; ok = 1'b1; end
            3'd1: begin u.lop.fn = LF_SUB; u.lop.sat = f7[0]; ok = 1'b1; end
            3'd2: begin
              u.lop.fn    = LF_MUL;
              u.lop.shift = f7[3:0];
              u.lop.rnd   = round_e'(f7[5:4]);
              u.rng_step  = (f7[5:4] == RND_STOCH);
              ok = (f7[5:4] != 2'd3);
            end
            default: ok = 1'b0;
          endcase
        end
        OPG_VTST: begin
          u.unit    = U_CMP;
          u.xwe     = 1'b1;
          u.lop.cmp = cmp_e'(f3[1:0]);
          ok = (f3[2] == 1'b0);
        end
        OPG_VSEL: begin
          u.unit    = U_VALU;
          u.vwe     = 1'b1;
          u.lop.fn  = LF_SEL;
          u.ra      = instr[11:7];   // vd is kept where the mask is 0
          u.need_rs = 2'b01;
          ok = (f3 == 3'd0);
        end
        OPG_VMEM: begin
          u.need_rs = 2'b01;
          unique case (f3)
            3'd0: begin u.unit = U_LOAD; u.vwe = 1'b1; ok = 1'b1; end
            3'd1: begin u.unit = U_LOAD; u.rng_load = 2'b01; ok = 1'b1; end
            3'd2: begin u.unit = U_LOAD; u.rng_load = 2'b10; ok = 1'b1; end
            3'd4: begin u.unit = U_STORE; u.imm = {instr[31:25], instr[11:7]}; ok = 1'b1; end
            default: ok = 1'b0;
          endcase
        end
        OPG_VMOV: begin
          unique case (f3)
            3'd0: begin
              u.unit = U_VALU; u.vwe = 1'b1; u.lop.fn = LF_PASS; u.bsrc = BSRC_FILL;
              u.need_rs = 2'b01; ok = 1'b1;
            end
            3'd1: begin u.unit = U_EXTRACT; u.xwe = 1'b1; u.need_rs = 2'b10; ok = 1'b1; end
            default: ok = 1'b0;
          endcase
        end
        OPG_VRNG: begin
          u.unit = U_VALU; u.vwe = 1'b1; u.lop.fn = LF_PASS; u.bsrc = BSRC_RNG;
          u.rng_step = 1'b1;
          ok = (f3 == 3'd0);
        end
        default: ok = 1'b0;
      endcase
    end
    return ok;
  endfunction

endpackage
