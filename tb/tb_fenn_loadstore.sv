// tb_fenn_loadstore: address calculation and memory-port control of vector loads
// and stores: base + sign-extended immediate, vector index from byte address bits
// [20:6], enables only when fired and only for memory instructions.
module tb_fenn_loadstore;
  import fenn_pkg::*;

  logic fire;
  unit_e unit;
  xword_t base;
  logic [11:0] imm;
  vec_t sd, wd;
  logic en, we;
  logic [14:0] addr;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fenn_loadstore dut (.fire(fire), .unit(unit), .base(base), .imm(imm), .store_data(sd),
                      .mem_en(en), .mem_we(we), .mem_addr(addr), .mem_wdata(wd));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ea;
    bit mem_op;
    for (int it = 0; it < 5000; it++) begin
      fire = 1'($urandom);
      unit = unit_e'($urandom_range(0, 4));
      base = $urandom;
      imm  = 12'($urandom);
      for (int w = 0; w < 16; w++) sd[32*w +: 32] = $urandom;
      #1;
      ea = (longint'(base) + longint'($signed(imm))) & 64'hffff_ffff;
      mem_op = (unit == U_LOAD) || (unit == U_STORE);
      checks += 4;
      if (addr !== 15'(ea / 64)) begin failures++; if (failures < 10) $display("FAIL addr %h %h", base, imm); end
      if (en !== (fire && mem_op)) begin failures++; $display("FAIL en"); end
      if (we !== (fire && unit == U_STORE)) begin failures++; $display("FAIL we"); end
      if (wd !== sd) begin failures++; $display("FAIL wdata"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
