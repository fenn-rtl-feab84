// tb_fenn_execute: the execute stage with a register-file model.  Checks ALU
// results, the writeback-to-execute bypass on both ports, VFILL/VRNG operand
// sources, compare masks and VEXTRACT, memory requests for loads and stores, RNG
// stepping, and that nothing is issued twice while writeback stalls.
module tb_fenn_execute;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic d_valid = 0, d_ready, byp_valid = 0, rng_step, mem_en, mem_we, wb_valid, wb_ready = 1;
  logic bypass_a, bypass_b;
  ex_req_t d_req = '0;
  reg_idx_t ra_addr, rb_addr, byp_vd = '0;
  vec_t ra_data, rb_data, byp_data = '0, rnd = '0, mem_wdata;
  logic [14:0] mem_addr;
  wb_req_t wb_req;
  vec_t regs [32];
  int checks = 0, failures = 0;

  assign ra_data = regs[ra_addr];
  assign rb_data = regs[rb_addr];

  fenn_execute dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect1(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // put one instruction into execute; at return it is in execute and outputs settled
  task automatic put(input logic [31:0] ins, input logic [31:0] x1 = 0, input logic [31:0] x2 = 0);
    uop_t u;
    void'(decode(ins, u));
    @(negedge clk);
    d_valid = 1; d_req.uop = u; d_req.rs1v = x1; d_req.rs2v = x2; d_req.id = 4'($urandom);
    @(negedge clk);
    d_valid = 0;
    #1;
  endtask

  function automatic vec_t rv();
    vec_t v;
    for (int w = 0; w < 16; w++) v[32*w +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    vec_t e, a, b;
    logic [31:0] m;
    foreach (regs[r]) regs[r] = rv();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int vd, v1, v2;
      vd = $urandom_range(0, 31); v1 = $urandom_range(0, 31); v2 = $urandom_range(0, 31);
      // plain add
      put(i_vadd(vd, v1, v2));
      for (int l = 0; l < 32; l++) e[16*l +: 16] = ref_add(regs[v1][16*l +: 16], regs[v2][16*l +: 16], 0, 0);
      expect1(wb_valid && wb_req.vwe && wb_req.vd == 5'(vd) && wb_req.vdata == e && !mem_en, "vadd");
      // bypass: writeback is about to write v1 and/or v2
      byp_valid = 1; byp_vd = 5'($urandom_range(0, 1) ? v1 : v2); byp_data = rv();
      put(i_vsub(vd, v1, v2, 1'b1));
      a = (byp_vd == 5'(v1)) ? byp_data : regs[v1];
      b = (byp_vd == 5'(v2)) ? byp_data : regs[v2];
      for (int l = 0; l < 32; l++) e[16*l +: 16] = ref_add(a[16*l +: 16], b[16*l +: 16], 1, 1);
      expect1(wb_req.vdata == e, "vsub with bypass");
      expect1(bypass_a == (byp_vd == 5'(v1)) && bypass_b == (byp_vd == 5'(v2)), "bypass flags");
      byp_valid = 0;
      // stochastic multiply steps the RNG and uses its bits
      rnd = rv();
      put(i_vmul(vd, v1, v2, 14, 2));
      for (int l = 0; l < 32; l++) e[16*l +: 16] = ref_mul(regs[v1][16*l +: 16], regs[v2][16*l +: 16], 14, 2, rnd[16*l +: 16]);
      expect1(wb_req.vdata == e && rng_step, "stochastic vmul");
      put(i_vmul(vd, v1, v2, 8, 1));
      expect1(!rng_step, "nearest vmul does not step");
      // compare mask, extract
      put(i_vtst(7, v1, v2, 2));
      for (int l = 0; l < 32; l++) m[l] = ref_cmp(regs[v1][16*l +: 16], regs[v2][16*l +: 16], 2);
      expect1(wb_req.xwe && wb_req.rd == 5'd7 && wb_req.xdata == m && !wb_req.vwe, "vtst mask");
      put(i_vextract(9, v1, 2), 0, 32'(it % 32));
      a = regs[v1];
      expect1(wb_req.xdata == {{16{a[16*(it%32)+15]}}, a[16*(it%32) +: 16]}, "vextract");
      // fill and rng
      put(i_vfill(vd, 3), 32'h0001_a5c3);
      expect1(wb_req.vdata == {32{16'ha5c3}}, "vfill");
      put(i_vrng(vd));
      expect1(wb_req.vdata == rnd && rng_step, "vrng");
      // select with mask from rs1: vd kept where 0
      m = $urandom;
      put(i_vsel(vd, 4, v2), m);
      for (int l = 0; l < 32; l++) e[16*l +: 16] = m[l] ? regs[v2][16*l +: 16] : regs[vd][16*l +: 16];
      expect1(wb_req.vdata == e, "vsel");
      // load and store
      put(i_vload(vd, 1, 12'h040, 0), 32'h0000_1000);
      expect1(mem_en && !mem_we && mem_addr == 15'h41 && wb_req.from_mem && wb_req.vwe, "vload request");
      put(i_vload(0, 1, -64, 2), 32'h0000_1000);
      expect1(mem_en && mem_addr == 15'h3f && wb_req.rng_load == 2'b10 && !wb_req.vwe, "vloadr1 request");
      put(i_vstore(v2, 1, 128), 32'h0000_0000);
      expect1(mem_en && mem_we && mem_addr == 15'h2 && mem_wdata == regs[v2] && !wb_req.vwe, "vstore");
      // stall: writeback not ready, nothing leaves and no side effects
      @(negedge clk);
      wb_ready = 0;
      begin
        uop_t u;
        void'(decode(i_vstore(v2, 1, 0), u));
        d_valid = 1; d_req.uop = u;
      end
      @(negedge clk);
      d_valid = 0;
      #1;
      expect1(!wb_valid && !mem_en && !d_ready, "stalled store does nothing");
      @(negedge clk); #1;
      expect1(!mem_en, "still stalled");
      wb_ready = 1; #1;
      expect1(mem_en && mem_we && wb_valid, "store fires once released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
