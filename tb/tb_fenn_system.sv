// tb_fenn_system: end-to-end test of one FeNN core at its full default size,
// running a population of 32 adaptive leaky integrate-and-fire (ALIF) neurons.
//
// The host side writes the FeNN program into the instruction BRAM and the model
// constants into the data BRAM through their host ports.  A scalar-core model then
// fetches the constants and program words through the core ports and offers the
// words to FeNN over the XIF with operands from its own scalar register file; scalar
// results (spike masks) come back into that register file.  Per time step:
//   thr  = Vth + beta*A                (round to nearest)
//   S    = V >= thr                    (mask to a scalar register)
//   V    = alpha*V + I - S*Vth         (stochastic rounding, saturating add/sub)
//   A    = rho*A + S                   (stochastic rounding)
// with I = w where the input spike mask (drawn by the scalar side) is set.  V and A
// live in the vector memory between steps (load at the start, store at the end).
// Fixed-point formats: V, I, Vth with 12 fraction bits; A with 8; alpha, rho, beta
// with 15.  The spike masks are checked against an independent integer model of the
// same equations and the V trace against a 64-bit floating-point model (normalised
// RMS error).  A second phase drives the neurons far above the calibrated range so
// that saturation occurs.  Then a throughput/latency test: 24 independent
// instructions must issue on consecutive cycles and each return its result three
// cycles after issue.  Each mechanism (bypass, result stall, late commit, kill,
// refused word, saturation, stochastic rounding, RNG load, vector load and store)
// must have happened at least once.
module tb_fenn_system;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

  localparam int STEPS1 = 200;
  localparam int STEPS2 = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          issue_valid, issue_ready, commit_valid, result_valid, result_ready;
  x_issue_req_t  issue_req;
  x_issue_resp_t issue_resp;
  x_commit_t     commit;
  x_result_t     result;
  logic        im_a_en = 0, im_b_en = 0, dm_a_en = 0, dm_b_en = 0;
  logic [11:0] im_a_addr = 0, im_b_addr = 0, dm_a_addr = 0, dm_b_addr = 0;
  logic [3:0]  im_b_we = 0, dm_a_we = 0, dm_b_we = 0;
  logic [31:0] im_b_wdata = 0, dm_a_wdata = 0, dm_b_wdata = 0;
  logic [31:0] im_a_rdata, im_b_rdata, dm_a_rdata, dm_b_rdata;

  fenn_system dut (
    .clk(clk), .rst_n(rst_n),
    .x_issue_valid(issue_valid), .x_issue_ready(issue_ready), .x_issue_req(issue_req),
    .x_issue_resp(issue_resp), .x_commit_valid(commit_valid), .x_commit(commit),
    .x_result_valid(result_valid), .x_result_ready(result_ready), .x_result(result),
    .im_a_en(im_a_en), .im_a_addr(im_a_addr), .im_a_rdata(im_a_rdata),
    .im_b_en(im_b_en), .im_b_we(im_b_we), .im_b_addr(im_b_addr), .im_b_wdata(im_b_wdata),
    .im_b_rdata(im_b_rdata),
    .dm_a_en(dm_a_en), .dm_a_we(dm_a_we), .dm_a_addr(dm_a_addr), .dm_a_wdata(dm_a_wdata),
    .dm_a_rdata(dm_a_rdata),
    .dm_b_en(dm_b_en), .dm_b_we(dm_b_we), .dm_b_addr(dm_b_addr), .dm_b_wdata(dm_b_wdata),
    .dm_b_rdata(dm_b_rdata));

  tb_fenn_xif_master #(.MEM_DEPTH(32768), .STALLS(1'b1)) cpu (
    .clk(clk), .rst_n(rst_n), .issue_valid(issue_valid), .issue_ready(issue_ready),
    .issue_req(issue_req), .issue_resp(issue_resp), .commit_valid(commit_valid),
    .commit(commit), .result_valid(result_valid), .result_ready(result_ready), .result(result));

  int checks = 0, failures = 0;
  int n_bypass = 0, n_vload = 0, n_vstore = 0, n_rngload = 0;

  always @(posedge clk) begin
    if (dut.u_fenn.u_execute.bypass_a || dut.u_fenn.u_execute.bypass_b) n_bypass++;
    if (dut.u_fenn.mem_en && !dut.u_fenn.mem_we) n_vload++;
    if (dut.u_fenn.mem_en && dut.u_fenn.mem_we) n_vstore++;
    if (|dut.u_fenn.rng_load_en) n_rngload++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end

  task automatic expect1(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- model constants ---------------------------------------------------------
  localparam int FV = 12, FA = 8;
  int c_alpha, c_rho, c_beta, c_vth, c_one, c_w;

  // ---- scalar-core model ---------------------------------------------------------
  logic [31:0] x [32];

  task automatic host_write(input bit im, input int addr, input logic [31:0] d);
    @(negedge clk);
    if (im) begin im_b_en = 1; im_b_we = 4'hf; im_b_addr = 12'(addr); im_b_wdata = d; end
    else    begin dm_b_en = 1; dm_b_we = 4'hf; dm_b_addr = 12'(addr); dm_b_wdata = d; end
    @(negedge clk);
    im_b_en = 0; im_b_we = 0; dm_b_en = 0; dm_b_we = 0;
  endtask

  task automatic host_read_dm(input int addr, output logic [31:0] d);
    @(negedge clk); dm_b_en = 1; dm_b_addr = 12'(addr);
    @(negedge clk); dm_b_en = 0; d = dm_b_rdata;
  endtask

  task automatic core_load(input int addr, output logic [31:0] d);
    @(negedge clk); dm_a_en = 1; dm_a_addr = 12'(addr);
    @(negedge clk); dm_a_en = 0; d = dm_a_rdata;
  endtask

  task automatic core_store(input int addr, input logic [31:0] d);
    @(negedge clk); dm_a_en = 1; dm_a_we = 4'hf; dm_a_addr = 12'(addr); dm_a_wdata = d;
    @(negedge clk); dm_a_en = 0; dm_a_we = 0;
  endtask

  task automatic core_fetch(input int pc, output logic [31:0] w);
    @(negedge clk); im_a_en = 1; im_a_addr = 12'(pc);
    @(negedge clk); im_a_en = 0; w = im_a_rdata;
  endtask

  // run instructions pc0..pc1-1 from the instruction BRAM
  task automatic core_run(input int pc0, input int pc1);
    logic [31:0] w, d;
    xid_t id;
    bit acc;
    for (int pc = pc0; pc < pc1; pc++) begin
      core_fetch(pc, w);
      if (w[1:0] == 2'b10 && w[6:2] == OPG_VTST) begin
        cpu.exec_get(w, x[w[19:15]], x[w[24:20]], d);
        if (w[11:7] != 0) x[w[11:7]] = d;
      end else cpu.exec(w, x[w[19:15]], x[w[24:20]], 1'b0, id, acc);
    end
  endtask

  // ---- program ----------------------------------------------------------------------
  // vector registers: v1 alpha, v2 rho, v3 beta, v4 Vth, v5 one(A), v6 w, v0 zero,
  // v10 V, v11 A, v12..v16 temporaries, v20/v21 seeds
  // scalar registers: x1..x6 constants, x7 input mask, x8 state base, x9 spike mask,
  // x11..x13 seed masks, x14..x17 seed values
  logic [31:0] prog [$];
  int pro_end, step_beg, step_end;

  task automatic build_program();
    prog.delete();
    prog.push_back(i_vfill(0, 0));
    prog.push_back(i_vfill(1, 1));  prog.push_back(i_vfill(2, 2));
    prog.push_back(i_vfill(3, 3));  prog.push_back(i_vfill(4, 4));
    prog.push_back(i_vfill(5, 5));  prog.push_back(i_vfill(6, 6));
    // per-lane RNG seeds, mixed with masks, stored and loaded into the RNG state
    prog.push_back(i_vfill(20, 14)); prog.push_back(i_vfill(21, 15));
    prog.push_back(i_vsel(20, 11, 21));
    prog.push_back(i_vfill(21, 16)); prog.push_back(i_vsel(20, 12, 21));
    prog.push_back(i_vfill(21, 17)); prog.push_back(i_vsel(20, 13, 21));
    prog.push_back(i_vstore(20, 8, 128));
    prog.push_back(i_vload(0, 8, 128, 1));
    prog.push_back(i_vsel(20, 12, 0));
    prog.push_back(i_vstore(20, 8, 192));
    prog.push_back(i_vload(0, 8, 192, 2));
    // V = A = 0
    prog.push_back(i_vstore(0, 8, 0));
    prog.push_back(i_vstore(0, 8, 64));
    pro_end = prog.size();
    step_beg = prog.size();
    prog.push_back(i_vload(10, 8, 0));              // V
    prog.push_back(i_vload(11, 8, 64));             // A
    prog.push_back(i_vmul(12, 11, 3, FA + 15 - FV, 1));  // beta*A, to V format
    prog.push_back(i_vadd(12, 4, 12, 1'b1));        // thr
    prog.push_back(i_vtst(9, 10, 12, 3));           // x9 = V >= thr
    prog.push_back(i_vmul(13, 10, 1, 15, 2));       // alpha*V
    prog.push_back(i_vfill(14, 0));
    prog.push_back(i_vsel(14, 7, 6));               // I
    prog.push_back(i_vadd(10, 13, 14, 1'b1));       // alpha*V + I
    prog.push_back(i_vsub(15, 10, 4, 1'b1));        // - Vth
    prog.push_back(i_vsel(10, 9, 15));              // where spiked
    prog.push_back(i_vmul(11, 11, 2, 15, 2));       // rho*A
    prog.push_back(i_vadd(16, 11, 5, 1'b1));        // + 1
    prog.push_back(i_vsel(11, 9, 16));              // where spiked
    prog.push_back(i_vstore(10, 8, 0));
    prog.push_back(i_vstore(11, 8, 64));
    step_end = prog.size();
  endtask

  // ---- independent models -------------------------------------------------------------
  logic [15:0] gV [32], gA [32], gs0 [32], gs1 [32];
  real fV [32], fA [32];
  real err2 = 0.0, ref2 = 0.0;

  function automatic logic [15:0] g_step_rng(input int l);
    logic [15:0] o;
    xoro_step(gs0[l], gs1[l], o);
    return o;
  endfunction

  function automatic logic [31:0] golden_step(input logic [31:0] in_mask);
    logic [15:0] thr, av, i_l, v1, vs, ra;
    logic [31:0] s;
    real fthr;
    bit fs;
    for (int l = 0; l < 32; l++) begin
      thr = ref_add(16'(c_vth), ref_mul(gA[l], 16'(c_beta), FA + 15 - FV, 1, 0), 1, 0);
      s[l] = ref_cmp(gV[l], thr, 3);
      av  = ref_mul(gV[l], 16'(c_alpha), 15, 2, g_step_rng(l));
      i_l = in_mask[l] ? 16'(c_w) : 16'd0;
      v1  = ref_add(av, i_l, 1, 0);
      vs  = ref_add(v1, 16'(c_vth), 1, 1);
      gV[l] = s[l] ? vs : v1;
      ra  = ref_mul(gA[l], 16'(c_rho), 15, 2, g_step_rng(l));
      gA[l] = s[l] ? ref_add(ra, 16'(c_one), 1, 0) : ra;
      // floating point, same equations
      fthr = 0.6 + 0.0174 * fA[l];
      fs = fV[l] >= fthr;
      fV[l] = $exp(-1.0 / 20.0) * fV[l] + (in_mask[l] ? real'(c_w) / 4096.0 : 0.0) - (fs ? 0.6 : 0.0);
      fA[l] = $exp(-1.0 / 2000.0) * fA[l] + (fs ? 1.0 : 0.0);
    end
    return s;
  endfunction

  // ---- test -------------------------------------------------------------------------
  initial begin
    logic [31:0] d, s_exp, in_mask;
    int spikes, n_mismatch, spikes_dm;
    real nrmse;
    xid_t id;
    bit acc;

    c_alpha = int'($exp(-1.0 / 20.0) * 32768.0 + 0.5);
    c_rho   = int'($exp(-1.0 / 2000.0) * 32768.0 + 0.5);
    c_beta  = int'(0.0174 * 32768.0 + 0.5);
    c_vth   = int'(0.6 * 4096.0 + 0.5);
    c_one   = 1 << FA;
    c_w     = int'(0.25 * 4096.0);

    build_program();
    // host: program and constants into the BRAMs while FeNN is held in reset
    for (int i = 0; i < prog.size(); i++) host_write(1, i, prog[i]);
    host_write(0, 1, c_alpha); host_write(0, 2, c_rho); host_write(0, 3, c_beta);
    host_write(0, 4, c_vth);   host_write(0, 5, c_one); host_write(0, 6, c_w);
    host_write(0, 11, 32'h5555_5555); host_write(0, 12, 32'h0f0f_3c3c); host_write(0, 13, 32'h00ff_ff00);
    host_write(0, 14, 32'h1d2b); host_write(0, 15, 32'h7c31); host_write(0, 16, 32'hb00f);
    host_write(0, 17, 32'h0e5a);
    // read-back of the program through the host port
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); im_b_en = 1; im_b_addr = 12'(i);
      @(negedge clk); im_b_en = 0;
      expect1(im_b_rdata == prog[i], "program readback");
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // core: constants into scalar registers
    foreach (x[i]) x[i] = '0;
    for (int i = 1; i <= 17; i++) if (i <= 6 || i >= 11) core_load(i, x[i]);
    x[8] = 32'h0001_0000;
    core_run(0, pro_end);
    for (int l = 0; l < 32; l++) begin
      logic [15:0] sd0, sd1;
      sd0 = 16'(x[14]);
      if (x[11][l]) sd0 = 16'(x[15]);
      if (x[12][l]) sd0 = 16'(x[16]);
      if (x[13][l]) sd0 = 16'(x[17]);
      sd1 = x[12][l] ? 16'd0 : sd0;
      gs0[l] = sd0; gs1[l] = sd1;
      gV[l] = 0; gA[l] = 0; fV[l] = 0.0; fA[l] = 0.0;
    end

    // phase 1: calibrated input; phase 2: far too much input
    spikes = 0; n_mismatch = 0;
    for (int t = 0; t < STEPS1 + STEPS2; t++) begin
      if (t == STEPS1) begin
        c_w = int'(3.0 * 4096.0);
        x[6] = c_w;
        cpu.exec(i_vfill(6, 6), x[6], 0, 1'b0, id, acc);
        // an instruction killed by the core never takes effect
        cpu.exec(i_vfill(6, 0), 0, 0, 1'b1, id, acc);
        // a scalar instruction is refused
        cpu.exec(32'h0020_8033, 0, 0, 1'b0, id, acc);
      end
      in_mask = (t < 100) ? ($urandom & $urandom) : (t < STEPS1) ? ($urandom & $urandom & $urandom & 32'h00ff_00ff) : $urandom;
      x[7] = in_mask;
      core_run(step_beg, step_end);
      s_exp = golden_step(in_mask);
      if (x[9] !== s_exp) n_mismatch++;
      spikes += $countones(x[9]);
      if (t < STEPS1)
        for (int l = 0; l < 32; l++) begin
          err2 += (real'($signed(gV[l])) / 4096.0 - fV[l]) ** 2;
          ref2 += fV[l] ** 2;
        end
    end
    cpu.drain();
    expect1(n_mismatch == 0, "spike masks match the integer ALIF model");
    nrmse = $sqrt(err2 / ref2);
    $display("ALIF: %0d steps, %0d spikes, V NRMSE vs float64 %f", STEPS1 + STEPS2, spikes, nrmse);
    expect1(spikes > 0, "neurons spiked");
    expect1(nrmse < 0.2, "fixed point V follows the float model");
    // the core reports the spike count to the host through the data BRAM
    core_store(100, spikes);
    host_read_dm(100, d);
    expect1(d == spikes, "result read by host");

    // throughput and latency: no stalls, commit in the cycle after issue
    cpu.stall_en = 0;
    cpu.commit_max = 1;
    cpu.drain();
    begin
      int first_id, first_cycle;
      first_id = int'(cpu.next_id);
      for (int i = 0; i < 24; i++) cpu.exec(i_vadd(16 + i % 8, 1, 2), 0, 0, 1'b0, id, acc);
      cpu.drain();
      first_cycle = cpu.issue_cycle[(first_id + 8) % 16];
      for (int i = 0; i < 16; i++) begin
        int k;
        k = (first_id + 8 + i) % 16;
        expect1(cpu.issue_cycle[k] == first_cycle + i, "one instruction issued per cycle");
        expect1(cpu.result_cycle[k] + 1 - cpu.issue_cycle[k] == 3, "result three cycles after issue");
      end
    end

    $display("mechanisms: bypass %0d result-stall %0d late-commit %0d kill %0d refused %0d sat %0d stoch %0d rngload %0d vload %0d vstore %0d issue-wait %0d",
             n_bypass, cpu.n_result_stall, cpu.n_late_commit, cpu.n_killed, cpu.n_refused,
             cpu.iss.n_sat, cpu.iss.n_stoch, n_rngload, n_vload, n_vstore, cpu.n_issue_wait);
    expect1(n_bypass > 0, "bypass used");
    expect1(cpu.n_result_stall > 0, "result stall");
    expect1(cpu.n_late_commit > 0, "late commit");
    expect1(cpu.n_killed > 0, "kill");
    expect1(cpu.n_refused > 0, "refused word");
    expect1(cpu.iss.n_sat > 0, "saturation");
    expect1(cpu.iss.n_stoch > 0, "stochastic rounding");
    expect1(n_rngload == 2, "RNG state loads");
    expect1(n_vload > 0 && n_vstore > 0, "vector load and store");
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end
endmodule
