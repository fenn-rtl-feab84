// tb_fenn_shd: a recurrent spiking classifier of the size used for spoken-digit
// recognition (700 input channels, 256 recurrent ALIF hidden neurons, 20 leaky
// integrator read-out neurons), run on one FeNN core at its full default size.
//
// Weights are not trained here: FeNN itself fills the vector memory with random
// weights (VRNG, then VMUL by a scale, then VSTORE), 7904 vectors in all:
//   input  row i (8 vectors, 256 hidden lanes)   at vectors 8i + j,       i < 700
//   recurrent row h (8 vectors)                  at vectors 5600 + 8h + j
//   read-out row h (1 vector, lanes 0..19 used)  at vector  7648 + h
// and hidden V, A and read-out V live at vectors 7904.. between time steps.
// Each time step, event-driven, as the scalar core would run it:
//   I_j  = sum of the input rows of this step's input spikes, then of the recurrent
//          rows of the previous step's hidden spikes (VLOAD + saturating VADD)
//   for each of the 8 hidden vectors: the ALIF update of tb_fenn_system (tau_m 20,
//          tau_a 2000, Vth 0.6, beta 0.0174), spike mask returned to the scalar side
//   Iout = sum of the read-out rows of this step's hidden spikes
//   Vout = kappa*Vout + Iout (stochastic rounding)
// Input spikes are drawn by the scalar side with $urandom.  The hidden spike masks
// and all 20 read-out voltages are compared every step with an independent integer
// model of the same network, including the per-lane random number sequence.  The
// cycles per time step are reported.
module tb_fenn_shd;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

  localparam int NIN = 700, NH = 256, NOUT = 20, HV = NH / 32;
  localparam int RB = NIN * HV, OB = RB + NH * HV, SB = OB + NH;
  localparam int STEPS = 100;
  localparam int FV = 12, FA = 8;
  localparam int P_IN_PERMIL = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          issue_valid, issue_ready, commit_valid, result_valid, result_ready;
  x_issue_req_t  issue_req;
  x_issue_resp_t issue_resp;
  x_commit_t     commit;
  x_result_t     result;
  logic [31:0]   unused_a, unused_b, unused_c, unused_d;

  fenn_system dut (
    .clk(clk), .rst_n(rst_n),
    .x_issue_valid(issue_valid), .x_issue_ready(issue_ready), .x_issue_req(issue_req),
    .x_issue_resp(issue_resp), .x_commit_valid(commit_valid), .x_commit(commit),
    .x_result_valid(result_valid), .x_result_ready(result_ready), .x_result(result),
    .im_a_en(1'b0), .im_a_addr('0), .im_a_rdata(unused_a),
    .im_b_en(1'b0), .im_b_we('0), .im_b_addr('0), .im_b_wdata('0), .im_b_rdata(unused_b),
    .dm_a_en(1'b0), .dm_a_we('0), .dm_a_addr('0), .dm_a_wdata('0), .dm_a_rdata(unused_c),
    .dm_b_en(1'b0), .dm_b_we('0), .dm_b_addr('0), .dm_b_wdata('0), .dm_b_rdata(unused_d));

  tb_fenn_xif_master #(.MEM_DEPTH(32768), .STALLS(1'b0)) cpu (
    .clk(clk), .rst_n(rst_n), .issue_valid(issue_valid), .issue_ready(issue_ready),
    .issue_req(issue_req), .issue_resp(issue_resp), .commit_valid(commit_valid),
    .commit(commit), .result_valid(result_valid), .result_ready(result_ready), .result(result));

  int checks = 0, failures = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end

  task automatic expect1(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input logic [31:0] ins, input logic [31:0] x1 = 0, input logic [31:0] x2 = 0);
    xid_t id;
    bit acc;
    cpu.exec(ins, x1, x2, 1'b0, id, acc);
  endtask

  function automatic logic [31:0] vaddr(input int v);
    return 32'(v * 64);
  endfunction

  // ---- independent model of the network --------------------------------------
  logic [15:0] gw [SB][32];
  logic [15:0] gs0 [32], gs1 [32];
  logic [15:0] gV [NH], gA [NH], gI [NH], gVo [32], gIo [32];
  bit          gS [NH];

  function automatic logic [15:0] g_rnd(input int l);
    logic [15:0] r;
    xoro_step(gs0[l], gs1[l], r);
    return r;
  endfunction

  // constants (fixed point: V, I, Vth with FV fraction bits, A with FA, factors S0.15)
  logic [15:0] c_alpha, c_rho, c_beta, c_vth, c_onea, c_kappa;
  logic [15:0] c_sin, c_srec, c_sout;

  initial begin
    logic [31:0] m, d;
    logic [15:0] seed, thr, t, r;
    int nin_spk, nh_spk, tot_in, tot_h, c0, step_cycles;
    int hlist [$], ilist [$], prev [$];
    c_alpha = 16'(int'($exp(-1.0 / 20.0) * 32768.0));
    c_rho   = 16'(int'($exp(-1.0 / 2000.0) * 32768.0));
    c_beta  = 16'(int'(0.0174 * 32768.0));
    c_vth   = 16'(int'(0.6 * real'(1 << FV) + 0.5));
    c_onea  = 16'(1 << FA);
    c_kappa = 16'(int'($exp(-1.0 / 20.0) * 32768.0));
    c_sin   = 16'(1 << (FV - 3));      // weight = r*scale >> 15: input weights in +-0.125
    c_srec  = 16'(1 << (FV - 3));      // recurrent weights in +-0.125
    c_sout  = 16'(1 << (FV - 2));      // read-out weights in +-0.25
    cpu.commit_max = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // per-lane seeds, as seed_rng builds them
    cpu.seed_rng(16'h1d2b, vaddr(SB + 32));
    for (int l = 0; l < 32; l++) begin
      seed = 16'h1d2b;
      if ((l & 1) != 0)  seed += 16'h3c6f;
      if ((l & 2) != 0)  seed += 16'h9e37;
      if ((l & 4) != 0)  seed += 16'h1b53;
      if ((l & 8) != 0)  seed += 16'h7f4a;
      if ((l & 16) != 0) seed += 16'hd1b5;
      gs0[l] = seed;
      gs1[l] = seed + 16'h5bd1;
    end

    // ---- random weights, generated and stored by FeNN ----
    c0 = cpu.cycle;
    for (int k = 0; k < SB; k++) begin
      if (k == 0)  run(i_vfill(30, 1), {16'h0, c_sin});
      if (k == RB) run(i_vfill(30, 1), {16'h0, c_srec});
      if (k == OB) run(i_vfill(30, 1), {16'h0, c_sout});
      run(i_vrng(28));
      run(i_vmul(29, 28, 30, 15, 0));
      run(i_vstore(29, 1, 0), vaddr(k));
      for (int l = 0; l < 32; l++) begin
        r = g_rnd(l);
        gw[k][l] = ref_mul(r, (k < RB) ? c_sin : (k < OB) ? c_srec : c_sout, 15, 0, 16'h0);
      end
    end
    cpu.drain();
    $display("weights: %0d vectors written in %0d cycles", SB, cpu.cycle - c0);

    // ---- constants and zero state ----
    run(i_vfill(16, 1), {16'h0, c_alpha});
    run(i_vfill(17, 1), {16'h0, c_rho});
    run(i_vfill(18, 1), {16'h0, c_beta});
    run(i_vfill(19, 1), {16'h0, c_vth});
    run(i_vfill(20, 1), {16'h0, c_onea});
    run(i_vfill(21, 1), {16'h0, c_kappa});
    run(i_vfill(22, 1), 0);
    for (int k = 0; k < 2 * HV + 1; k++) run(i_vstore(22, 1, 0), vaddr(SB + k));
    foreach (gV[n]) begin gV[n] = 0; gA[n] = 0; end
    foreach (gVo[l]) gVo[l] = 0;

    tot_in = 0; tot_h = 0; step_cycles = 0;
    for (int t_step = 0; t_step < STEPS; t_step++) begin
      cpu.drain();
      c0 = cpu.cycle;
      ilist.delete();
      for (int i = 0; i < NIN; i++) if ($urandom_range(999) < P_IN_PERMIL) ilist.push_back(i);
      nin_spk = ilist.size();
      tot_in += nin_spk;
      prev = hlist;
      hlist.delete();

      // synaptic input
      for (int j = 0; j < HV; j++) run(i_vfill(j, 1), 0);
      foreach (gI[n]) gI[n] = 0;
      foreach (ilist[s])
        for (int j = 0; j < HV; j++) begin
          run(i_vload(8, 1, 0), vaddr(ilist[s] * HV + j));
          run(i_vadd(j, j, 8, 1'b1));
          for (int l = 0; l < 32; l++)
            gI[32 * j + l] = ref_add(gI[32 * j + l], gw[ilist[s] * HV + j][l], 1'b1, 1'b0);
        end
      foreach (prev[s])
        for (int j = 0; j < HV; j++) begin
          run(i_vload(8, 1, 0), vaddr(RB + prev[s] * HV + j));
          run(i_vadd(j, j, 8, 1'b1));
          for (int l = 0; l < 32; l++)
            gI[32 * j + l] = ref_add(gI[32 * j + l], gw[RB + prev[s] * HV + j][l], 1'b1, 1'b0);
        end

      // ALIF update of each hidden vector
      for (int j = 0; j < HV; j++) begin
        run(i_vload(10, 1, 0), vaddr(SB + j));                // V
        run(i_vload(11, 1, 0), vaddr(SB + HV + j));           // A
        run(i_vmul(12, 11, 18, FA + 15 - FV, 1));             // beta*A
        run(i_vadd(12, 19, 12, 1'b1));                        // thr
        cpu.exec_get(i_vtst(9, 10, 12, 3), 0, 0, m);          // S = V >= thr
        run(i_vmul(13, 10, 16, 15, 2));                       // alpha*V
        run(i_vadd(10, 13, j, 1'b1));                         // + I
        run(i_vsub(14, 10, 19, 1'b1));                        // - Vth
        run(i_vsel(10, 9, 14), m);                            // where spiked
        run(i_vmul(11, 11, 17, 15, 2));                       // rho*A
        run(i_vadd(15, 11, 20, 1'b1));                        // + 1
        run(i_vsel(11, 9, 15), m);                            // where spiked
        run(i_vstore(10, 1, 0), vaddr(SB + j));
        run(i_vstore(11, 1, 0), vaddr(SB + HV + j));
        for (int l = 0; l < 32; l++) begin
          int n;
          n = 32 * j + l;
          thr = ref_add(c_vth, ref_mul(gA[n], c_beta, FA + 15 - FV, 1, 16'h0), 1'b1, 1'b0);
          gS[n] = ref_cmp(gV[n], thr, 3);
          t = ref_mul(gV[n], c_alpha, 15, 2, g_rnd(l));
          gV[n] = ref_add(t, gI[n], 1'b1, 1'b0);
          if (gS[n]) gV[n] = ref_add(gV[n], c_vth, 1'b1, 1'b1);
          t = ref_mul(gA[n], c_rho, 15, 2, g_rnd(l));
          gA[n] = gS[n] ? ref_add(t, c_onea, 1'b1, 1'b0) : t;
          expect1(m[l] == gS[n], $sformatf("step %0d hidden neuron %0d spike", t_step, n));
          if (m[l]) hlist.push_back(n);
        end
      end
      nh_spk = hlist.size();
      tot_h += nh_spk;

      // read-out
      run(i_vfill(9, 1), 0);
      foreach (gIo[l]) gIo[l] = 0;
      foreach (hlist[s]) begin
        run(i_vload(8, 1, 0), vaddr(OB + hlist[s]));
        run(i_vadd(9, 9, 8, 1'b1));
        for (int l = 0; l < 32; l++) gIo[l] = ref_add(gIo[l], gw[OB + hlist[s]][l], 1'b1, 1'b0);
      end
      run(i_vload(12, 1, 0), vaddr(SB + 2 * HV));
      run(i_vmul(12, 12, 21, 15, 2));
      run(i_vadd(12, 12, 9, 1'b1));
      run(i_vstore(12, 1, 0), vaddr(SB + 2 * HV));
      for (int l = 0; l < 32; l++)
        gVo[l] = ref_add(ref_mul(gVo[l], c_kappa, 15, 2, g_rnd(l)), gIo[l], 1'b1, 1'b0);
      cpu.drain();
      step_cycles += cpu.cycle - c0;
      for (int o = 0; o < NOUT; o++) begin
        cpu.exec_get(i_vextract(7, 12, 2), 0, o, d);
        expect1(d == {{16{gVo[o][15]}}, gVo[o]}, $sformatf("step %0d read-out %0d", t_step, o));
      end
      $display("step %2d: %3d input spikes, %3d hidden spikes, %0d cycles",
               t_step, nin_spk, nh_spk, cpu.cycle - c0);
    end
    cpu.drain();
    $display("%0d steps: %0d input spikes, %0d hidden spikes, %0d cycles per step on average",
             STEPS, tot_in, tot_h, step_cycles / STEPS);
    expect1(tot_h > 0, "hidden neurons spiked");
    expect1(tot_h < STEPS * NH, "hidden neurons did not all spike every step");
    expect1(cpu.n_results == cpu.n_issued, "one result per instruction");
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end
endmodule
