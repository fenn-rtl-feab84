// tb_fenn_alif: accuracy of 16-bit ALIF neuron simulation on FeNN under the
// rounding and overflow options of the multiply and add instructions.
//
// 32 adaptive leaky integrate-and-fire neurons (one vector), tau_m = 20 steps,
// tau_a = 2000 steps, Vth = 0.6, beta = 0.0174, are simulated on FeNN for 1000
// steps in four variants and compared with a 64-bit floating-point simulation of
// the same equations and inputs:
//   experiment 1, calibrated input: two periods of denser random input spikes
//     separated by a period of sparse background input;
//     variant a: round-to-zero (plain truncating multiply), variant b: stochastic
//     rounding; both with saturating add/sub.
//   experiment 2, input whose rate rises until it drives V and A beyond the range
//     of their 16-bit formats;
//     variant a: stochastic rounding with wrapping add/sub, variant b: stochastic
//     rounding with saturating add/sub.
// Per step, with up to 4 input spikes per neuron (mask per slot) of weight w:
//   thr = Vth + beta*A;  S = V >= thr (mask returned to the scalar side)
//   V   = alpha*V + I - S*Vth;   A = rho*A + S
// w = 0.25 with spike probability 0.1 / 0.01 per slot in experiment 1, and w = 4
// with probability rising from 0.05 to 1 in experiment 2.  V and A have 8 fraction
// bits (range +-128) and the factors 15; a coarse V format makes the bias of
// truncation visible.  The run on FeNN is checked against
// an integer model of the same instructions: the spike mask every step, and V and A
// of all neurons read back with VEXTRACT every 50 steps.  The normalised RMS error
// (NRMSE) of V and A against the float model is then computed per variant, and
// the test checks that stochastic rounding lowers the error of experiment 1 and
// that saturation lowers the error of experiment 2.
module tb_fenn_alif;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

  localparam int STEPS = 1000, SLOTS = 4;
  localparam real W0 = 0.25, W1 = 4.0, PHI = 0.1, PLO = 0.01;
  localparam int FV = 8, FA = 8;
  localparam real SV = real'(1 << FV);

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
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end

  task automatic expect1(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic run(input logic [31:0] ins, input logic [31:0] x1 = 0, input logic [31:0] x2 = 0);
    xid_t id;
    bit acc;
    cpu.exec(ins, x1, x2, 1'b0, id, acc);
  endtask

  // ---- inputs and models -------------------------------------------------------
  logic [31:0] inm [2][STEPS][SLOTS];
  int          wgt [2];
  real         fV [2][STEPS][32], fA [2][STEPS][32];
  logic [15:0] gV [32], gA [32], gs0 [32], gs1 [32];
  int c_alpha, c_rho, c_beta, c_vth, c_one;

  function automatic logic [15:0] g_rnd(input int l);
    logic [15:0] o;
    xoro_step(gs0[l], gs1[l], o);
    return o;
  endfunction

  // draw the input masks of both experiments and run the float model on them
  task automatic make_inputs();
    real p, v, a, thr;
    bit  s;
    int  n;
    for (int e = 0; e < 2; e++) begin
      for (int t = 0; t < STEPS; t++) begin
        if (e == 0) p = (t < 250 || t >= 750) ? PHI : PLO;
        else        p = 0.05 + 0.95 * real'(t) / real'(STEPS);
        for (int k = 0; k < SLOTS; k++) begin
          inm[e][t][k] = '0;
          for (int l = 0; l < 32; l++)
            inm[e][t][k][l] = (real'($urandom_range(9999)) < p * 10000.0);
        end
      end
      for (int l = 0; l < 32; l++) begin
        v = 0.0; a = 0.0;
        for (int t = 0; t < STEPS; t++) begin
          n = 0;
          for (int k = 0; k < SLOTS; k++) n += int'(inm[e][t][k][l]);
          thr = 0.6 + 0.0174 * a;
          s = v >= thr;
          v = $exp(-1.0 / 20.0) * v + real'(n * wgt[e]) / SV - (s ? 0.6 : 0.0);
          a = $exp(-1.0 / 2000.0) * a + (s ? 1.0 : 0.0);
          fV[e][t][l] = v;
          fA[e][t][l] = a;
        end
      end
    end
  endtask

  // one variant on FeNN and on the integer model; returns NRMSE of V and A
  task automatic run_variant(input int e, input int mode, input bit sat, input string name,
                             output real nrmse_v, output real nrmse_a, output int spikes);
    logic [31:0] m, d;
    logic [15:0] thr, t16, i_l, v1;
    real ev, rv, ea, ra;
    int n_mis;
    cpu.drain();
    cpu.seed_rng(16'h4a17 + 16'(e * 7 + mode), 32'h0);
    for (int l = 0; l < 32; l++) begin
      logic [15:0] seed;
      seed = 16'h4a17 + 16'(e * 7 + mode);
      if ((l & 1) != 0)  seed += 16'h3c6f;
      if ((l & 2) != 0)  seed += 16'h9e37;
      if ((l & 4) != 0)  seed += 16'h1b53;
      if ((l & 8) != 0)  seed += 16'h7f4a;
      if ((l & 16) != 0) seed += 16'hd1b5;
      gs0[l] = seed; gs1[l] = seed + 16'h5bd1;
      gV[l] = 0; gA[l] = 0;
    end
    run(i_vfill(1, 1), c_alpha);
    run(i_vfill(2, 1), c_rho);
    run(i_vfill(3, 1), c_beta);
    run(i_vfill(4, 1), c_vth);
    run(i_vfill(5, 1), c_one);
    run(i_vfill(6, 1), wgt[e]);
    run(i_vfill(10, 1), 0);
    run(i_vfill(11, 1), 0);
    ev = 0; rv = 0; ea = 0; ra = 0; n_mis = 0; spikes = 0;
    for (int t = 0; t < STEPS; t++) begin
      run(i_vmul(12, 11, 3, FA + 15 - FV, 1));               // beta*A
      run(i_vadd(12, 4, 12, sat));                           // thr
      cpu.exec_get(i_vtst(9, 10, 12, 3), 0, 0, m);           // S = V >= thr
      run(i_vmul(13, 10, 1, 15, mode));                      // alpha*V
      run(i_vfill(14, 1), 0);
      for (int k = 0; k < SLOTS; k++) begin
        run(i_vadd(15, 14, 6, sat));
        run(i_vsel(14, 1, 15), inm[e][t][k]);                // I += w where spike
      end
      run(i_vadd(10, 13, 14, sat));
      run(i_vsub(15, 10, 4, sat));
      run(i_vsel(10, 9, 15), m);                             // reset where spiked
      run(i_vmul(11, 11, 2, 15, mode));                      // rho*A
      run(i_vadd(16, 11, 5, sat));
      run(i_vsel(11, 9, 16), m);                             // A += 1 where spiked
      for (int l = 0; l < 32; l++) begin
        thr = ref_add(16'(c_vth), ref_mul(gA[l], 16'(c_beta), FA + 15 - FV, 1, 16'h0), sat, 1'b0);
        if (m[l] != ref_cmp(gV[l], thr, 3)) n_mis++;
        t16 = ref_mul(gV[l], 16'(c_alpha), 15, mode, (mode == 2) ? g_rnd(l) : 16'h0);
        i_l = 16'h0;
        for (int k = 0; k < SLOTS; k++) if (inm[e][t][k][l]) i_l = ref_add(i_l, 16'(wgt[e]), sat, 1'b0);
        v1 = ref_add(t16, i_l, sat, 1'b0);
        gV[l] = m[l] ? ref_add(v1, 16'(c_vth), sat, 1'b1) : v1;
        t16 = ref_mul(gA[l], 16'(c_rho), 15, mode, (mode == 2) ? g_rnd(l) : 16'h0);
        gA[l] = m[l] ? ref_add(t16, 16'(c_one), sat, 1'b0) : t16;
        ev += (real'($signed(gV[l])) / SV - fV[e][t][l]) ** 2;
        rv += fV[e][t][l] ** 2;
        ea += (real'($signed(gA[l])) / 256.0 - fA[e][t][l]) ** 2;
        ra += fA[e][t][l] ** 2;
      end
      spikes += $countones(m);
      if (t % 50 == 49)
        for (int l = 0; l < 32; l++) begin
          cpu.exec_get(i_vextract(7, 10, 2), 0, l, d);
          expect1(d[15:0] == gV[l], $sformatf("%s step %0d V[%0d]", name, t, l));
          cpu.exec_get(i_vextract(7, 11, 2), 0, l, d);
          expect1(d[15:0] == gA[l], $sformatf("%s step %0d A[%0d]", name, t, l));
        end
    end
    cpu.drain();
    expect1(n_mis == 0, $sformatf("%s spike masks match the integer model", name));
    nrmse_v = $sqrt(ev / rv);
    nrmse_a = $sqrt(ea / ra);
    $display("%-34s spikes %6d  NRMSE V %.4f  A %.4f", name, spikes, nrmse_v, nrmse_a);
  endtask

  initial begin
    real v1a, a1a, v1b, a1b, v2a, a2a, v2b, a2b;
    int s1a, s1b, s2a, s2b, sat0;
    c_alpha = int'($exp(-1.0 / 20.0) * 32768.0 + 0.5);
    c_rho   = int'($exp(-1.0 / 2000.0) * 32768.0 + 0.5);
    c_beta  = int'(0.0174 * 32768.0 + 0.5);
    c_vth   = int'(0.6 * SV + 0.5);
    c_one   = 1 << FA;
    wgt[0]  = int'(W0 * SV);
    wgt[1]  = int'(W1 * SV);
    cpu.commit_max = 1;
    make_inputs();
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_variant(0, 0, 1'b1, "calibrated, round-to-zero",         v1a, a1a, s1a);
    run_variant(0, 2, 1'b1, "calibrated, stochastic",            v1b, a1b, s1b);
    sat0 = cpu.iss.n_sat;
    run_variant(1, 2, 1'b0, "over-range, stochastic, wrapping",  v2a, a2a, s2a);
    expect1(cpu.iss.n_sat == sat0, "no clamping with wrapping add/sub");
    run_variant(1, 2, 1'b1, "over-range, stochastic, saturating", v2b, a2b, s2b);
    expect1(cpu.iss.n_sat > sat0, "saturation occurred");
    expect1(s1a > 0 && s1b > 0 && s2a > 0 && s2b > 0, "neurons spiked in every variant");
    expect1(v1b < v1a && a1b < a1a, "stochastic rounding lowers the error of V and A");
    expect1(v1b < 0.75 * v1a && a1b < 0.5 * a1a, "stochastic rounding lowers the error clearly");
    expect1(v2b < v2a && a2b < a2a, "saturation lowers the error of V and A");
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end
endmodule
