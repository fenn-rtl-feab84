// tb_fenn_poisson: Poisson random numbers on FeNN with Knuth's direct method,
// 3200 variates with lambda = 5 (100 vectors of 32 lanes).
//
// Per vector: k = -1, p = 1 (S0.15), active mask m = all lanes; repeat
//   u = VRNG/2 + 1/2 (uniform in [0,1)); k = k+1 where m; p = p*u >> 15;
//   m = (L < p)
// until the mask returned to the scalar side is zero, with L = exp(-5) in S0.15.
// The loop is software-pipelined as a compiler would schedule it for the scalar
// core: each mask travels back while the next variate u is formed, and the core
// waits only if it has not arrived when the masked VSEL needs it.  Every returned
// value is checked against the instruction-set model; the histogram is compared
// with the Poisson probabilities and the mean with lambda.  The cycles per 32
// variates are reported and checked against at most 8 cycles per loop iteration
// (seven FeNN instructions issued at one per cycle, plus a bounded wait).
module tb_fenn_poisson;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

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
    repeat (2000000) @(posedge clk);
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

  int hist [0:40];
  initial begin
    logic [31:0] m, d;
    int n, c0, total_cycles, gen_cycles, sum, iters, n_wait;
    bit pend, acc;
    xid_t tid;
    real mean, pmf, e;
    cpu.commit_max = 1;
    foreach (hist[i]) hist[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cpu.seed_rng(16'h2545, 32'h0);
    // constants: v0 = 0, v1 = one (integer 1), v2 = L, v3 = p start
    run(i_vfill(0, 1), 0);
    run(i_vfill(1, 1), 1);
    run(i_vfill(2, 1), int'($exp(-5.0) * 32768.0 + 0.5));
    run(i_vfill(3, 1), 32'h4000);      // 1/2
    total_cycles = 0; gen_cycles = 0; iters = 0; n_wait = 0;
    for (int v = 0; v < 100; v++) begin
      cpu.drain();
      c0 = cpu.cycle;
      run(i_vfill(10, 1), 32'hffff);     // k = -1
      run(i_vfill(11, 1), 32'h7fff);     // p = 1
      m = 32'hffff_ffff;
      n = 0;
      pend = 0;
      // software-pipelined: the mask of one iteration travels back to the scalar
      // side while the next uniform variate is formed
      while (n < 40) begin
        run(i_vrng(12));
        run(i_vmul(12, 12, 3, 15, 0));                      // r/2
        run(i_vadd(12, 12, 3));                             // u = r/2 + 1/2 in [0, 1)
        if (pend) begin
          while (!cpu.seen[tid]) begin @(negedge clk); n_wait++; end
          m = cpu.last_data[tid];
        end
        if (m == 0) break;
        run(i_vadd(14, 10, 1));
        run(i_vsel(10, 6, 14), m);                          // k++ where active
        run(i_vmul(11, 11, 12, 15, 1));                     // p *= u
        cpu.exec(i_vtst(6, 2, 11, 2), 0, 0, 1'b0, tid, acc); // L < p
        pend = 1;
        n++;
      end
      iters += n;
      cpu.drain();
      gen_cycles += cpu.cycle - c0;
      run(i_vstore(10, 1, 128 + 64 * v), 32'h0);
      for (int l = 0; l < 32; l++) begin
        cpu.exec_get(i_vextract(7, 10, 2), 0, l, d);
        if (int'($signed(d[15:0])) >= 0 && int'($signed(d[15:0])) <= 40) hist[int'($signed(d[15:0]))]++;
        else expect1(0, "variate out of range");
      end
      total_cycles += cpu.cycle - c0;
    end
    cpu.drain();
    sum = 0; n = 0;
    for (int k = 0; k <= 40; k++) begin sum += k * hist[k]; n += hist[k]; end
    mean = real'(sum) / real'(n);
    $display("Poisson lambda=5: %0d variates, mean %f, %0d loop iterations per vector, %0d cycles per 32 variates (%0d with read-out)",
             n, mean, iters / 100, gen_cycles / 100, total_cycles / 100);
    expect1(n == 3200, "all variates in range");
    $display("cycles waiting for a mask: %0d in %0d iterations", n_wait, iters);
    expect1(gen_cycles <= 8 * iters + 100 * 12, "loop rate of at most 8 cycles per iteration");
    expect1(mean > 4.8 && mean < 5.2, "mean close to lambda");
    pmf = $exp(-5.0);
    for (int k = 0; k <= 12; k++) begin
      e = 3200.0 * pmf;
      $display("  k=%2d observed %4d expected %7.1f", k, hist[k], e);
      expect1((real'(hist[k]) - e) ** 2 < 25.0 * (e + 4.0), "histogram follows the Poisson PMF");
      pmf = pmf * 5.0 / real'(k + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end
endmodule
