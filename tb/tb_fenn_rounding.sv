// tb_fenn_rounding: the fixed-point rounding experiment.  21760 multiplications
// (680 vectors of 32 lanes) of random S0.15 operands drawn from FeNN's own RNG, each
// done with round-to-zero (truncating shift), round-to-nearest and stochastic
// rounding.  Every product returned by the co-processor is checked bit-exactly
// against the instruction-set model, and the error against the exact product, in
// units of 2^-15, must have the distribution of its rounding mode: truncation lies
// in (-1, 0] with mean -1/2, round-to-nearest in [-1/2, 1/2] with mean 0, and
// stochastic rounding in (-1, 1) with mean 0 and a spread larger than nearest.
module tb_fenn_rounding;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

  localparam int NVEC = 680;

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

  real sum [3], sq [3], mn [3], mx [3];

  initial begin
    logic [31:0] d;
    logic [15:0] a, b;
    real exact, err;
    cpu.commit_max = 1;
    for (int m = 0; m < 3; m++) begin sum[m] = 0; sq[m] = 0; mn[m] = 1e9; mx[m] = -1e9; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    cpu.seed_rng(16'h8a1f, 32'h0);
    for (int v = 0; v < NVEC; v++) begin
      run(i_vrng(1));
      run(i_vrng(2));
      run(i_vmul(3, 1, 2, 15, 0));
      run(i_vmul(4, 1, 2, 15, 1));
      run(i_vmul(5, 1, 2, 15, 2));
      cpu.drain();
      for (int l = 0; l < 32; l++) begin
        a = cpu.iss.v[1][l];
        b = cpu.iss.v[2][l];
        exact = real'(s16(a)) * real'(s16(b)) / 32768.0;
        for (int m = 0; m < 3; m++) begin
          cpu.exec_get(i_vextract(6, 3 + m, 2), 0, l, d);
          err = real'(s16(d[15:0])) - exact;
          sum[m] += err; sq[m] += err * err;
          if (err < mn[m]) mn[m] = err;
          if (err > mx[m]) mx[m] = err;
        end
      end
    end
    cpu.drain();
    for (int m = 0; m < 3; m++)
      $display("mode %0d: mean error %f lsb, rms %f, range [%f, %f]", m, sum[m] / (NVEC * 32.0),
               $sqrt(sq[m] / (NVEC * 32.0)), mn[m], mx[m]);
    expect1(mn[0] > -1.0 && mx[0] <= 0.0, "truncation error in (-1, 0]");
    expect1(sum[0] / (NVEC * 32.0) < -0.45 && sum[0] / (NVEC * 32.0) > -0.55, "truncation bias -1/2");
    expect1(mn[1] >= -0.5 && mx[1] <= 0.5, "nearest error within 1/2");
    expect1(sum[1] / (NVEC * 32.0) > -0.02 && sum[1] / (NVEC * 32.0) < 0.02, "nearest unbiased");
    expect1(mn[2] > -1.0 && mx[2] < 1.0, "stochastic error within 1");
    expect1(sum[2] / (NVEC * 32.0) > -0.02 && sum[2] / (NVEC * 32.0) < 0.02, "stochastic unbiased");
    expect1(sq[2] > sq[1], "stochastic spread exceeds nearest");
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end
endmodule
