// tb_fenn_coproc: random instruction-stream test of the FeNN co-processor against
// the instruction-set reference model.
//
// A reduced vector memory (64 vectors) is attached.  The registers are first given
// lane-varied contents with VFILL and VSEL, stored, and the RNG state is loaded from
// memory.  Then a random stream of every instruction kind runs, with random commit
// delays, killed instructions, refused non-FeNN words and a core that withholds
// result_ready at random.  Every result is checked as it returns; at the end every
// lane of every register and the RNG output are read back with VEXTRACT.  The test
// fails if the bypass, a kill, a result stall or a late commit never happened.
module tb_fenn_coproc;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

  localparam int DEPTH = 64;
  localparam int AW    = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          issue_valid, issue_ready, commit_valid, result_valid, result_ready;
  x_issue_req_t  issue_req;
  x_issue_resp_t issue_resp;
  x_commit_t     commit;
  x_result_t     result;
  logic          mem_en, mem_we;
  logic [AW-1:0] mem_addr;
  vec_t          mem_wdata, mem_rdata;

  fenn_coproc #(.AW(AW)) dut (
    .clk(clk), .rst_n(rst_n),
    .x_issue_valid(issue_valid), .x_issue_ready(issue_ready), .x_issue_req(issue_req),
    .x_issue_resp(issue_resp), .x_commit_valid(commit_valid), .x_commit(commit),
    .x_result_valid(result_valid), .x_result_ready(result_ready), .x_result(result),
    .mem_en(mem_en), .mem_we(mem_we), .mem_addr(mem_addr), .mem_wdata(mem_wdata),
    .mem_rdata(mem_rdata));

  fenn_vmem #(.DEPTH(DEPTH)) u_mem (.clk(clk), .en(mem_en), .we(mem_we), .addr(mem_addr),
                                    .wdata(mem_wdata), .rdata(mem_rdata));

  tb_fenn_xif_master #(.MEM_DEPTH(DEPTH), .STALLS(1'b1)) cpu (
    .clk(clk), .rst_n(rst_n), .issue_valid(issue_valid), .issue_ready(issue_ready),
    .issue_req(issue_req), .issue_resp(issue_resp), .commit_valid(commit_valid),
    .commit(commit), .result_valid(result_valid), .result_ready(result_ready), .result(result));

  int checks = 0, failures = 0;
  int n_bypass = 0;
  bit written [DEPTH];

  always @(posedge clk)
    if (dut.u_execute.bypass_a || dut.u_execute.bypass_b) n_bypass++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end

  task automatic run(input logic [31:0] ins, input logic [31:0] x1 = 0, input logic [31:0] x2 = 0,
                     input bit kill = 0);
    xid_t id;
    bit acc;
    cpu.exec(ins, x1, x2, kill, id, acc);
  endtask

  // a base register value and store/load immediate that address vector k
  task automatic addr_for(input int k, output logic [31:0] base, output int imm);
    imm  = $urandom_range(0, 4095) - 2048;
    base = 32'(k * 64 - imm + $urandom_range(0, 63));
  endtask

  function automatic void need(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
  endfunction

  initial begin
    logic [31:0] base, d;
    int imm, k, kind, n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // lane-varied register contents
    for (int r = 0; r < 32; r++) begin
      run(i_vfill(r, 0), $urandom);
      repeat (4) begin
        run(i_vfill(31, 0), $urandom);
        run(i_vsel(r, 1, 31), $urandom);
      end
    end
    for (int k2 = 0; k2 < 8; k2++) begin
      addr_for(k2, base, imm);
      run(i_vstore(k2 * 3 % 32, 2, imm), base);
      written[k2] = 1;
    end
    addr_for(3, base, imm); run(i_vload(0, 1, imm, 1), base);
    addr_for(4, base, imm); run(i_vload(0, 1, imm, 2), base);

    for (int it = 0; it < 4000; it++) begin
      kind = $urandom_range(0, 12);
      case (kind)
        0: run(i_vadd($urandom_range(0, 31), $urandom_range(0, 31), $urandom_range(0, 31), 1'($urandom)));
        1: run(i_vsub($urandom_range(0, 31), $urandom_range(0, 31), $urandom_range(0, 31), 1'($urandom)));
        2: run(i_vmul($urandom_range(0, 31), $urandom_range(0, 31), $urandom_range(0, 31),
                      $urandom_range(0, 15), $urandom_range(0, 2)));
        3: run(i_vtst($urandom_range(1, 31), $urandom_range(0, 31), $urandom_range(0, 31), $urandom_range(0, 3)));
        4: run(i_vsel($urandom_range(0, 31), 5, $urandom_range(0, 31)), $urandom);
        5: begin
          k = $urandom_range(0, DEPTH - 1);
          addr_for(k, base, imm);
          run(i_vstore($urandom_range(0, 31), 6, imm), base);
          written[k] = 1;
        end
        6, 7: begin
          do k = $urandom_range(0, DEPTH - 1); while (!written[k]);
          addr_for(k, base, imm);
          n = $urandom_range(0, 9);
          run(i_vload($urandom_range(0, 31), 7, imm, (n == 0) ? 1 : (n == 1) ? 2 : 0), base);
        end
        8: run(i_vfill($urandom_range(0, 31), 8), $urandom);
        9: run(i_vextract($urandom_range(1, 31), $urandom_range(0, 31), 9), 0, $urandom);
        10: run(i_vrng($urandom_range(0, 31)));
        11: run(i_vadd($urandom_range(0, 31), $urandom_range(0, 31), $urandom_range(0, 31)), 0, 0, 1'b1);
        default: run(32'h0000_0033 | ($urandom & 32'hffff_ff80));   // a scalar instruction
      endcase
    end
    // read back every lane of every register, then the RNG output
    for (int r = 0; r < 32; r++)
      for (int l = 0; l < 32; l++) run(i_vextract(1, r, 2), 0, l);
    run(i_vrng(4));
    for (int l = 0; l < 32; l++) run(i_vextract(1, 4, 2), 0, l);
    cpu.drain();

    $display("issued %0d killed %0d refused %0d results %0d bypass %0d result stalls %0d issue waits %0d late commits %0d sat %0d stoch %0d",
             cpu.n_issued, cpu.n_killed, cpu.n_refused, cpu.n_results, n_bypass,
             cpu.n_result_stall, cpu.n_issue_wait, cpu.n_late_commit, cpu.iss.n_sat, cpu.iss.n_stoch);
    need("bypass", n_bypass);
    need("kill", cpu.n_killed);
    need("refused", cpu.n_refused);
    need("result stall", cpu.n_result_stall);
    need("late commit", cpu.n_late_commit);
    need("saturation", cpu.iss.n_sat);
    need("stochastic multiply", cpu.iss.n_stoch);
    checks++;
    if (cpu.n_results != cpu.n_issued - cpu.n_killed) begin
      failures++;
      $display("FAIL results %0d != committed %0d", cpu.n_results, cpu.n_issued - cpu.n_killed);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks + cpu.checks, failures + cpu.failures);
    $finish;
  end
endmodule
