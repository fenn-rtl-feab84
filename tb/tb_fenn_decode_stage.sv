// tb_fenn_decode_stage: directed tests of the XIF issue/commit handling.
// Checks accept/writeback responses, refusal of non-FeNN words, that an accepted
// instruction is offered to execute only after its commit, that a killed one never
// is, that issue_ready stays low while the buffer is occupied, commits in the issue
// cycle, waiting for a needed scalar operand, and back-pressure from execute.
// Then a random phase: 4000 offers of valid FeNN words and random words, with commit
// delays of 0..3 cycles, 20% kills and random back-pressure.  Each offer's accept
// and writeback bits are checked against the opcode table, and every instruction
// that reaches execute must be the next committed, non-killed one, with its id and
// scalar operands intact.
module tb_fenn_decode_stage;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic issue_valid = 0, issue_ready, commit_valid = 0, d_valid, d_ready = 1;
  x_issue_req_t issue_req = '0;
  x_issue_resp_t issue_resp;
  x_commit_t commit = '0;
  ex_req_t d_req;
  int checks = 0, failures = 0;

  fenn_decode_stage dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect1(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // offer an instruction at the falling edge; returns whether it would be taken
  task automatic offer(input logic [31:0] ins, input logic [31:0] x1, x2, input xid_t id,
                       input logic [1:0] rsv = 2'b11);
    @(negedge clk);
    issue_valid = 1; issue_req.instr = ins; issue_req.id = id;
    issue_req.rs[0] = x1; issue_req.rs[1] = x2; issue_req.rs_valid = rsv;
    #1;
  endtask

  function automatic logic [31:0] rand_fenn_word();
    int r1, r2, r3;
    r1 = $urandom_range(31); r2 = $urandom_range(31); r3 = $urandom_range(31);
    case ($urandom_range(10))
      0: return i_vadd(r1, r2, r3, 1'($urandom_range(1)));
      1: return i_vsub(r1, r2, r3, 1'($urandom_range(1)));
      2: return i_vmul(r1, r2, r3, $urandom_range(15), $urandom_range(2));
      3: return i_vtst(r1, r2, r3, $urandom_range(3));
      4: return i_vsel(r1, r2, r3);
      5: return i_vload(r1, r2, $urandom_range(4095) - 2048, $urandom_range(2));
      6: return i_vstore(r1, r2, $urandom_range(4095) - 2048);
      7: return i_vfill(r1, r2);
      8: return i_vextract(r1, r2, r3);
      default: return i_vrng(r1);
    endcase
  endfunction

  // defined (group, funct3) pairs of the FeNN quadrant
  function automatic bit defined_op(input logic [31:0] w);
    logic [4:0] g;
    logic [2:0] f;
    g = w[6:2]; f = w[14:12];
    if (w[1:0] != 2'b10) return 0;
    case (g)
      5'd0: return f <= 3'd2;
      5'd1: return f <= 3'd3;
      5'd2, 5'd5: return f == 3'd0;
      5'd3: return f <= 3'd2 || f == 3'd4;
      5'd4: return f <= 3'd1;
      default: return 0;
    endcase
  endfunction

  typedef struct { xid_t id; logic [31:0] x1, x2; } exp_t;

  task automatic random_phase();
    exp_t eq [$];
    exp_t e;
    bit   pend, pkill, offering, valid_word, same;
    xid_t pid, nid;
    int   pdue, cyc, n_fire, n_kill, n_same, n_refused;
    logic [31:0] w;
    // commit and drain the instruction the directed tests left waiting (id 6)
    @(negedge clk);
    commit_valid = 1; commit.id = 4'd6; commit.commit_kill = 0; d_ready = 1;
    @(negedge clk);
    commit_valid = 0;
    @(negedge clk);
    expect1(!d_valid && issue_ready, "empty before random phase");
    pend = 0; offering = 0; nid = 4'd8; cyc = 0;
    n_fire = 0; n_kill = 0; n_same = 0; n_refused = 0;
    for (int k = 0; k < 4000 || offering || pend || eq.size() != 0; ) begin
      @(negedge clk);
      cyc++;
      commit_valid = 0;
      if (pend && cyc >= pdue) begin
        commit_valid = 1; commit.id = pid; commit.commit_kill = pkill; pend = 0;
      end
      d_ready = ($urandom_range(3) != 0);
      if (!offering && k < 4000 && $urandom_range(3) != 0) begin
        valid_word = ($urandom_range(3) != 0);
        w = valid_word ? rand_fenn_word() : $urandom;
        issue_valid = 1; issue_req.instr = w; issue_req.id = nid;
        issue_req.rs[0] = $urandom; issue_req.rs[1] = $urandom; issue_req.rs_valid = 2'b11;
        offering = 1;
        k++;
      end else if (!offering) issue_valid = 0;
      #1;
      if (offering && issue_ready) begin
        if (issue_resp.accept) begin
          expect1(defined_op(w), "only defined FeNN words accepted");
          expect1(issue_resp.writeback == (w[6:2] == 5'd1 || (w[6:2] == 5'd4 && w[14:12] == 3'd1)),
                  "writeback flag");
          pkill = ($urandom_range(4) == 0);
          same  = !commit_valid && ($urandom_range(3) == 0);
          if (same) begin
            commit_valid = 1; commit.id = nid; commit.commit_kill = pkill; n_same++;
          end else begin
            pend = 1; pid = nid; pdue = cyc + 1 + $urandom_range(2);
          end
          if (pkill) n_kill++;
          else begin
            e.id = nid; e.x1 = issue_req.rs[0]; e.x2 = issue_req.rs[1];
            eq.push_back(e);
          end
          nid = nid + 1'b1;
          #1;
        end else begin
          n_refused++;
          if (valid_word) expect1(0, "valid FeNN word refused");
          else checks++;
        end
        offering = 0;
      end
      if (d_valid && d_ready) begin
        n_fire++;
        if (eq.size() == 0) expect1(0, "instruction offered to execute that was not expected");
        else begin
          e = eq.pop_front();
          expect1(d_req.id == e.id && d_req.rs1v == e.x1 && d_req.rs2v == e.x2,
                  $sformatf("in-order delivery of id %0d", e.id));
        end
      end
      if (cyc > 40000) begin expect1(0, "random phase stuck"); break; end
    end
    @(negedge clk);
    issue_valid = 0; commit_valid = 0;
    $display("random phase: %0d executed, %0d killed, %0d same-cycle commits, %0d refused",
             n_fire, n_kill, n_same, n_refused);
    expect1(n_fire > 1000 && n_kill > 100 && n_same > 100 && n_refused > 100, "random phase coverage");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. VADD accepted, no scalar writeback, held until commit
    offer(i_vadd(3, 4, 5), 32'h11, 32'h22, 4'd1);
    expect1(issue_ready && issue_resp.accept && !issue_resp.writeback, "vadd accept");
    @(negedge clk); issue_valid = 0; #1;
    expect1(!d_valid, "no execute before commit");
    expect1(!issue_ready || !issue_valid, "idle");
    // a second instruction must wait while the first is uncommitted
    offer(i_vtst(7, 1, 2, 2), 0, 0, 4'd2);
    expect1(issue_resp.accept && issue_resp.writeback, "vtst accept+writeback");
    expect1(!issue_ready, "buffer full holds issue");
    @(negedge clk); #1;
    expect1(!issue_ready, "still full");
    // commit id 1: offered to execute, and the next can enter in the same cycle
    commit_valid = 1; commit.id = 4'd1; commit.commit_kill = 0; #1;
    expect1(d_valid && d_req.id == 4'd1 && d_req.uop.vd == 5'd3 && d_req.rs1v == 32'h11 &&
            d_req.rs2v == 32'h22 && d_req.uop.lop.fn == LF_ADD, "committed instruction offered");
    expect1(issue_ready, "issue ready while buffer drains");
    @(negedge clk); commit_valid = 0; issue_valid = 0; #1;
    expect1(!d_valid && d_req.id == 4'd2, "vtst waiting for commit");
    // kill id 2
    commit_valid = 1; commit.id = 4'd2; commit.commit_kill = 1; #1;
    expect1(!d_valid, "killed never offered");
    @(negedge clk); commit_valid = 0; #1;
    expect1(!d_valid && issue_ready == 1'b1 || !issue_valid, "empty after kill");
    // 2. non-FeNN word refused at once
    offer(32'h0020_8033, 0, 0, 4'd3);
    expect1(issue_ready && !issue_resp.accept, "scalar instruction refused");
    @(negedge clk); issue_valid = 0; #1;
    expect1(!d_valid, "refused not held");
    // 3. commit in the issue cycle
    offer(i_vrng(9), 0, 0, 4'd4);
    commit_valid = 1; commit.id = 4'd4; commit.commit_kill = 0; #1;
    @(negedge clk); issue_valid = 0; commit_valid = 0; #1;
    expect1(d_valid && d_req.id == 4'd4 && d_req.uop.rng_step, "same-cycle commit");
    // back-pressure: execute not ready keeps it
    d_ready = 0;
    @(negedge clk); #1;
    expect1(d_valid && d_req.id == 4'd4, "held under back-pressure");
    offer(i_vfill(2, 3), 32'h5, 0, 4'd5);
    expect1(!issue_ready, "no issue under back-pressure");
    d_ready = 1; #1;
    expect1(issue_ready, "issue when execute takes the held one");
    @(negedge clk); issue_valid = 0; #1;
    expect1(d_req.id == 4'd5 && !d_valid, "next instruction captured");
    commit_valid = 1; commit.id = 4'd5; commit.commit_kill = 0;
    @(negedge clk); commit_valid = 0;
    // 4. needed scalar operand not yet valid
    offer(i_vsel(1, 6, 2), 32'hffff, 0, 4'd6, 2'b10);
    expect1(!issue_ready && issue_resp.accept, "waits for rs1");
    issue_req.rs_valid = 2'b01; #1;
    expect1(issue_ready, "rs1 valid, rs2 not needed");
    @(negedge clk); issue_valid = 0;
    // 5. undefined funct3 in the FeNN quadrant is refused
    offer(enc(7'd0, 5'd0, 5'd0, 3'd7, 5'd1, 5'd0), 0, 0, 4'd7);
    expect1(!issue_resp.accept, "undefined VALU funct3 refused");
    offer(enc(7'd0, 5'd0, 5'd0, 3'd0, 5'd1, 5'd9), 0, 0, 4'd7);
    expect1(!issue_resp.accept, "undefined group refused");
    @(negedge clk); issue_valid = 0;
    random_phase();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
