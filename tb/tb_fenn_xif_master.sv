// tb_fenn_xif_master: plays the scalar RISC-V core's side of the XIF for FeNN
// testbenches.
//
// exec() offers one instruction with its scalar operands on the issue interface,
// waits for the handshake and then commits (or kills) it in the next cycle or up
// to commit_max-1 cycles later, in
// issue order, from a separate process.  Every committed instruction is also run
// on the reference model (fenn_iss), and the result the co-processor returns is
// checked against the model's, in order: id, rd, we and, for scalar results, data.
// result_ready is withheld at random while stall_en (initially STALLS) is set.  issue_cycle and
// result_cycle record, per id, the clock edge of each handshake.  Signals are driven on the
// falling clock edge and handshakes are decided just before the rising edge.
module tb_fenn_xif_master
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;
#(
  parameter int unsigned MEM_DEPTH = 64,
  parameter bit          STALLS    = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          issue_valid,
  input  logic          issue_ready,
  output x_issue_req_t  issue_req,
  input  x_issue_resp_t issue_resp,
  output logic          commit_valid,
  output x_commit_t     commit,
  input  logic          result_valid,
  output logic          result_ready,
  input  x_result_t     result
);

  typedef struct { xid_t id; bit kill; int due; } commit_t;
  typedef struct { xid_t id; logic we; logic [4:0] rd; logic [31:0] data; } expect_t;

  fenn_iss iss;
  commit_t cq[$];
  expect_t eq[$];
  int cycle = 0;
  int checks = 0, failures = 0;
  int n_issued = 0, n_killed = 0, n_refused = 0, n_results = 0;
  int n_issue_wait = 0, n_result_stall = 0, n_late_commit = 0;
  xid_t next_id = '0;
  logic [31:0] last_data [16];
  bit          seen [16];
  int          commit_max = 3;
  bit          stall_en = STALLS;
  int          issue_cycle [16];
  int          result_cycle [16];

  initial begin
    iss = new(MEM_DEPTH);
    issue_valid  = 1'b0;
    issue_req    = '0;
    commit_valid = 1'b0;
    commit       = '0;
    result_ready = 1'b1;
  end

  always @(posedge clk) cycle <= cycle + 1;

  // commit process
  initial forever begin
    @(negedge clk);
    commit_valid = 1'b0;
    if (cq.size() > 0 && cq[0].due <= cycle) begin
      commit_valid       = 1'b1;
      commit.id          = cq[0].id;
      commit.commit_kill = cq[0].kill;
      void'(cq.pop_front());
    end
  end

  // result monitor
  initial forever begin
    expect_t e;
    @(negedge clk);
    result_ready = stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
    #2;
    if (result_valid && !result_ready) n_result_stall++;
    if (result_valid && result_ready) begin
      n_results++;
      checks++;
      if (eq.size() == 0) begin
        failures++;
        $display("FAIL unexpected result id=%0d", result.id);
      end else begin
        e = eq.pop_front();
        if (result.id !== e.id || result.we !== e.we || (e.we && (result.rd !== e.rd ||
            result.data !== e.data))) begin
          failures++;
          if (failures < 10)
            $display("FAIL result id=%0d/%0d we=%0b/%0b rd=%0d/%0d data=%h/%h", result.id, e.id,
                     result.we, e.we, result.rd, e.rd, result.data, e.data);
        end
        last_data[result.id] = result.data;
        result_cycle[result.id] = cycle;
        seen[result.id]      = 1'b1;
      end
    end
  end

  // Issue one instruction.  Returns its id; accepted tells whether FeNN took it.
  task automatic exec(input logic [31:0] instr, input logic [31:0] x1 = 0,
                      input logic [31:0] x2 = 0, input bit kill = 1'b0,
                      output xid_t id, output bit accepted);
    expect_t e;
    commit_t c;
    logic [31:0] r;
    @(negedge clk);
    issue_valid        = 1'b1;
    issue_req.instr    = instr;
    issue_req.id       = next_id;
    issue_req.rs[0]    = x1;
    issue_req.rs[1]    = x2;
    issue_req.rs_valid = 2'b11;
    #2;
    while (!issue_ready) begin
      n_issue_wait++;
      @(negedge clk);
      #2;
    end
    accepted = issue_resp.accept;
    id       = next_id;
    @(posedge clk);
    #1;
    issue_valid = 1'b0;
    issue_cycle[id] = cycle;
    if (accepted) begin
      seen[id] = 1'b0;
      c.id   = id;
      c.kill = kill;
      c.due  = cycle + $urandom_range(0, commit_max - 1);
      if (c.due > cycle) n_late_commit++;
      cq.push_back(c);
      n_issued++;
      if (kill) n_killed++;
      else begin
        r = iss.exec(instr, x1, x2);
        e.id = id; e.we = issue_resp.writeback; e.rd = instr[11:7]; e.data = r;
        eq.push_back(e);
      end
      next_id = next_id + 1'b1;
    end else n_refused++;
  endtask

  // Issue and wait for the scalar result, as the core does for a dependent use.
  task automatic exec_get(input logic [31:0] instr, input logic [31:0] x1, input logic [31:0] x2,
                          output logic [31:0] data);
    xid_t id;
    bit   acc;
    exec(instr, x1, x2, 1'b0, id, acc);
    while (!seen[id]) @(negedge clk);
    data = last_data[id];
  endtask

  // Give every lane its own RNG seed: v20 = base + sum of C_b over the set bits b
  // of the lane number, built with VFILL/VSEL/VADD, stored at byte address addr and
  // addr+64 and loaded into the two state registers.  Uses v20..v22 and x1, x2.
  task automatic seed_rng(input logic [15:0] base, input logic [31:0] addr);
    xid_t id;
    bit acc;
    logic [31:0] lane_bit [5] = '{32'haaaa_aaaa, 32'hcccc_cccc, 32'hf0f0_f0f0, 32'hff00_ff00, 32'hffff_0000};
    logic [15:0] c [5] = '{16'h3c6f, 16'h9e37, 16'h1b53, 16'h7f4a, 16'hd1b5};
    exec(i_vfill(20, 1), {16'h0, base}, 0, 1'b0, id, acc);
    for (int b = 0; b < 5; b++) begin
      exec(i_vfill(21, 1), 0, 0, 1'b0, id, acc);
      exec(i_vfill(22, 1), {16'h0, c[b]}, 0, 1'b0, id, acc);
      exec(i_vsel(21, 2, 22), lane_bit[b], 0, 1'b0, id, acc);
      exec(i_vadd(20, 20, 21), 0, 0, 1'b0, id, acc);
    end
    exec(i_vstore(20, 1, 0), addr, 0, 1'b0, id, acc);
    exec(i_vload(0, 1, 0, 1), addr, 0, 1'b0, id, acc);
    exec(i_vfill(21, 1), 32'h5bd1, 0, 1'b0, id, acc);
    exec(i_vadd(20, 20, 21), 0, 0, 1'b0, id, acc);
    exec(i_vstore(20, 1, 64), addr, 0, 1'b0, id, acc);
    exec(i_vload(0, 1, 64, 2), addr, 0, 1'b0, id, acc);
  endtask

  task automatic drain();
    while (cq.size() != 0 || eq.size() != 0) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

endmodule
