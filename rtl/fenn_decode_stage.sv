// fenn_decode_stage: FeNN decode stage and the XIF issue / commit handshakes.
//
// The scalar core offers every instruction it decodes on the issue interface
// together with the values of scalar registers rs1 and rs2.  This stage decodes the
// word (fenn_pkg::decode); words in the FeNN opcode quadrant (bits[1:0]=2'b10) that
// decode to a defined instruction are accepted, all others are refused with
// accept=0 in the same handshake.  resp.writeback tells the core whether a scalar
// result (a mask or an extracted element) will come back.
//
// An accepted instruction waits here, with its scalar operands, until the core
// commits it (commit.id matches, commit_kill=0); a killed instruction is dropped.
// Only then is it offered to execute (d_valid/d_ready).  One instruction is held,
// so issue_ready is low while the held one cannot move on, and also while an
// accepted instruction's needed scalar operand is not yet valid.  A commit may come
// in the same cycle as the issue or later.  With commits one cycle after issue
// the stage passes one instruction per cycle.
// The handshake roles follow the CV32E40X XIF; the single-entry buffer is this
// implementation's choice.
module fenn_decode_stage
  import fenn_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // XIF issue
  input  logic          issue_valid,
  output logic          issue_ready,
  input  x_issue_req_t  issue_req,
  output x_issue_resp_t issue_resp,
  // XIF commit
  input  logic          commit_valid,
  input  x_commit_t     commit,
  // to execute
  output logic          d_valid,
  output ex_req_t       d_req,
  input  logic          d_ready
);

  logic    held_valid, held_committed;
  ex_req_t held;

  uop_t dec_uop;
  logic dec_ok;
  logic rs_ok;
  logic issue_fire;
  logic commit_hit, commit_new_hit;
  logic committed_now, killed_now;
  logic d_fire;

  always_comb begin
    dec_ok = decode(issue_req.instr, dec_uop);
    issue_resp.accept    = dec_ok;
    issue_resp.writeback = dec_ok & dec_uop.xwe;
    rs_ok = &(issue_req.rs_valid | ~dec_uop.need_rs);
  end

  assign commit_hit     = commit_valid && held_valid && (commit.id == held.id);
  assign committed_now  = held_committed || (commit_hit && !commit.commit_kill);
  assign killed_now     = commit_hit && commit.commit_kill;
  assign d_valid        = held_valid && committed_now;
  assign d_req          = held;
  assign d_fire         = d_valid && d_ready;
  assign issue_ready    = (!held_valid || d_fire || killed_now) && (!dec_ok || rs_ok);
  assign issue_fire     = issue_valid && issue_ready && dec_ok;
  assign commit_new_hit = commit_valid && (commit.id == issue_req.id) && !commit_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_valid     <= 1'b0;
      held_committed <= 1'b0;
      held           <= '0;
    end else if (issue_fire) begin
      held_valid     <= !(commit_new_hit && commit.commit_kill);
      held_committed <= commit_new_hit && !commit.commit_kill;
      held.uop       <= dec_uop;
      held.rs1v      <= issue_req.rs[0];
      held.rs2v      <= issue_req.rs[1];
      held.id        <= issue_req.id;
    end else if (d_fire || killed_now) begin
      held_valid     <= 1'b0;
      held_committed <= 1'b0;
    end else if (commit_hit) begin
      held_committed <= 1'b1;
    end
  end

  // The buffer is only refilled once it has emptied.
  property p_no_overwrite;
    @(posedge clk) disable iff (!rst_n)
      issue_fire |-> (!held_valid || d_fire || killed_now);
  endproperty
  a_no_overwrite: assert property (p_no_overwrite);

endmodule
