// tb_fenn_valu: checks the 32-lane vector ALU lane by lane against the integer
// reference: random vectors through add, saturating sub, stochastic multiply,
// select with a random mask, and compares gathered into a 32-bit mask.
module tb_fenn_valu;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

  lane_op_t op;
  vec_t va, vb, vr, vy;
  logic [31:0] mi, mo, expm;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fenn_valu dut (.op(op), .va(va), .vb(vb), .vrnd(vr), .mask_in(mi), .vy(vy), .mask_out(mo));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chkv(input string what, input int kind);
    logic [15:0] e;
    for (int l = 0; l < 32; l++) begin
      case (kind)
        0: e = ref_add(va[16*l +: 16], vb[16*l +: 16], 1'b0, 1'b0);
        1: e = ref_add(va[16*l +: 16], vb[16*l +: 16], 1'b1, 1'b1);
        2: e = ref_mul(va[16*l +: 16], vb[16*l +: 16], 12, 2, vr[16*l +: 16]);
        default: e = mi[l] ? vb[16*l +: 16] : va[16*l +: 16];
      endcase
      checks++;
      if (vy[16*l +: 16] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL %s lane %0d got %h exp %h", what, l, vy[16*l +: 16], e);
      end
    end
  endtask

  initial begin
    for (int it = 0; it < 300; it++) begin
      for (int w = 0; w < 16; w++) begin
        va[32*w +: 32] = $urandom; vb[32*w +: 32] = $urandom; vr[32*w +: 32] = $urandom;
      end
      if (it % 3 == 0) vb[255:0] = va[255:0];   // make some lanes equal
      mi = $urandom;
      op = '0;
      op.fn = LF_ADD; #1; chkv("add", 0);
      op.fn = LF_SUB; op.sat = 1; #1; chkv("subs", 1);
      op.sat = 0; op.fn = LF_MUL; op.shift = 4'd12; op.rnd = RND_STOCH; #1; chkv("muls", 2);
      op.fn = LF_SEL; #1; chkv("sel", 3);
      for (int c = 0; c < 4; c++) begin
        op.cmp = cmp_e'(c); #1;
        for (int l = 0; l < 32; l++) expm[l] = ref_cmp(va[16*l +: 16], vb[16*l +: 16], c);
        checks++;
        if (mo !== expm) begin
          failures++;
          if (failures < 10) $display("FAIL cmp%0d got %h exp %h", c, mo, expm);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
