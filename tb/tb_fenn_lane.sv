// tb_fenn_lane: self-checking test of one FeNN vector lane.  Random and corner
// operands for add/sub (wrapping and saturating), multiply with every shift and
// rounding mode, select, pass and the four compares, against integer reference
// arithmetic.
module tb_fenn_lane;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

  lane_op_t    op;
  logic [15:0] a, b, rnd, y;
  logic        sel, cmp;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fenn_lane dut (.op(op), .a(a), .b(b), .rnd(rnd), .sel(sel), .y(y), .cmp(cmp));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [15:0] exp, input string what);
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got %h exp %h", what, a, b, y, exp);
    end
  endtask

  logic [15:0] corners [6] = '{16'h0000, 16'h0001, 16'h7fff, 16'h8000, 16'hffff, 16'h4000};

  initial begin
    for (int it = 0; it < 6000; it++) begin
      if (it < 36) begin a = corners[it % 6]; b = corners[it / 6]; end
      else begin a = 16'($urandom); b = 16'($urandom); end
      rnd = 16'($urandom);
      sel = 1'($urandom);
      op = '0;
      for (int s = 0; s < 2; s++) begin
        op.sat = 1'(s);
        op.fn = LF_ADD; #1; chk(ref_add(a, b, s != 0, 0), "add");
        op.fn = LF_SUB; #1; chk(ref_add(a, b, s != 0, 1), "sub");
      end
      op.sat = 0;
      op.fn = LF_MUL;
      for (int m = 0; m < 3; m++) begin
        op.rnd = round_e'(m);
        op.shift = 4'($urandom_range(0, 15));
        #1; chk(ref_mul(a, b, int'(op.shift), m, rnd), "mul");
        op.shift = 4'd15;
        #1; chk(ref_mul(a, b, 15, m, rnd), "mul15");
      end
      op.fn = LF_SEL;  #1; chk(sel ? b : a, "sel");
      op.fn = LF_PASS; #1; chk(b, "pass");
      for (int c = 0; c < 4; c++) begin
        op.cmp = cmp_e'(c); #1;
        checks++;
        if (cmp !== ref_cmp(a, b, c)) begin
          failures++;
          if (failures < 10) $display("FAIL cmp%0d a=%h b=%h", c, a, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
