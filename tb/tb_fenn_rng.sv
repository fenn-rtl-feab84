// tb_fenn_rng: loads random seeds into both state registers, then steps the
// generators and compares every lane's output with a software Xoroshiro32++
// [13,5,10,9].  Also checks that output holds without a step, that a load and a
// step in the same cycle use the loaded state, and reset.
module tb_fenn_rng;
  import fenn_pkg::*;
  import tb_fenn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [1:0] load_en = '0;
  vec_t load_data = '0, rnd;
  logic step = 0;
  logic [15:0] s0 [32], s1 [32], o;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fenn_rng dut (.clk(clk), .rst_n(rst_n), .load_en(load_en), .load_data(load_data), .step(step), .rnd(rnd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string what);
    logic [15:0] t0, t1;
    for (int l = 0; l < 32; l++) begin
      t0 = s0[l]; t1 = s1[l];
      xoro_step(t0, t1, o);
      checks++;
      if (rnd[16*l +: 16] !== o) begin
        failures++;
        if (failures < 4) $display("FAIL %s lane %0d got %h exp %h  dut s0 %h s1 %h model %h %h", what, l, rnd[16*l +: 16], o, dut.s0_q[16*l +: 16], dut.s1_q[16*l +: 16], s0[l], s1[l]);
      end
    end
  endtask

  task automatic model_step();
    for (int l = 0; l < 32; l++) xoro_step(s0[l], s1[l], o);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (rnd !== '0) begin failures++; $display("FAIL reset state"); end
    for (int round = 0; round < 4; round++) begin
      // load s0 then s1
      @(negedge clk);
      for (int w = 0; w < 16; w++) load_data[32*w +: 32] = $urandom;
      for (int l = 0; l < 32; l++) s0[l] = load_data[16*l +: 16];
      load_en = 2'b01;
      @(negedge clk);
      for (int w = 0; w < 16; w++) load_data[32*w +: 32] = $urandom;
      for (int l = 0; l < 32; l++) s1[l] = load_data[16*l +: 16];
      load_en = 2'b10;
      if (round % 2 == 1) begin
        // load and step together: the step must see the loaded s1
        step = 1;
        #1 compare("load+step");
        model_step();
      end
      @(negedge clk);
      load_en = 2'b00;
      step = 0;
      for (int n = 0; n < 200; n++) begin
        #1 compare("step");
        step = ($urandom_range(0, 3) != 0);
        @(negedge clk);
        if (step) model_step();
        step = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
