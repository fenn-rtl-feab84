// tb_fenn_writeback: the writeback stage.  Checks that ALU data or memory data is
// written to the vector register file only in the cycle the result is accepted,
// RNG-state loads, the bypass outputs, and the XIF result fields, with result_ready
// withheld at random.
module tb_fenn_writeback;
  import fenn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, wb_ready, vrf_we, byp_valid, result_valid, result_ready = 1;
  wb_req_t in_req = '0;
  vec_t mem_rdata = '0, vrf_wd, rng_load_data, byp_data;
  reg_idx_t vrf_wa, byp_vd;
  logic [1:0] rng_load_en;
  x_result_t result;
  int checks = 0, failures = 0;

  fenn_writeback dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect1(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    wb_req_t r;
    vec_t exp_data;
    int waited;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      r = '0;
      r.id = 4'($urandom); r.rd = 5'($urandom); r.vd = 5'($urandom);
      r.xdata = $urandom;
      for (int w = 0; w < 16; w++) r.vdata[32*w +: 32] = $urandom;
      case ($urandom_range(0, 3))
        0: r.vwe = 1;
        1: begin r.vwe = 1; r.from_mem = 1; end
        2: begin r.from_mem = 1; r.rng_load = 2'($urandom_range(1, 2)); end
        default: r.xwe = 1;
      endcase
      in_valid = 1; in_req = r;
      result_ready = 1'($urandom);
      #1;
      expect1(wb_ready == (!result_valid || result_ready), "ready rule");
      while (!wb_ready) begin @(negedge clk); result_ready = 1'($urandom); #1; end
      @(negedge clk);
      in_valid = 0;
      for (int w = 0; w < 16; w++) mem_rdata[32*w +: 32] = $urandom;
      exp_data = r.from_mem ? mem_rdata : r.vdata;
      waited = 0;
      forever begin
        result_ready = ($urandom_range(0, 2) != 0);
        #1;
        expect1(result_valid && result.id == r.id && result.we == r.xwe &&
                (!r.xwe || (result.rd == r.rd && result.data == r.xdata)), "result fields");
        expect1(byp_valid == r.vwe && (!r.vwe || (byp_vd == r.vd && byp_data == exp_data)), "bypass");
        expect1(vrf_we == (r.vwe && result_ready), "write only when accepted");
        if (vrf_we) expect1(vrf_wa == r.vd && vrf_wd == exp_data, "write data");
        expect1(rng_load_en == (result_ready ? r.rng_load : 2'b00), "rng load enable");
        if (|rng_load_en) expect1(rng_load_data == mem_rdata, "rng load data");
        if (result_ready) break;
        waited++;
        @(negedge clk);
      end
      @(negedge clk); result_ready = 0; #1;
      expect1(!result_valid, "empty after accept");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
