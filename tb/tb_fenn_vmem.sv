// tb_fenn_vmem: vector memory with a reduced depth.  Writes whole vectors, reads
// them back and checks the one-cycle read latency, that all eight banks take part,
// and that the read data holds while the memory is idle or written.
module tb_fenn_vmem;
  localparam int DEPTH = 256;
  logic clk = 0, en = 0, we = 0;
  logic [7:0] addr = '0;
  logic [511:0] wdata = '0, rdata;
  logic [511:0] model [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fenn_vmem #(.DEPTH(DEPTH)) dut (.clk(clk), .en(en), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] last;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 8'(a);
      for (int w = 0; w < 16; w++) wdata[32*w +: 32] = $urandom;
      model[a] = wdata;
    end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      en = 1; we = 0; addr = 8'($urandom);
      @(negedge clk);
      // one cycle after the request the data is there
      checks++;
      if (rdata !== model[addr]) begin failures++; if (failures < 10) $display("FAIL read %0d", addr); end
      last = rdata;
      // idle or write: output holds
      en = 1'($urandom); we = 1; addr = 8'($urandom);
      for (int w = 0; w < 16; w++) wdata[32*w +: 32] = $urandom;
      if (en) model[addr] = wdata;
      @(negedge clk);
      en = 0;
      checks++;
      if (rdata !== last) begin failures++; if (failures < 10) $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
