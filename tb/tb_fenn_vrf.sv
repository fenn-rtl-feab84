// tb_fenn_vrf: random writes and two-port reads of the vector register file
// against an array model; checks that a read in the write cycle returns the old
// value and the new one after the edge.
module tb_fenn_vrf;
  logic clk = 0;
  logic [4:0] ra, rb, wa;
  logic [511:0] rd_a, rd_b, wd;
  logic we = 0;
  logic [511:0] model [32];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fenn_vrf dut (.clk(clk), .ra_addr(ra), .ra_data(rd_a), .rb_addr(rb), .rb_data(rd_b), .we(we), .wa(wa), .wd(wd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rnd512(output logic [511:0] v);
    for (int w = 0; w < 16; w++) v[32*w +: 32] = $urandom;
  endtask

  initial begin
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); we = 1; wa = 5'(r); rnd512(wd); model[r] = wd;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      ra = 5'($urandom); rb = 5'($urandom);
      we = 1'($urandom); wa = ra; rnd512(wd);
      #1;
      checks += 2;
      if (rd_a !== model[ra]) begin failures++; $display("FAIL port A reg %0d", ra); end
      if (rd_b !== model[rb]) begin failures++; $display("FAIL port B reg %0d", rb); end
      @(posedge clk);
      if (we) model[wa] = wd;
      #1;
      checks++;
      if (rd_a !== model[ra]) begin failures++; $display("FAIL after write reg %0d", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
