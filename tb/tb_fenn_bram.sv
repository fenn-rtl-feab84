// tb_fenn_bram: dual-port BRAM with a reduced depth.  The host port (B) fills the
// memory, the core port (A) reads it back one cycle later; byte-enable writes from
// both ports and read-first behaviour are checked against a model.
module tb_fenn_bram;
  localparam int DEPTH = 128;
  logic clk = 0;
  logic a_en = 0, b_en = 0;
  logic [3:0] a_we = 0, b_we = 0;
  logic [6:0] a_addr = 0, b_addr = 0;
  logic [31:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fenn_bram #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d, input logic [3:0] be);
    for (int i = 0; i < 4; i++) if (be[i]) old[8*i +: 8] = d[8*i +: 8];
    return old;
  endfunction

  initial begin
    logic [31:0] ea, eb;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); b_en = 1; b_we = 4'hf; b_addr = 7'(a); b_wdata = $urandom; model[a] = b_wdata;
    end
    @(negedge clk); b_en = 0; b_we = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      a_en = 1; b_en = 1;
      a_addr = 7'($urandom); b_addr = 7'($urandom);
      if (b_addr == a_addr) b_addr = b_addr + 1;
      a_we = 4'($urandom); b_we = 4'($urandom);
      a_wdata = $urandom; b_wdata = $urandom;
      ea = model[a_addr]; eb = model[b_addr];
      model[a_addr] = merge(model[a_addr], a_wdata, a_we);
      model[b_addr] = merge(model[b_addr], b_wdata, b_we);
      @(negedge clk);
      a_en = 0; b_en = 0; a_we = 0; b_we = 0;
      checks += 2;
      if (a_rdata !== ea) begin failures++; if (failures < 10) $display("FAIL A %0d", a_addr); end
      if (b_rdata !== eb) begin failures++; if (failures < 10) $display("FAIL B %0d", b_addr); end
    end
    // final read-back of everything through port A
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); a_en = 1; a_addr = 7'(a);
      @(negedge clk); a_en = 0;
      checks++;
      if (a_rdata !== model[a]) begin failures++; if (failures < 10) $display("FAIL final %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
