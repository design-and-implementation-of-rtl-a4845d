// tb_lref_coef_mem: self-checking testbench for the 67-word coefficient store.
// Checks the power-up contents against the coefficient file (read here
// separately), the one-clock read latency, writes, and that addresses past
// the end read as zero and ignore writes.
module tb_lref_coef_mem;
  logic clk = 0, we = 0;
  logic [6:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  always #5 clk = ~clk;

  lref_coef_mem dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] ref_mem [67];

  task automatic expect_rd(logic [6:0] a, logic [15:0] e);
    @(negedge clk) raddr = a;
    @(posedge clk); #1;
    checks++;
    if (rdata !== e) begin
      failures++; $display("FAIL: addr %0d read %h expected %h", a, rdata, e);
    end
  endtask

  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    $readmemh("rtl/lref_coeffs.hex", ref_mem);
    // power-up contents
    for (int a = 0; a < 67; a++) expect_rd(7'(a), ref_mem[a]);
    // halfband masking words are the paper's non-zero taps: none may be zero
    for (int a = 56; a < 67; a++) begin
      checks++;
      if (ref_mem[a] == 0) begin failures++; $display("FAIL: zero masking coefficient at %0d", a); end
    end
    // one-clock latency: the value changes at the first edge after the address
    @(negedge clk) raddr = 7'd5;
    @(posedge clk); #1;
    @(negedge clk) raddr = 7'd60;
    #1; checks++;
    if (rdata !== ref_mem[5]) begin failures++; $display("FAIL: read is not registered"); end
    @(posedge clk); #1; checks++;
    if (rdata !== ref_mem[60]) begin failures++; $display("FAIL: read latency"); end
    // writes
    for (int i = 0; i < 40; i++) begin
      logic [6:0] a;
      logic [15:0] d;
      a = 7'($urandom_range(0, 66));
      d = 16'($urandom);
      @(negedge clk) begin we = 1; waddr = a; wdata = d; end
      @(negedge clk) we = 0;
      ref_mem[a] = d;
      expect_rd(a, d);
    end
    for (int a = 0; a < 67; a++) expect_rd(7'(a), ref_mem[a]);
    // out of range
    @(negedge clk) begin we = 1; waddr = 7'd100; wdata = 16'hBEEF; end
    @(negedge clk) we = 0;
    expect_rd(7'd100, 16'h0000);
    expect_rd(7'd67, 16'h0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
