// tb_lref_coef_ctrl: self-checking testbench for the bandwidth controller.
// A behavioural 67-word store with a one-clock registered read stands in for
// lref_coef_mem and holds random words. Checks: the full load after reset
// (all 25 words, commit 25+3 clocks after reset release), each bandwidth
// switch (14 words, commit 14+3 clocks after bw_sel changes), that the active
// coefficients do not change until the commit, that a switch leaves the
// masking coefficients alone, that reload picks up rewritten masking words,
// and that a request arriving during a load is honoured afterwards.
module tb_lref_coef_ctrl;
  import lref_pkg::*;
  logic clk = 0, rst_n = 0, reload = 0;
  bw_e bw_sel = BW_498K;
  logic [6:0] mem_raddr;
  logic [15:0] mem_rdata;
  logic signed [15:0] coef1 [14];
  logic signed [15:0] coef2 [7];
  logic signed [15:0] coef3 [4];
  bw_e active_bw;
  logic busy, ready, switch_done;
  always #5 clk = ~clk;

  lref_coef_ctrl dut (.*);

  logic [15:0] store [67];
  always @(posedge clk) mem_rdata <= (mem_raddr < 67) ? store[mem_raddr] : 16'h0;

  int checks = 0, failures = 0;
  int switches [4] = '{default: 0};

  task automatic check_set(bw_e b, string what);
    checks++;
    if (active_bw != b) begin failures++; $display("FAIL %s: active_bw %0d expected %0d", what, active_bw, b); end
    for (int k = 0; k < 14; k++) begin
      checks++;
      if (coef1[k] !== store[14 * b + k]) begin failures++; $display("FAIL %s: coef1[%0d]", what, k); end
    end
    for (int k = 0; k < 7; k++) begin
      checks++;
      if (coef2[k] !== store[56 + k]) begin failures++; $display("FAIL %s: coef2[%0d]", what, k); end
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (coef3[k] !== store[63 + k]) begin failures++; $display("FAIL %s: coef3[%0d]", what, k); end
    end
  endtask

  // Count clock edges until switch_done, checking coef1 holds still meanwhile.
  task automatic wait_commit(output int edges);
    logic signed [15:0] held [14];
    held = coef1;
    edges = 0;
    do begin
      @(posedge clk); #1; edges++;
      if (!switch_done) begin
        checks++;
        if (coef1 != held) begin failures++; $display("FAIL: coefficients changed before commit"); end
      end
    end while (!switch_done && edges < 200);
  endtask

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int e;
    for (int a = 0; a < 67; a++) store[a] = 16'($urandom);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait_commit(e);
    checks++;
    if (e != 25 + 3) begin failures++; $display("FAIL: full load took %0d edges", e); end
    check_set(BW_498K, "reset load");
    checks++;
    if (!ready || busy) begin failures++; $display("FAIL: ready/busy after load"); end

    // every bandwidth, in a mixed order
    for (int r = 0; r < 8; r++) begin
      bw_e nb;
      nb = bw_e'((int'(active_bw) + 1 + $urandom_range(0, 2)) % 4);
      @(negedge clk) bw_sel = nb;
      wait_commit(e);
      checks++;
      if (e != 14 + 3) begin failures++; $display("FAIL: switch took %0d edges", e); end
      check_set(nb, "switch");
      switches[nb]++;
    end

    // rewrite masking words, then reload
    for (int a = 56; a < 67; a++) store[a] = 16'($urandom);
    @(negedge clk) reload = 1;
    @(negedge clk) reload = 0;
    wait_commit(e);
    check_set(bw_sel, "reload");

    // a new request while a load is running is served after it
    @(negedge clk) bw_sel = bw_e'((int'(bw_sel) + 1) % 4);
    repeat (5) @(negedge clk);
    bw_sel = bw_e'((int'(bw_sel) + 2) % 4);
    wait_commit(e);
    wait_commit(e);
    check_set(bw_sel, "request during load");
    repeat (30) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL: still busy"); end

    for (int b = 0; b < 4; b++) begin
      checks++;
      if (switches[b] == 0) begin failures++; $display("FAIL: bandwidth %0d never selected", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
