// tb_lref_filter: self-checking testbench for the complete LRef filter.
//
// For each of the four bandwidths: select it, wait for the switch, flush the
// delay lines with zeros, send an impulse and check the whole 171-sample
// impulse response against the bit-true direct-form model of lref_model_pkg,
// its linear-phase symmetry about sample 85 (the group delay) and its peak at
// sample 85. Then streams random complex samples with random gaps while
// switching bandwidth on the fly, and checks every output against the model.
// Also checks the 3-clock latency from in_valid to out_valid.
module tb_lref_filter;
  import lref_pkg::*;
  import lref_model_pkg::*;

  logic clk = 0, rst_n = 0, reload = 0, cfg_we = 0;
  logic [6:0] cfg_waddr = '0;
  logic [15:0] cfg_wdata = '0;
  bw_e bw_sel = BW_342K, active_bw;
  logic busy, ready, switch_done;
  logic in_valid = 0, out_valid;
  logic signed [15:0] in_data [2];
  logic signed [15:0] out_data [2];
  always #5 clk = ~clk;

  lref_filter dut (.*);

  int checks = 0, failures = 0;
  lref_model mdl [2];
  longint expq [2][$];
  longint got [2][$];
  logic [2:0] vpipe = '0;
  int n_switch_stream = 0;

  // Feed the model with each accepted sample and the bank active at that edge.
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== vpipe[2]) begin failures++; $display("FAIL: out_valid latency"); end
      vpipe <= {vpipe[1:0], in_valid};
      if (in_valid)
        for (int l = 0; l < 2; l++) expq[l].push_back(mdl[l].push(in_data[l], int'(active_bw)));
      if (out_valid)
        for (int l = 0; l < 2; l++) got[l].push_back(out_data[l]);
    end
  end

  task automatic send(longint i_v, longint q_v, int gap);
    @(negedge clk);
    in_valid = 1; in_data[0] = 16'(i_v); in_data[1] = 16'(q_v);
    @(negedge clk);
    in_valid = 0;
    repeat (gap) @(negedge clk);
  endtask

  task automatic switch_to(bw_e b);
    @(negedge clk) bw_sel = b;
    while (active_bw != b || busy) @(negedge clk);
  endtask

  task automatic compare_all();
    repeat (5) @(negedge clk);
    checks++;
    if (got[0].size() != expq[0].size()) begin
      failures++; $display("FAIL: %0d outputs, %0d expected", got[0].size(), expq[0].size());
    end
    for (int l = 0; l < 2; l++)
      while (got[l].size() > 0 && expq[l].size() > 0) begin
        longint g, e;
        g = got[l].pop_front(); e = expq[l].pop_front();
        checks++;
        if (g != e) begin
          failures++;
          if (failures < 10) $display("FAIL: lane %0d got %0d expected %0d", l, g, e);
        end
      end
  endtask

  initial begin
    #50000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0] w [67];
    $readmemh("rtl/lref_coeffs.hex", w);
    for (int l = 0; l < 2; l++) begin
      mdl[l] = new();
      for (int a = 0; a < 67; a++) mdl[l].words[a] = longint'($signed(w[a]));
    end
    in_data[0] = '0; in_data[1] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);

    for (int b = 0; b < 4; b++) begin
      longint ir [IMPULSE_LEN];
      int peak;
      switch_to(bw_e'(b));
      repeat (IMPULSE_LEN) send(0, 0, 0);
      compare_all();
      send(20000, -20000, 0);
      repeat (IMPULSE_LEN + 4) send(0, 0, 0);
      repeat (5) @(negedge clk);
      for (int k = 0; k < IMPULSE_LEN; k++) ir[k] = got[0][k];
      compare_all();
      peak = 0;
      for (int k = 0; k < IMPULSE_LEN; k++) if (ir[k] > ir[peak]) peak = k;
      checks++;
      if (peak != GROUP_DELAY) begin failures++; $display("FAIL: bw %0d peak at %0d", b, peak); end
      for (int k = 0; k < GROUP_DELAY; k++) begin
        checks++;
        if (ir[k] != ir[IMPULSE_LEN - 1 - k]) begin failures++; $display("FAIL: bw %0d not symmetric at %0d", b, k); end
      end
      $display("bandwidth %0d: impulse peak %0d at sample %0d", b, ir[peak], peak);
    end

    // random stream with bandwidth switches on the fly
    for (int i = 0; i < 1200; i++) begin
      if (i % 300 == 150) begin
        @(negedge clk) bw_sel = bw_e'((int'(bw_sel) + 1 + $urandom_range(0, 2)) % 4);
        n_switch_stream++;
      end
      send($signed($urandom_range(0, 24000)) - 12000, $signed($urandom_range(0, 24000)) - 12000,
           ($urandom_range(0, 3) == 0) ? 1 : 0);
    end
    compare_all();
    $display("switches during stream=%0d", n_switch_stream);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
