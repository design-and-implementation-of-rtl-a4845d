// tb_lref_ofdm_top: end-to-end testbench of the filtering section, at the
// default parameters (16-bit samples and coefficients, I/Q lanes).
//
// The transmit filter's output is looped straight into the receive filter's
// input (an ideal RF link), so every sample goes through H(z) twice. Random
// complex baseband samples with random gaps are sent through, and each output
// of both filters is compared with the bit-true model of lref_model_pkg.
// Mechanisms exercised and counted (a failure is counted for any that never
// happens): selection of each of the four bandwidths, a bandwidth switch while
// samples are flowing, a coefficient rewrite through the write port followed
// by reload, gaps in the sample stream. Also checks the end-to-end delay of
// 2 x 85 samples for an impulse and the 3-clock latency of each filter.
module tb_lref_ofdm_top;
  import lref_pkg::*;
  import lref_model_pkg::*;

  logic clk = 0, rst_n = 0, reload = 0, cfg_we = 0;
  logic [6:0] cfg_waddr = '0;
  logic [15:0] cfg_wdata = '0;
  bw_e bw_sel = BW_498K, tx_active_bw, rx_active_bw;
  logic tx_busy, rx_busy, tx_ready, rx_ready, tx_switch_done, rx_switch_done;
  logic tx_in_valid = 0, tx_out_valid, rx_in_valid, rx_out_valid;
  logic signed [15:0] tx_in_data [2];
  logic signed [15:0] tx_out_data [2];
  logic signed [15:0] rx_in_data [2];
  logic signed [15:0] rx_out_data [2];
  always #5 clk = ~clk;

  lref_ofdm_top dut (.*);

  // ideal link: transmitter output straight into the receiver
  assign rx_in_valid = tx_out_valid;
  assign rx_in_data  = tx_out_data;

  int checks = 0, failures = 0;
  lref_model txm [2], rxm [2];
  longint tx_exp [2][$], rx_exp [2][$], tx_got [2][$], rx_got [2][$];
  logic [2:0] txv = '0, rxv = '0;
  int cnt_bw [4] = '{default: 0};
  int cnt_switch_live = 0, cnt_reload = 0, cnt_gap = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      checks += 2;
      if (tx_out_valid !== txv[2]) begin failures++; $display("FAIL: tx latency"); end
      if (rx_out_valid !== rxv[2]) begin failures++; $display("FAIL: rx latency"); end
      txv <= {txv[1:0], tx_in_valid};
      rxv <= {rxv[1:0], rx_in_valid};
      if (tx_in_valid)
        for (int l = 0; l < 2; l++) tx_exp[l].push_back(txm[l].push(tx_in_data[l], int'(tx_active_bw)));
      if (rx_in_valid)
        for (int l = 0; l < 2; l++) rx_exp[l].push_back(rxm[l].push(rx_in_data[l], int'(rx_active_bw)));
      if (tx_out_valid) for (int l = 0; l < 2; l++) tx_got[l].push_back(tx_out_data[l]);
      if (rx_out_valid) for (int l = 0; l < 2; l++) rx_got[l].push_back(rx_out_data[l]);
      if (tx_switch_done) cnt_bw[tx_active_bw]++;
    end
  end

  task automatic send(longint i_v, longint q_v, int gap);
    @(negedge clk);
    tx_in_valid = 1; tx_in_data[0] = 16'(i_v); tx_in_data[1] = 16'(q_v);
    @(negedge clk);
    tx_in_valid = 0;
    if (gap > 0) cnt_gap++;
    repeat (gap) @(negedge clk);
  endtask

  task automatic compare(string what, ref longint g [2][$], ref longint e [2][$]);
    checks++;
    if (g[0].size() != e[0].size()) begin
      failures++; $display("FAIL %s: %0d outputs, %0d expected", what, g[0].size(), e[0].size());
    end
    for (int l = 0; l < 2; l++)
      while (g[l].size() > 0 && e[l].size() > 0) begin
        longint a, b;
        a = g[l].pop_front(); b = e[l].pop_front();
        checks++;
        if (a != b) begin
          failures++;
          if (failures < 10) $display("FAIL %s: lane %0d got %0d expected %0d", what, l, a, b);
        end
      end
  endtask

  task automatic drain_and_compare();
    repeat (10) @(negedge clk);
    compare("tx", tx_got, tx_exp);
    compare("rx", rx_got, rx_exp);
  endtask

  task automatic flush();
    repeat (2 * IMPULSE_LEN + 8) send(0, 0, 0);
    drain_and_compare();
  endtask

  initial begin
    #100000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0] w [67];
    $readmemh("rtl/lref_coeffs.hex", w);
    for (int l = 0; l < 2; l++) begin
      txm[l] = new(); rxm[l] = new();
      for (int a = 0; a < 67; a++) begin
        txm[l].words[a] = longint'($signed(w[a]));
        rxm[l].words[a] = longint'($signed(w[a]));
      end
    end
    tx_in_data[0] = '0; tx_in_data[1] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!(tx_ready && rx_ready)) @(negedge clk);

    // impulse through both filters: peak after 2 x 85 samples
    begin
      longint pk;
      int at;
      send(30000, 0, 0);
      repeat (2 * IMPULSE_LEN + 8) send(0, 0, 0);
      repeat (10) @(negedge clk);
      pk = 0; at = -1;
      for (int k = 0; k < rx_got[0].size(); k++) if (rx_got[0][k] > pk) begin pk = rx_got[0][k]; at = k; end
      checks++;
      if (at != 2 * GROUP_DELAY) begin failures++; $display("FAIL: end-to-end peak at %0d", at); end
      $display("end-to-end impulse peak %0d at sample %0d", pk, at);
      drain_and_compare();
    end

    // every bandwidth in turn, with a burst of data, switching while data flows
    for (int r = 0; r < 6; r++) begin
      for (int i = 0; i < 400; i++) begin
        if (i == 200) begin
          @(negedge clk) bw_sel = bw_e'((int'(bw_sel) + 1) % 4);
          cnt_switch_live++;
        end
        send($signed($urandom_range(0, 30000)) - 15000, $signed($urandom_range(0, 30000)) - 15000,
             ($urandom_range(0, 4) == 0) ? $urandom_range(1, 2) : 0);
      end
      drain_and_compare();
    end

    // install new masking coefficients through the write port, then reload
    flush();
    for (int a = 56; a < 67; a++) begin
      logic [15:0] nw;
      nw = 16'(($signed(w[a]) * 7) / 8);
      @(negedge clk) begin cfg_we = 1; cfg_waddr = 7'(a); cfg_wdata = nw; end
      for (int l = 0; l < 2; l++) begin txm[l].words[a] = $signed(nw); rxm[l].words[a] = $signed(nw); end
    end
    @(negedge clk) begin cfg_we = 0; reload = 1; end
    @(negedge clk) reload = 0;
    while (tx_busy || rx_busy) @(negedge clk);
    cnt_reload++;
    for (int i = 0; i < 600; i++)
      send($signed($urandom_range(0, 30000)) - 15000, $signed($urandom_range(0, 30000)) - 15000, 0);
    drain_and_compare();

    for (int b = 0; b < 4; b++) begin
      checks++;
      if (cnt_bw[b] == 0) begin failures++; $display("FAIL: bandwidth %0d never selected", b); end
    end
    checks += 3;
    if (cnt_switch_live == 0) begin failures++; $display("FAIL: no switch while streaming"); end
    if (cnt_reload == 0)      begin failures++; $display("FAIL: no reload"); end
    if (cnt_gap == 0)         begin failures++; $display("FAIL: no stream gaps"); end
    $display("bandwidth selections 342k=%0d 498k=%0d 654k=%0d 732k=%0d, live switches=%0d, reloads=%0d, gaps=%0d, saturated outputs tx=%0d rx=%0d",
             cnt_bw[0], cnt_bw[1], cnt_bw[2], cnt_bw[3], cnt_switch_live, cnt_reload, cnt_gap,
             txm[0].n_sat + txm[1].n_sat, rxm[0].n_sat + rxm[1].n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
