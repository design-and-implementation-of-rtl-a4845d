// tb_lref_wordlength: the LRef filter at the other two filter word lengths
// of the word-length study, next to the 16-bit default: an 8-bit filter
// (8-bit samples, coefficients rounded to Q1.7 by the store) and a 32-bit
// filter (32-bit samples, the 16-bit Q1.15 coefficients). Both instances
// receive the same random complex signal, at half full scale for their word
// length, while the bandwidth is stepped through all four settings; every
// output of each is checked against the bit-true model at that word length,
// whose 8-bit coefficients are rounded here independently of the RTL. The
// relative error of the 8-bit output against the 32-bit one is printed as a
// measure of the 8-bit quantisation noise, and must be worse than -40 dB
// (an 8-bit filter cannot be better) and better than -15 dB.
module tb_lref_wordlength;
  import lref_pkg::*;
  import lref_model_pkg::*;

  logic clk = 0, rst_n = 0;
  bw_e bw_sel = BW_342K;
  bw_e act8, act32;
  logic busy8, busy32, ready8, ready32, sd8, sd32;
  logic in_valid = 0, ov8, ov32;
  logic signed [7:0]  in8  [2];
  logic signed [7:0]  out8 [2];
  logic signed [31:0] in32  [2];
  logic signed [31:0] out32 [2];
  always #5 clk = ~clk;

  lref_filter #(.WL(8), .CW(8)) dut8 (
    .clk, .rst_n, .bw_sel, .reload(1'b0), .cfg_we(1'b0), .cfg_waddr('0), .cfg_wdata('0),
    .active_bw(act8), .busy(busy8), .ready(ready8), .switch_done(sd8),
    .in_valid, .in_data(in8), .out_valid(ov8), .out_data(out8));
  lref_filter #(.WL(32)) dut32 (
    .clk, .rst_n, .bw_sel, .reload(1'b0), .cfg_we(1'b0), .cfg_waddr('0), .cfg_wdata('0),
    .active_bw(act32), .busy(busy32), .ready(ready32), .switch_done(sd32),
    .in_valid, .in_data(in32), .out_valid(ov32), .out_data(out32));

  int checks = 0, failures = 0;
  lref_model m8 [2], m32 [2];
  longint e8 [2][$], e32 [2][$], g8 [2][$], g32 [2][$];
  real err_pow = 0.0, sig_pow = 0.0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid)
        for (int l = 0; l < 2; l++) begin
          e8[l].push_back(m8[l].push(in8[l], int'(act8)));
          e32[l].push_back(m32[l].push(in32[l], int'(act32)));
        end
      if (ov8)  for (int l = 0; l < 2; l++) g8[l].push_back(out8[l]);
      if (ov32) for (int l = 0; l < 2; l++) g32[l].push_back(out32[l]);
    end
  end

  initial begin
    #50000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0] w [67];
    $readmemh("rtl/lref_coeffs.hex", w);
    for (int l = 0; l < 2; l++) begin
      m8[l] = new(8, 8); m32[l] = new(32, 16);
      for (int a = 0; a < 67; a++) begin
        // Q1.15 to Q1.7, round half up (no word is near full scale)
        m8[l].words[a]  = (longint'($signed(w[a])) + 128) >>> 8;
        m32[l].words[a] = longint'($signed(w[a]));
      end
    end
    in8 = '{default: '0}; in32 = '{default: '0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!(ready8 && ready32)) @(negedge clk);

    for (int b = 0; b < 4; b++) begin
      bw_sel = bw_e'(b);
      while (act8 != bw_e'(b) || act32 != bw_e'(b)) @(negedge clk);
      for (int i = 0; i < 400; i++) begin
        longint v [2];
        @(negedge clk);
        for (int l = 0; l < 2; l++) begin
          // one signal, 32-bit full scale / 2; the 8-bit filter sees its top bits
          v[l] = longint'($signed($urandom)) >>> 1;
          in32[l] = 32'(v[l]);
          in8[l]  = 8'(v[l] >>> 24);
        end
        in_valid = 1;
        @(negedge clk) in_valid = 0;
      end
    end
    repeat (10) @(negedge clk);

    for (int l = 0; l < 2; l++) begin
      checks += 2;
      if (g8[l].size() != e8[l].size() || g32[l].size() != e32[l].size()) begin
        failures++; $display("FAIL: output counts");
      end
      for (int n = 0; n < g8[l].size() && n < e8[l].size(); n++) begin
        checks += 2;
        if (g8[l][n] != e8[l][n]) begin
          failures++; if (failures < 10) $display("FAIL: WL8 lane %0d n %0d got %0d exp %0d", l, n, g8[l][n], e8[l][n]);
        end
        if (g32[l][n] != e32[l][n]) begin
          failures++; if (failures < 10) $display("FAIL: WL32 lane %0d n %0d got %0d exp %0d", l, n, g32[l][n], e32[l][n]);
        end
        if (n > IMPULSE_LEN) begin
          real a, r;
          a = real'(g32[l][n]) / 16777216.0;
          r = real'(g8[l][n]) - a;
          err_pow += r * r;
          sig_pow += a * a;
        end
      end
    end
    begin
      real db;
      db = 10.0 * $log10(err_pow / sig_pow);
      $display("8-bit filter output error relative to 32-bit: %0.1f dB", db);
      checks++;
      if (db < -40.0 || db > -15.0) begin
        failures++; $display("FAIL: 8-bit error %0.1f dB outside -40..-15 dB", db);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
