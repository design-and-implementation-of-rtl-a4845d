// tb_lref_spectrum: frequency response of the LRef filter for each of the
// four transmission bandwidths, measured with complex tones.
//
// For each bandwidth the filter is fed a complex exponential (I = A cos wn,
// Q = A sin wn) at a set of frequencies: five across the passband (0 to half
// the bandwidth) and sixteen from the Filter I stopband edge (336 kHz for
// 342/498 kHz, 397.5 kHz for 654/732 kHz, at 4 MHz sampling) up to 2 MHz.
// After the 171-sample impulse response has filled, the output is correlated
// with the tone over 512 samples, which gives |H(f)| with the rounding noise
// averaged down. The expected response is worked out here from the default
// coefficient file: the three sub-filter impulse responses are rebuilt,
// interpolated, convolved into the 171-tap cascade and transformed.
//
// Checks per tone: the measured passband gain is within 0.05 dB of the
// computed one and within 0.5 dB of unity; the measured stopband gain is no
// more than 1.5 dB above the computed one (or above -70 dB, where rounding
// noise takes over). Per bandwidth, the worst stopband gain must beat
// -54, -48, -38 and -15 dB. These limits are the figures of the coefficients
// this design ships, not requirements from the LDACS spectral mask.
module tb_lref_spectrum;
  import lref_pkg::*;

  localparam int  NMEAS = 512;
  localparam real AMP   = 16000.0;
  localparam real FS_HZ = 4.0e6;
  localparam real PI    = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  bw_e bw_sel = BW_342K;
  bw_e active_bw;
  logic busy, ready, switch_done;
  logic in_valid = 0, out_valid;
  logic signed [15:0] in_data  [2];
  logic signed [15:0] out_data [2];
  always #5 clk = ~clk;

  lref_filter dut (
    .clk, .rst_n, .bw_sel, .reload(1'b0), .cfg_we(1'b0), .cfg_waddr('0), .cfg_wdata('0),
    .active_bw, .busy, .ready, .switch_done,
    .in_valid, .in_data, .out_valid, .out_data);

  int checks = 0, failures = 0;
  real h [IMPULSE_LEN];
  real w [67];

  initial begin
    #20000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Cascade impulse response of bandwidth b from the coefficient words.
  task automatic build_h(int b);
    real h1 [105], h2 [53], h3 [15], t [157];
    for (int i = 0; i < 105; i++) h1[i] = 0.0;
    for (int i = 0; i < 53; i++)  h2[i] = 0.0;
    for (int i = 0; i < 15; i++)  h3[i] = 0.0;
    for (int k = 0; k <= 13; k++) begin              // Filter I, order 26, x4
      h1[4 * k] = w[14 * b + k];
      h1[4 * (26 - k)] = w[14 * b + k];
    end
    for (int j = 0; j <= 6; j++) begin               // Filter II, halfband order 26, x2
      h2[2 * (2 * j)] = w[56 + j];
      h2[2 * (26 - 2 * j)] = w[56 + j];
    end
    h2[26] = 0.5;
    for (int j = 0; j <= 3; j++) begin               // Filter III, halfband order 14
      h3[2 * j] = w[63 + j];
      h3[14 - 2 * j] = w[63 + j];
    end
    h3[7] = 0.5;
    for (int i = 0; i < 157; i++) t[i] = 0.0;
    for (int i = 0; i < 105; i++) for (int j = 0; j < 53; j++) t[i + j] += h1[i] * h2[j];
    for (int i = 0; i < IMPULSE_LEN; i++) h[i] = 0.0;
    for (int i = 0; i < 157; i++) for (int j = 0; j < 15; j++) h[i + j] += t[i] * h3[j];
  endtask

  function automatic real calc_db(real f_hz);
    real re = 0.0, im = 0.0, wn;
    for (int n = 0; n < IMPULSE_LEN; n++) begin
      wn = 2.0 * PI * f_hz / FS_HZ * n;
      re += h[n] * $cos(wn);
      im -= h[n] * $sin(wn);
    end
    return 10.0 * $log10(re * re + im * im + 1.0e-30);
  endfunction

  // Drive a tone through the filter and return the measured gain in dB.
  task automatic measure(real f_hz, output real db);
    real re = 0.0, im = 0.0, wn, yi, yq;
    int n = 0, m = 0;
    while (m < NMEAS) begin
      @(negedge clk);
      wn = 2.0 * PI * f_hz / FS_HZ * n;
      in_data[0] = 16'($rtoi(AMP * $cos(wn) + ((AMP * $cos(wn) >= 0.0) ? 0.5 : -0.5)));
      in_data[1] = 16'($rtoi(AMP * $sin(wn) + ((AMP * $sin(wn) >= 0.0) ? 0.5 : -0.5)));
      in_valid = 1;
      @(posedge clk);
      #1;
      // the output of this sample is valid after the third clock edge that
      // follows it in; correlate it with the tone phase it belongs to
      n++;
      in_valid = 0;
      repeat (2) @(posedge clk);
      #1;
      checks++;
      if (!out_valid) begin
        failures++; $display("FAIL: no output three clocks after a sample");
      end
      if (n > IMPULSE_LEN) begin
        wn = 2.0 * PI * f_hz / FS_HZ * (n - 1);
        yi = real'(out_data[0]);
        yq = real'(out_data[1]);
        // (yi + j yq) * exp(-j wn)
        re += yi * $cos(wn) + yq * $sin(wn);
        im += yq * $cos(wn) - yi * $sin(wn);
        m++;
      end
    end
    db = 20.0 * $log10(($sqrt(re * re + im * im) + 1.0e-9) / (AMP * NMEAS));
  endtask

  real pb_hz   [4] = '{171.0e3, 249.0e3, 327.0e3, 366.0e3};
  real sb_hz   [4] = '{336.0e3, 336.0e3, 397.5e3, 397.5e3};
  real sb_lim  [4] = '{-54.0, -48.0, -38.0, -15.0};

  initial begin
    logic [15:0] words [67];
    $readmemh("rtl/lref_coeffs.hex", words);
    for (int a = 0; a < 67; a++) w[a] = real'($signed(words[a])) / 32768.0;
    in_data = '{default: '0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);

    for (int b = 0; b < 4; b++) begin
      real worst_sb = -300.0, pb_lo = 100.0, pb_hi = -100.0;
      bw_sel = bw_e'(b);
      while (active_bw != bw_e'(b)) @(negedge clk);
      build_h(b);
      for (int i = 0; i <= 4; i++) begin
        real f, got, exp_db;
        f = pb_hz[b] * i / 4.0;
        measure(f, got);
        exp_db = calc_db(f);
        checks += 2;
        if (got - exp_db > 0.05 || exp_db - got > 0.05) begin
          failures++; $display("FAIL: bw %0d passband %0.0f Hz: %0.3f dB, computed %0.3f dB", b, f, got, exp_db);
        end
        if (got > 0.5 || got < -0.5) begin
          failures++; $display("FAIL: bw %0d passband %0.0f Hz gain %0.3f dB", b, f, got);
        end
        if (got < pb_lo) pb_lo = got;
        if (got > pb_hi) pb_hi = got;
      end
      for (int i = 0; i < 16; i++) begin
        real f, got, exp_db, lim;
        f = sb_hz[b] + (2.0e6 - sb_hz[b]) * i / 16.0;
        measure(f, got);
        exp_db = calc_db(f);
        lim = ((exp_db > -70.0) ? exp_db : -70.0) + 1.5;
        checks++;
        if (got > lim) begin
          failures++; $display("FAIL: bw %0d stopband %0.0f Hz: %0.1f dB, computed %0.1f dB", b, f, got, exp_db);
        end
        if (got > worst_sb) worst_sb = got;
      end
      checks++;
      if (worst_sb > sb_lim[b]) begin
        failures++; $display("FAIL: bw %0d worst stopband %0.1f dB above %0.1f dB", b, worst_sb, sb_lim[b]);
      end
      $display("bandwidth %0d kHz: passband %0.3f..%0.3f dB, stopband from %0.1f kHz at most %0.1f dB",
               (b == 0) ? 342 : (b == 1) ? 498 : (b == 2) ? 654 : 732, pb_lo, pb_hi, sb_hz[b] / 1.0e3, worst_sb);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
