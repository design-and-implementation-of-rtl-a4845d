// tb_ifir_sym_stage: self-checking testbench for ifir_sym_stage (Filter I) (ORDER=26, M=4).
//
// Drives random complex samples with random gaps in in_valid and compares every
// output with a direct-form model written independently of the transposed
// structure: y[n] = round_sat( sum_t h_t(n - M t) * x[n - M t] ), where h_t(k)
// is the tap set that was on the coefficient port when sample k entered (the
// transposed form keeps the products already in its delay line, so a
// coefficient change takes effect sample by sample). Also checks that out_valid
// follows in_valid by one clock, that an impulse comes out after exactly the
// group delay M*ORDER/2 with the centre tap's value, and that large
// coefficients saturate the output rather than wrap it.
module tb_ifir_sym_stage;
  localparam bit HB    = 1'b0;
  localparam int ORDER = 26;
  localparam int M     = 4;
  localparam int WL = 16, CW = 16, LANES = 2;
  localparam int NC = HB ? (ORDER + 2) / 4 : ORDER / 2 + 1;
  localparam int GD = M * ORDER / 2;
  localparam int MAXN = 4000;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [WL-1:0] in_data [LANES];
  logic signed [WL-1:0] out_data [LANES];
  logic signed [CW-1:0] coef [NC];
  always #5 clk = ~clk;

  if (HB) begin : g_hb
    ifir_halfband_stage #(.WL(WL), .CW(CW), .LANES(LANES), .ORDER(ORDER), .M(M)) dut (.*);
  end else begin : g_sym
    ifir_sym_stage #(.WL(WL), .CW(CW), .LANES(LANES), .ORDER(ORDER), .M(M)) dut (.*);
  end

  int checks = 0, failures = 0;
  longint xs [LANES][MAXN];
  longint taps [MAXN][ORDER+1];
  longint outs [LANES][MAXN];
  int n_in = 0, n_out = 0, n_sat = 0;

  function automatic longint round_sat(longint a);
    longint r = (a + (64'sd1 <<< (CW - 2))) >>> (CW - 1);
    if (r > (1 <<< (WL - 1)) - 1) return (1 <<< (WL - 1)) - 1;
    if (r < -(1 <<< (WL - 1)))     return -(1 <<< (WL - 1));
    return r;
  endfunction

  // Full tap vector of the prototype from the unique coefficients.
  function automatic void expand(output longint h [ORDER+1]);
    for (int t = 0; t <= ORDER; t++) begin
      int k = (t <= ORDER / 2) ? t : ORDER - t;
      if (!HB) h[t] = coef[k];
      else if (k == ORDER / 2) h[t] = 64'sd1 <<< (CW - 2);
      else if (k % 2 == 0) h[t] = coef[k / 2];
      else h[t] = 0;
    end
  endfunction

  function automatic longint model(int l, int n);
    longint acc = 0;
    for (int t = 0; t <= ORDER; t++)
      if (n - M * t >= 0) acc += taps[n - M * t][t] * xs[l][n - M * t];
    return acc;
  endfunction

  // Sample capture: input history and output stream.
  logic prev_valid = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== prev_valid) begin
        failures++; $display("FAIL: out_valid %0b, expected %0b", out_valid, prev_valid);
      end
      prev_valid <= in_valid;
      if (in_valid) begin
        longint h [ORDER+1];
        expand(h);
        for (int t = 0; t <= ORDER; t++) taps[n_in][t] = h[t];
        for (int l = 0; l < LANES; l++) xs[l][n_in] = in_data[l];
        n_in++;
      end
      if (out_valid) begin
        for (int l = 0; l < LANES; l++) outs[l][n_out] = out_data[l];
        n_out++;
      end
    end
  end

  task automatic send(longint i_v, longint q_v, int gap);
    @(negedge clk);
    in_valid = 1; in_data[0] = WL'(i_v); in_data[1] = WL'(q_v);
    @(negedge clk);
    in_valid = 0;
    repeat (gap) @(negedge clk);
  endtask

  task automatic set_random_coefs(int mag);
    for (int k = 0; k < NC; k++) coef[k] = CW'($signed($urandom_range(0, 2 * mag)) - mag);
  endtask

  initial begin
    #200000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int base;
    for (int l = 0; l < LANES; l++) in_data[l] = '0;
    set_random_coefs(3000);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. impulse: group delay and centre tap
    base = n_in;
    send(16000, -16000, 0);
    repeat (2 * GD + 5) send(0, 0, 0);
    repeat (3) @(negedge clk);
    begin
      longint h [ORDER+1];
      longint c;
      expand(h);
      c = round_sat(h[ORDER / 2] * 16000);
      checks++;
      if (outs[0][base + GD] != c || outs[1][base + GD] != -c) begin
        failures++;
        $display("FAIL: impulse at group delay %0d: got %0d/%0d expected %0d", GD,
                 outs[0][base + GD], outs[1][base + GD], c);
      end
      for (int k = 0; k <= 2 * GD; k++) if (k % M != 0) begin
        checks++;
        if (outs[0][base + k] != 0) begin
          failures++; $display("FAIL: non-zero output between interpolated taps at %0d", k);
        end
      end
    end

    // 2. random samples with random gaps, coefficients changed mid-stream
    for (int i = 0; i < 1500; i++) begin
      if (i == 700) set_random_coefs(3000);
      send($signed($urandom_range(0, 60000)) - 30000, $signed($urandom_range(0, 60000)) - 30000,
           ($urandom_range(0, 3) == 0) ? $urandom_range(1, 3) : 0);
    end

    // 3. saturation: large coefficients, full-scale input
    set_random_coefs(32000);
    for (int k = 0; k < NC; k++) coef[k] = 16'sd32000;
    for (int i = 0; i < 4 * GD + 40; i++) send(32767, -32768, 0);
    repeat (4) @(negedge clk);

    // compare every output with the model
    for (int n = 0; n < n_out; n++) begin
      for (int l = 0; l < LANES; l++) begin
        longint e;
        e = round_sat(model(l, n));
        checks++;
        if (outs[l][n] != e) begin
          failures++;
          if (failures < 10) $display("FAIL: sample %0d lane %0d got %0d expected %0d", n, l, outs[l][n], e);
        end
        if (e == 32767 || e == -32768) n_sat++;
      end
    end
    checks++;
    if (n_out != n_in) begin failures++; $display("FAIL: %0d in, %0d out", n_in, n_out); end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: saturation never exercised"); end
    $display("samples=%0d saturated=%0d", n_out, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
