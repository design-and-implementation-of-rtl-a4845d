// ifir_halfband_stage: interpolated halfband masking FIR stage (Filters II and III
// of the LRef filter).
//
// A halfband prototype of order N (N = 2 mod 4) has zero coefficients at every
// second tap and a centre coefficient of exactly 0.5. With interpolation
// factor M the response is
//   H(z) = sum_{j} c_j [z^{-M*2j} + z^{-M(N-2j)}] + 0.5 z^{-MN/2},  j = 0 .. (N-2)/4
// Transposed direct form as in ifir_sym_stage: each of the (N+2)/4 non-zero
// coefficients multiplies the incoming sample once per lane and the product is
// added at its two mirrored delays; the 0.5 centre tap is the input shifted,
// with no multiplier. Filter II (N=26, M=2) uses 7 multipliers per lane,
// Filter III (N=14, M=1) uses 4, as in the paper.
//
// Interface and timing match ifir_sym_stage: LANES signed WL-bit lanes per
// in_valid strobe, coefficients signed Q1.(CW-1) for c_0, c_1, ... (the taps
// h_0, h_2, h_4, ...), output rounded half-up, saturated and registered one
// clock after in_valid. Group delay M*N/2 samples (26 for Filter II, 7 for III).
// The defaults are Filter II's.
//
// Halfband structure, orders and interpolation factors follow the paper;
// rounding, saturation, guard bits, lanes and handshake are this design's choices.
module ifir_halfband_stage #(
  parameter int unsigned WL    = 16,
  parameter int unsigned CW    = 16,
  parameter int unsigned LANES = 2,
  parameter int unsigned ORDER = 26,
  parameter int unsigned M     = 2,
  parameter int unsigned GUARD = 4,
  localparam int unsigned NC   = (ORDER + 2) / 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [WL-1:0] in_data  [LANES],
  input  logic signed [CW-1:0] coef     [NC],
  output logic                 out_valid,
  output logic signed [WL-1:0] out_data [LANES]
);

  localparam int unsigned D     = M * ORDER;
  localparam int unsigned ACC_W = WL + CW + GUARD;
  localparam int unsigned FRAC  = CW - 1;
  localparam int          CTR   = int'(ORDER / 2);

  if (ORDER % 4 != 2) begin : g_bad_order
    $error("ifir_halfband_stage: ORDER must be 2 mod 4 for a halfband filter");
  end

  // What sits at delay d: -2 nothing, -1 the 0.5 centre tap, k >= 0 coefficient c_k.
  function automatic int tap_kind(int d);
    int t, k;
    if (d % M != 0) return -2;
    t = d / M;
    k = (t <= CTR) ? t : int'(ORDER) - t;
    if (k == CTR) return -1;
    if (k % 2 != 0) return -2;
    return k / 2;
  endfunction

  logic signed [ACC_W-1:0] prod  [LANES][NC];
  logic signed [ACC_W-1:0] half  [LANES];     // 0.5 * x in the product scaling
  logic signed [ACC_W-1:0] y_full [LANES];

  // WL x CW signed product at its natural width (one multiplier each).
  function automatic logic signed [WL+CW-1:0] smul(logic signed [WL-1:0] a, logic signed [CW-1:0] b);
    return a * b;
  endfunction

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      for (int k = 0; k < int'(NC); k++) begin
        prod[l][k] = ACC_W'(smul(in_data[l], coef[k]));
      end
      half[l]   = ACC_W'(in_data[l]) <<< (FRAC - 1);
    end
  end

  // Partial-sum line: register g_pos[d].s holds the sum due d samples later.
  // Positions without a tap are plain delays (their addend is constant zero).
  for (genvar l = 0; l < int'(LANES); l++) begin : g_lane
    for (genvar d = 1; d <= int'(D); d++) begin : g_pos
      logic signed [ACC_W-1:0] s;
      logic signed [ACC_W-1:0] upstream;
      localparam int KIND = tap_kind(d);
      logic signed [ACC_W-1:0] addend;
      if (KIND == -1) begin : g_half
        assign addend = half[l];
      end else if (KIND >= 0) begin : g_mul
        assign addend = prod[l][KIND];
      end else begin : g_none
        assign addend = '0;
      end
      if (d < int'(D)) begin : g_mid
        assign upstream = g_pos[d+1].s;
      end else begin : g_end
        assign upstream = '0;
      end
      always_ff @(posedge clk) begin
        if (!rst_n)        s <= '0;
        else if (in_valid) s <= upstream + addend;
      end
    end
    assign y_full[l] = prod[l][0] + g_pos[1].s;
  end

  function automatic logic signed [WL-1:0] round_sat(logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] r;
    r = (a + (ACC_W'(1) <<< (FRAC - 1))) >>> FRAC;
    if (r > ACC_W'((1 <<< (WL - 1)) - 1))   return {1'b0, {(WL-1){1'b1}}};
    if (r < -(ACC_W'(1) <<< (WL - 1)))       return {1'b1, {(WL-1){1'b0}}};
    return r[WL-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) out_data[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) out_data[l] <= round_sat(y_full[l]);
      end
    end
  end

endmodule
