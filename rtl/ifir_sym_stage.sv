// ifir_sym_stage: interpolated, linear-phase FIR stage (Filter I of the LRef filter).
//
// Implements H(z) = sum_{n=0}^{N/2-1} h_n [z^{-Mn} + z^{-M(N-n)}] + h_{N/2} z^{-MN/2},
// an order-N symmetric prototype whose every unit delay is replaced by M delays.
// Transposed direct form: each of the N/2+1 unique coefficients multiplies the
// incoming sample once per lane, and the product is added into the partial-sum
// delay line at delays M*n and M*(N-n). Delays between taps are plain registers.
// So the stage uses N/2+1 multipliers per lane (14 for N=26), as in the paper.
//
// Interface: one sample per in_valid strobe on LANES signed WL-bit lanes
// (I and Q share the coefficients). Coefficients are signed Q1.(CW-1).
// The full-precision sum is rounded half-up to WL bits and saturated; the
// result is registered, so out_valid follows in_valid by exactly one clock.
// The delay line advances only on in_valid, so the group delay is M*N/2
// samples (52 for Filter I) regardless of the gaps between samples.
//
// Order, interpolation factor, symmetric folding and transposed form follow the
// paper. Rounding, saturation, the guard bits, the I/Q lanes and the
// valid handshake are this design's choices.
module ifir_sym_stage #(
  parameter int unsigned WL    = 16,
  parameter int unsigned CW    = 16,
  parameter int unsigned LANES = 2,
  parameter int unsigned ORDER = 26,
  parameter int unsigned M     = 4,
  parameter int unsigned GUARD = 4,
  localparam int unsigned NC   = ORDER / 2 + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [WL-1:0] in_data  [LANES],
  input  logic signed [CW-1:0] coef     [NC],
  output logic                 out_valid,
  output logic signed [WL-1:0] out_data [LANES]
);

  localparam int unsigned D     = M * ORDER;       // length of the partial-sum line
  localparam int unsigned ACC_W = WL + CW + GUARD;
  localparam int unsigned FRAC  = CW - 1;

  if (ORDER % 2 != 0) begin : g_bad_order
    $error("ifir_sym_stage: ORDER must be even");
  end

  // Coefficient index used at delay d, or -1 when no tap sits there.
  function automatic int tap_index(int d);
    int t;
    if (d % M != 0) return -1;
    t = d / M;
    return (t <= int'(ORDER / 2)) ? t : int'(ORDER) - t;
  endfunction

  logic signed [ACC_W-1:0] prod [LANES][NC];
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
    end
  end

  // Partial-sum line: register g_pos[d].s holds the sum due d samples later.
  // Positions without a tap are plain delays (their addend is constant zero).
  for (genvar l = 0; l < int'(LANES); l++) begin : g_lane
    for (genvar d = 1; d <= int'(D); d++) begin : g_pos
      logic signed [ACC_W-1:0] s;
      logic signed [ACC_W-1:0] upstream;
      localparam int KIND = tap_index(d);
      logic signed [ACC_W-1:0] addend;
      if (KIND >= 0) begin : g_mul
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

  // Round half up, then saturate to WL bits.
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
