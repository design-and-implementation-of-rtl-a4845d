// lref_filter: the low-complexity bandwidth-reconfigurable filter (LRef filter).
//
// A cascade of three sub-filters, H(z) = H_I(z) H_II(z) H_III(z), run at the
// 4 MHz LDACS sample rate:
//   Filter I   order 26 lowpass, interpolated by 4 (14 multipliers/lane); its
//              coefficients set the transmission bandwidth (342/498/654/732 kHz)
//   Filter II  order 26 halfband, interpolated by 2 (7 multipliers/lane); masks
//              the image band of Filter I around half the Nyquist frequency
//   Filter III order 14 halfband (4 multipliers/lane); masks the remaining
//              high-pass image
// 25 multipliers per lane in all, and a linear-phase group delay of
// 13*4 + 13*2 + 7 = 85 samples (21.25 us at 4 MHz). The coefficients live in
// a 67-word store; lref_coef_ctrl copies the bank of the selected bandwidth
// into the sub-filters whenever bw_sel changes, while samples keep flowing.
//
// Interface: one complex sample (LANES signed WL-bit lanes) per in_valid;
// out_valid follows in_valid by 3 clocks (one register per stage). Outputs
// are zero until the first coefficient load has completed (ready).
// cfg_we/cfg_waddr/cfg_wdata write the coefficient store; pulse reload after
// writing so that the new words are loaded.
//
// The cascade, orders, interpolation factors, halfband shifts and the 67-word
// store follow the paper; the coefficient values, word formats, handshakes
// and the load sequence are this design's choices.
module lref_filter
  import lref_pkg::*;
#(
  parameter int unsigned WL        = WL_DEFAULT,
  parameter int unsigned CW        = CW_DEFAULT,
  parameter int unsigned LANES     = LANES_DEFAULT,
  parameter string       INIT_FILE = "rtl/lref_coeffs.hex"
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // bandwidth selection and coefficient store access
  input  bw_e                  bw_sel,
  input  logic                 reload,
  input  logic                 cfg_we,
  input  logic [COEF_AW-1:0]   cfg_waddr,
  input  logic [CW-1:0]        cfg_wdata,
  output bw_e                  active_bw,
  output logic                 busy,
  output logic                 ready,
  output logic                 switch_done,
  // sample stream
  input  logic                 in_valid,
  input  logic signed [WL-1:0] in_data  [LANES],
  output logic                 out_valid,
  output logic signed [WL-1:0] out_data [LANES]
);

  logic [COEF_AW-1:0]   mem_raddr;
  logic [CW-1:0]        mem_rdata;
  logic signed [CW-1:0] coef1 [F1_NCOEF];
  logic signed [CW-1:0] coef2 [F2_NCOEF];
  logic signed [CW-1:0] coef3 [F3_NCOEF];

  lref_coef_mem #(.CW(CW), .DEPTH(COEF_DEPTH), .INIT_FILE(INIT_FILE)) u_mem (
    .clk   (clk),
    .we    (cfg_we),
    .waddr (cfg_waddr),
    .wdata (cfg_wdata),
    .raddr (mem_raddr),
    .rdata (mem_rdata)
  );

  lref_coef_ctrl #(.CW(CW)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .bw_sel      (bw_sel),
    .reload      (reload),
    .mem_raddr   (mem_raddr),
    .mem_rdata   (mem_rdata),
    .coef1       (coef1),
    .coef2       (coef2),
    .coef3       (coef3),
    .active_bw   (active_bw),
    .busy        (busy),
    .ready       (ready),
    .switch_done (switch_done)
  );

  logic                 v1, v2;
  logic signed [WL-1:0] d1 [LANES];
  logic signed [WL-1:0] d2 [LANES];

  ifir_sym_stage #(.WL(WL), .CW(CW), .LANES(LANES), .ORDER(F1_ORDER), .M(F1_M)) u_filter1 (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_data   (in_data),
    .coef      (coef1),
    .out_valid (v1),
    .out_data  (d1)
  );

  ifir_halfband_stage #(.WL(WL), .CW(CW), .LANES(LANES), .ORDER(F2_ORDER), .M(F2_M)) u_filter2 (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (v1),
    .in_data   (d1),
    .coef      (coef2),
    .out_valid (v2),
    .out_data  (d2)
  );

  ifir_halfband_stage #(.WL(WL), .CW(CW), .LANES(LANES), .ORDER(F3_ORDER), .M(F3_M)) u_filter3 (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (v2),
    .in_data   (d2),
    .coef      (coef3),
    .out_valid (out_valid),
    .out_data  (out_data)
  );

endmodule
