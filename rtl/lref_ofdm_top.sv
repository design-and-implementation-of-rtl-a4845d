// lref_ofdm_top: filtering section of an LRef-OFDM LDACS transceiver.
//
// The transmit path ends, after preamble addition, in an LRef filter whose
// output goes to the RF transmitter; the receive path starts, after the RF
// receiver and phase correction, with a second LRef filter whose output goes
// to preamble detection. Both filters are identical instances of lref_filter
// and follow one bandwidth select, so the link runs at 342, 498, 654 or
// 732 kHz. The OFDM baseband blocks, the RF front end and the host are
// outside this module; their sample streams and configuration are its ports.
//
// Each stream carries one complex sample (LANES signed WL-bit lanes) per valid
// strobe at the 4 MHz sample rate; each filter adds 85 samples of group delay
// and 3 clocks of register latency. The coefficient write port and reload
// pulse go to both filters' stores.
//
// The placement of the two filters follows the paper's transceiver diagram;
// sharing one bandwidth select and one write port is this design's choice.
module lref_ofdm_top
  import lref_pkg::*;
#(
  parameter int unsigned WL    = WL_DEFAULT,
  parameter int unsigned CW    = CW_DEFAULT,
  parameter int unsigned LANES = LANES_DEFAULT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration from the host
  input  bw_e                  bw_sel,
  input  logic                 reload,
  input  logic                 cfg_we,
  input  logic [COEF_AW-1:0]   cfg_waddr,
  input  logic [CW-1:0]        cfg_wdata,
  // status
  output bw_e                  tx_active_bw,
  output bw_e                  rx_active_bw,
  output logic                 tx_busy,
  output logic                 rx_busy,
  output logic                 tx_ready,
  output logic                 rx_ready,
  output logic                 tx_switch_done,
  output logic                 rx_switch_done,
  // transmit path: from preamble addition, to the RF transmitter
  input  logic                 tx_in_valid,
  input  logic signed [WL-1:0] tx_in_data  [LANES],
  output logic                 tx_out_valid,
  output logic signed [WL-1:0] tx_out_data [LANES],
  // receive path: from the RF receiver / phase correction, to preamble detection
  input  logic                 rx_in_valid,
  input  logic signed [WL-1:0] rx_in_data  [LANES],
  output logic                 rx_out_valid,
  output logic signed [WL-1:0] rx_out_data [LANES]
);

  lref_filter #(.WL(WL), .CW(CW), .LANES(LANES)) u_tx_filter (
    .clk         (clk),
    .rst_n       (rst_n),
    .bw_sel      (bw_sel),
    .reload      (reload),
    .cfg_we      (cfg_we),
    .cfg_waddr   (cfg_waddr),
    .cfg_wdata   (cfg_wdata),
    .active_bw   (tx_active_bw),
    .busy        (tx_busy),
    .ready       (tx_ready),
    .switch_done (tx_switch_done),
    .in_valid    (tx_in_valid),
    .in_data     (tx_in_data),
    .out_valid   (tx_out_valid),
    .out_data    (tx_out_data)
  );

  lref_filter #(.WL(WL), .CW(CW), .LANES(LANES)) u_rx_filter (
    .clk         (clk),
    .rst_n       (rst_n),
    .bw_sel      (bw_sel),
    .reload      (reload),
    .cfg_we      (cfg_we),
    .cfg_waddr   (cfg_waddr),
    .cfg_wdata   (cfg_wdata),
    .active_bw   (rx_active_bw),
    .busy        (rx_busy),
    .ready       (rx_ready),
    .switch_done (rx_switch_done),
    .in_valid    (rx_in_valid),
    .in_data     (rx_in_data),
    .out_valid   (rx_out_valid),
    .out_data    (rx_out_data)
  );

endmodule
