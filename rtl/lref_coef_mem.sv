// lref_coef_mem: the 67-word coefficient store of the LRef filter.
//
// Holds every unique non-trivial coefficient of the three sub-filters:
// four banks of 14 Filter I coefficients (one per transmission bandwidth,
// addresses 0..55), the 7 Filter II coefficients (56..62) and the 4 Filter III
// coefficients (63..66). The 0.5 centre taps of the halfband filters are shifts
// and are not stored. 67 words is the paper's figure; the address map is this
// design's choice.
//
// One write port (for a host that wants to install other coefficients) and
// one synchronous read port: rdata holds mem[raddr] one clock after raddr is
// presented. The array is not reset; its power-up contents are read from
// INIT_FILE (16-bit Q1.15 words, one hex word per line). For CW below 16 each
// word is rounded half up to Q1.(CW-1) and saturated; for CW above 16 it is
// padded with zero bits, so the same file serves every coefficient width.
// The default file holds equiripple coefficients designed for the band edges
// of the paper's Table I and quantized to 16 bits; the paper does not print
// its own coefficients.
module lref_coef_mem
  import lref_pkg::*;
#(
  parameter int unsigned CW        = CW_DEFAULT,
  parameter int unsigned DEPTH     = COEF_DEPTH,
  parameter string       INIT_FILE = "rtl/lref_coeffs.hex",
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [CW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [CW-1:0] rdata
);

  localparam int unsigned FILE_W = 16;   // word width of INIT_FILE

  logic [CW-1:0]     mem       [DEPTH];
  logic [FILE_W-1:0] file_word [DEPTH];

  // Q1.15 file word to Q1.(CW-1).
  function automatic logic [CW-1:0] requant(logic [FILE_W-1:0] w);
    longint v, hi, lo;
    v = longint'($signed(w));
    if (CW >= FILE_W) return CW'(v <<< (CW - FILE_W));
    v  = (v + (64'sd1 <<< (FILE_W - CW - 1))) >>> (FILE_W - CW);
    hi = (64'sd1 <<< (CW - 1)) - 1;
    lo = -(64'sd1 <<< (CW - 1));
    return CW'((v > hi) ? hi : (v < lo) ? lo : v);
  endfunction

  initial begin
    if (INIT_FILE != "") begin
      $readmemh(INIT_FILE, file_word);
      for (int i = 0; i < DEPTH; i++) mem[i] = requant(file_word[i]);
    end
  end

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

endmodule
