// lref_coef_ctrl: bandwidth controller of the LRef filter.
//
// Switches the transmission bandwidth on the fly by loading the Filter I
// coefficient bank of the requested bandwidth from the coefficient store.
// After reset it loads all 25 words (14 Filter I words of the selected bank,
// then the 7 Filter II and 4 Filter III words); whenever bw_sel differs from
// the bandwidth in effect it loads only the 14 Filter I words, since the
// masking filters are the same for every bandwidth. A reload pulse repeats the
// full load (after the store has been rewritten).
//
// A load reads one word per clock (the store answers one clock later) into
// shadow registers, and then commits the whole set in a single clock, so the
// sub-filters never see a half-updated set and keep filtering meanwhile.
// The commit happens 14 + 3 clock edges after the first edge at which bw_sel
// differs from active_bw (one to start, 14 reads, two to drain and commit);
// a full load takes 25 + 3. switch_done pulses in the commit clock;
// active_bw names the bank now in effect; ready rises at the first commit.
//
// That coefficients are selected from memory at run time follows the paper;
// the sequencing, shadow registers and atomic commit are this design's choice.
module lref_coef_ctrl
  import lref_pkg::*;
#(
  parameter int unsigned CW = CW_DEFAULT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  bw_e                     bw_sel,
  input  logic                    reload,
  output logic [COEF_AW-1:0]      mem_raddr,
  input  logic [CW-1:0]           mem_rdata,
  output logic signed [CW-1:0]    coef1 [F1_NCOEF],
  output logic signed [CW-1:0]    coef2 [F2_NCOEF],
  output logic signed [CW-1:0]    coef3 [F3_NCOEF],
  output bw_e                     active_bw,
  output logic                    busy,
  output logic                    ready,
  output logic                    switch_done
);

  localparam int unsigned N_SWITCH = F1_NCOEF;                       // 14
  localparam int unsigned N_FULL   = F1_NCOEF + F2_NCOEF + F3_NCOEF; // 25
  localparam int unsigned IW       = $clog2(N_FULL + 1);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_COMMIT} state_e;

  state_e        state;
  bw_e           target_bw;
  logic          full_load;
  logic          full_pending;   // set by reset and by reload
  logic [IW-1:0] rd_idx;         // index of the word being addressed
  logic [IW-1:0] cap_idx;        // index of the word arriving from the store
  logic          cap_valid;
  logic [IW-1:0] n_words;

  logic signed [CW-1:0] sh1 [F1_NCOEF];
  logic signed [CW-1:0] sh2 [F2_NCOEF];
  logic signed [CW-1:0] sh3 [F3_NCOEF];

  // Store address of word i of a load for bank b.
  function automatic logic [COEF_AW-1:0] word_addr(bw_e b, logic [IW-1:0] i);
    int unsigned ii;
    ii = 32'(i);
    if (ii < F1_NCOEF)                 return COEF_AW'(F1_BASE + 32'(b) * F1_NCOEF + ii);
    else if (ii < F1_NCOEF + F2_NCOEF) return COEF_AW'(F2_BASE + ii - F1_NCOEF);
    else                               return COEF_AW'(F3_BASE + ii - F1_NCOEF - F2_NCOEF);
  endfunction

  assign n_words   = full_load ? IW'(N_FULL) : IW'(N_SWITCH);
  assign mem_raddr = word_addr(target_bw, rd_idx);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      target_bw    <= BW_342K;
      active_bw    <= BW_342K;
      full_load    <= 1'b0;
      full_pending <= 1'b1;
      rd_idx       <= '0;
      cap_idx      <= '0;
      cap_valid    <= 1'b0;
      ready        <= 1'b0;
      switch_done  <= 1'b0;
      for (int k = 0; k < int'(F1_NCOEF); k++) begin coef1[k] <= '0; sh1[k] <= '0; end
      for (int k = 0; k < int'(F2_NCOEF); k++) begin coef2[k] <= '0; sh2[k] <= '0; end
      for (int k = 0; k < int'(F3_NCOEF); k++) begin coef3[k] <= '0; sh3[k] <= '0; end
    end else begin
      switch_done <= 1'b0;
      if (reload) full_pending <= 1'b1;

      // Capture the word the store returns for the previous address.
      cap_valid <= 1'b0;
      if (cap_valid) begin
        if (32'(cap_idx) < F1_NCOEF)
          sh1[$clog2(F1_NCOEF)'(cap_idx)] <= mem_rdata;
        else if (32'(cap_idx) < F1_NCOEF + F2_NCOEF)
          sh2[32'(cap_idx) - F1_NCOEF] <= mem_rdata;
        else
          sh3[32'(cap_idx) - F1_NCOEF - F2_NCOEF] <= mem_rdata;
      end

      unique case (state)
        S_IDLE: begin
          if (full_pending || reload || bw_sel != active_bw || !ready) begin
            state        <= S_READ;
            target_bw    <= bw_sel;
            full_load    <= full_pending || reload || !ready;
            full_pending <= 1'b0;
            rd_idx       <= '0;
          end
        end
        S_READ: begin
          cap_valid <= 1'b1;
          cap_idx   <= rd_idx;
          if (rd_idx == n_words - 1'b1) state <= S_COMMIT;
          else                          rd_idx <= rd_idx + 1'b1;
        end
        S_COMMIT: begin
          // The last word is captured in this clock; commit one clock later
          // by waiting for cap_valid to drop.
          if (!cap_valid) begin
            coef1 <= sh1;
            if (full_load) begin
              coef2 <= sh2;
              coef3 <= sh3;
            end
            active_bw   <= target_bw;
            ready       <= 1'b1;
            switch_done <= 1'b1;
            state       <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The commit must never happen while a word is still in flight.
  a_commit_after_capture: assert property (@(posedge clk) disable iff (!rst_n)
    switch_done |-> $past(!cap_valid));

endmodule
