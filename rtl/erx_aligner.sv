// erx_aligner: phase aligner for one 1.28 Gbps input channel.
//
// The analog front end (a 16-stage delay line on the 1.28 GHz clock) lets
// the channel be latched at 16 phases 48.8 ps apart; `taps[k]` is the value
// latched at phase k in the current unit interval (UI). This block is the
// digital side: the 16:1 phase multiplexer and the edge-detecting scan that
// picks the phase.
//
// Scan: after reset, or when `auto_en` rises, the block dwells DWELL UIs on
// each candidate phase p = 0..15 and counts the UIs in which taps[p] differs
// from the phase just before it (taps[p-1], or for p = 0 taps[15] of the
// previous UI), i.e. how often a data edge falls between the two phases.
// The phase with the most edges is where the data switches; the block then
// samples half a UI away, phase (edge + 8) mod 16, and raises `locked`.
// With `auto_en` low the phase comes from `manual_phase` and `locked` is low.
//
// Timing: everything advances on `ui_en`, a one-cycle strobe at the 1.28 GHz
// UI rate. `data` is registered: it is taps[phase] of the previous UI.
// A full scan takes 16*DWELL UIs.
//
// From the paper: 16 phases, 16:1 mux, edge detection, scanning with a
// programmable phase. The dwell time, the edge-count criterion, the
// "edge + 8" choice and the manual mode are this design's own choices.
module erx_aligner
  import gbs20_pkg::*;
#(
  parameter int unsigned DWELL = 128   // UIs observed per candidate phase
) (
  input  logic               clk,
  input  logic               rst_n,       // synchronous, active low
  input  logic               ui_en,       // one strobe per UI
  input  logic [N_PHASES-1:0] taps,       // channel latched at the 16 phases
  input  logic               auto_en,     // 1: scan, 0: use manual_phase
  input  logic [PHASE_W-1:0] manual_phase,
  output logic               data,        // re-timed channel bit
  output logic [PHASE_W-1:0] phase,       // phase in use
  output logic               locked       // scan finished, phase chosen
);

  localparam int unsigned CNT_W = $clog2(DWELL + 1);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_LOCK} state_e;

  state_e             state_q;
  logic [PHASE_W-1:0] scan_p_q;     // phase under test
  logic [CNT_W-1:0]   dwell_q;      // UIs spent on scan_p_q
  logic [CNT_W-1:0]   edges_q;      // edges seen at scan_p_q
  logic [CNT_W-1:0]   best_cnt_q;   // largest edge count so far
  logic [PHASE_W-1:0] best_p_q;     // phase of that count
  logic [PHASE_W-1:0] lock_p_q;     // chosen sampling phase
  logic               last_tap_q;   // taps[15] of the previous UI
  logic               data_q;

  // Edge between scan_p_q and the phase before it.
  logic prev_tap, edge_hit;
  always_comb begin
    prev_tap = (scan_p_q == '0) ? last_tap_q : taps[scan_p_q - 1'b1];
    edge_hit = taps[scan_p_q] ^ prev_tap;
  end

  // Edge count of this dwell including the current UI.
  logic [CNT_W-1:0] edges_now;
  assign edges_now = edges_q + CNT_W'(edge_hit);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      scan_p_q   <= '0;
      dwell_q    <= '0;
      edges_q    <= '0;
      best_cnt_q <= '0;
      best_p_q   <= '0;
      lock_p_q   <= '0;
      last_tap_q <= 1'b0;
      data_q     <= 1'b0;
    end else if (ui_en) begin
      last_tap_q <= taps[N_PHASES-1];
      data_q     <= taps[phase];
      unique case (state_q)
        S_IDLE: if (auto_en) begin
          state_q    <= S_SCAN;
          scan_p_q   <= '0;
          dwell_q    <= '0;
          edges_q    <= '0;
          best_cnt_q <= '0;
          best_p_q   <= '0;
        end
        S_SCAN: begin
          if (!auto_en) begin
            state_q <= S_IDLE;
          end else if (dwell_q == CNT_W'(DWELL - 1)) begin
            dwell_q <= '0;
            edges_q <= '0;
            if (edges_now > best_cnt_q) begin
              best_cnt_q <= edges_now;
              best_p_q   <= scan_p_q;
            end
            if (scan_p_q == PHASE_W'(N_PHASES - 1)) begin
              state_q  <= S_LOCK;
              lock_p_q <= ((edges_now > best_cnt_q) ? scan_p_q : best_p_q)
                          + PHASE_W'(N_PHASES / 2);
            end
            scan_p_q <= scan_p_q + 1'b1;
          end else begin
            dwell_q <= dwell_q + 1'b1;
            edges_q <= edges_now;
          end
        end
        S_LOCK: if (!auto_en) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // During a scan the sampling phase stays where it was last locked.
  assign phase  = auto_en ? lock_p_q : manual_phase;
  assign locked = (state_q == S_LOCK);
  assign data   = data_q;

endmodule
