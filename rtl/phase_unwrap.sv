// phase_unwrap: cumulative (unwrapped) phase of a segment.
//
// What it does: the arctangent gives the phase only modulo one turn. This
// block adds the whole turns back, Phi[n] = phi[n] + N[n] turns, so that the
// phase of an oscillation grows without jumps through the segment and a
// straight line can be fitted to it.
//
// How: in the PHASE_W-bit turn format the difference phi[n] - phi[n-1],
// taken modulo one turn, is already the step in -1/2 .. +1/2 turn. It is
// sign-extended and added to the running sum. The first sample of a segment
// (after reset or after a sample flagged `in_last`) starts the sum at its own
// phase. This is correct as long as the phase moves less than half a turn per
// sample, i.e. the signal is below half the sampling rate (769 kHz at the
// paper's 1.538 MSa/s, above its 500 kHz maximum).
//
// Timing: one sample per clock, one clock of latency; `in_weight` and
// `in_last` are delayed to stay aligned with the phase.
//
// From the paper: the cumulative phase Phi[n] = phi[n] + 2 pi N. The
// modular-difference method and the widths are this design's.
module phase_unwrap
  import fc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    in_last,
  input  phase_t  in_phase,
  input  weight_t in_weight,
  output logic    out_valid,
  output logic    out_last,
  output phi_t    out_phi,
  output weight_t out_weight
);

  phase_t prev;
  logic   first;
  phase_t step;

  assign step = in_phase - prev;   // modulo one turn

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev       <= '0;
      first      <= 1'b1;
      out_valid  <= 1'b0;
      out_last   <= 1'b0;
      out_phi    <= '0;
      out_weight <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid) begin
        prev       <= in_phase;
        first      <= in_last;
        out_weight <= in_weight;
        out_phi    <= first ? PHI_W'(in_phase) : out_phi + PHI_W'(step);
      end
    end
  end

endmodule
