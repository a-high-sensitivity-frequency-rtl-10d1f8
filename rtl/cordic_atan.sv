// cordic_atan: phase and amplitude of the analytic signal x + i*y.
//
// What it does: for every (x, y) pair it returns the angle atan2(y, x) as a
// fraction of a turn (PHASE_W bits, 2**PHASE_W = one turn, two's complement
// so the range is -1/2 .. +1/2 turn) and the magnitude sqrt(x^2 + y^2). The
// angle is the instantaneous phase of the signal and the magnitude its
// instantaneous amplitude, used as the fit weight.
//
// How: a vectoring CORDIC. A first stage folds the left half-plane onto the
// right one (negate x and y, start the angle at 1/2 turn). Then ITER
// shift-and-add stages each rotate the vector towards the x axis by
// +-atan(2^-i), accumulating the angles, which are computed at elaboration
// as round(atan(2^-i) / (2 pi) * 2^PHASE_W). At the end y is near zero and x
// is the magnitude times the CORDIC gain G = prod sqrt(1 + 2^-2i) ~ 1.6468.
// The gain is not divided out: the fit uses the weights only relative to one
// another. The weight output is the magnitude shifted right by WSHIFT and
// saturated to WEIGHT_W bits.
//
// Timing: one pair per clock; results leave ITER + 1 clocks after the input.
// `in_last` travels with its pair.
//
// From the paper: the arctangent step and the amplitude sqrt(x^2 + y^2) as
// weight. The CORDIC, its length, the phase format and the weight scaling
// are this design's choices.
module cordic_atan
  import fc_pkg::*;
#(
  parameter int ITER   = 22,  // micro-rotations
  parameter int GUARD  = 6,   // extra fraction bits in the x/y datapath
  parameter int WSHIFT = 4    // magnitude to weight right shift
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    in_last,
  input  sample_t in_x,
  input  hilb_t   in_y,
  output logic    out_valid,
  output logic    out_last,
  output phase_t  out_phase,
  output logic [MAG_W-1:0] out_mag,   // |x + iy| * G
  output weight_t out_weight          // out_mag >> WSHIFT, saturated
);

  // x/y datapath: input width + 1 (fold) + 1 (gain 1.65, sqrt 2) + guard
  localparam int DW = HILB_W + 2 + GUARD;

  function automatic phase_t atan_turns(int i);
    real a;
    a = $atan(2.0 ** (-i)) / (2.0 * 3.14159265358979323846) * (2.0 ** PHASE_W);
    return phase_t'($rtoi(a + 0.5));
  endfunction

  logic signed [DW-1:0] xs [ITER+1];
  logic signed [DW-1:0] ys [ITER+1];
  phase_t               zs [ITER+1];
  logic [ITER:0]        vs, ls;

  // stage 0: fold into the right half-plane
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0; ys[0] <= '0; zs[0] <= '0; vs[0] <= 1'b0; ls[0] <= 1'b0;
    end else begin
      vs[0] <= in_valid;
      ls[0] <= in_last && in_valid;
      if (in_x < 0) begin
        xs[0] <= -(DW'(in_x) <<< GUARD);
        ys[0] <= -(DW'(in_y) <<< GUARD);
        zs[0] <= phase_t'(1 << (PHASE_W - 1));   // half a turn
      end else begin
        xs[0] <= DW'(in_x) <<< GUARD;
        ys[0] <= DW'(in_y) <<< GUARD;
        zs[0] <= '0;
      end
    end
  end

  // stages 1..ITER: micro-rotations by atan(2^-i), i = 0 .. ITER-1
  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[i+1] <= '0; ys[i+1] <= '0; zs[i+1] <= '0;
        vs[i+1] <= 1'b0; ls[i+1] <= 1'b0;
      end else begin
        vs[i+1] <= vs[i];
        ls[i+1] <= ls[i];
        if (ys[i] >= 0) begin
          xs[i+1] <= xs[i] + (ys[i] >>> i);
          ys[i+1] <= ys[i] - (xs[i] >>> i);
          zs[i+1] <= zs[i] + atan_turns(i);
        end else begin
          xs[i+1] <= xs[i] - (ys[i] >>> i);
          ys[i+1] <= ys[i] + (xs[i] >>> i);
          zs[i+1] <= zs[i] - atan_turns(i);
        end
      end
    end
  end

  logic [DW-1:0] mag_full;
  logic [DW-1:0] wfull;
  assign mag_full = xs[ITER] >>> GUARD;
  assign wfull    = mag_full >> WSHIFT;

  assign out_valid  = vs[ITER];
  assign out_last   = ls[ITER];
  assign out_phase  = zs[ITER];
  assign out_mag    = MAG_W'(mag_full);
  assign out_weight = (wfull > DW'(2 ** WEIGHT_W - 1)) ? weight_t'(2 ** WEIGHT_W - 1)
                                                       : weight_t'(wfull);

endmodule
