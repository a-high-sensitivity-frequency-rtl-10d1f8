// wlr_fit: amplitude-weighted least-squares slope of phase against time.
//
// What it does: over one segment it receives (w[t], Phi[t]) for t = 0, 1, 2...
// and, after the sample flagged `in_last`, returns the slope b of the line
// Phi = a + b t that minimises sum w[t] (Phi[t] - a - b t)^2. With Phi in
// turns and t in samples, b is the frequency divided by the sampling rate.
//
// How: five running sums are kept as the samples stream in,
//     Sw = sum w,  St = sum w t,  Stt = sum w t^2,
//     Sp = sum w Phi,  Stp = sum w t Phi,
// all exact integers. After the last sample
//     b = (Sw * Stp - St * Sp) / (Sw * Stt - St^2).
// The two products of each difference are formed in one clock, the
// differences in the next, and the quotient, scaled to RATIO_FRAC fraction
// bits, by a restoring divider that makes one quotient bit per clock. The
// sign is handled apart from the magnitude. A zero or negative denominator
// (fewer than two distinct weighted points) sets `out_err`, as does a
// quotient too large for the ratio format, which is then saturated.
//
// Timing: samples are taken one per clock, with two clocks of pipeline.
// `out_valid` is set DIV_CYCLES + 4 clocks after the clock that takes the last sample, where
// DIV_CYCLES is the dividend width (130 at the default sizes). `busy` is high
// from the first sample until the result.
//
// From the paper: a linear regression of the cumulative phase on time, with
// the instantaneous amplitude as the weight, whose slope is the frequency.
// The closed-form sums, exact integer arithmetic and the serial divider are
// this design's choices.
module wlr_fit
  import fc_pkg::*;
#(
  parameter int T_W = 13   // width of the time index, log2 of the buffer depth
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    in_last,
  input  phi_t    in_phi,
  input  weight_t in_weight,
  output logic    busy,
  output logic    out_valid,
  output logic    out_err,
  output ratio_t  out_ratio
);

  localparam int W      = WEIGHT_W;
  localparam int SW_W   = W + T_W;
  localparam int ST_W   = W + 2 * T_W;
  localparam int STT_W  = W + 3 * T_W;
  localparam int SP_W   = W + PHI_W + T_W + 1;
  localparam int STP_W  = W + T_W + PHI_W + T_W + 1;
  localparam int NUM_W  = SW_W + STP_W + 2;
  localparam int DEN_W  = SW_W + STT_W + 2;
  localparam int SHIFT  = RATIO_FRAC - PHASE_W;
  localparam int DVD_W  = NUM_W + SHIFT;
  localparam int DC_W   = $clog2(DVD_W + 1);

  typedef enum logic [2:0] {S_ACC, S_MUL, S_SUB, S_DIV, S_DONE} state_t;
  state_t state;

  // stage 1
  logic                   v1, l1;
  logic [T_W-1:0]         t, t1;
  weight_t                w1;
  phi_t                   p1;
  logic [W+T_W-1:0]       wt1;
  logic signed [W+PHI_W:0] wp1;

  // sums
  logic [SW_W-1:0]          s_w;
  logic [ST_W-1:0]          s_t;
  logic [STT_W-1:0]         s_tt;
  logic signed [SP_W-1:0]   s_p;
  logic signed [STP_W-1:0]  s_tp;

  // fit
  logic signed [NUM_W-1:0]  num_a, num_b;
  logic signed [DEN_W-1:0]  den_a, den_b, den;
  logic                     neg;
  logic [DVD_W-1:0]         dvd, quo;
  logic [DEN_W-1:0]         rem;
  logic [DC_W-1:0]          dcnt;
  logic [DEN_W:0]           rem_sh;

  assign busy   = (state != S_ACC) || v1 || (t != '0);
  assign rem_sh = {rem[DEN_W-1:0], dvd[DVD_W-1]};

  logic signed [NUM_W-1:0]  num_c;
  logic [NUM_W-1:0]         num_mag;
  assign num_c   = num_a - num_b;
  assign num_mag = (num_c < 0) ? NUM_W'(-num_c) : NUM_W'(num_c);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_ACC;
      v1 <= 1'b0; l1 <= 1'b0; t <= '0; t1 <= '0; w1 <= '0; p1 <= '0;
      wt1 <= '0; wp1 <= '0;
      s_w <= '0; s_t <= '0; s_tt <= '0; s_p <= '0; s_tp <= '0;
      num_a <= '0; num_b <= '0;
      den_a <= '0; den_b <= '0; den <= '0;
      neg <= 1'b0; dvd <= '0; quo <= '0; rem <= '0; dcnt <= '0;
      out_valid <= 1'b0; out_err <= 1'b0; out_ratio <= '0;
    end else begin
      out_valid <= 1'b0;

      // stage 1: per-sample products
      v1 <= 1'b0;
      l1 <= 1'b0;
      if (in_valid && state == S_ACC) begin
        v1  <= 1'b1;
        l1  <= in_last;
        t1  <= t;
        w1  <= in_weight;
        p1  <= in_phi;
        wt1 <= (W+T_W)'(in_weight) * (W+T_W)'(t);
        wp1 <= $signed({1'b0, in_weight}) * in_phi;
        t   <= in_last ? '0 : t + 1'b1;
      end

      unique case (state)
        S_ACC: begin
          // stage 2: accumulate
          if (v1) begin
            s_w  <= s_w  + SW_W'(w1);
            s_t  <= s_t  + ST_W'(wt1);
            s_tt <= s_tt + ST_W'(wt1) * STT_W'(t1);
            s_p  <= s_p  + SP_W'(wp1);
            s_tp <= s_tp + STP_W'($signed({1'b0, wt1})) * STP_W'(p1);
            if (l1) state <= S_MUL;
          end
        end
        S_MUL: begin
          num_a <= NUM_W'($signed({1'b0, s_w})) * NUM_W'(s_tp);
          num_b <= NUM_W'($signed({1'b0, s_t})) * NUM_W'(s_p);
          den_a <= DEN_W'(s_w) * DEN_W'(s_tt);
          den_b <= DEN_W'(s_t) * DEN_W'(s_t);
          state <= S_SUB;
        end
        S_SUB: begin
          den   <= den_a - den_b;
          neg   <= num_c < 0;
          dvd   <= DVD_W'(num_mag) << SHIFT;
          rem   <= '0;
          quo   <= '0;
          dcnt  <= '0;
          state <= S_DIV;
        end
        S_DIV: begin
          // one restoring-division step per clock, DVD_W steps
          if (rem_sh >= (DEN_W+1)'(den)) begin
            rem <= DEN_W'(rem_sh - (DEN_W+1)'(den));
            quo <= {quo[DVD_W-2:0], 1'b1};
          end else begin
            rem <= DEN_W'(rem_sh);
            quo <= {quo[DVD_W-2:0], 1'b0};
          end
          dvd  <= dvd << 1;
          dcnt <= dcnt + 1'b1;
          if (dcnt == DC_W'(DVD_W - 1)) state <= S_DONE;
        end
        S_DONE: begin
          out_valid <= 1'b1;
          if (den <= 0) begin
            out_err   <= 1'b1;
            out_ratio <= '0;
          end else if (quo > DVD_W'(2 ** (RATIO_W - 1) - 1)) begin
            out_err   <= 1'b1;
            out_ratio <= neg ? ratio_t'(-(2 ** (RATIO_W - 1) - 1)) : ratio_t'(2 ** (RATIO_W - 1) - 1);
          end else begin
            out_err   <= 1'b0;
            out_ratio <= neg ? -ratio_t'(quo) : ratio_t'(quo);
          end
          s_w <= '0; s_t <= '0; s_tt <= '0; s_p <= '0; s_tp <= '0;
          state <= S_ACC;
        end
        default: state <= S_ACC;
      endcase
    end
  end

endmodule
