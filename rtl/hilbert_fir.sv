// hilbert_fir: truncated discrete Hilbert transform of a sample stream.
//
// What it does: for each input sample x[n] it computes
//     y[n] = (2/pi) * sum over odd k, -K <= k <= K, of x[n-k] / k
// which is the discrete Hilbert transform cut off after |k| = K. The pair
// (x[n], y[n]) is the analytic signal whose angle is the instantaneous phase.
// For x = sin(w n) it returns y = -cos(w n), i.e. the phase runs forward.
//
// How: the kernel is odd, so the sum folds into
//     y[n] = sum over k = 1, 3, ..., KO of c_k * (x[n-k] - x[n+k]),
//     c_k  = round(2^CF * 2 / (pi * k)),  KO = largest odd number <= K,
// that is KO+1/2 multipliers on sample differences. A window of 2*KO+1
// samples slides over the stream; a result is produced once the window is
// full, so a segment of N samples gives N - 2*KO outputs, for the samples
// n = KO .. N-1-KO, and the samples at the edges, whose window would run off
// the segment, are not used. `in_last` marks the last sample of a segment;
// the window is then emptied for the next segment and `out_last` marks the
// last output.
//
// Timing: fully pipelined, one sample per clock; an output leaves LATENCY = 2
// clocks after the input that completed its window. Inputs may have gaps.
//
// From the paper: the transform and its truncation at K, with K = 20 as the
// chosen value. The folding into differences, the coefficient precision CF
// and the use of only full windows at the segment edges are this design's.
module hilbert_fir
  import fc_pkg::*;
#(
  parameter int K  = 20,  // truncation of the sum, |k| <= K
  parameter int CF = 16   // fraction bits of the coefficients
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    in_last,
  input  sample_t in_x,
  output logic    out_valid,
  output logic    out_last,
  output sample_t out_x,    // x[n], the centre of the window
  output hilb_t   out_y     // y[n]
);

  localparam int KO   = (K % 2 == 1) ? K : K - 1;
  localparam int NT   = (KO + 1) / 2;           // taps after folding
  localparam int L    = 2 * KO + 1;             // window length
  localparam int PW   = SAMPLE_W + 1 + CF + 1;  // product width
  localparam int SW   = PW + $clog2(NT + 1);    // sum width
  localparam int FW   = $clog2(L + 1);

  if (K < 1) begin : g_check_k
    $error("hilbert_fir: K must be at least 1");
  end

  // c_k for k = 2i+1
  function automatic logic signed [CF+1:0] coef(int i);
    real c;
    c = (2.0 ** CF) * 2.0 / (3.14159265358979323846 * real'(2 * i + 1));
    return (CF+2)'($rtoi(c + 0.5));
  endfunction

  logic signed [CF+1:0] coefs [NT];
  for (genvar i = 0; i < NT; i++) begin : g_coef
    localparam logic signed [CF+1:0] C = coef(i);
    assign coefs[i] = C;
  end

  sample_t        win [L];     // win[0] newest, win[L-1] oldest
  logic [FW-1:0]  fill;
  logic           a_valid, a_last;
  logic signed [PW-1:0] prod [NT];
  sample_t        b_x;
  logic           b_valid, b_last;
  logic signed [SW-1:0] acc;
  logic signed [SW-1:0] rnd;

  // stage A: slide the window
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill    <= '0;
      a_valid <= 1'b0;
      a_last  <= 1'b0;
      for (int j = 0; j < L; j++) win[j] <= '0;
    end else begin
      a_valid <= 1'b0;
      a_last  <= 1'b0;
      if (in_valid) begin
        win[0] <= in_x;
        for (int j = 1; j < L; j++) win[j] <= win[j-1];
        a_valid <= (fill >= FW'(L - 1));
        a_last  <= in_last && (fill >= FW'(L - 1));
        if (in_last)                 fill <= '0;
        else if (fill < FW'(L))      fill <= fill + 1'b1;
      end
    end
  end

  // stage B: folded differences times coefficients
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0;
      b_last  <= 1'b0;
      b_x     <= '0;
      for (int i = 0; i < NT; i++) prod[i] <= '0;
    end else begin
      b_valid <= a_valid;
      b_last  <= a_last;
      b_x     <= win[KO];
      for (int i = 0; i < NT; i++)
        // win[KO + k] is x[n-k], win[KO - k] is x[n+k]
        prod[i] <= PW'((SAMPLE_W+1)'(win[KO + 2*i + 1]) - (SAMPLE_W+1)'(win[KO - 2*i - 1]))
                   * PW'(coefs[i]);
    end
  end

  // stage C: sum, round and saturate
  always_comb begin
    acc = '0;
    for (int i = 0; i < NT; i++) acc += SW'(prod[i]);
    rnd = (acc + (SW'(1) <<< (CF - 1))) >>> CF;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
    end else begin
      out_valid <= b_valid;
      out_last  <= b_last;
      out_x     <= b_x;
      if (rnd > SW'(2 ** (HILB_W - 1) - 1))
        out_y <= hilb_t'(2 ** (HILB_W - 1) - 1);
      else if (rnd < -SW'(2 ** (HILB_W - 1)))
        out_y <= hilb_t'(-(2 ** (HILB_W - 1)));
      else
        out_y <= hilb_t'(rnd);
    end
  end

endmodule
