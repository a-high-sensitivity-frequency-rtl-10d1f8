// tb_hilbert_fir: checks the truncated Hilbert transform against a
// floating-point evaluation of y[n] = 2/pi * sum_{odd k, |k|<=K} x[n-k]/k.
//
// Two segments are streamed back to back (random full-scale samples, then a
// sampled sine with gaps in the input), so the window reset between segments
// is exercised. For every output the test checks x[n], y[n] within the
// coefficient-rounding bound, the number of outputs (N - 2*KO per segment),
// the `out_last` flag and the pipeline latency of 2 clocks.
module tb_hilbert_fir;
  import fc_pkg::*;

  localparam int K  = 20;
  localparam int KO = 19;
  localparam int N1 = 150;
  localparam int N2 = 300;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  sample_t in_x = '0;
  logic out_valid, out_last;
  sample_t out_x;
  hilb_t out_y;

  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  hilbert_fir #(.K(K)) dut (.*);

  int xs [2][N2];
  int lens [2] = '{N1, N2};
  int in_cyc [2][N2];
  int seg = 0, outn = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic real yref(int s, int n);
    real acc = 0.0;
    for (int k = 1; k <= KO; k += 2)
      acc += real'(xs[s][n-k] - xs[s][n+k]) / real'(k);
    return acc * 2.0 / PI;
  endfunction

  function automatic real tol(int s, int n);
    real t = 1.0;
    for (int k = 1; k <= KO; k += 2)
      t += real'((xs[s][n-k] > xs[s][n+k]) ? xs[s][n-k] - xs[s][n+k]
                                            : xs[s][n+k] - xs[s][n-k]) / 131072.0;
    return t;
  endfunction

  // output monitor
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int n;
      real d;
      n = KO + outn;
      d = real'(out_y) - yref(seg, n);
      check(out_x == sample_t'(xs[seg][n]), $sformatf("x seg %0d n %0d", seg, n));
      check(d <= tol(seg, n) && d >= -tol(seg, n),
            $sformatf("y seg %0d n %0d got %0d want %f", seg, n, out_y, yref(seg, n)));
      check(cyc - in_cyc[seg][n + KO] == 3, $sformatf("latency %0d", cyc - in_cyc[seg][n + KO]));
      check(out_last == (n == lens[seg] - 1 - KO), $sformatf("last seg %0d n %0d", seg, n));
      outn++;
      if (out_last) begin
        check(outn == lens[seg] - 2 * KO, $sformatf("count seg %0d: %0d", seg, outn));
        seg++;
        outn = 0;
      end
    end
  end

  initial begin
    for (int n = 0; n < N1; n++) xs[0][n] = int'($urandom_range(0, 262143)) - 131072;
    for (int n = 0; n < N2; n++)
      xs[1][n] = $rtoi(120000.0 * $sin(2.0 * PI * 0.1625 * n));
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int s = 0; s < 2; s++) begin
      for (int n = 0; n < lens[s]; n++) begin
        in_valid <= 1;
        in_x     <= sample_t'(xs[s][n]);
        in_last  <= (n == lens[s] - 1);
        @(posedge clk);
        in_cyc[s][n] = cyc;
        if (s == 1 && n % 7 == 3) begin
          in_valid <= 0;
          in_last  <= 0;
          @(posedge clk);
        end
      end
    end
    in_valid <= 0;
    in_last  <= 0;
    repeat (10) @(posedge clk);
    check(seg == 2, $sformatf("segments completed %0d", seg));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
