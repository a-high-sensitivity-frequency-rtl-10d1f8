// tb_wlr_fit: checks the weighted least-squares slope against a
// floating-point fit.
//
// Each case streams (weight, phase) pairs and compares the returned ratio
// with the slope computed here in double precision from weighted means,
//     b = sum w (t - tm)(Phi - pm) / sum w (t - tm)^2,
// scaled to the ratio format (RATIO_FRAC fraction bits, phase LSB = 2^-24
// turn). Cases: a decaying-amplitude 250 kHz-like phase ramp with noise, a
// negative slope, the largest segment with full-scale weights and near half
// a turn per sample (the widest sums), a single sample and all-zero weights
// (both must report err), and 30 random cases (length 2-600, any slope
// below half a turn per sample, random weights), half of them with idle
// cycles between samples. The latency from the last sample to the result is
// checked against the divider length.
module tb_wlr_fit;
  import fc_pkg::*;

  localparam int T_W   = 13;
  localparam int NMAX  = 8192;
  localparam int LAT   = 135;   // last sample to observed out_valid (DVD_W + 5)

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  phi_t in_phi = '0;
  weight_t in_weight = '0;
  logic busy, out_valid, out_err;
  ratio_t out_ratio;

  int checks = 0, failures = 0;
  int cyc = 0;
  longint ph [NMAX];
  int     ws [NMAX];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  wlr_fit #(.T_W(T_W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic real ref_slope(int n);
    real sw = 0, st = 0, sp = 0, tm, pm, num = 0, den = 0;
    for (int i = 0; i < n; i++) begin
      sw += ws[i]; st += real'(ws[i]) * i; sp += real'(ws[i]) * real'(ph[i]);
    end
    tm = st / sw; pm = sp / sw;
    for (int i = 0; i < n; i++) begin
      num += real'(ws[i]) * (i - tm) * (real'(ph[i]) - pm);
      den += real'(ws[i]) * (i - tm) * (i - tm);
    end
    return num / den;
  endfunction

  task automatic run(int n, bit expect_err, string name, bit bubbles = 0);
    int t_last;
    real want, got, tol;
    for (int i = 0; i < n; i++) begin
      if (bubbles && $urandom_range(0, 3) == 0) begin
        in_valid <= 0;
        in_last  <= 0;
        repeat ($urandom_range(1, 3)) @(posedge clk);
      end
      in_valid  <= 1;
      in_phi    <= phi_t'(ph[i]);
      in_weight <= weight_t'(ws[i]);
      in_last   <= (i == n - 1);
      @(posedge clk);
    end
    t_last = cyc;
    in_valid <= 0;
    in_last  <= 0;
    @(posedge clk);
    check(busy, {name, ": busy while dividing"});
    while (!out_valid) @(posedge clk);
    check(cyc - t_last == LAT, $sformatf("%s: latency %0d", name, cyc - t_last));
    check(out_err == expect_err, $sformatf("%s: err %0b", name, out_err));
    if (!expect_err) begin
      want = ref_slope(n) * (2.0 ** (RATIO_FRAC - PHASE_W));
      got  = real'(out_ratio);
      tol  = 2.0 + 1e-9 * (want < 0 ? -want : want);
      check(got - want < tol && want - got < tol,
            $sformatf("%s: ratio %f want %f (f/fs %f)", name, got, want, want / 2.0 ** RATIO_FRAC));
    end
    @(posedge clk);
    check(!busy, {name, ": idle after result"});
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // 1: f/fs = 0.1625, decaying weights, phase noise, offset
    for (int i = 0; i < 3808; i++) begin
      ws[i] = $rtoi(13000.0 * $exp(-real'(i) / 3846.0));
      ph[i] = longint'($rtoi(0.1625 * i * 16777216.0)) + 1234567 + longint'(int'($urandom_range(0, 20000)) - 10000);
    end
    run(3808, 0, "ramp");

    // 2: negative slope, random weights
    for (int i = 0; i < 1000; i++) begin
      ws[i] = int'($urandom_range(1, 65535));
      ph[i] = -longint'($rtoi(0.0123 * i * 16777216.0)) - 5000000 + longint'(int'($urandom_range(0, 2000)) - 1000);
    end
    run(1000, 0, "negative");

    // 3: widest sums: full segment, full-scale weights, 0.49 turn/sample
    for (int i = 0; i < NMAX; i++) begin
      ws[i] = 65535;
      ph[i] = longint'($rtoi(0.49 * i * 16777216.0)) + longint'(int'($urandom_range(0, 4000000)) - 2000000);
    end
    run(NMAX, 0, "full");

    // random cases: length, slope, offset and weights drawn at random; half
    // of them with idle cycles between samples
    for (int c = 0; c < 30; c++) begin
      int  n    = int'($urandom_range(2, 600));
      real slp  = (real'($urandom_range(0, 980000)) / 1000000.0 - 0.49) * 16777216.0;
      longint off = longint'(int'($urandom_range(0, 200000000))) - 100000000;
      for (int i = 0; i < n; i++) begin
        ws[i] = int'($urandom_range(1, 65535));
        ph[i] = off + longint'($rtoi(slp * i)) + longint'(int'($urandom_range(0, 2000)) - 1000);
      end
      run(n, 0, $sformatf("random %0d (n=%0d)", c, n), c[0]);
    end

    // 4: one sample only
    ws[0] = 100; ph[0] = 77;
    run(1, 1, "single");

    // 5: zero weights
    for (int i = 0; i < 50; i++) begin ws[i] = 0; ph[i] = i * 1000; end
    run(50, 1, "zero-weight");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
