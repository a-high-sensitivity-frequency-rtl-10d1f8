// tb_cordic_atan: checks phase and magnitude of the CORDIC against
// floating-point atan2 and sqrt.
//
// Random (x, y) pairs over the full input range of all four quadrants, plus
// the axes and small vectors, are streamed one per clock. Each output is
// compared with atan2(y, x) in turns (modulo one turn) and with
// G * sqrt(x^2 + y^2), G = prod sqrt(1 + 2^-2i); the weight output with the
// magnitude shifted and saturated; the latency must be ITER + 1 clocks.
module tb_cordic_atan;
  import fc_pkg::*;

  localparam int ITER = 22;
  localparam int NV   = 2000;
  localparam real PI  = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  sample_t in_x = '0;
  hilb_t   in_y = '0;
  logic out_valid, out_last;
  phase_t out_phase;
  logic [MAG_W-1:0] out_mag;
  weight_t out_weight;

  int checks = 0, failures = 0;
  int cyc = 0;
  int xs [NV], ys [NV], tin [NV];
  int k = 0;
  real gain = 1.0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  cordic_atan #(.ITER(ITER)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real want_ph, got_ph, dph, r, want_mag, tol_ph;
      int  want_w;
      r       = $sqrt(real'(xs[k]) * xs[k] + real'(ys[k]) * ys[k]);
      want_ph = $atan2(real'(ys[k]), real'(xs[k])) / (2.0 * PI);
      got_ph  = real'(out_phase) / (2.0 ** PHASE_W);
      dph     = got_ph - want_ph;
      if (dph > 0.5)  dph -= 1.0;
      if (dph < -0.5) dph += 1.0;
      tol_ph  = 8.0 / (2.0 ** PHASE_W) + 0.25 / (2.0 * PI * (r + 1.0));
      check(dph < tol_ph && dph > -tol_ph,
            $sformatf("phase x=%0d y=%0d got %f want %f", xs[k], ys[k], got_ph, want_ph));
      want_mag = gain * r;
      check(real'(out_mag) - want_mag < 4.0 && want_mag - real'(out_mag) < 4.0,
            $sformatf("mag x=%0d y=%0d got %0d want %f", xs[k], ys[k], out_mag, want_mag));
      want_w = int'(out_mag >> 4);
      if (want_w > 65535) want_w = 65535;
      check(int'(out_weight) == want_w, "weight");
      check(cyc - tin[k] == ITER + 1, $sformatf("latency %0d", cyc - tin[k]));
      check(out_last == (k == NV - 1), "last");
      k++;
    end
  end

  initial begin
    for (int i = 0; i < ITER; i++) gain *= $sqrt(1.0 + 2.0 ** (-2 * i));
    for (int i = 0; i < NV; i++) begin
      xs[i] = int'($urandom_range(0, 262143)) - 131072;
      ys[i] = int'($urandom_range(0, 1048575)) - 524288;
      if (i % 5 == 1) begin xs[i] = xs[i] / 1024; ys[i] = ys[i] / 1024; end
    end
    xs[0] = 1000;  ys[0] = 0;
    xs[1] = 0;     ys[1] = 1000;
    xs[2] = -1000; ys[2] = 0;
    xs[3] = 0;     ys[3] = -1000;
    xs[4] = -131072; ys[4] = -524288;
    xs[5] = 131071;  ys[5] = 524287;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < NV; i++) begin
      in_valid <= 1;
      in_x     <= sample_t'(xs[i]);
      in_y     <= hilb_t'(ys[i]);
      in_last  <= (i == NV - 1);
      @(posedge clk);
      tin[i] = cyc;
    end
    in_valid <= 0;
    in_last  <= 0;
    repeat (ITER + 5) @(posedge clk);
    check(k == NV, $sformatf("outputs %0d", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
