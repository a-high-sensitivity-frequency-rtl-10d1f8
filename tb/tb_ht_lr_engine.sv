// tb_ht_lr_engine: end-to-end HT-LR processing of synthetic FID segments.
//
// Segments A exp(-n/(fs tau)) sin(2 pi f n/fs) + noise, quantised to 18
// bits, are placed in a buffer model (two banks, one-clock read latency)
// and the engine is started on them. Each result is compared with
//   * a double-precision run of the same algorithm computed here (Hilbert
//     sum with exact coefficients, atan2, unwrapping, fit weighted by
//     sqrt(x^2 + y^2)): the hardware must agree within 2 mHz;
//   * the true frequency: within 0.6 Hz, the truncation error at K = 20
//     for the lowest frequency (10 kHz) being about 0.5 Hz.
// The cases: 2.5 ms pulses (3846 samples) at 250, 10 and 500 kHz; a noisy
// 0.5 ms pulse (1000 Hz output rate) at 400 kHz; a 5 ms pulse (100 Hz rate)
// at 20 kHz; a noisy 250 kHz pulse with a 5 ms gate, like the simulated data
// set used to compare weighted and unweighted fitting.
// Also checked: ratio and Hz outputs agree, the reported sample count and
// cycle count (cnt + fixed latency), busy, and that a segment too short
// for the Hilbert window is answered with err.
module tb_ht_lr_engine;
  import fc_pkg::*;

  localparam int    DEPTH = 8192;
  localparam int    AW    = 13;
  localparam int    K     = 20;
  localparam int    KO    = 19;
  localparam real   PI    = 3.14159265358979323846;
  localparam real   FS    = 200.0e6 / 130.0;
  localparam int    OVERHEAD = 164;   // cycles beyond cnt: pipeline and divider

  logic clk = 0, rst_n = 0;
  logic start = 0, start_bank = 0;
  logic [AW:0] start_cnt = '0;
  logic busy;
  logic rd_bank;
  logic [AW-1:0] rd_addr;
  sample_t rd_data;
  logic result_valid;
  result_t result;

  int checks = 0, failures = 0;
  int mem [2][DEPTH];
  real xr [DEPTH];

  always #5 clk = ~clk;

  ht_lr_engine #(.DEPTH(DEPTH), .K(K)) dut (.*);

  always @(posedge clk) rd_data <= sample_t'(mem[rd_bank][rd_addr]);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // floating-point HT-LR on bank b, n samples; returns f in Hz
  function automatic real ref_htlr(int b, int n);
    real sw = 0, st = 0, sp = 0, stt = 0, stp = 0;
    real prev = 0, phi = 0;
    int  t = 0;
    for (int i = KO; i < n - KO; i++) begin
      real x, y, ph, w, d;
      x = mem[b][i];
      y = 0;
      for (int k = 1; k <= KO; k += 2) y += (mem[b][i-k] - mem[b][i+k]) * 2.0 / (PI * k);
      ph = $atan2(y, x) / (2.0 * PI);
      w  = $sqrt(x * x + y * y);
      if (t == 0) phi = ph;
      else begin
        d = ph - prev;
        d = d - $floor(d + 0.5);
        phi += d;
      end
      prev = ph;
      sw += w; st += w * t; stt += w * t * t; sp += w * phi; stp += w * t * phi;
      t++;
    end
    return (sw * stp - st * sp) / (sw * stt - st * st) * FS;
  endfunction

  task automatic fill(int b, int n, real f, real amp, real noise);
    for (int i = 0; i < n; i++) begin
      real v;
      v = amp * $exp(-real'(i) / (FS * 2.5e-3)) * $sin(2.0 * PI * f * i / FS)
          + noise * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
      mem[b][i] = $rtoi(v);
    end
  endtask

  task automatic run(int b, int n, real f, bit expect_err, string name);
    real got, want_ref, fr;
    start <= 1; start_bank <= b[0]; start_cnt <= (AW+1)'(n);
    @(posedge clk);
    start <= 0;
    @(posedge clk);
    check(busy, {name, ": busy"});
    while (!result_valid) @(posedge clk);
    @(posedge clk);
    check(result.err == expect_err, $sformatf("%s: err %0b", name, result.err));
    check(result.cnt == 32'(n), {name, ": cnt"});
    check(!busy, {name, ": idle after result"});
    if (!expect_err) begin
      got      = real'(result.freq) / 65536.0;
      fr       = real'(result.ratio) / (2.0 ** RATIO_FRAC) * FS;
      want_ref = ref_htlr(b, n);
      $display("%s: f=%0.1f Hz  hw=%0.6f  ratio-Hz=%0.6f ref=%0.6f  hw-f=%0.4f  cycles=%0d",
               name, f, got, fr, want_ref, got - f, result.cycles);
      check(got - fr < 1e-4 && fr - got < 1e-4, {name, ": ratio and Hz agree"});
      check(got - want_ref < 2e-3 && want_ref - got < 2e-3, {name, ": matches float HT-LR"});
      check(got - f < 0.6 && f - got < 0.6, {name, ": near true frequency"});
      check(result.cycles == 32'(n + OVERHEAD), $sformatf("%s: cycles %0d", name, result.cycles));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    fill(0, 3846, 250000.0, 120000.0, 0.0);
    fill(1, 3846, 10000.0, 120000.0, 0.0);
    run(0, 3846, 250000.0, 0, "250k");
    run(1, 3846, 10000.0, 0, "10k");
    fill(0, 3846, 500000.0, 120000.0, 0.0);
    run(0, 3846, 500000.0, 0, "500k");
    fill(1, 769, 400000.0, 60000.0, 20.0);
    run(1, 769, 400000.0, 0, "400k-1000Hz-rate-noisy");
    fill(0, 7692, 20000.0, 120000.0, 5.0);
    run(0, 7692, 20000.0, 0, "20k-100Hz-rate");
    fill(1, 7692, 250000.0, 120000.0, 300.0);
    run(1, 7692, 250000.0, 0, "250k-5ms-gate-noisy");
    run(1, 2 * KO + 1, 0.0, 1, "too-short");
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
