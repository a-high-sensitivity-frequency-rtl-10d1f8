// tb_ht_lr_ksweep: the HT-LR engine built for a range of truncation lengths.
//
// The truncation K of the Hilbert sum is an elaboration parameter. This bench
// builds eight engines, for the K values of the published truncation study
// (1, 5, 10, 15, 20, 30, 40, 50). It starts them all on the same 2.5 ms damped
// segment (3846 samples at 650 ns, tau = 2.5 ms) held in a shared two-bank
// buffer model. Each engine has its own one-clock read port. The study's four
// signal frequencies are run: 10, 20, 100 and 400 kHz.
//
// Checked for every K:
//   * busy after start, no err, and the reported sample count;
//   * agreement within 2 mHz with a double-precision HT-LR using the same K;
//   * the engine time is cnt plus a fixed pipeline/divider latency that does
//     not depend on K (164 clocks).
// Checked across K, at 10 kHz where truncation matters most: the error against
// the true frequency at K = 50 is smaller than at K = 5, and at K = 20 it is
// below 0.6 Hz. That study compared HT-LR with a nonlinear fit on measured,
// noisy data; here the signal is synthetic and noise-free, so only the
// trend, not the published numbers, is checked.
module tb_ht_lr_ksweep;
  import fc_pkg::*;

  localparam int  DEPTH = 8192;
  localparam int  AW    = 13;
  localparam int  NK    = 8;
  localparam int  KS [NK] = '{1, 5, 10, 15, 20, 30, 40, 50};
  localparam real PI    = 3.14159265358979323846;
  localparam real FS    = 200.0e6 / 130.0;
  localparam int  N     = 3846;
  localparam int  OVERHEAD = 164;

  logic clk = 0, rst_n = 0;
  logic start = 0, start_bank = 0;
  logic [AW:0] start_cnt = '0;
  logic    busy         [NK];
  logic    rd_bank      [NK];
  logic [AW-1:0] rd_addr [NK];
  sample_t rd_data      [NK];
  logic    result_valid [NK];
  result_t result       [NK];

  int checks = 0, failures = 0;
  int mem [2][DEPTH];

  always #5 clk = ~clk;

  for (genvar g = 0; g < NK; g++) begin : g_eng
    ht_lr_engine #(.DEPTH(DEPTH), .K(KS[g])) u_eng (
      .clk, .rst_n, .start, .start_bank, .start_cnt,
      .busy(busy[g]), .rd_bank(rd_bank[g]), .rd_addr(rd_addr[g]),
      .rd_data(rd_data[g]), .result_valid(result_valid[g]), .result(result[g]));
    always @(posedge clk) rd_data[g] <= sample_t'(mem[rd_bank[g]][rd_addr[g]]);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic real fabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  // floating-point HT-LR with truncation k_max on bank b, n samples; f in Hz
  function automatic real ref_htlr(int b, int n, int k_max);
    real sw = 0, st = 0, sp = 0, stt = 0, stp = 0;
    real prev = 0, phi = 0;
    int  ko = (k_max % 2 == 1) ? k_max : k_max - 1;
    int  t = 0;
    for (int i = ko; i < n - ko; i++) begin
      real x, y, ph, w, d;
      x = mem[b][i];
      y = 0;
      for (int k = 1; k <= ko; k += 2) y += (mem[b][i-k] - mem[b][i+k]) * 2.0 / (PI * k);
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

  task automatic fill(int b, real f);
    for (int i = 0; i < N; i++)
      mem[b][i] = $rtoi(120000.0 * $exp(-real'(i) / (FS * 2.5e-3)) * $sin(2.0 * PI * f * i / FS));
  endtask

  task automatic run(int b, real f, string name);
    bit  done [NK];
    int  ndone = 0;
    real dev [NK];
    foreach (done[j]) done[j] = 0;
    start <= 1; start_bank <= b[0]; start_cnt <= (AW+1)'(N);
    @(posedge clk);
    start <= 0;
    @(posedge clk);
    for (int j = 0; j < NK; j++) check(busy[j], $sformatf("%s K=%0d: busy", name, KS[j]));
    while (ndone < NK) begin
      @(posedge clk);
      for (int j = 0; j < NK; j++)
        if (result_valid[j] && !done[j]) begin
          done[j] = 1;
          ndone++;
        end
    end
    @(posedge clk);
    for (int j = 0; j < NK; j++) begin
      real got, want;
      got  = real'(result[j].freq) / 65536.0;
      want = ref_htlr(b, N, KS[j]);
      dev[j] = got - f;
      $display("%s K=%0d: hw %0.6f Hz, reference %0.6f Hz, error vs true %0.4f Hz, cycles %0d",
               name, KS[j], got, want, got - f, result[j].cycles);
      check(!result[j].err, $sformatf("%s K=%0d: err", name, KS[j]));
      check(result[j].cnt == 32'(N), $sformatf("%s K=%0d: cnt", name, KS[j]));
      check(fabs(got - want) < 2e-3, $sformatf("%s K=%0d: matches float HT-LR", name, KS[j]));
      check(result[j].cycles == 32'(N + OVERHEAD),
            $sformatf("%s K=%0d: cycles %0d", name, KS[j], result[j].cycles));
    end
    if (f < 20000.0) begin
      check(fabs(dev[7]) < fabs(dev[1]), $sformatf("%s: K=50 closer than K=5", name));
      check(fabs(dev[4]) < 0.6, $sformatf("%s: K=20 within 0.6 Hz", name));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    fill(0, 10000.0);
    fill(1, 20000.0);
    run(0, 10000.0, "10k");
    run(1, 20000.0, "20k");
    fill(0, 100000.0);
    run(0, 100000.0, "100k");
    fill(1, 400000.0);
    run(1, 400000.0, "400k");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
