// tb_fid_full: the whole counter at its default sizes, at the paper's main
// operating point: 200 MHz clock, 650 ns sampling (1.538 MSa/s), 8192-sample
// banks, K = 20, and a 200 Hz pulse train with 50 % duty cycle (trigger low
// for 2.5 ms = 3846 samples, then high for 2.5 ms), tau = 2.5 ms.
//
// Three pulses at 10 kHz, 250 kHz and 500 kHz (the ends and middle of the
// paper's 10-500 kHz range) are measured at the 200 Hz output rate. Then the
// two ends of the paper's output-rate study follow, each at 20 kHz and 400 kHz
// and at 50 % duty: 100 Hz (5 ms = 7692-sample pulses, the longest a bank must
// hold) and 1000 Hz (0.5 ms = 769 samples). For each pulse:
//   * exactly one result comes before the next pulse would start;
//   * the segment holds the pulse length +- 1 samples;
//   * the engine time is cnt + 164 clocks;
//   * the frequency agrees within 2 mHz with a double-precision HT-LR run on
//     the same ADC codes, which are read back over AXI;
//   * it is within 0.6 Hz of the true frequency. The exception is 20 kHz in a
//     0.5 ms pulse: that holds only ten cycles, and there the truncated
//     transform alone is off by about 2 Hz, so a 5 Hz bound is applied.
module tb_fid_full;
  import fc_pkg::*;

  localparam int  CLK_HZ = 200_000_000;
  localparam int  SC     = 130;
  localparam int  DEPTH  = 8192;
  localparam real FS     = real'(CLK_HZ) / real'(SC);
  localparam real PI     = 3.14159265358979323846;
  localparam int  ADDR_W = 16;

  logic clk = 0, rst_n = 0;
  logic adc_cnv, adc_sclk, adc_din, adc_dout;
  logic trigger = 1;
  logic [ADDR_W-1:0] s_axil_awaddr = '0, s_axil_araddr = '0;
  logic s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 0;
  logic s_axil_arvalid = 0, s_axil_rready = 0;
  logic [31:0] s_axil_wdata = '0;
  logic [3:0] s_axil_wstrb = '0;
  logic s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic [31:0] s_axil_rdata;
  logic irq, res_valid, res_err;
  ratio_t res_ratio;
  freq_t res_freq;

  logic signed [17:0] code = '0;
  int conversions, timing_errors;

  int checks = 0, failures = 0;
  longint cyc = 0;
  // signal generator state
  bit     on = 0;
  longint t_fall = 0;
  real    f_sig = 1e5, amp = 120000.0, tau_s = 2.5e-3;
  // conversions: code latched at each CNV rise
  int     conv_codes [$];
  // results
  int     n_results = 0;
  bit     last_err;
  real    last_f;
  // mechanism counters
  int m_result = 0, m_bank0 = 0, m_bank1 = 0, m_overrun = 0, m_overflow = 0;
  int m_short = 0, m_disable = 0, m_readback = 0, m_irq = 0;

  always #2.5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  fid_freq_counter dut (.*);

  adc_model #(.T_CONV_MIN(56)) u_adc (
    .clk, .rst_n, .cnv(adc_cnv), .sclk(adc_sclk), .din(adc_din), .code,
    .dout(adc_dout), .conversions, .timing_errors
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  // analog signal, sampled by the ADC model at CNV
  logic cnv_q = 0;
  always @(posedge clk) begin
    real t, v;
    t = real'(cyc - t_fall) / real'(CLK_HZ);
    v = on ? amp * $exp(-t / tau_s) * $sin(2.0 * PI * f_sig * t) : 0.0;
    code  <= 18'($rtoi(v));
    cnv_q <= adc_cnv;
    if (rst_n && adc_cnv && !cnv_q) conv_codes.push_back(int'(code));
  end

  always @(posedge clk) begin
    if (rst_n && res_valid) begin
      n_results++;
      last_err = res_err;
      last_f   = real'(res_freq) / 65536.0;
    end
  end

  // ---------------------------------------------------------------- AXI
  task automatic axi_read(input int addr, output logic [31:0] data);
    s_axil_araddr <= ADDR_W'(addr); s_axil_arvalid <= 1;
    @(posedge clk);
    while (!s_axil_arready) @(posedge clk);
    s_axil_arvalid <= 0;
    s_axil_rready  <= 1;
    @(posedge clk);
    while (!s_axil_rvalid) @(posedge clk);
    data = s_axil_rdata;
    s_axil_rready <= 0;
    @(posedge clk);
  endtask

  task automatic axi_write(input int addr, input logic [31:0] data);
    s_axil_awaddr <= ADDR_W'(addr); s_axil_awvalid <= 1;
    s_axil_wdata <= data; s_axil_wstrb <= 4'hF; s_axil_wvalid <= 1;
    @(posedge clk);
    while (!(s_axil_awready && s_axil_wready)) @(posedge clk);
    s_axil_awvalid <= 0; s_axil_wvalid <= 0;
    s_axil_bready <= 1;
    @(posedge clk);
    while (!s_axil_bvalid) @(posedge clk);
    s_axil_bready <= 0;
    @(posedge clk);
  endtask

  // ------------------------------------------------------------- pulses
  // trigger low for `lo` sample periods (signal on), then high for `hi`
  task automatic pulse(int lo, int hi, real f);
    f_sig  = f;
    @(posedge clk);
    trigger <= 0;
    on      = 1;
    t_fall  = cyc;
    repeat (lo * SC) @(posedge clk);
    trigger <= 1;
    on      = 0;
    repeat (hi * SC) @(posedge clk);
  endtask

  // wait for the result of the last pulse and check it
  task automatic expect_result(int n0, bit want_err, real f, string name);
    int w = 0;
    while (n_results == n0 && w < 20000) begin @(posedge clk); w++; end
    check(n_results == n0 + 1, $sformatf("%s: one result (%0d)", name, n_results - n0));
    check(last_err == want_err, $sformatf("%s: err %0b", name, last_err));
    if (!want_err) begin
      $display("%s: f=%0.1f measured %0.6f Hz (error %0.6f)", name, f, last_f, last_f - f);
      check(last_f - f < 50.0 && f - last_f < 50.0, $sformatf("%s: frequency %f", name, last_f));
    end
  endtask

  // read the raw samples of the last segment and find them in the ADC record
  task automatic check_readback(int n, string name, output int start_out);
    logic [31:0] d;
    int first [4];
    int start_idx = -1;
    int ok = 1;
    for (int i = 0; i < 4; i++) begin
      axi_read('h8000 + 4 * i, d);
      first[i] = int'(signed'(d));
    end
    for (int j = 0; j + 3 < conv_codes.size(); j++)
      if (conv_codes[j] == first[0] && conv_codes[j+1] == first[1] &&
          conv_codes[j+2] == first[2] && conv_codes[j+3] == first[3] && first[1] != 0) begin
        start_idx = j;
      end
    check(start_idx >= 0, {name, ": segment start found in ADC record"});
    if (start_idx >= 0) begin
      for (int i = 0; i < n; i += 37) begin
        axi_read('h8000 + 4 * i, d);
        if (int'(signed'(d)) != conv_codes[start_idx + i]) ok = 0;
      end
      check(ok == 1, {name, ": raw samples read back"});
      if (ok == 1) m_readback++;
    end
    start_out = start_idx;
  endtask

  // floating-point HT-LR (K = 20) over n recorded conversions from index s0
  function automatic real ref_htlr(int s0, int n);
    real sw = 0, st = 0, sp = 0, stt = 0, stp = 0;
    real prev = 0, phi = 0;
    int  t = 0;
    for (int i = 19; i < n - 19; i++) begin
      real x, y, ph, w, dd;
      x = conv_codes[s0 + i];
      y = 0;
      for (int k = 1; k <= 19; k += 2)
        y += (conv_codes[s0 + i - k] - conv_codes[s0 + i + k]) * 2.0 / (PI * k);
      ph = $atan2(y, x) / (2.0 * PI);
      w  = $sqrt(x * x + y * y);
      if (t == 0) phi = ph;
      else begin
        dd = ph - prev;
        dd = dd - $floor(dd + 0.5);
        phi += dd;
      end
      prev = ph;
      sw += w; st += w * t; stt += w * t * t; sp += w * phi; stp += w * t * phi;
      t++;
    end
    return (sw * stp - st * sp) / (sw * stt - st * st) * FS;
  endfunction

  // compare the last result with the floating-point algorithm on the same data
  task automatic check_against_ref(string name);
    logic [31:0] d;
    int s0;
    real r;
    axi_read('h08, d);
    check_readback(int'(d), name, s0);
    if (s0 >= 0) begin
      r = ref_htlr(s0, int'(d));
      $display("%s: reference HT-LR %0.6f Hz, hardware - reference %0.6f Hz", name, r, last_f - r);
      check(last_f - r < 2e-3 && r - last_f < 2e-3, $sformatf("%s: hardware %f vs reference %f", name, last_f, r));
      if (last_f - r < 2e-3 && r - last_f < 2e-3) m_result++;
    end
  endtask

  task automatic status_and_clear(string name);
    logic [31:0] st;
    axi_read('h04, st);
    check(st[2] == 1'b1 && irq, {name, ": result pending"});
    if (st[5]) m_bank1++; else m_bank0++;
    axi_write('h34, 32'h0);
    check(!irq, {name, ": irq cleared"});
    if (st[2] && !irq) m_irq++;
  endtask

  // one pulse of `hp` samples followed by `hp` quiet samples (50 % duty)
  task automatic one_pulse(real f, int hp, real tol_true, string name);
    logic [31:0] d;
    int nr;
    longint t_end;
    nr = n_results;
    f_sig = f;
    @(posedge clk);
    trigger <= 0;
    on      = 1;
    t_fall  = cyc;
    repeat (hp * SC) @(posedge clk);
    trigger <= 1;
    on      = 0;
    t_end   = cyc;
    while (n_results == nr && cyc - t_end < hp * SC) @(posedge clk);
    check(n_results == nr + 1, {name, ": result within the quiet half-period"});
    $display("%s: result %0d clocks after the trigger rose", name, cyc - t_end);
    check(!last_err, {name, ": no err"});
    $display("%s: f=%0.1f measured %0.6f Hz (error %0.6f)", name, f, last_f, last_f - f);
    check(last_f - f < tol_true && f - last_f < tol_true, $sformatf("%s: frequency %f", name, last_f));
    axi_read('h08, d);
    check(int'(d) >= hp - 1 && int'(d) <= hp + 1, $sformatf("%s: data_cnt %0d", name, d));
    axi_read('h30, d);
    begin
      logic [31:0] c;
      axi_read('h1C, c);
      check(d == c + 164, $sformatf("%s: engine cycles %0d for %0d samples", name, d, c));
    end
    check_against_ref(name);
    status_and_clear(name);
    while (cyc - t_end < hp * SC) @(posedge clk);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n <= 1;
    repeat (3846 * SC) @(posedge clk);   // quiet half-period before the first pulse
    one_pulse(10000.0, 3846, 0.6, "200Hz-rate 10k");
    one_pulse(250000.0, 3846, 0.6, "200Hz-rate 250k");
    one_pulse(500000.0, 3846, 0.6, "200Hz-rate 500k");
    one_pulse(20000.0, 7692, 0.6, "100Hz-rate 20k");
    one_pulse(400000.0, 7692, 0.6, "100Hz-rate 400k");
    one_pulse(20000.0, 769, 5.0, "1000Hz-rate 20k");
    one_pulse(400000.0, 769, 0.6, "1000Hz-rate 400k");
    check(m_result == 7, $sformatf("results matching the reference: %0d", m_result));
    check(timing_errors == 0, "ADC timing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (22 * 3846 * SC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
