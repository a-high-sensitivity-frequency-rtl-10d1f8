// tb_fid_freq_counter: the whole counter, from trigger and ADC pins to the
// AXI4-Lite port, at reduced sizes (84-clock sampling, 512-sample banks).
//
// The testbench plays the signal generator: while the trigger is low it
// produces A exp(-t/tau) sin(2 pi f t) as a continuous function of time,
// which a behavioural ADC samples at each conversion start. A sequence of
// pulses makes every mechanism of the design happen and counts it:
//   result      a pulse measured; the result agrees within 2 mHz with a
//               double-precision HT-LR run on the same ADC codes
//   bank0/bank1 both buffer banks used
//   overrun     a pulse ending while the engine is busy is dropped
//   overflow    a pulse longer than the bank is cut and still measured
//   short       a pulse too short for the Hilbert window gives err
//   disable     acquisition switched off over AXI: no conversions
//   readback    raw samples read over AXI equal the ADC's conversions
//   irq         result interrupt raised and cleared
// A mechanism that never happened counts as a failure.
module tb_fid_freq_counter;
  import fc_pkg::*;

  localparam int  CLK_HZ = 200_000_000;
  localparam int  SC     = 84;
  localparam int  DEPTH  = 512;
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

  fid_freq_counter #(
    .CLK_HZ(CLK_HZ), .SAMPLE_CYCLES(SC), .CONV_CYCLES(10), .SCLK_HALF(2),
    .DEPTH(DEPTH), .K(20)
  ) dut (.*);

  adc_model #(.T_CONV_MIN(10)) u_adc (
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

  initial begin
    logic [31:0] d;
    int nr, conv0, ov0;
    repeat (5) @(posedge clk);
    rst_n <= 1;
    repeat (10 * SC) @(posedge clk);

    // 1: ordinary pulse
    nr = n_results;
    pulse(400, 5, 250000.0);
    expect_result(nr, 0, 250000.0, "p1");
    axi_read('h08, d);
    check(d >= 399 && d <= 401, $sformatf("p1: data_cnt %0d", d));
    check_against_ref("p1");
    status_and_clear("p1");
    repeat (100 * SC) @(posedge clk);

    // 2 + 3: pulse 3 ends while pulse 2 is still being processed
    nr = n_results;
    pulse(400, 1, 40000.0);
    pulse(5, 200, 123000.0);
    expect_result(nr, 0, 40000.0, "p2");
    check_against_ref("p2");
    axi_read('h10, d);
    check(d == 1, $sformatf("overrun count %0d", d));
    if (d == 1) m_overrun++;
    check(n_results == nr + 1, "p3 dropped");
    status_and_clear("p2");

    // 4: longer than the bank
    nr = n_results;
    pulse(DEPTH + 90, 200, 330000.0);
    expect_result(nr, 0, 330000.0, "p4");
    axi_read('h08, d);
    check(d == DEPTH, $sformatf("p4: data_cnt %0d", d));
    axi_read('h14, d);
    check(d == 1, $sformatf("overflow count %0d", d));
    axi_read('h04, d);
    if (d[4]) m_overflow++;
    check(d[4] == 1'b1, "p4: overflow flag");
    check_against_ref("p4");
    status_and_clear("p4");

    // 5: too short
    nr = n_results;
    pulse(20, 200, 200000.0);
    expect_result(nr, 1, 0.0, "p5");
    if (last_err) m_short++;
    status_and_clear("p5");

    // 6: acquisition switched off
    axi_write('h00, 32'h0);
    repeat (3 * SC) @(posedge clk);
    conv0 = conversions;
    nr = n_results;
    pulse(60, 100, 100000.0);
    check(conversions == conv0, $sformatf("no conversions while disabled (%0d)", conversions - conv0));
    if (conversions == conv0) m_disable++;
    expect_result(nr, 1, 0.0, "p6");
    status_and_clear("p6");
    axi_write('h00, 32'h1);
    repeat (3 * SC) @(posedge clk);

    // 7: back on
    nr = n_results;
    pulse(450, 100, 15000.0);
    expect_result(nr, 0, 15000.0, "p7");
    check_against_ref("p7");
    status_and_clear("p7");

    axi_read('h0C, d);
    check(d == 7, $sformatf("segments %0d", d));
    check(timing_errors == 0, "ADC timing");

    $display("mechanisms: result=%0d bank0=%0d bank1=%0d overrun=%0d overflow=%0d short=%0d disable=%0d readback=%0d irq=%0d",
             m_result, m_bank0, m_bank1, m_overrun, m_overflow, m_short, m_disable, m_readback, m_irq);
    check(m_result > 0, "mechanism: result");
    check(m_bank0 > 0, "mechanism: bank 0");
    check(m_bank1 > 0, "mechanism: bank 1");
    check(m_overrun > 0, "mechanism: overrun");
    check(m_overflow > 0, "mechanism: overflow");
    check(m_short > 0, "mechanism: short segment");
    check(m_disable > 0, "mechanism: acquisition disable");
    check(m_readback > 0, "mechanism: raw readback");
    check(m_irq > 0, "mechanism: irq");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
