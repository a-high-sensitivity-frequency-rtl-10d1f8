// tb_adc_spi_ctrl: the ADC read-out against a behavioural ADC model.
//
// The model latches a new random code at every CNV rising edge and shifts it
// out MSB first. The test checks that every `sample` equals the code the
// model latched, that samples come exactly SAMPLE_CYCLES clocks apart (the
// 650 ns grid at 200 MHz), that CNV is high for CONV_CYCLES, that each
// conversion gets 18 SCLK pulses, that DIN is held high and that no
// conversions start while `en` is low.
module tb_adc_spi_ctrl;
  import fc_pkg::*;

  localparam int SAMPLE_CYCLES = 130;
  localparam int CONV_CYCLES   = 56;
  localparam int NSAMP         = 200;

  logic clk = 0, rst_n = 0, en = 0;
  logic adc_cnv, adc_sclk, adc_din, adc_dout;
  sample_t sample;
  logic sample_valid;
  logic signed [17:0] code;
  int conversions, timing_errors;

  int checks = 0, failures = 0;
  int cyc = 0, last_valid = -1, cnv_rise = 0, sclk_rises = 0, got = 0;
  logic cnv_q = 0, sclk_q = 0;
  int codes [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  adc_spi_ctrl #(.SAMPLE_CYCLES(SAMPLE_CYCLES), .CONV_CYCLES(CONV_CYCLES), .SCLK_HALF(2)) dut (.*);
  adc_model #(.T_CONV_MIN(CONV_CYCLES)) u_adc (
    .clk, .rst_n, .cnv(adc_cnv), .sclk(adc_sclk), .din(adc_din), .code, .dout(adc_dout),
    .conversions, .timing_errors
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    cnv_q  <= adc_cnv;
    sclk_q <= adc_sclk;
    if (rst_n && adc_cnv && !cnv_q) begin
      codes.push_back(int'(code));
      if (cnv_rise != 0) check(sclk_rises == 18, $sformatf("sclk pulses %0d", sclk_rises));
      cnv_rise   <= cyc;
      sclk_rises <= 0;
    end
    if (rst_n && !adc_cnv && cnv_q) check(cyc - cnv_rise == CONV_CYCLES, $sformatf("cnv width %0d", cyc - cnv_rise));
    if (adc_sclk && !sclk_q) sclk_rises <= sclk_rises + 1;
    if (rst_n) check(adc_din == 1'b1, "din high");
    if (rst_n && sample_valid) begin
      int want;
      want = codes.pop_front();
      check(int'(sample) == want, $sformatf("sample %0d want %0d", sample, want));
      if (last_valid >= 0)
        check(cyc - last_valid == SAMPLE_CYCLES, $sformatf("period %0d", cyc - last_valid));
      last_valid <= cyc;
      got++;
    end
  end

  // a new random code for the model after every conversion start
  always @(posedge clk) if (adc_cnv && !cnv_q) code <= 18'($urandom);

  initial begin
    code = 18'h2_0001;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (20) @(posedge clk);
    check(conversions == 0, "no conversion while disabled");
    en <= 1;
    while (got < NSAMP) @(posedge clk);
    en <= 0;
    repeat (3 * SAMPLE_CYCLES) @(posedge clk);
    check(got == NSAMP || got == NSAMP + 1, $sformatf("stopped after %0d", got));
    check(conversions == got, $sformatf("conversions %0d samples %0d", conversions, got));
    check(timing_errors == 0, "ADC model timing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NSAMP + 10) * SAMPLE_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
