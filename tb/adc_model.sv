// adc_model: behavioural model of an 18-bit SAR ADC with a CNV / SCK / SDO
// serial port, for simulation only.
//
// The rising edge of `cnv` samples `code` (the already-quantised input the
// testbench supplies). When `cnv` falls the MSB appears on `dout`; each
// falling `sclk` edge moves to the next bit. `conversions` counts cnv pulses.
// The model also flags a read-out that starts before the conversion time
// T_CONV_MIN (in clocks of `clk`) has passed.
module adc_model #(
  parameter int T_CONV_MIN = 50
) (
  input  logic               clk,
  input  logic               rst_n,     // clears the counters
  input  logic               cnv,
  input  logic               sclk,
  input  logic               din,
  input  logic signed [17:0] code,
  output logic               dout,
  output int                 conversions,
  output int                 timing_errors
);
  logic [17:0] held;
  logic [17:0] sh;
  int          conv_clks;
  logic        cnv_q, sclk_q;

  initial begin
    dout = 1'b0; conversions = 0; timing_errors = 0;
    held = '0; sh = '0; conv_clks = 0; cnv_q = 1'b0; sclk_q = 1'b0;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      conversions   <= 0;
      timing_errors <= 0;
    end
    cnv_q  <= cnv;
    sclk_q <= sclk;
    if (cnv && !cnv_q && rst_n) begin
      held      <= code;
      conv_clks <= 1;
      conversions <= conversions + 1;
    end else if (cnv) begin
      conv_clks <= conv_clks + 1;
    end
    if (!cnv && cnv_q && rst_n) begin
      if (conv_clks < T_CONV_MIN) timing_errors <= timing_errors + 1;
      if (!din) timing_errors <= timing_errors + 1;
      sh   <= {held[16:0], 1'b0};
      dout <= held[17];
    end else if (!sclk && sclk_q && !cnv) begin
      dout <= sh[17];
      sh   <= {sh[16:0], 1'b0};
    end
  end
endmodule
