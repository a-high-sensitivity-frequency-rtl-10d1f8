// adc_spi_ctrl: conversion timing and serial read-out for the 18-bit SAR ADC.
//
// What it does: while `en` is high it starts one ADC conversion every
// SAMPLE_CYCLES clocks and shifts the 18-bit result in over the ADC's serial
// port, presenting it as a signed sample with a one-cycle `sample_valid`.
//
// How: a free-running counter marks the sampling grid. At each grid point
// `adc_cnv` rises and stays high for CONV_CYCLES (the conversion time). When
// it falls the ADC drives the MSB on `adc_dout`; the controller then gives 18
// `adc_sclk` pulses, each SCLK_HALF clocks low then SCLK_HALF clocks high,
// and samples `adc_dout` on every rising SCLK edge (MSB first). The ADC moves
// to the next bit on the falling SCLK edge. `adc_din` is held high, which on
// the common 18-bit SAR parts selects the 3-wire mode with CNV as chip select.
//
// Timing: conversions start exactly SAMPLE_CYCLES apart, so the sample rate
// is CLK_HZ / SAMPLE_CYCLES. `sample_valid` comes CONV_CYCLES + 36*SCLK_HALF
// clocks after the conversion starts, and at most one sample is in flight.
// Lowering `en` finishes the sample under way and then stops.
//
// From the paper: the pin names (dout, sclk, din, cnv), the 18-bit width and
// the 650 ns sampling interval. The defaults assume a 200 MHz logic clock from
// the PLL (130 clocks = 650 ns); the conversion time, the SCLK rate, the
// 3-wire mode and the two's-complement output code are this design's choices.
module adc_spi_ctrl
  import fc_pkg::*;
#(
  parameter int SAMPLE_CYCLES = 130,  // clocks per sample: 650 ns at 200 MHz
  parameter int CONV_CYCLES   = 56,   // CNV high time (conversion), 280 ns
  parameter int SCLK_HALF     = 2     // SCLK half period in clocks (50 MHz)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,            // acquisition enable
  output logic    adc_cnv,       // conversion start / chip select
  output logic    adc_sclk,      // serial clock
  output logic    adc_din,       // ADC configuration input, held high
  input  logic    adc_dout,      // serial data from the ADC, MSB first
  output sample_t sample,        // last converted sample, two's complement
  output logic    sample_valid   // one-cycle strobe per new sample
);

  localparam int CW = $clog2(SAMPLE_CYCLES + 1);
  localparam int HW = $clog2(CONV_CYCLES + SCLK_HALF + 1);

  if (CONV_CYCLES + 2 * SCLK_HALF * SAMPLE_W > SAMPLE_CYCLES) begin : g_check_timing
    $error("adc_spi_ctrl: conversion and read-out do not fit in one sample period");
  end

  typedef enum logic [2:0] {S_IDLE, S_CONV, S_LO, S_HI} state_t;

  state_t                state;
  logic [CW-1:0]         cyc;     // position on the sampling grid
  logic [HW-1:0]         cnt;     // clocks spent in the current phase
  logic [4:0]            bits;    // bits already read
  logic [SAMPLE_W-1:0]   shreg;

  assign adc_din = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cyc          <= '0;
      cnt          <= '0;
      bits         <= '0;
      shreg        <= '0;
      adc_cnv      <= 1'b0;
      adc_sclk     <= 1'b0;
      sample       <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      cyc <= (cyc == CW'(SAMPLE_CYCLES - 1)) ? '0 : cyc + 1'b1;
      unique case (state)
        S_IDLE: begin
          // the conversion starts on the next grid point (cyc == 0)
          if (en && cyc == CW'(SAMPLE_CYCLES - 1)) begin
            state   <= S_CONV;
            adc_cnv <= 1'b1;
            cnt     <= '0;
          end
        end
        S_CONV: begin
          if (cnt == HW'(CONV_CYCLES - 1)) begin
            adc_cnv <= 1'b0;
            state   <= S_LO;
            cnt     <= '0;
            bits    <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_LO: begin
          if (cnt == HW'(SCLK_HALF - 1)) begin
            adc_sclk <= 1'b1;
            shreg    <= {shreg[SAMPLE_W-2:0], adc_dout};
            state    <= S_HI;
            cnt      <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_HI: begin
          if (cnt == HW'(SCLK_HALF - 1)) begin
            adc_sclk <= 1'b0;
            cnt      <= '0;
            if (bits == 5'(SAMPLE_W - 1)) begin
              sample       <= sample_t'(shreg);
              sample_valid <= 1'b1;
              state        <= S_IDLE;
            end else begin
              bits  <= bits + 1'b1;
              state <= S_LO;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
