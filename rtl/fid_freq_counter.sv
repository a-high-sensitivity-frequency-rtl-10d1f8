// fid_freq_counter: real-time frequency counter for pulsed FID signals.
//
// What it does: measures, once per pulse, the oscillation frequency of a
// free-induction-decay signal (a burst A exp(-t/tau) sin(2 pi f t) repeated
// at the pulse rate). An external 18-bit ADC samples the signal every
// SAMPLE_CYCLES clocks (650 ns at the 200 MHz default); the trigger marks
// each pulse (low while the pulse is present). The samples of one pulse are
// stored, then an HT-LR engine (Hilbert transform, arctangent, phase
// unwrapping, amplitude-weighted linear fit) turns them into one frequency.
// Sampling of the next pulse proceeds while the previous one is processed.
//
// Structure:
//   adc_spi_ctrl  conversion timing and serial read-out of the ADC
//   acq_ctrl      trigger-gated capture, ping-pong bank control, data_cnt
//   seg_buffer    two banks of DEPTH samples, write + engine + host ports
//   ht_lr_engine  hilbert_fir -> cordic_atan -> phase_unwrap -> wlr_fit
//   axil_regs     AXI4-Lite register and sample window for the processor
// The logic clock `clk` comes from a PLL locked to the 40 MHz OCXO; the
// PLL, the ADC and the processor are outside this module. Each result is
// also given on the `res_*` ports with a one-clock `res_valid`.
//
// Timing: one result per pulse, about cnt + 170 clocks after the trigger
// rises at the end of a cnt-sample pulse (cnt + 164 of them in the engine,
// the rest in the trigger synchroniser and the hand-over). If a pulse ends while the engine
// is still busy, that pulse is dropped and counted as an overrun.
//
// From the paper: the split into ADC interface, trigger-gated acquisition,
// segment memory, HT-LR processing and an AXI link (Fig. 1(a)), the 18-bit
// samples, the 650 ns sampling interval and K = 20. In the paper the HT-LR
// steps are software on an ARM core; here they are hardware, and the clock
// frequency, buffer depth and register map are this design's choices.
module fid_freq_counter
  import fc_pkg::*;
#(
  parameter int CLK_HZ        = 200_000_000,
  parameter int SAMPLE_CYCLES = 130,
  parameter int CONV_CYCLES   = 56,
  parameter int SCLK_HALF     = 2,
  parameter int DEPTH         = 8192,
  parameter int K             = 20,
  parameter int AXI_ADDR_W    = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ADC
  output logic                  adc_cnv,
  output logic                  adc_sclk,
  output logic                  adc_din,
  input  logic                  adc_dout,
  // pulse trigger, low while the FID pulse is present
  input  logic                  trigger,
  // AXI4-Lite slave
  input  logic [AXI_ADDR_W-1:0] s_axil_awaddr,
  input  logic                  s_axil_awvalid,
  output logic                  s_axil_awready,
  input  logic [31:0]           s_axil_wdata,
  input  logic [3:0]            s_axil_wstrb,
  input  logic                  s_axil_wvalid,
  output logic                  s_axil_wready,
  output logic [1:0]            s_axil_bresp,
  output logic                  s_axil_bvalid,
  input  logic                  s_axil_bready,
  input  logic [AXI_ADDR_W-1:0] s_axil_araddr,
  input  logic                  s_axil_arvalid,
  output logic                  s_axil_arready,
  output logic [31:0]           s_axil_rdata,
  output logic [1:0]            s_axil_rresp,
  output logic                  s_axil_rvalid,
  input  logic                  s_axil_rready,
  output logic                  irq,
  // results
  output logic                  res_valid,
  output logic                  res_err,
  output ratio_t                res_ratio,
  output freq_t                 res_freq
);

  localparam int AW = $clog2(DEPTH);

  logic          acq_en;
  sample_t       sample;
  logic          sample_valid;

  logic          wr_en, wr_bank;
  logic [AW-1:0] wr_addr;
  sample_t       wr_data;
  logic          seg_done, seg_bank, seg_trunc, capturing;
  logic [AW:0]   seg_cnt;
  logic [31:0]   seg_total, overrun_cnt, trunc_cnt;

  logic          eng_busy;
  logic          ra_bank, rb_bank;
  logic [AW-1:0] ra_addr, rb_addr;
  sample_t       ra_data, rb_data;
  result_t       result;

  logic eng_res_valid;

  assign res_valid = eng_res_valid;
  assign res_err   = result.err;
  assign res_ratio = result.ratio;
  assign res_freq  = result.freq;

  adc_spi_ctrl #(
    .SAMPLE_CYCLES(SAMPLE_CYCLES), .CONV_CYCLES(CONV_CYCLES), .SCLK_HALF(SCLK_HALF)
  ) u_adc (
    .clk, .rst_n, .en(acq_en),
    .adc_cnv, .adc_sclk, .adc_din, .adc_dout,
    .sample, .sample_valid
  );

  acq_ctrl #(.DEPTH(DEPTH)) u_acq (
    .clk, .rst_n, .trigger,
    .sample, .sample_valid,
    .engine_busy(eng_busy),
    .wr_en, .wr_bank, .wr_addr, .wr_data,
    .seg_done, .seg_bank, .seg_cnt, .seg_trunc, .capturing,
    .seg_total, .overrun_cnt, .trunc_cnt
  );

  seg_buffer #(.DEPTH(DEPTH)) u_buf (
    .clk,
    .we(wr_en), .wbank(wr_bank), .waddr(wr_addr), .wdata(wr_data),
    .ra_bank, .ra_addr, .ra_data,
    .rb_bank, .rb_addr, .rb_data
  );

  ht_lr_engine #(
    .DEPTH(DEPTH), .K(K), .CLK_HZ(CLK_HZ), .SAMPLE_CYCLES(SAMPLE_CYCLES)
  ) u_engine (
    .clk, .rst_n,
    .start(seg_done), .start_bank(seg_bank), .start_cnt(seg_cnt),
    .busy(eng_busy),
    .rd_bank(ra_bank), .rd_addr(ra_addr), .rd_data(ra_data),
    .result_valid(eng_res_valid), .result
  );

  axil_regs #(.AW(AW), .ADDR_W(AXI_ADDR_W)) u_regs (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid),
    .s_wready(s_axil_wready), .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid),
    .s_bready(s_axil_bready), .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid),
    .s_arready(s_axil_arready), .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .acq_en, .irq,
    .capturing, .engine_busy(eng_busy),
    .seg_done, .seg_bank, .seg_cnt, .seg_trunc,
    .seg_total, .overrun_cnt, .trunc_cnt,
    .result_valid(eng_res_valid), .result,
    .rb_bank, .rb_addr, .rb_data
  );

  // the engine never reads the bank acquisition is writing
  always_ff @(posedge clk) begin
    if (rst_n && wr_en && eng_busy)
      assert (wr_bank != ra_bank) else $error("fid_freq_counter: bank conflict");
  end

endmodule
