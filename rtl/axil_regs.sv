// axil_regs: AXI4-Lite register port of the frequency counter.
//
// What it does: lets the processor read the results and the raw samples of
// the last segment and switch acquisition on and off. It stands for the
// AXI link between the programmable logic and the ARM cores.
//
// Register map (byte addresses, 32-bit registers, all others read 0):
//   0x00 CTRL       rw  [0] acquisition enable (1 after reset)
//   0x04 STATUS     ro  [0] capturing  [1] engine busy  [2] result pending
//                       [3] last result had err  [4] last segment overflowed
//                       [5] bank of the last segment
//   0x08 DATA_CNT   ro  samples in the last segment handed to the engine
//   0x0C SEG_TOTAL  ro  segments completed
//   0x10 OVERRUNS   ro  segments dropped because the engine was busy
//   0x14 OVERFLOWS  ro  segments longer than the buffer
//   0x18 RES_SEQ    ro  results produced
//   0x1C RES_CNT    ro  samples in the segment of the last result
//   0x20 RATIO_LO   ro  f/fs, bits 31:0 (RATIO_FRAC fraction bits)
//   0x24 RATIO_HI   ro  f/fs, upper bits, sign-extended
//   0x28 FREQ_LO    ro  f in Hz, bits 31:0 (FREQ_FRAC fraction bits)
//   0x2C FREQ_HI    ro  f in Hz, upper bits, sign-extended
//   0x30 RES_CYCLES ro  clocks the engine took for the last result
//   0x34 IRQ_CLR    wo  any write clears the result-pending flag and `irq`
//   0x8000 + 4*i    ro  sample i of the last segment, sign-extended
// Reads of the sample window go to the buffer's second read port, so the
// processor can fetch raw data while the engine works on the same bank.
//
// How: one transaction at a time in each direction. A write is taken when
// address and data are both valid (AWREADY and WREADY together for one
// clock), answered with BVALID. A read address is taken, the buffer or
// register is read in the next clock, and RVALID is raised with the data
// held until RREADY. Responses are always OKAY.
//
// From the paper: only that results and data cross an AXI interface to the
// ARM side (data and data_cnt in Fig. 1(a)). The register map and the
// AXI4-Lite subset are this design's.
module axil_regs
  import fc_pkg::*;
#(
  parameter int AW     = 13,       // buffer address width
  parameter int ADDR_W = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0]  s_awaddr,
  input  logic               s_awvalid,
  output logic               s_awready,
  input  logic [31:0]        s_wdata,
  input  logic [3:0]         s_wstrb,
  input  logic               s_wvalid,
  output logic               s_wready,
  output logic [1:0]         s_bresp,
  output logic               s_bvalid,
  input  logic               s_bready,
  input  logic [ADDR_W-1:0]  s_araddr,
  input  logic               s_arvalid,
  output logic               s_arready,
  output logic [31:0]        s_rdata,
  output logic [1:0]         s_rresp,
  output logic               s_rvalid,
  input  logic               s_rready,
  // design state
  output logic               acq_en,
  output logic               irq,
  input  logic               capturing,
  input  logic               engine_busy,
  input  logic               seg_done,
  input  logic               seg_bank,
  input  logic [AW:0]        seg_cnt,
  input  logic               seg_trunc,
  input  logic [31:0]        seg_total,
  input  logic [31:0]        overrun_cnt,
  input  logic [31:0]        trunc_cnt,
  input  logic               result_valid,
  input  result_t            result,
  // host read port of the segment buffer
  output logic               rb_bank,
  output logic [AW-1:0]      rb_addr,
  input  sample_t            rb_data
);

  if (AW + 3 > ADDR_W) begin : g_check_addr
    $error("axil_regs: ADDR_W too small for the sample window");
  end

  localparam logic [ADDR_W-1:0] WIN = ADDR_W'(1) << (ADDR_W - 1);

  logic [AW:0]        data_cnt;
  logic               last_trunc;
  logic [31:0]        res_seq;
  logic               pending;
  logic               rd_pend;
  logic [ADDR_W-1:0]  rd_addr_q;
  logic [31:0]        reg_q;
  logic               wr_take, rd_take;

  assign s_bresp = 2'b00;
  assign s_rresp = 2'b00;
  assign irq     = pending;
  assign rb_addr = s_araddr[AW+1:2];   // the buffer registers it with the request

  assign wr_take   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_take;
  assign s_wready  = wr_take;
  assign rd_take   = s_arvalid && !s_rvalid && !rd_pend;
  assign s_arready = rd_take;

  // register file read, registered with the request
  always_comb begin
    unique case (s_araddr[7:0] & {8{s_araddr < WIN}})
      8'h00: reg_q = {31'b0, acq_en};
      8'h04: reg_q = {26'b0, rb_bank, last_trunc, result.err, pending, engine_busy, capturing};
      8'h08: reg_q = 32'(data_cnt);
      8'h0C: reg_q = seg_total;
      8'h10: reg_q = overrun_cnt;
      8'h14: reg_q = trunc_cnt;
      8'h18: reg_q = res_seq;
      8'h1C: reg_q = result.cnt;
      8'h20: reg_q = result.ratio[31:0];
      8'h24: reg_q = 32'(signed'(result.ratio[RATIO_W-1:32]));
      8'h28: reg_q = result.freq[31:0];
      8'h2C: reg_q = 32'(signed'(result.freq[FREQ_W-1:32]));
      8'h30: reg_q = result.cycles;
      default: reg_q = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acq_en     <= 1'b1;
      s_bvalid   <= 1'b0;
      s_rvalid   <= 1'b0;
      s_rdata    <= '0;
      rd_pend    <= 1'b0;
      rd_addr_q  <= '0;
      rb_bank    <= 1'b0;
      data_cnt   <= '0;
      last_trunc <= 1'b0;
      res_seq    <= '0;
      pending    <= 1'b0;
    end else begin
      // design state
      if (seg_done) begin
        rb_bank    <= seg_bank;
        data_cnt   <= seg_cnt;
        last_trunc <= seg_trunc;
      end
      if (result_valid) begin
        res_seq <= res_seq + 1'b1;
        pending <= 1'b1;
      end

      // write channel
      if (wr_take) begin
        s_bvalid <= 1'b1;
        if (s_awaddr == ADDR_W'('h00) && s_wstrb[0]) acq_en <= s_wdata[0];
        if (s_awaddr == ADDR_W'('h34) && !result_valid) pending <= 1'b0;
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end

      // read channel: address clock, buffer clock, data
      if (rd_take) begin
        rd_pend   <= 1'b1;
        rd_addr_q <= s_araddr;
        s_rdata   <= reg_q;
      end else if (rd_pend) begin
        rd_pend  <= 1'b0;
        s_rvalid <= 1'b1;
        if (rd_addr_q >= WIN) s_rdata <= 32'(rb_data);
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response stays valid, with its data unchanged, until taken
  logic        r_held, b_held;
  logic [31:0] rdata_prev;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_held     <= 1'b0;
      b_held     <= 1'b0;
      rdata_prev <= '0;
    end else begin
      r_held     <= s_rvalid && !s_rready;
      b_held     <= s_bvalid && !s_bready;
      rdata_prev <= s_rdata;
      if (r_held) assert (s_rvalid && s_rdata == rdata_prev)
        else $error("axil_regs: read response changed before RREADY");
      if (b_held) assert (s_bvalid)
        else $error("axil_regs: write response dropped before BREADY");
    end
  end

endmodule
