// tb_axil_regs: AXI4-Lite register port.
//
// An AXI4-Lite master in the testbench reads every register and compares it
// with the design state driven here, reads the sample window through a
// buffer model (sign extension, bank of the last segment), writes CTRL, and
// checks the result-pending flag and `irq` (set by a result, cleared by a
// write to IRQ_CLR). The master holds RREADY and BREADY low for a few
// clocks on some transfers, so responses must be held.
module tb_axil_regs;
  import fc_pkg::*;

  localparam int AW = 6;
  localparam int ADDR_W = 16;

  logic clk = 0, rst_n = 0;
  logic [ADDR_W-1:0] s_awaddr = '0, s_araddr = '0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = '0;
  logic [3:0] s_wstrb = '0;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic acq_en, irq;
  logic capturing = 0, engine_busy = 0, seg_done = 0, seg_bank = 0, seg_trunc = 0;
  logic [AW:0] seg_cnt = '0;
  logic [31:0] seg_total = 32'd7, overrun_cnt = 32'd3, trunc_cnt = 32'd2;
  logic result_valid = 0;
  result_t result = '0;
  logic rb_bank;
  logic [AW-1:0] rb_addr;
  sample_t rb_data;

  int checks = 0, failures = 0;
  int mem [2][64];

  always #5 clk = ~clk;

  axil_regs #(.AW(AW), .ADDR_W(ADDR_W)) dut (.*);

  always @(posedge clk) rb_data <= sample_t'(mem[rb_bank][rb_addr]);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic axi_read(input int addr, output logic [31:0] data, input int stall);
    s_araddr <= ADDR_W'(addr); s_arvalid <= 1;
    @(posedge clk);
    while (!s_arready) @(posedge clk);
    s_arvalid <= 0;
    while (!s_rvalid) @(posedge clk);
    repeat (stall) @(posedge clk);
    s_rready <= 1;
    @(posedge clk);
    data = s_rdata;
    check(s_rresp == 2'b00, "rresp");
    s_rready <= 0;
    @(posedge clk);
  endtask

  task automatic axi_write(input int addr, input logic [31:0] data, input int stall);
    s_awaddr <= ADDR_W'(addr); s_awvalid <= 1;
    s_wdata <= data; s_wstrb <= 4'hF; s_wvalid <= 1;
    @(posedge clk);
    while (!(s_awready && s_wready)) @(posedge clk);
    s_awvalid <= 0; s_wvalid <= 0;
    while (!s_bvalid) @(posedge clk);
    repeat (stall) @(posedge clk);
    s_bready <= 1;
    @(posedge clk);
    check(s_bresp == 2'b00, "bresp");
    s_bready <= 0;
    @(posedge clk);
  endtask

  task automatic expect_reg(int addr, logic [31:0] want, string name);
    logic [31:0] d;
    axi_read(addr, d, addr % 3);
    check(d == want, $sformatf("%s: got %h want %h", name, d, want));
  endtask

  initial begin
    logic [31:0] d;
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < 64; i++) mem[b][i] = (b ? -1 : 1) * (i * 1000 + 7);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(acq_en == 1'b1, "acquisition enabled after reset");
    check(!irq, "no irq after reset");
    expect_reg('h00, 32'h1, "CTRL");
    axi_write('h00, 32'h0, 2);
    check(acq_en == 1'b0, "CTRL write clears enable");
    expect_reg('h00, 32'h0, "CTRL readback");
    axi_write('h00, 32'h1, 0);
    check(acq_en == 1'b1, "CTRL write sets enable");

    // a segment is handed over, then a result arrives
    seg_done <= 1; seg_bank <= 1; seg_cnt <= 7'd50; seg_trunc <= 1;
    @(posedge clk);
    seg_done <= 0;
    result.err    <= 0;
    result.ratio  <= ratio_t'(48'sh0A_1234_5678_9A);
    result.freq   <= freq_t'(-40'sd123456789012);
    result.cnt    <= 32'd50;
    result.cycles <= 32'd214;
    result_valid  <= 1;
    @(posedge clk);
    result_valid <= 0;
    capturing <= 1; engine_busy <= 1;
    @(posedge clk);
    check(irq, "irq after result");
    expect_reg('h04, 32'b110111, "STATUS");
    expect_reg('h08, 32'd50, "DATA_CNT");
    expect_reg('h0C, 32'd7, "SEG_TOTAL");
    expect_reg('h10, 32'd3, "OVERRUNS");
    expect_reg('h14, 32'd2, "OVERFLOWS");
    expect_reg('h18, 32'd1, "RES_SEQ");
    expect_reg('h1C, 32'd50, "RES_CNT");
    expect_reg('h20, 32'h3456789A, "RATIO_LO");
    expect_reg('h24, 32'h00000A12, "RATIO_HI");
    d = 32'(-40'sd123456789012);
    expect_reg('h28, d, "FREQ_LO");
    expect_reg('h2C, 32'hFFFFFFE3, "FREQ_HI");
    expect_reg('h30, 32'd214, "RES_CYCLES");
    expect_reg('h3C, 32'd0, "unmapped");
    // sample window: bank 1 holds negative values, must be sign-extended
    for (int i = 0; i < 10; i++)
      expect_reg('h8000 + 4 * i, 32'(-(i * 1000 + 7)), $sformatf("sample %0d", i));
    // clear the pending flag
    axi_write('h34, 32'h0, 3);
    check(!irq, "irq cleared");
    expect_reg('h04, 32'b110011, "STATUS after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
