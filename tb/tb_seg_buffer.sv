// tb_seg_buffer: the two-bank memory against a reference array.
//
// Random writes and random reads on both read ports run together for many
// clocks. Each read must return, one clock later, the word the reference
// held when the address was presented (a read of a word being written in
// the same clock returns the old word). The banks must be independent.
module tb_seg_buffer;
  import fc_pkg::*;

  localparam int DEPTH = 256;
  localparam int AW    = 8;

  logic clk = 0;
  logic we = 0, wbank = 0, ra_bank = 0, rb_bank = 0;
  logic [AW-1:0] waddr = '0, ra_addr = '0, rb_addr = '0;
  sample_t wdata = '0, ra_data, rb_data;

  int checks = 0, failures = 0;
  int ref_mem [2*DEPTH];
  int want_a, want_b;
  bit pend = 0;

  always #5 clk = ~clk;

  seg_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    // fill both banks with distinct data
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < DEPTH; i++) begin
        we <= 1; wbank <= b[0]; waddr <= AW'(i);
        wdata <= sample_t'(b * 100000 + i * 3 - 50000);
        ref_mem[b*DEPTH + i] = b * 100000 + i * 3 - 50000;
        @(posedge clk);
      end
    we <= 0;
    @(posedge clk);
    for (int n = 0; n < 5000; n++) begin
      logic wb, rab, rbb;
      logic [AW-1:0] wa, raa, rba;
      int wd;
      wb = 1'($urandom); wa = AW'($urandom); wd = int'($urandom_range(0, 262143)) - 131072;
      rab = 1'($urandom); raa = AW'($urandom);
      rbb = 1'($urandom); rba = (n % 4 == 0) ? wa : AW'($urandom);
      if (n % 4 == 0) rbb = wb;
      we <= 1'($urandom); wbank <= wb; waddr <= wa; wdata <= sample_t'(wd);
      ra_bank <= rab; ra_addr <= raa; rb_bank <= rbb; rb_addr <= rba;
      @(posedge clk);
      // values the reads must return (state before this clock's write)
      if (pend) begin
        check(int'(ra_data) == want_a, $sformatf("port A got %0d want %0d", ra_data, want_a));
        check(int'(rb_data) == want_b, $sformatf("port B got %0d want %0d", rb_data, want_b));
      end
      want_a = ref_mem[{rab, raa}];
      want_b = ref_mem[{rbb, rba}];
      pend   = 1;
      if (we) ref_mem[{wb, wa}] = wd;
    end
    we <= 0;
    @(posedge clk);
    check(int'(ra_data) == want_a, "port A last");
    check(int'(rb_data) == want_b, "port B last");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
