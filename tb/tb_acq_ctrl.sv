// tb_acq_ctrl: trigger-gated capture, bank swapping, overrun and overflow.
//
// Samples arrive every 10 clocks with increasing values. The trigger is
// moved 5 clocks after a sample, so the test knows exactly which samples
// fall inside each low period. A small buffer (DEPTH = 64) is modelled here
// from the write port. Checked: no capture for a pulse already running at
// reset; the count, bank and stored samples of each segment; banks
// alternating; a segment that ends while the engine is busy is dropped and
// counted, its bank reused; a segment longer than DEPTH is cut to DEPTH and
// flagged; the segment counters.
module tb_acq_ctrl;
  import fc_pkg::*;

  localparam int DEPTH = 64;
  localparam int AW    = 6;

  logic clk = 0, rst_n = 0;
  logic trigger = 0;             // low at reset: pulse already running
  sample_t sample = '0;
  logic sample_valid = 0;
  logic engine_busy = 0;
  logic wr_en, wr_bank;
  logic [AW-1:0] wr_addr;
  sample_t wr_data;
  logic seg_done, seg_bank, seg_trunc, capturing;
  logic [AW:0] seg_cnt;
  logic [31:0] seg_total, overrun_cnt, trunc_cnt;

  int checks = 0, failures = 0;
  int cyc = 0, strobes = 0;
  int mem [2][DEPTH];
  int done_seen = 0;
  logic last_bank;
  int last_cnt;
  logic last_trunc;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  acq_ctrl #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // sample source
  always @(posedge clk) begin
    sample_valid <= 1'b0;
    if (rst_n && cyc % 10 == 0) begin
      sample_valid <= 1'b1;
      sample       <= sample_t'(strobes);
      strobes      <= strobes + 1;
    end
  end

  // buffer model and hand-over monitor
  always @(posedge clk) begin
    if (rst_n && wr_en) mem[wr_bank][wr_addr] = int'(wr_data);
    if (rst_n && seg_done) begin
      done_seen++;
      last_bank  = seg_bank;
      last_cnt   = int'(seg_cnt);
      last_trunc = seg_trunc;
    end
  end

  // hold the trigger low for n samples; returns the value of the first one
  task automatic pulse(int n, output int first);
    int s0;
    @(posedge sample_valid);
    repeat (5) @(posedge clk);
    s0 = strobes;
    first = s0;
    trigger <= 0;
    while (strobes < s0 + n) @(posedge clk);
    repeat (5) @(posedge clk);
    trigger <= 1;
    repeat (8) @(posedge clk);
  endtask

  task automatic expect_seg(int first, int n, logic bank, string name);
    int keep;
    keep = n > DEPTH ? DEPTH : n;
    check(last_cnt == keep, $sformatf("%s: cnt %0d want %0d", name, last_cnt, keep));
    check(last_bank == bank, $sformatf("%s: bank %0d", name, last_bank));
    check(last_trunc == (n > DEPTH), $sformatf("%s: trunc", name));
    for (int i = 0; i < keep; i++)
      check(mem[bank][i] == first + i,
            $sformatf("%s: mem[%0d][%0d] = %0d want %0d", name, bank, i, mem[bank][i], first + i));
  endtask

  initial begin
    int first, d;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // a pulse already under way at reset must not be captured
    repeat (100) @(posedge clk);
    check(!capturing, "not capturing a pulse already under way");
    trigger <= 1;
    repeat (50) @(posedge clk);
    check(done_seen == 0 && seg_total == 0, "nothing handed over yet");

    // segment 1 -> bank 0
    d = done_seen;
    pulse(20, first);
    check(done_seen == d + 1, "seg1 handed over");
    expect_seg(first, 20, 1'b0, "seg1");

    // segment 2 -> bank 1
    d = done_seen;
    pulse(33, first);
    check(done_seen == d + 1, "seg2 handed over");
    expect_seg(first, 33, 1'b1, "seg2");

    // segment 3 ends while the engine is busy: dropped
    d = done_seen;
    engine_busy <= 1;
    pulse(12, first);
    engine_busy <= 0;
    check(done_seen == d, "seg3 dropped");
    check(overrun_cnt == 1, $sformatf("overrun_cnt %0d", overrun_cnt));

    // segment 4 reuses bank 0
    d = done_seen;
    pulse(25, first);
    check(done_seen == d + 1, "seg4 handed over");
    expect_seg(first, 25, 1'b0, "seg4");

    // segment 5 overflows the bank (bank 1)
    d = done_seen;
    pulse(DEPTH + 17, first);
    check(done_seen == d + 1, "seg5 handed over");
    expect_seg(first, DEPTH + 17, 1'b1, "seg5");
    check(trunc_cnt == 1, $sformatf("trunc_cnt %0d", trunc_cnt));

    check(seg_total == 5, $sformatf("seg_total %0d", seg_total));
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
