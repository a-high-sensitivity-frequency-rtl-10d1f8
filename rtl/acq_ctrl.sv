// acq_ctrl: trigger-gated segment capture into a two-bank buffer.
//
// What it does: the external trigger is low while an FID pulse is present and
// high in the quiet time between pulses. Every sample that arrives while the
// trigger is low is written to the current buffer bank at address 0, 1, 2...
// When the trigger rises again the segment is complete: its bank and length
// (data_cnt) are handed to the processing engine with a one-cycle `seg_done`,
// and the next segment goes to the other bank, so one segment is captured
// while the previous one is processed.
//
// How: the trigger passes a two-flop synchroniser. A falling edge opens a
// segment, but only after the trigger has been seen high once, so a pulse
// already under way at reset is not captured half. Three exceptional cases
// are handled and counted:
//   * overflow: samples beyond DEPTH are dropped and `seg_trunc` is set for
//     that segment (its first DEPTH samples are still processed);
//   * overrun: if the engine is still busy with the previous segment when a
//     new one completes, the new one is dropped (`overrun_cnt`) and its bank
//     is reused, because the other bank is still being read;
//   * a segment is handed over even when short; the engine rejects segments
//     too short for the Hilbert filter.
//
// Timing: `seg_done` comes two clocks after the trigger rises at the pin (the
// synchroniser). A sample strobed in the same clock as the synchronised rise
// is still part of the segment.
//
// From the paper: the trigger polarity (low during the pulse), the use of
// data and data_cnt, and the overlap of sampling and processing in Fig. 1(a).
// The depth default, 8192, is this design's: the longest segment in the
// paper's tests is 5 ms at 650 ns, 7692 samples (100 Hz output rate).
module acq_ctrl
  import fc_pkg::*;
#(
  parameter int DEPTH = 8192,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          trigger,       // asynchronous, low = pulse present
  input  sample_t       sample,
  input  logic          sample_valid,
  input  logic          engine_busy,   // the other bank is being read
  // write port of the segment buffer
  output logic          wr_en,
  output logic          wr_bank,
  output logic [AW-1:0] wr_addr,
  output sample_t       wr_data,
  // completed segment
  output logic          seg_done,
  output logic          seg_bank,
  output logic [AW:0]   seg_cnt,       // data_cnt, 0 .. DEPTH
  output logic          seg_trunc,     // the segment overflowed the bank
  output logic          capturing,
  // statistics
  output logic [31:0]   seg_total,     // segments completed (handed or dropped)
  output logic [31:0]   overrun_cnt,   // segments dropped, engine busy
  output logic [31:0]   trunc_cnt      // segments that overflowed
);

  logic [1:0] sync;
  logic       trig_s, trig_q, armed;
  logic [AW:0] cnt;
  logic        trunc;

  assign trig_s = sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= 2'b00;
    else        sync <= {sync[0], trigger};
  end

  // write side: combinational so the sample is written in its strobe cycle
  always_comb begin
    wr_en   = capturing && sample_valid && !cnt[AW];
    wr_addr = cnt[AW-1:0];
    wr_data = sample;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_q      <= 1'b1;
      armed       <= 1'b0;
      capturing   <= 1'b0;
      cnt         <= '0;
      trunc       <= 1'b0;
      wr_bank     <= 1'b0;
      seg_done    <= 1'b0;
      seg_bank    <= 1'b0;
      seg_cnt     <= '0;
      seg_trunc   <= 1'b0;
      seg_total   <= '0;
      overrun_cnt <= '0;
      trunc_cnt   <= '0;
    end else begin
      trig_q   <= trig_s;
      seg_done <= 1'b0;
      if (trig_s) armed <= 1'b1;

      if (capturing && sample_valid) begin
        if (!cnt[AW]) cnt <= cnt + 1'b1;
        else          trunc <= 1'b1;
      end

      if (!capturing) begin
        if (armed && trig_q && !trig_s) begin   // falling edge: pulse starts
          capturing <= 1'b1;
          cnt       <= '0;
          trunc     <= 1'b0;
        end
      end else if (trig_s && !trig_q) begin     // rising edge: pulse over
        capturing <= 1'b0;
        seg_total <= seg_total + 1'b1;
        if (trunc || (sample_valid && cnt[AW])) trunc_cnt <= trunc_cnt + 1'b1;
        if (engine_busy) begin
          overrun_cnt <= overrun_cnt + 1'b1;
        end else begin
          seg_done  <= 1'b1;
          seg_bank  <= wr_bank;
          seg_cnt   <= (sample_valid && !cnt[AW]) ? cnt + 1'b1 : cnt;
          seg_trunc <= trunc || (sample_valid && cnt[AW]);
          wr_bank   <= ~wr_bank;
        end
      end
    end
  end

endmodule
