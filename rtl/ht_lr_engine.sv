// ht_lr_engine: Hilbert-transform linear-regression (HT-LR) frequency engine.
//
// What it does: given a finished segment in the buffer (its bank and sample
// count), it reads the samples in order and returns one frequency estimate
// for the segment: Hilbert transform -> phase and amplitude -> unwrapped
// phase -> amplitude-weighted straight-line fit -> slope. The slope, in turns
// per sample, is also converted to Hz.
//
// How: a small sequencer reads addresses 0 .. cnt-1 of the bank, one per
// clock, and streams them through
//     hilbert_fir -> cordic_atan -> phase_unwrap -> wlr_fit,
// all of which accept one sample per clock. The Hilbert filter drops the KO
// samples at each end of the segment whose window would leave it (KO = 19
// for K = 20). A segment shorter than MIN_LEN = 2*KO + 2 samples cannot give
// two fitted points and is answered at once with `err` set. The frequency in
// Hz is ratio * fs with fs = CLK_HZ / SAMPLE_CYCLES held as a fixed-point
// constant with FREQ_FRAC fraction bits (the 1.538 MSa/s of the paper is
// 200 MHz / 130).
//
// Interface: `start` (one clock) with `start_bank`, `start_cnt`; `busy` is
// high from the clock after `start` until `result_valid`; `result` holds
// the last answer. The engine ignores `start` while busy.
//
// Timing: `result_valid` comes cnt + 164 clocks after `start` for a segment
// of cnt samples at the default sizes (about 4 000 clocks, 20 us at 200 MHz,
// for the paper's 3846-sample segments), far below the 2.5 ms quiet time.
// `result.cycles` reports the count of each run.
//
// From the paper: the three processing steps, their order, K = 20 and the
// weighting by amplitude. In the paper they run as software on the second
// ARM core; running them as a hardware pipeline, the sequencer and all
// number formats are this design's.
module ht_lr_engine
  import fc_pkg::*;
#(
  parameter int DEPTH         = 8192,
  parameter int AW            = $clog2(DEPTH),
  parameter int K             = 20,
  parameter int CLK_HZ        = 200_000_000,
  parameter int SAMPLE_CYCLES = 130
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          start_bank,
  input  logic [AW:0]   start_cnt,
  output logic          busy,
  // read port of the segment buffer (data one clock after address)
  output logic          rd_bank,
  output logic [AW-1:0] rd_addr,
  input  sample_t       rd_data,
  // result
  output logic          result_valid,
  output result_t       result
);

  localparam int KO      = (K % 2 == 1) ? K : K - 1;
  localparam int MIN_LEN = 2 * KO + 2;
  localparam longint FS_Q = (longint'(CLK_HZ) <<< FREQ_FRAC) / longint'(SAMPLE_CYCLES);
  localparam int FSQ_W   = $clog2(FS_Q + 1) + 1;
  localparam int PR_W    = RATIO_W + FSQ_W;

  typedef enum logic [2:0] {E_IDLE, E_READ, E_WAIT, E_SCALE, E_REJECT} estate_t;
  estate_t state;

  logic [AW:0]   cnt;
  logic [AW:0]   addr;
  logic          rd_v, rd_last;
  logic [31:0]   cycles;
  ratio_t        ratio_q;
  logic          err_q;

  // pipeline wires
  logic    h_valid, h_last;
  sample_t h_x;
  hilb_t   h_y;
  logic    c_valid, c_last;
  phase_t  c_phase;
  weight_t c_weight;
  logic    u_valid, u_last;
  phi_t    u_phi;
  weight_t u_weight;
  logic    f_busy, f_valid, f_err;
  ratio_t  f_ratio;

  logic signed [PR_W-1:0] prod;

  assign busy    = (state != E_IDLE);
  assign rd_addr = addr[AW-1:0];
  assign prod    = PR_W'(ratio_q) * PR_W'(FS_Q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= E_IDLE;
      cnt          <= '0;
      addr         <= '0;
      rd_bank      <= 1'b0;
      rd_v         <= 1'b0;
      rd_last      <= 1'b0;
      cycles       <= '0;
      ratio_q      <= '0;
      err_q        <= 1'b0;
      result_valid <= 1'b0;
      result       <= '0;
    end else begin
      result_valid <= 1'b0;
      rd_v         <= 1'b0;
      rd_last      <= 1'b0;
      if (state != E_IDLE) cycles <= cycles + 1'b1;
      unique case (state)
        E_IDLE: begin
          if (start) begin
            cnt     <= start_cnt;
            rd_bank <= start_bank;
            addr    <= '0;
            cycles  <= 32'd1;
            state   <= (start_cnt < (AW+1)'(MIN_LEN)) ? E_REJECT : E_READ;
          end
        end
        E_READ: begin
          rd_v    <= 1'b1;
          rd_last <= (addr == cnt - 1'b1);
          if (addr == cnt - 1'b1) state <= E_WAIT;
          else                    addr  <= addr + 1'b1;
        end
        E_WAIT: begin
          if (f_valid) begin
            ratio_q <= f_ratio;
            err_q   <= f_err;
            state   <= E_SCALE;
          end
        end
        E_SCALE: begin
          result_valid  <= 1'b1;
          result.err    <= err_q;
          result.ratio  <= ratio_q;
          result.freq   <= freq_t'(prod >>> RATIO_FRAC);
          result.cnt    <= 32'(cnt);
          result.cycles <= cycles;
          state         <= E_IDLE;
        end
        E_REJECT: begin
          result_valid  <= 1'b1;
          result.err    <= 1'b1;
          result.ratio  <= '0;
          result.freq   <= '0;
          result.cnt    <= 32'(cnt);
          result.cycles <= cycles;
          state         <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  hilbert_fir #(.K(K)) u_hilbert (
    .clk, .rst_n,
    .in_valid (rd_v),    .in_last (rd_last), .in_x (rd_data),
    .out_valid(h_valid), .out_last(h_last),  .out_x(h_x), .out_y(h_y)
  );

  cordic_atan u_cordic (
    .clk, .rst_n,
    .in_valid (h_valid), .in_last (h_last), .in_x(h_x), .in_y(h_y),
    .out_valid(c_valid), .out_last(c_last), .out_phase(c_phase),
    .out_mag  (),        .out_weight(c_weight)   // raw magnitude not needed here
  );

  phase_unwrap u_unwrap (
    .clk, .rst_n,
    .in_valid (c_valid), .in_last (c_last), .in_phase(c_phase), .in_weight(c_weight),
    .out_valid(u_valid), .out_last(u_last), .out_phi (u_phi),   .out_weight(u_weight)
  );

  wlr_fit #(.T_W(AW)) u_fit (
    .clk, .rst_n,
    .in_valid (u_valid), .in_last(u_last), .in_phi(u_phi), .in_weight(u_weight),
    .busy     (f_busy),  .out_valid(f_valid), .out_err(f_err), .out_ratio(f_ratio)
  );

  // the fit must be idle whenever a new segment starts
  always_ff @(posedge clk) begin
    if (rst_n && start && !busy)
      assert (!f_busy) else $error("ht_lr_engine: fit still busy at segment start");
  end

endmodule
