// seg_buffer: two-bank segment memory with one write and two read ports.
//
// What it does: holds two complete FID segments of up to DEPTH samples. The
// acquisition side writes one bank while the HT-LR engine reads the other
// (the ping-pong that lets sampling of pulse n+1 overlap processing of pulse
// n). A second read port lets the host read the raw samples of a segment at
// the same time, for logging or off-line fitting.
//
// How: a single array of 2*DEPTH words addressed by {bank, address}. Reads are
// synchronous: data appears one clock after the address. A write and a read
// of the same word in one clock return the old word.
//
// From the paper: the role of the on-chip memory that holds a segment between
// acquisition and processing. The two banks, the two read ports and the depth
// are this design's choices.
module seg_buffer
  import fc_pkg::*;
#(
  parameter int DEPTH = 8192,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  // write port (acquisition)
  input  logic          we,
  input  logic          wbank,
  input  logic [AW-1:0] waddr,
  input  sample_t       wdata,
  // read port A (engine)
  input  logic          ra_bank,
  input  logic [AW-1:0] ra_addr,
  output sample_t       ra_data,
  // read port B (host)
  input  logic          rb_bank,
  input  logic [AW-1:0] rb_addr,
  output sample_t       rb_data
);

  sample_t mem [2*DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[{wbank, waddr}] <= wdata;
    ra_data <= mem[{ra_bank, ra_addr}];
    rb_data <= mem[{rb_bank, rb_addr}];
  end

endmodule
