// const_spad: constant scratchpad of one group of eight vector lanes.
//
// Each group of eight lanes has a small SRAM (6 MiB over the whole chip,
// 6144 words per group) that holds scalar constants and, in WHET, compressed
// plaintexts.  A word read from it is broadcast to all eight lanes of the
// group in the same cycle, so a plaintext whose NTT-domain limb repeats
// itself (the paper's plaintext compression) needs one stored copy per group
// instead of one per lane.  The group layout that makes the repeated
// elements fall on the same word is described in ptxt_fanout.  Group size,
// capacity and broadcast follow the paper; the single write port (from the
// HBM-channel fan-out) and single read port are this design's choice.
//
// Timing: a write (we) stores wdata at waddr at the clock edge.  A read
// (re) of raddr presents the word on bcast[0..LANES-1] one cycle later and
// holds it until the next read.
module const_spad
  import whet_pkg::*;
#(
  parameter int unsigned DEPTH = 6144,
  parameter int unsigned LANES = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output word_t         bcast [LANES]
);
  word_t mem [DEPTH];
  word_t rd;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rd <= mem[raddr];
  end

  always_comb
    for (int l = 0; l < LANES; l++) bcast[l] = rd;
endmodule
