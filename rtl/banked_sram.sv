// banked_sram: one vector lane's slice of an on-chip scratchpad, built from
// single-ported SRAM banks with word-interleaved addressing.
//
// The accelerator's main scratchpad, KeyMult buffer and BConv buffer are all
// made of single-ported SRAM that reaches its bandwidth by bank interleaving
// (the paper says so for all its SRAM).  Word address A lives in bank
// A mod NBANKS at row A / NBANKS.  Up to NPORTS requesters (functional-unit
// ports) may each issue one read or write per cycle; each bank serves at most
// one of them, the lowest-numbered port first.  A request that loses its bank
// is not served (gnt low) and must be repeated: this is the scratchpad
// bandwidth stall of the paper's bottleneck analysis.  Bank count per
// memory is derived from the paper's bandwidth figures (one 4-byte word per
// bank per 1 GHz cycle per lane); the fixed-priority arbitration is this
// design's choice.
//
// Timing: gnt is combinational in the request cycle; read data of a granted
// read appears on rdata one cycle later and holds until the next granted read
// on that port.  A read and a write to the same word in one cycle cannot
// happen (they would need the same bank).
module banked_sram
  import whet_pkg::*;
#(
  parameter int unsigned DEPTH  = 16384,   // words in this lane's slice
  parameter int unsigned NBANKS = 8,
  parameter int unsigned NPORTS = 7,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned ROWS  = (DEPTH + NBANKS - 1) / NBANKS
) (
  input  logic              clk,
  input  logic [NPORTS-1:0] req,
  input  logic [NPORTS-1:0] we,
  input  logic [AW-1:0]     addr  [NPORTS],
  input  word_t             wdata [NPORTS],
  output logic [NPORTS-1:0] gnt,
  output word_t             rdata [NPORTS]
);
  word_t mem [NBANKS][ROWS];

  logic [NBANKS-1:0] busy;
  always_comb begin
    busy = '0;
    gnt  = '0;
    for (int p = 0; p < NPORTS; p++) begin
      if (req[p] && !busy[int'(addr[p]) % NBANKS]) begin
        gnt[p] = 1'b1;
        busy[int'(addr[p]) % NBANKS] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      if (gnt[p]) begin
        if (we[p]) mem[int'(addr[p]) % NBANKS][int'(addr[p]) / NBANKS] <= wdata[p];
        else       rdata[p] <= mem[int'(addr[p]) % NBANKS][int'(addr[p]) / NBANKS];
      end
    end
  end
endmodule
