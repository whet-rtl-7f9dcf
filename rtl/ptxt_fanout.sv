// ptxt_fanout: distributes one HBM (pseudo-)channel's words over the four
// constant-scratchpad groups attached to it, according to the compression
// rate of the plaintext being loaded.
//
// A cluster holds a limb of N = R*R words (R = 256 lanes) with element
// k = R*lane + cycle.  A plaintext compressed C-fold repeats every N/C
// elements; with N = 2^16 and R = 256 that period is 256*(256/C), so lanes
// l and l' hold identical words when l = l' mod (256/C).  Group g (0..31) serves lanes {g, g+32, ..., g+224},
// so at C = 8 every group holds distinct data; channel h feeds groups
// {h, h+8, h+16, h+24} (slots 0..3).  At C = 16 slots 0/2 and 1/3 hold the
// same data, and at C = 32 all four slots do.  Hence one channel word is
// written to one, two or four groups, and a plaintext limb is fetched with
// N/C words in total, which is how the paper supports rates of 8x to 32x at
// full HBM bandwidth.  The lane-to-group assignment that makes this work is
// this design's choice; the paper gives groups of eight lanes and four groups
// per channel.
//
// Interface: in_valid/in_data is one channel word; base is the destination
// word address of the plaintext in the group SRAMs and idx counts the words
// of this plaintext (0, 1, ...).  Outputs are the four groups' write ports,
// combinational (same cycle).
module ptxt_fanout
  import whet_pkg::*;
#(
  parameter int unsigned AW = 13
) (
  input  logic          in_valid,
  input  compr_e        rate,
  input  logic [AW-1:0] base,
  input  logic [AW+1:0] idx,
  input  word_t         in_data,
  output logic [3:0]    we,
  output logic [AW-1:0] waddr [4],
  output word_t         wdata [4]
);
  always_comb begin
    we = '0;
    for (int s = 0; s < 4; s++) begin
      wdata[s] = in_data;
      waddr[s] = base;
    end
    if (in_valid) begin
      unique case (rate)
        COMPR_8X: begin
          we[idx[1:0]] = 1'b1;
          for (int s = 0; s < 4; s++) waddr[s] = base + AW'(idx >> 2);
        end
        COMPR_16X: begin
          we[{1'b0, idx[0]}] = 1'b1;
          we[{1'b1, idx[0]}] = 1'b1;
          for (int s = 0; s < 4; s++) waddr[s] = base + AW'(idx >> 1);
        end
        default: begin
          we = 4'hF;
          for (int s = 0; s < 4; s++) waddr[s] = base + AW'(idx);
        end
      endcase
    end
  end
endmodule
