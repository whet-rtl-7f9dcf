// prng: pseudo-random generator of the evaluation-key "a" half, evk[0][i].
//
// Half of every evaluation key consists of uniformly random polynomials that
// are fully determined by a seed, so the accelerator regenerates them on chip
// instead of loading them from HBM.  The paper places a PRNG next to each
// 8-lane constant-scratchpad group but does not give its algorithm.  This
// design uses NOUT independent 64-bit xorshift generators (shifts 13, 7, 17),
// one per lane of the group, stream k seeded with seed ^ (k * 0x9E3779B97F4A7C15);
// each output is mapped to Z_q by Barrett-reducing its low 31 bits.  Any
// change of generator only changes which keys are valid.
//
// Interface: load (with seed, must be non-zero) restarts the sequences; each
// cycle with next high advances them.  rnd[k] is stream k's current word,
// already reduced modulo m.q, valid the cycle after load or next.
module prng
  import whet_pkg::*;
#(
  parameter int unsigned NOUT = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  modulus_t    m,
  input  logic        load,
  input  logic [63:0] seed,
  input  logic        next,
  output word_t       rnd [NOUT]
);
  logic [63:0] s [NOUT];

  function automatic logic [63:0] xorshift64(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  function automatic logic [63:0] stream_seed(input logic [63:0] sd, input int unsigned k);
    logic [63:0] v;
    v = sd ^ (64'(k) * 64'h9E37_79B9_7F4A_7C15);
    return (v == '0) ? 64'h1 : v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NOUT; k++) s[k] <= stream_seed(64'h0123_4567_89AB_CDEF, k);
    end else begin
      for (int k = 0; k < NOUT; k++) begin
        if (load)      s[k] <= stream_seed(seed, k);
        else if (next) s[k] <= xorshift64(s[k]);
      end
    end
  end

  always_comb
    for (int k = 0; k < NOUT; k++) rnd[k] = mod_reduce(64'(s[k][30:0]), m);
endmodule
