// ntt_xlane: pipelined R-point cyclic NTT across R lanes, one vector per cycle.
//
// Used twice by the NTT unit (nttu) for the two passes of the four-step
// algorithm.  Computes Y[k] = sum_j X[j] * w^(j*k) mod q for the R-th root of
// unity w whose powers w^0 .. w^(R/2-1) are given in tw[].  The input is
// wired in bit-reversed order and log2(R) radix-2 Cooley-Tukey stages follow,
// each registered, so the output is in natural order.  The stage structure
// is this design's choice; the paper states only that the NTT unit uses a
// long pipeline of sqrt(N)-point NTTs.
//
// Timing: fully pipelined, latency log2(R) cycles; in_valid travels with the
// data to out_valid.
module ntt_xlane
  import whet_pkg::*;
#(
  parameter int unsigned R = 256,
  localparam int unsigned S = $clog2(R)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  modulus_t m,
  input  word_t    tw [R/2],
  input  logic     in_valid,
  input  word_t    x  [R],
  output logic     out_valid,
  output word_t    y  [R]
);
  function automatic int unsigned bitrev(input int unsigned i);
    int unsigned r;
    r = 0;
    for (int b = 0; b < S; b++) r |= ((i >> b) & 1) << (S - 1 - b);
    return r;
  endfunction

  word_t xin [R];
  always_comb
    for (int i = 0; i < R; i++) xin[i] = x[bitrev(i)];

  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int unsigned HALF = 1 << s;
    word_t d [R];     // stage input
    word_t q [R];     // stage output register
    logic  v;
    if (s == 0) begin : g_first
      always_comb begin
        d = xin;
      end
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) v <= 1'b0;
        else        v <= in_valid;
    end else begin : g_next
      always_comb begin
        d = g_stage[s-1].q;
      end
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) v <= 1'b0;
        else        v <= g_stage[s-1].v;
    end
    always_ff @(posedge clk) begin
      for (int i = 0; i < R; i++) begin
        if ((i % (2 * HALF)) < HALF) begin
          word_t t;
          t = mod_mul(d[i + HALF], tw[(i % HALF) * (R / (2 * HALF))], m);
          q[i]        <= mod_add(d[i], t, m);
          q[i + HALF] <= mod_sub(d[i], t, m);
        end
      end
    end
  end

  assign out_valid = g_stage[S-1].v;
  assign y         = g_stage[S-1].q;
endmodule
