// autou: automorphism unit of one cluster.
//
// Applies the ring automorphism a(X) -> a(X^g) (g odd; g = 5^r mod 2N for a
// rotation by r slots) to one limb of N = R*R words held in the NTT domain.
// In that domain the automorphism is a pure permutation: output element k
// equals input element j with 2j+1 = (2k+1)*g mod 2N.  Element n travels in
// lane n / R at cycle n % R, as in the NTT unit.  The unit stores an incoming
// limb in one of two limb buffers and, once it is complete, gathers the
// permuted limb out of it while the next limb fills the other buffer, so it
// sustains one limb per R cycles (the paper's 31.25M automorphisms/s over
// eight units at 1 GHz).  The paper gives the function and throughput; the
// double-buffered gather, which stands in for the chip's automorphism
// network, is this design's choice.
//
// Streaming: a limb is R consecutive accepted vectors (in_valid); g is
// sampled with the first one.  The input is always ready.  The permuted limb
// leaves on out_valid/out_data as R consecutive vectors; the first one is
// valid two clock edges after the edge that takes the last input vector.
// idle is high when no limb is stored or leaving.
module autou
  import whet_pkg::*;
#(
  parameter int unsigned R = 256,
  localparam int unsigned LOGN = 2 * $clog2(R),
  localparam int unsigned N    = R * R
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [LOGN:0]   g,
  input  word_t           in_data [R],
  output logic            out_valid,
  output word_t           out_data [R],
  output logic            idle          // nothing stored or in flight
);
  word_t         buffer [2][N];
  logic [LOGN:0] gbuf [2];
  logic [1:0]    full;
  int unsigned   wcnt, rcnt;
  logic          wsel, rsel, reading;
  logic          done_fill;

  assign done_fill = in_valid && (wcnt == R - 1);
  assign idle      = (full == '0) && !reading && (wcnt == 0) && !out_valid;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int l = 0; l < R; l++) buffer[wsel][R*l + wcnt] <= in_data[l];
      if (wcnt == 0) gbuf[wsel] <= g;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt <= 0; wsel <= 1'b0; rcnt <= 0; rsel <= 1'b0;
      full <= '0; reading <= 1'b0;
    end else begin
      if (in_valid) begin
        wcnt <= (wcnt == R - 1) ? 0 : wcnt + 1;
        if (done_fill) begin
          full[wsel] <= 1'b1;
          wsel       <= ~wsel;
        end
      end
      if (!reading) begin
        if (full[rsel]) begin reading <= 1'b1; rcnt <= 0; end
      end else if (rcnt == R - 1) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
        reading    <= full[~rsel] || (done_fill && wsel == ~rsel);
        rcnt       <= 0;
      end else rcnt <= rcnt + 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= reading;
  end

  always_ff @(posedge clk) begin
    if (reading) begin
      for (int l = 0; l < R; l++) begin
        logic [LOGN:0] k2, odd;
        k2  = ((LOGN+1)'(R*l) + (LOGN+1)'(rcnt)) << 1 | (LOGN+1)'(1);   // 2k+1
        odd = k2 * gbuf[rsel];                                          // mod 2N
        out_data[l] <= buffer[rsel][LOGN'(odd >> 1)];
      end
    end
  end
endmodule
