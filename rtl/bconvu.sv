// bconvu: base-conversion unit of one vector lane.
//
// Base conversion (BConv) multiplies the L x N matrix of a polynomial's limbs
// by an L' x L matrix of constants.  Each lane holds, as in the paper, a small
// output-stationary systolic array of 2 x 6 plain (non-modular) multiply-add
// units: row r works on one of two coefficients that arrive together (8 bytes
// per cycle from the BConv buffer), column j on one of six output limbs.
// Every cycle one input limb index i is presented with the two coefficients
// x[0..1] (already scaled, y_i = [a_i * qhat_i^-1]_{q_i}) and the six constants
// b[0..5] = [qhat_i]_{p_j}.  Coefficient r is skewed by r cycles, constant j by
// j cycles, so PE(r,j) sees matching pairs r+j cycles late and keeps a wide
// running sum.  After the last input limb every sum is reduced modulo its
// output prime p_j and the 2 x 6 results leave together.
//
// WHET's extension for intermediate ModRaise (recovering a coefficient from
// its residues modulo 2-3 primes) is the RECON mode: each row also keeps the
// exact integer x = sum_i y_i * qhat_i (qhat_i given as a 96-bit constant),
// decides v = round(x / Q) (x < 3Q), and every output is corrected to
// [x - v*Q]_{p_j} = [sum_i y_i [qhat_i]_{p_j} - v [Q]_{p_j}]_{p_j}, i.e. the
// centred lift of x modulo Q reduced into each new prime.
// The paper gives the 2x6 plain-MAD array and says reconstruction logic is
// added; accumulator widths, skewing, the centred-lift correction and the
// interface are this design's choices.
//
// Interface: in_valid/in_first/in_last frame one conversion (in_first with
// the first input limb, in_last with the last); recon is sampled with
// in_first.  out_valid pulses once, 8 cycles after the in_last cycle
// (skew ROWS-1 + COLS-1, accumulate, reduce).  Input limbs must be at most 64.
// Conversions may follow each other back to back, down to one input limb each.
module bconvu
  import whet_pkg::*;
#(
  parameter int unsigned ROWS  = 2,
  parameter int unsigned COLS  = 6,
  parameter int unsigned ACC_W = 72,
  parameter int unsigned WIDE_W = 96
) (
  input  logic              clk,
  input  logic              rst_n,
  input  modulus_t          p      [COLS],   // output primes
  input  word_t             q_mod_p [COLS],  // [Q]_{p_j} for RECON
  input  logic [WIDE_W-1:0] q_big,           // Q (product of input primes) for RECON
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  logic              recon,
  input  word_t             x      [ROWS],
  input  word_t             b      [COLS],
  input  logic [WIDE_W-1:0] qhat_big,        // qhat_i for RECON
  output logic              out_valid,
  output word_t             y      [ROWS][COLS]
);
  localparam int unsigned DEPTH = ROWS + COLS;   // control skew depth

  // ---------------- control pipeline ----------------
  // v_d[k], f_d[k], l_d[k]: in_valid, in_first, in_last delayed by k cycles
  // (PE(r,j) uses index r+j <= DEPTH-2; the final reduction uses l_d[DEPTH-1])
  logic [DEPTH-2:0] v_d, f_d;
  logic [DEPTH-1:0] l_d;
  assign v_d[0] = in_valid;
  assign f_d[0] = in_valid & in_first;
  assign l_d[0] = in_valid & in_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d[DEPTH-2:1] <= '0; f_d[DEPTH-2:1] <= '0; l_d[DEPTH-1:1] <= '0;
    end else begin
      v_d[DEPTH-2:1] <= v_d[DEPTH-3:0];
      f_d[DEPTH-2:1] <= f_d[DEPTH-3:0];
      l_d[DEPTH-1:1] <= l_d[DEPTH-2:0];
    end
  end
  logic recon_q;
  always_ff @(posedge clk)
    if (in_valid && in_first) recon_q <= recon;

  // ---------------- skewed operand delay lines ----------------
  word_t xs [ROWS][DEPTH-1];   // xs[r][d] = x[r] delayed by d cycles
  word_t bs [COLS][DEPTH-1];
  always_comb begin
    for (int r = 0; r < ROWS; r++) xs[r][0] = x[r];
    for (int j = 0; j < COLS; j++) bs[j][0] = b[j];
  end
  for (genvar d = 1; d <= DEPTH - 2; d++) begin : g_dly
    always_ff @(posedge clk) begin
      for (int r = 0; r < ROWS; r++) xs[r][d] <= xs[r][d-1];
      for (int j = 0; j < COLS; j++) bs[j][d] <= bs[j][d-1];
    end
  end

  // ---------------- 2 x 6 plain MAD array ----------------
  logic [ACC_W-1:0] acc [ROWS][COLS];
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      // PE(r,j) sees input limb i at cycle i + r + j
      always_ff @(posedge clk) begin
        if (v_d[r+j]) begin
          if (f_d[r+j]) acc[r][j] <= ACC_W'(64'(xs[r][r+j]) * 64'(bs[j][r+j]));
          else          acc[r][j] <= acc[r][j] + ACC_W'(64'(xs[r][r+j]) * 64'(bs[j][r+j]));
        end
      end
    end
  end

  // ---------------- exact reconstruction sums (RECON) ----------------
  logic [WIDE_W-1:0] xw [ROWS];
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < ROWS; r++) begin
        if (in_first) xw[r] <= WIDE_W'(x[r]) * qhat_big;
        else          xw[r] <= xw[r] + WIDE_W'(x[r]) * qhat_big;
      end
    end
  end

  // centred-lift multiple v = round(x / Q), x < 3Q
  function automatic logic [1:0] lift_count(input logic [WIDE_W-1:0] xv,
                                            input logic [WIDE_W-1:0] qv);
    logic [WIDE_W+1:0] half, t;
    logic [1:0] c;
    half = (WIDE_W+2)'(qv >> 1) + (WIDE_W+2)'(qv[0]);
    c = 2'd0;
    for (int k = 0; k < 3; k++) begin
      t = (WIDE_W+2)'(k) * (WIDE_W+2)'(qv) + half;
      if ((WIDE_W+2)'(xv) >= t) c = 2'(k + 1);
    end
    return c;
  endfunction

  // ---------------- per-PE result capture ----------------
  // PE(r,j) holds its final sum in the cycle it sees in_last (i_last + r + j).
  // The sum is captured there and delayed by DEPTH-2-(r+j) cycles so that all
  // twelve sums line up DEPTH-1 cycles after in_last, before the next
  // conversion's first product can overwrite any of them.  This lets
  // conversions follow each other without a gap.
  logic [ACC_W-1:0] fin [ROWS][COLS][DEPTH-1];
  for (genvar r = 0; r < ROWS; r++) begin : g_frow
    for (genvar j = 0; j < COLS; j++) begin : g_fcol
      localparam int unsigned K = DEPTH - 2 - (r + j);
      always_ff @(posedge clk) begin
        if (l_d[r+j]) begin
          if (f_d[r+j]) fin[r][j][0] <= ACC_W'(64'(xs[r][r+j]) * 64'(bs[j][r+j]));
          else          fin[r][j][0] <= acc[r][j] + ACC_W'(64'(xs[r][r+j]) * 64'(bs[j][r+j]));
        end
        for (int k = 1; k <= K; k++) fin[r][j][k] <= fin[r][j][k-1];
      end
    end
  end

  // lift counts, computed the cycle after in_last (when xw is complete) and
  // carried along to the final reduction
  logic [1:0] lc [ROWS][DEPTH-2];
  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      lc[r][0] <= (l_d[1] && recon_q) ? lift_count(xw[r], q_big) : 2'd0;
      for (int k = 1; k < DEPTH - 2; k++) lc[r][k] <= lc[r][k-1];
    end
  end

  // ---------------- final reduction ----------------
  // All captured sums are aligned DEPTH-1 cycles after in_last; the reduction
  // registers one cycle later.
  logic done;
  assign done = l_d[DEPTH-1];

  function automatic word_t reduce_acc(input logic [ACC_W-1:0] a, input modulus_t mm);
    word_t hi_r, c36;
    hi_r = mod_reduce(64'(a >> 36), mm);
    c36  = mod_reduce(64'd1 << 36, mm);
    return mod_reduce(64'(hi_r) * 64'(c36) + 64'(a[35:0]), mm);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= done;
  end
  always_ff @(posedge clk) begin
    if (done) begin
      for (int r = 0; r < ROWS; r++) begin
        for (int j = 0; j < COLS; j++)
          y[r][j] <= mod_sub(reduce_acc(fin[r][j][DEPTH-2-(r+j)], p[j]),
                             mod_reduce(64'(lc[r][DEPTH-3]) * 64'(q_mod_p[j]), p[j]), p[j]);
      end
    end
  end
endmodule
