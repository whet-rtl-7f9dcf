// nttu: number-theoretic transform unit of one cluster (four-step NTT).
//
// Transforms one limb of N = R*R words (R = sqrt(N) = 256 lanes) every R
// cycles.  Element n of the limb travels in lane n / R at cycle n % R, for
// input and output alike, so a forward NTT followed by an inverse NTT returns
// the original limb.  As in the paper, the limb is viewed as an R x R matrix:
//   1. (forward) each element is multiplied by psi^n (negacyclic weighting),
//   2. pass 1: an R-point NTT across the lanes of each arriving vector,
//   3. lane k1 of input vector t is multiplied by w^(t*k1) (w = psi^2),
//   4. the vectors are written column-wise into a transpose buffer and read
//      back row-wise (the transposition that the chip's NTT network performs),
//   5. pass 2: another R-point NTT across lanes,
//   6. (inverse) each element is multiplied by N^-1 * psi^-n.
// The inverse transform runs the same pipeline with psi^-1.  Forward output
// element k is the evaluation of the input polynomial at psi^(2k+1)
// (natural order).
// The paper gives the four-step structure, sqrt(N)-point passes, the
// transposition and the NTT/INTT switching bubbles; the triple-buffered
// transpose memory (so the unit never stalls inside a limb), the on-chip
// twiddle-table generation and all timing details are this design's choices.
// The chip-wide NoC transposition is modelled by the local transpose memory.
//
// Configuration: pulse cfg_start with psi (a primitive 2N-th root of unity
// mod q), psi_inv and n_inv = N^-1 mod q; the unit builds its twiddle tables
// in S+1+R cycles and raises cfg_done.
// Streaming: a limb is R consecutive accepted vectors (in_valid & in_ready);
// in_inverse is sampled with the first vector.  A limb of the other direction
// is refused (in_ready low) until every limb in flight has left the unit:
// mode_bubble is high in each such cycle.  out_valid marks the R output
// vectors of a limb; latency from the first input vector to the first output
// vector is R + 2*log2(R) + 5 cycles.  There is no output back-pressure.
// idle is high when no limb is in flight.
module nttu
  import whet_pkg::*;
#(
  parameter int unsigned R = 256,
  localparam int unsigned S = $clog2(R),
  localparam int unsigned NB = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  modulus_t m,
  // configuration
  input  logic     cfg_start,
  input  word_t    psi,
  input  word_t    psi_inv,
  input  word_t    n_inv,
  output logic     cfg_done,
  // input stream
  input  logic     in_valid,
  input  logic     in_inverse,
  output logic     in_ready,
  input  word_t    in_data [R],
  // output stream
  output logic     out_valid,
  output word_t    out_data [R],
  output logic     mode_bubble,
  output logic     idle           // no limb in flight
);
  // ------------------------------------------------------------------
  // Twiddle tables
  // ------------------------------------------------------------------
  word_t tw_f [R/2], tw_i [R/2];   // w_R^j, w_R^-j
  word_t pre_f [R];                // psi^(R*l)
  word_t mid_f [R], mid_i [R];     // w^k, w^-k
  word_t post_i [R];               // N^-1 * psi^-(R*l)

  typedef enum logic [1:0] {C_IDLE, C_SQ, C_FILL} cfg_state_e;
  cfg_state_e cst;
  int unsigned cnt;
  word_t sq_f, sq_i;               // running squares
  word_t p2_f, p2_i, pR_f, pR_i, p2R_f, p2R_i;
  word_t x_f, x_i, y_f, y_i, z_f, z_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst      <= C_IDLE;
      cfg_done <= 1'b0;
      cnt      <= 0;
    end else begin
      unique case (cst)
        C_IDLE: if (cfg_start) begin
          cst <= C_SQ; cnt <= 0; cfg_done <= 1'b0;
          sq_f <= psi; sq_i <= psi_inv;
        end
        C_SQ: begin
          // after iteration c, sq = psi^(2^(c+1))
          sq_f <= mod_mul(sq_f, sq_f, m);
          sq_i <= mod_mul(sq_i, sq_i, m);
          if (cnt == 0) begin p2_f <= mod_mul(sq_f, sq_f, m); p2_i <= mod_mul(sq_i, sq_i, m); end
          if (cnt == S - 1) begin pR_f <= mod_mul(sq_f, sq_f, m); pR_i <= mod_mul(sq_i, sq_i, m); end
          if (cnt == S) begin
            p2R_f <= mod_mul(sq_f, sq_f, m); p2R_i <= mod_mul(sq_i, sq_i, m);
            cst <= C_FILL; cnt <= 0;
            x_f <= word_t'(1); x_i <= word_t'(1); y_f <= word_t'(1);
            y_i <= n_inv; z_f <= word_t'(1); z_i <= word_t'(1);
          end else cnt <= cnt + 1;
        end
        C_FILL: begin
          mid_f[cnt] <= x_f;  mid_i[cnt] <= x_i;
          pre_f[cnt] <= y_f;  post_i[cnt] <= y_i;
          if (cnt < R / 2) begin tw_f[cnt] <= z_f; tw_i[cnt] <= z_i; end
          x_f <= mod_mul(x_f, p2_f, m);  x_i <= mod_mul(x_i, p2_i, m);
          y_f <= mod_mul(y_f, pR_f, m);  y_i <= mod_mul(y_i, pR_i, m);
          z_f <= mod_mul(z_f, p2R_f, m); z_i <= mod_mul(z_i, p2R_i, m);
          if (cnt == R - 1) begin cst <= C_IDLE; cfg_done <= 1'b1; end
          cnt <= cnt + 1;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // Input acceptance and NTT/INTT mode
  // ------------------------------------------------------------------
  logic        inv_mode;       // direction of the limbs in flight
  int unsigned in_cnt;         // vector index within the current input limb
  int unsigned inflight;       // limbs accepted but not completely output
  logic        first_vec, accept, out_last;

  assign first_vec   = (in_cnt == 0);
  assign in_ready    = !(first_vec && (in_inverse != inv_mode) && inflight != 0);
  assign mode_bubble = in_valid && !in_ready;
  assign accept      = in_valid && in_ready;
  assign idle        = (inflight == 0) && (in_cnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inv_mode <= 1'b0;
      in_cnt   <= 0;
      inflight <= 0;
    end else begin
      if (accept) begin
        if (first_vec) inv_mode <= in_inverse;
        in_cnt <= (in_cnt == R - 1) ? 0 : in_cnt + 1;
      end
      inflight <= inflight + ((accept && first_vec) ? 1 : 0) - (out_last ? 1 : 0);
    end
  end

  // ------------------------------------------------------------------
  // Stage P: negacyclic pre-weighting psi^(R*l + t) (forward only)
  // ------------------------------------------------------------------
  word_t run_pre [R];
  word_t p_data  [R];
  logic  p_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p_valid <= 1'b0;
    else        p_valid <= accept;
  end
  always_ff @(posedge clk) begin
    if (accept) begin
      for (int l = 0; l < R; l++) begin
        word_t w;
        w = first_vec ? pre_f[l] : run_pre[l];
        p_data[l]  <= (first_vec ? in_inverse : inv_mode) ? in_data[l]
                                                          : mod_mul(in_data[l], w, m);
        run_pre[l] <= mod_mul(w, psi, m);
      end
    end
  end

  // ------------------------------------------------------------------
  // Pass 1
  // ------------------------------------------------------------------
  word_t tw_sel [R/2];
  always_comb tw_sel = inv_mode ? tw_i : tw_f;

  word_t a_data [R];
  logic  a_valid;
  ntt_xlane #(.R(R)) u_pass1 (
    .clk, .rst_n, .m, .tw(tw_sel), .in_valid(p_valid), .x(p_data),
    .out_valid(a_valid), .y(a_data));

  // ------------------------------------------------------------------
  // Stage M: twiddle w^(t*k1) and column write into the transpose buffer
  // ------------------------------------------------------------------
  word_t       tbuf [NB][R][R];
  word_t       run_mid [R];
  int unsigned wcol;
  int unsigned wbuf;
  logic [NB-1:0] full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcol <= 0;
      wbuf <= 0;
    end else if (a_valid) begin
      wcol <= (wcol == R - 1) ? 0 : wcol + 1;
      if (wcol == R - 1) wbuf <= (wbuf == NB - 1) ? 0 : wbuf + 1;
    end
  end

  always_ff @(posedge clk) begin
    if (a_valid) begin
      for (int k = 0; k < R; k++) begin
        word_t w;
        w = (wcol == 0) ? word_t'(1) : run_mid[k];
        tbuf[wbuf][k][wcol] <= mod_mul(a_data[k], w, m);
        run_mid[k] <= mod_mul(w, inv_mode ? mid_i[k] : mid_f[k], m);
      end
    end
  end

  // ------------------------------------------------------------------
  // Stage T: row read-out of a full buffer
  // ------------------------------------------------------------------
  int unsigned rrow, rbuf;
  logic        reading;
  word_t       t_data [R];
  logic        t_valid;
  logic        set_full;
  int unsigned nbuf;
  assign set_full = a_valid && (wcol == R - 1);
  assign nbuf     = (rbuf == NB - 1) ? 0 : rbuf + 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full    <= '0;
      rrow    <= 0;
      rbuf    <= 0;
      reading <= 1'b0;
      t_valid <= 1'b0;
    end else begin
      t_valid <= 1'b0;
      if (set_full) full[wbuf] <= 1'b1;
      if (!reading && full[rbuf]) begin
        reading <= 1'b1;
        rrow    <= 0;
      end else if (reading) begin
        t_valid <= 1'b1;
        if (rrow == R - 1) begin
          // continue straight into the next buffer if it is already full
          reading    <= full[nbuf] || (set_full && wbuf == nbuf);
          full[rbuf] <= 1'b0;
          rbuf       <= nbuf;
          rrow       <= 0;
        end else rrow <= rrow + 1;
      end
    end
  end
  always_ff @(posedge clk)
    if (reading) t_data <= tbuf[rbuf][rrow];

  // ------------------------------------------------------------------
  // Pass 2 and inverse post-scaling
  // ------------------------------------------------------------------
  word_t b_data [R];
  logic  b_valid;
  ntt_xlane #(.R(R)) u_pass2 (
    .clk, .rst_n, .m, .tw(tw_sel), .in_valid(t_valid), .x(t_data),
    .out_valid(b_valid), .y(b_data));

  int unsigned ocnt;
  word_t run_post [R];
  assign out_last = out_valid && (ocnt == 0);   // asserted with the last vector

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      ocnt      <= 0;
    end else begin
      out_valid <= b_valid;
      if (b_valid) ocnt <= (ocnt == R - 1) ? 0 : ocnt + 1;
    end
  end
  always_ff @(posedge clk) begin
    if (b_valid) begin
      for (int l = 0; l < R; l++) begin
        word_t w;
        w = (ocnt == 0) ? post_i[l] : run_post[l];
        out_data[l] <= inv_mode ? mod_mul(b_data[l], w, m) : b_data[l];
        run_post[l] <= mod_mul(w, psi_inv, m);
      end
    end
  end
endmodule
