// ewe: extended element-wise engine of one vector lane.
//
// Four modular multiply-add (MMAD) units are arranged as two pipeline stages
// of two units each.  An instruction picks, per unit, which operands it
// multiplies and adds, so one lane can run a compound element-wise operation
// on one element per cycle.  Besides plain add/sub/mul/mad it runs:
//   * KEYMULT: one of the beta accumulation steps of key multiplication,
//       (a,b) <- (a + d*evk[0][i], b + d*evk[1][i]),
//     with the running (a,b) read from and written back to the KeyMult buffer
//     and evk[0][i] coming from the PRNG;
//   * PMAC_KM (WHET extension 1): d_res = p*a + a', and
//       (a_res,b_res) = (d_res*evk[0][i], d_res*evk[1][i] + (p*b + b')),
//     with b' read from and (a_res,b_res) written to the KeyMult buffer;
//   * CSUBC   (WHET extension 2): a_res = (C*a - a')*C' for scalars C, C'.
// The four units, the operation set and the two extensions follow the paper;
// the split into two stages of two units, the operand bundle (whet_pkg::ewe_in_t)
// and the opcode encoding are this design's choices.
//
// Interface: in_valid/op/in are taken every cycle (no back-pressure); the
// result appears on out_valid/out_op/out exactly two cycles later.
//   out.r0 goes to the main scratchpad, out.r1/out.r2 to the KeyMult buffer.
module ewe
  import whet_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  modulus_t m,
  input  logic     in_valid,
  input  ewe_op_e  op,
  input  ewe_in_t  in,
  output logic     out_valid,
  output ewe_op_e  out_op,
  output ewe_out_t out
);
  localparam word_t ONE  = word_t'(1);
  localparam word_t ZERO = '0;

  // ---------------- stage 1 operand selection ----------------
  word_t a0, b0, c0, a1, b1, c1;
  always_comb begin
    a0 = ZERO; b0 = ZERO; c0 = ZERO;
    a1 = ZERO; b1 = ZERO; c1 = ZERO;
    unique case (op)
      EWE_ADD:     begin a0 = in.x0; b0 = ONE;   c0 = in.x1; end
      EWE_SUB:     begin a0 = in.x0; b0 = ONE;   c0 = mod_sub(ZERO, in.x1, m); end
      EWE_MUL:     begin a0 = in.x0; b0 = in.x1; end
      EWE_MAD:     begin a0 = in.x0; b0 = in.x1; c0 = in.x2; end
      EWE_KEYMULT: begin
        a0 = in.x0; b0 = in.prng; c0 = in.km0;   // a + d*evk0
        a1 = in.x0; b1 = in.x1;   c1 = in.km1;   // b + d*evk1
      end
      EWE_PMAC_KM: begin
        a0 = in.cst; b0 = in.x0; c0 = in.x1;     // d_res = p*a + a'
        a1 = in.cst; b1 = in.x2; c1 = in.km0;    // p*b + b'
      end
      EWE_CSUBC:   begin a0 = in.c0; b0 = in.x0; c0 = mod_sub(ZERO, in.x1, m); end
      default: ;
    endcase
  end

  word_t   s1_y0, s1_y1;
  logic    s1_valid;
  ewe_op_e s1_op;
  word_t   s1_prng, s1_evk1, s1_c1;

  mmad u_mmad0 (.clk, .en(1'b1), .m, .a(a0), .b(b0), .c(c0), .y(s1_y0));
  mmad u_mmad1 (.clk, .en(1'b1), .m, .a(a1), .b(b1), .c(c1), .y(s1_y1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_op    <= EWE_NOP;
    end else begin
      s1_valid <= in_valid;
      s1_op    <= in_valid ? op : EWE_NOP;
    end
  end
  always_ff @(posedge clk) begin
    s1_prng <= in.prng;
    s1_evk1 <= in.x3;
    s1_c1   <= in.c1;
  end

  // ---------------- stage 2 operand selection ----------------
  word_t a2, b2, c2, a3, b3, c3;
  always_comb begin
    // default: pass stage-1 results through (y*1 + 0)
    a2 = s1_y0; b2 = ONE; c2 = ZERO;
    a3 = s1_y1; b3 = ONE; c3 = ZERO;
    unique case (s1_op)
      EWE_PMAC_KM: begin
        a2 = s1_y0; b2 = s1_prng; c2 = ZERO;     // a_res = d_res*evk0
        a3 = s1_y0; b3 = s1_evk1; c3 = s1_y1;    // b_res = d_res*evk1 + (p*b+b')
      end
      EWE_CSUBC: begin
        a2 = s1_y0; b2 = s1_c1;                  // (C*a - a') * C'
      end
      default: ;
    endcase
  end

  word_t s2_y2, s2_y3, s2_d;
  mmad u_mmad2 (.clk, .en(1'b1), .m, .a(a2), .b(b2), .c(c2), .y(s2_y2));
  mmad u_mmad3 (.clk, .en(1'b1), .m, .a(a3), .b(b3), .c(c3), .y(s2_y3));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_op    <= EWE_NOP;
    end else begin
      out_valid <= s1_valid;
      out_op    <= s1_op;
    end
  end
  always_ff @(posedge clk) s2_d <= s1_y0;   // d_res of PMAC_KM

  always_comb begin
    out = '0;
    unique case (out_op)
      EWE_KEYMULT: begin out.r1 = s2_y2; out.r2 = s2_y3; end
      EWE_PMAC_KM: begin out.r0 = s2_d;  out.r1 = s2_y2; out.r2 = s2_y3; end
      default:     out.r0 = s2_y2;
    endcase
  end
endmodule
