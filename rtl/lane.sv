// lane: one of the 256 vector lanes of a cluster.
//
// A lane holds its slices of the three banked on-chip memories - main
// scratchpad (16384 words = 64 KiB, 8 banks), KeyMult buffer (4096 words =
// 16 KiB, 6 banks) and BConv buffer (2304 words = 9 KiB, 5 banks) - together
// with its extended element-wise engine (EWE) and its 2x6 base-conversion
// array (BConvU).  The NTT unit and automorphism unit span all lanes of the
// cluster; the lane supplies one operand word per cycle to them and stores
// their results.  Sizes are the paper's chip totals divided over 2048 lanes;
// bank counts follow its bandwidths (64, 48 and 40 TB/s).
//
// All lanes receive the same port requests (SIMD).  The cluster's
// sequencers drive them:
//   * read requests (main, KeyMult, BConv) return data one cycle later;
//   * the EWE issues when all of its reads are granted (ewe_issue): op,
//     scalars and destination addresses are then carried down the EWE's
//     two-cycle pipeline and written back three cycles after issue;
//   * functional-unit results (NTTU, AutoU, BConvU) are written at the
//     address the sequencer presents with them.
// A read that loses its bank to a higher-priority port is reported on the
// *_gnt outputs; the sequencer then repeats it (scratchpad bandwidth stall).
// For the EWE, reads already granted are kept and only the missing ones are
// repeated, so an element always issues within four attempts.
// Writes have the highest priority and must not collide with each other in a
// bank (checked by assertion).  The port assignment and the muxing of the FU
// operand between the three memories (Fig. 5's MUX/DEMUX blocks, here driven
// by fu_src) follow the lane diagram; the exact port numbering, priorities
// and timing are this design's choices.
// The EWE's out_op output is left unconnected: the lane keeps its own copy of
// the issued operation in the write-back pipeline, so a lint warning about
// the empty pin is expected.
module lane
  import whet_pkg::*;
#(
  parameter int unsigned MAIN_DEPTH = 16384,
  parameter int unsigned KM_DEPTH   = 4096,
  parameter int unsigned BC_DEPTH   = 2304
) (
  input  logic       clk,
  input  logic       rst_n,
  input  modulus_t   m,
  // ---- EWE issue ----
  input  logic       ewe_req,          // an EWE element wants to issue this cycle
  input  ewe_op_e    ewe_op,
  input  port_req_t  ewe_rd   [4],     // x0..x3 reads (main)
  input  port_req_t  ewe_km_rd [2],    // km0, km1 reads (KeyMult)
  input  port_req_t  ewe_wr,           // r0 destination (main), en = write r0
  input  port_req_t  ewe_km_wr [2],    // r1, r2 destinations (KeyMult)
  input  word_t      ewe_c0, ewe_c1,
  input  word_t      cst_word,         // constant-scratchpad broadcast (valid the cycle after issue)
  input  word_t      prng_word,        // PRNG word for this lane (sampled at issue)
  output logic       ewe_issue,        // all EWE reads granted: element issued
  // ---- functional-unit operand read (NTTU / AutoU) ----
  input  port_req_t  fu_rd,
  input  loc_e       fu_src,
  output logic       fu_rd_gnt,
  output word_t      fu_rd_data,       // valid the cycle after a granted read
  // ---- functional-unit result writes ----
  input  port_req_t  fu_wr,            // NTTU or AutoU result
  input  loc_e       fu_dst,
  input  word_t      fu_wr_data,
  // ---- BConvU ----
  input  port_req_t  bcv_rd [2],       // coefficient pair reads (BConv buffer)
  output logic       bcv_rd_gnt,
  input  logic       bcv_valid, bcv_first, bcv_last, bcv_recon,  // with bcv_rd
  input  modulus_t   bcv_p [6],
  input  word_t      bcv_qmodp [6],
  input  logic [95:0] bcv_qbig,
  input  word_t      bcv_b [6],        // constants of the limb being read, one cycle later
  input  logic [95:0] bcv_qhat,        // one cycle later as well
  output logic       bcv_out_valid,
  input  port_req_t  bcv_wr,           // drain of one result word into the BConv buffer
  input  logic [3:0] bcv_wr_sel,       // result index r*6 + j
  // ---- status ----
  output logic       ewe_out_valid
);
  // ------------------------------------------------------------------
  // Main scratchpad
  // ------------------------------------------------------------------
  logic [MAIN_PORTS-1:0] m_req, m_we, m_gnt;
  logic [$clog2(MAIN_DEPTH)-1:0] m_addr [MAIN_PORTS];
  word_t m_wdata [MAIN_PORTS], m_rdata [MAIN_PORTS];

  logic [KM_PORTS-1:0] k_req, k_we, k_gnt;
  logic [$clog2(KM_DEPTH)-1:0] k_addr [KM_PORTS];
  word_t k_wdata [KM_PORTS], k_rdata [KM_PORTS];

  logic [BC_PORTS-1:0] b_req, b_we, b_gnt;
  logic [$clog2(BC_DEPTH)-1:0] b_addr [BC_PORTS];
  word_t b_wdata [BC_PORTS], b_rdata [BC_PORTS];

  banked_sram #(.DEPTH(MAIN_DEPTH), .NBANKS(8), .NPORTS(MAIN_PORTS)) u_main (
    .clk, .req(m_req), .we(m_we), .addr(m_addr), .wdata(m_wdata), .gnt(m_gnt), .rdata(m_rdata));
  banked_sram #(.DEPTH(KM_DEPTH), .NBANKS(6), .NPORTS(KM_PORTS)) u_keymult (
    .clk, .req(k_req), .we(k_we), .addr(k_addr), .wdata(k_wdata), .gnt(k_gnt), .rdata(k_rdata));
  banked_sram #(.DEPTH(BC_DEPTH), .NBANKS(5), .NPORTS(BC_PORTS)) u_bconvbuf (
    .clk, .req(b_req), .we(b_we), .addr(b_addr), .wdata(b_wdata), .gnt(b_gnt), .rdata(b_rdata));

  // ------------------------------------------------------------------
  // EWE pipeline
  // ------------------------------------------------------------------
  ewe_in_t  e_in;
  ewe_out_t e_out;
  ewe_op_e  e_op_q;
  logic     e_valid_q;
  word_t    prng_q, c0_q, c1_q;
  port_req_t wr0_d [3], wr1_d [3], wr2_d [3];   // destination delay lines

  // Element issue needs every requested EWE read granted, now or in an
  // earlier attempt at the same element: a read that won its bank keeps its
  // data on the memory port (rdata holds until the port's next granted read)
  // and is not repeated, so two operands that always share a bank still
  // issue after one extra cycle.
  logic [3:0] got_m;
  logic [1:0] got_k;
  always_comb begin
    logic ok;
    ok = ewe_req;
    for (int i = 0; i < 4; i++)
      if (ewe_rd[i].en && !got_m[i] && !m_gnt[MP_EWE_R0 + i]) ok = 1'b0;
    for (int i = 0; i < 2; i++)
      if (ewe_km_rd[i].en && !got_k[i] && !k_gnt[KP_R0 + i]) ok = 1'b0;
    ewe_issue = ok;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got_m <= '0; got_k <= '0;
    end else if (ewe_issue || !ewe_req) begin
      got_m <= '0; got_k <= '0;
    end else begin
      for (int i = 0; i < 4; i++) if (m_gnt[MP_EWE_R0 + i]) got_m[i] <= 1'b1;
      for (int i = 0; i < 2; i++) if (k_gnt[KP_R0 + i])     got_k[i] <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid_q <= 1'b0;
      e_op_q    <= EWE_NOP;
      for (int s = 0; s < 3; s++) begin wr0_d[s] <= '0; wr1_d[s] <= '0; wr2_d[s] <= '0; end
    end else begin
      e_valid_q <= ewe_issue;
      e_op_q    <= ewe_op;
      wr0_d[0]  <= ewe_issue ? ewe_wr       : '0;
      wr1_d[0]  <= ewe_issue ? ewe_km_wr[0] : '0;
      wr2_d[0]  <= ewe_issue ? ewe_km_wr[1] : '0;
      for (int s = 1; s < 3; s++) begin
        wr0_d[s] <= wr0_d[s-1]; wr1_d[s] <= wr1_d[s-1]; wr2_d[s] <= wr2_d[s-1];
      end
    end
  end
  always_ff @(posedge clk) begin
    prng_q <= prng_word;
    c0_q   <= ewe_c0;
    c1_q   <= ewe_c1;
  end

  always_comb begin
    e_in.x0   = m_rdata[MP_EWE_R0 + 0];
    e_in.x1   = m_rdata[MP_EWE_R0 + 1];
    e_in.x2   = m_rdata[MP_EWE_R0 + 2];
    e_in.x3   = m_rdata[MP_EWE_R0 + 3];
    e_in.km0  = k_rdata[KP_R0];
    e_in.km1  = k_rdata[KP_R1];
    e_in.cst  = cst_word;
    e_in.prng = prng_q;
    e_in.c0   = c0_q;
    e_in.c1   = c1_q;
  end

  ewe u_ewe (.clk, .rst_n, .m, .in_valid(e_valid_q), .op(e_op_q), .in(e_in),
             .out_valid(ewe_out_valid), .out_op(), .out(e_out));

  // ------------------------------------------------------------------
  // BConvU
  // ------------------------------------------------------------------
  logic  bv_q, bf_q, bl_q, br_q;
  word_t bcv_x [2];
  word_t bcv_y [2][6];
  assign bcv_rd_gnt = (!bcv_rd[0].en || b_gnt[BP_X0]) && (!bcv_rd[1].en || b_gnt[BP_X1]);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bv_q <= 1'b0; bf_q <= 1'b0; bl_q <= 1'b0; br_q <= 1'b0;
    end else begin
      bv_q <= bcv_valid && bcv_rd_gnt;
      bf_q <= bcv_first; bl_q <= bcv_last; br_q <= bcv_recon;
    end
  end
  assign bcv_x[0] = b_rdata[BP_X0];
  assign bcv_x[1] = b_rdata[BP_X1];

  bconvu u_bconvu (
    .clk, .rst_n, .p(bcv_p), .q_mod_p(bcv_qmodp), .q_big(bcv_qbig),
    .in_valid(bv_q), .in_first(bf_q), .in_last(bl_q), .recon(br_q),
    .x(bcv_x), .b(bcv_b), .qhat_big(bcv_qhat), .out_valid(bcv_out_valid), .y(bcv_y));

  // ------------------------------------------------------------------
  // Port wiring
  // ------------------------------------------------------------------
  loc_e fu_src_q;
  always_ff @(posedge clk) fu_src_q <= fu_src;

  always_comb begin
    // main scratchpad
    m_req = '0; m_we = '0;
    for (int p = 0; p < MAIN_PORTS; p++) begin m_addr[p] = '0; m_wdata[p] = '0; end
    m_req[MP_EWE_W] = wr0_d[2].en;  m_we[MP_EWE_W] = 1'b1;
    m_addr[MP_EWE_W] = wr0_d[2].addr[$clog2(MAIN_DEPTH)-1:0];
    m_wdata[MP_EWE_W] = e_out.r0;
    m_req[MP_FU_W] = fu_wr.en && fu_dst == LOC_MAIN;  m_we[MP_FU_W] = 1'b1;
    m_addr[MP_FU_W] = fu_wr.addr[$clog2(MAIN_DEPTH)-1:0];
    m_wdata[MP_FU_W] = fu_wr_data;
    for (int i = 0; i < 4; i++) begin
      m_req[MP_EWE_R0 + i]  = ewe_req && ewe_rd[i].en && !got_m[i];
      m_addr[MP_EWE_R0 + i] = ewe_rd[i].addr[$clog2(MAIN_DEPTH)-1:0];
    end
    m_req[MP_FU_R]  = fu_rd.en && fu_src == LOC_MAIN;
    m_addr[MP_FU_R] = fu_rd.addr[$clog2(MAIN_DEPTH)-1:0];

    // KeyMult buffer
    k_req = '0; k_we = '0;
    for (int p = 0; p < KM_PORTS; p++) begin k_addr[p] = '0; k_wdata[p] = '0; end
    k_req[KP_R1_W] = wr1_d[2].en; k_we[KP_R1_W] = 1'b1;
    k_addr[KP_R1_W] = wr1_d[2].addr[$clog2(KM_DEPTH)-1:0]; k_wdata[KP_R1_W] = e_out.r1;
    k_req[KP_R2_W] = wr2_d[2].en; k_we[KP_R2_W] = 1'b1;
    k_addr[KP_R2_W] = wr2_d[2].addr[$clog2(KM_DEPTH)-1:0]; k_wdata[KP_R2_W] = e_out.r2;
    k_req[KP_FU_W] = fu_wr.en && fu_dst == LOC_KM; k_we[KP_FU_W] = 1'b1;
    k_addr[KP_FU_W] = fu_wr.addr[$clog2(KM_DEPTH)-1:0]; k_wdata[KP_FU_W] = fu_wr_data;
    for (int i = 0; i < 2; i++) begin
      k_req[KP_R0 + i]  = ewe_req && ewe_km_rd[i].en && !got_k[i];
      k_addr[KP_R0 + i] = ewe_km_rd[i].addr[$clog2(KM_DEPTH)-1:0];
    end
    k_req[KP_FU_R]  = fu_rd.en && fu_src == LOC_KM;
    k_addr[KP_FU_R] = fu_rd.addr[$clog2(KM_DEPTH)-1:0];

    // BConv buffer
    b_req = '0; b_we = '0;
    for (int p = 0; p < BC_PORTS; p++) begin b_addr[p] = '0; b_wdata[p] = '0; end
    b_req[BP_NTT_W] = fu_wr.en && fu_dst == LOC_BCONV; b_we[BP_NTT_W] = 1'b1;
    b_addr[BP_NTT_W] = fu_wr.addr[$clog2(BC_DEPTH)-1:0]; b_wdata[BP_NTT_W] = fu_wr_data;
    b_req[BP_BCV_W] = bcv_wr.en; b_we[BP_BCV_W] = 1'b1;
    b_addr[BP_BCV_W] = bcv_wr.addr[$clog2(BC_DEPTH)-1:0];
    b_wdata[BP_BCV_W] = bcv_y[bcv_wr_sel / 6][bcv_wr_sel % 6];
    b_req[BP_NTT_R]  = fu_rd.en && fu_src == LOC_BCONV;
    b_addr[BP_NTT_R] = fu_rd.addr[$clog2(BC_DEPTH)-1:0];
    for (int i = 0; i < 2; i++) begin
      b_req[BP_X0 + i]  = bcv_valid && bcv_rd[i].en;
      b_addr[BP_X0 + i] = bcv_rd[i].addr[$clog2(BC_DEPTH)-1:0];
    end
  end

  always_comb begin
    unique case (fu_src)
      LOC_KM:    fu_rd_gnt = k_gnt[KP_FU_R];
      LOC_BCONV: fu_rd_gnt = b_gnt[BP_NTT_R];
      default:   fu_rd_gnt = m_gnt[MP_FU_R];
    endcase
    unique case (fu_src_q)
      LOC_KM:    fu_rd_data = k_rdata[KP_FU_R];
      LOC_BCONV: fu_rd_data = b_rdata[BP_NTT_R];
      default:   fu_rd_data = m_rdata[MP_FU_R];
    endcase
  end

  // Writes are scheduled statically and are never refused.
  a_main_wr: assert property (@(posedge clk) disable iff (!rst_n) (m_req & m_we) == (m_gnt & m_we))
    else $error("main scratchpad write refused: req %b gnt %b", m_req, m_gnt);
  a_km_wr: assert property (@(posedge clk) disable iff (!rst_n) (k_req & k_we) == (k_gnt & k_we))
    else $error("KeyMult buffer write refused: req %b gnt %b", k_req, k_gnt);
  a_bc_wr: assert property (@(posedge clk) disable iff (!rst_n) (b_req & b_we) == (b_gnt & b_we))
    else $error("BConv buffer write refused: req %b gnt %b", b_req, b_gnt);
endmodule
