// cluster: one of the eight vector clusters of the WHET accelerator.
//
// A cluster has R = sqrt(N) = 256 vector lanes (main scratchpad, KeyMult
// buffer, BConv buffer, extended EWE and 2x6 BConvU in each), one NTT unit
// and one automorphism unit spanning all lanes, and R/8 = 32 groups of
// constant scratchpad + PRNG, each broadcasting to its eight lanes.  Eight
// HBM (pseudo-)channels feed the constant-scratchpad groups, four groups per
// channel, through a compression-aware fan-out.  A limb of N = R*R words sits
// in the cluster with element k in lane k / R at word address base + k % R.
//
// Control follows the paper's statically scheduled VLIW model: a bundle has
// one slot per sequencer, and each slot takes a coarse instruction with a
// valid/ready handshake:
//   * EWE slot (ewe_instr_t): an element-wise instruction over len words of
//     every lane; the sequencer issues one element per cycle and repeats an
//     element whose scratchpad reads lost a bank (bank-conflict stall).
//   * FU slot (fu_instr_t): streams one limb into the NTTU or the AutoU from
//     the main scratchpad, KeyMult buffer or BConv buffer and writes the
//     result limb back when it emerges.  A limb for the NTTU in the other
//     direction (NTT <-> INTT) waits until the NTTU has drained, and a
//     switch between NTTU and AutoU waits until the other unit is idle, so
//     their result writes never meet (counted as mode and unit-switch stalls).
//   * BConv slot (bconv_instr_t): runs base conversion over coefficient pairs
//     of the BConv buffer with constants from a table loaded by the host.
// A DMA port (standing in for HBM transfers to the lane memories) writes or
// reads one word per lane per cycle when the functional-unit ports are free.
// Which unit reads or writes which memory follows the lane diagram; the
// instruction formats, the sequencers and the DMA port are this design's
// choices.  One modulus (m) is active for the whole cluster at a time.
module cluster
  import whet_pkg::*;
#(
  parameter int unsigned R          = 256,
  parameter int unsigned MAIN_DEPTH = 16384,
  parameter int unsigned KM_DEPTH   = 4096,
  parameter int unsigned BC_DEPTH   = 2304,
  parameter int unsigned CS_DEPTH   = 6144,
  localparam int unsigned NGROUP    = R / 8,
  localparam int unsigned NCH       = (NGROUP + 3) / 4,
  localparam int unsigned CSAW      = $clog2(CS_DEPTH),
  localparam int unsigned LOGN      = 2 * $clog2(R)
) (
  input  logic          clk,
  input  logic          rst_n,
  // ---- configuration ----
  input  modulus_t      m,
  input  logic          ntt_cfg_start,
  input  word_t         psi, psi_inv, n_inv,
  output logic          ntt_cfg_done,
  input  logic          prng_load,
  input  logic [63:0]   prng_seed,
  input  logic          bct_we,            // BConv constant table write
  input  logic [5:0]    bct_idx,
  input  word_t         bct_b [6],
  input  logic [95:0]   bct_qhat,
  input  modulus_t      bc_p [6],
  input  word_t         bc_qmodp [6],
  input  logic [95:0]   bc_qbig,
  // ---- VLIW slots ----
  input  logic          ewe_valid,
  output logic          ewe_ready,
  input  ewe_instr_t    ewe_instr,
  input  logic          fu_valid,
  output logic          fu_ready,
  input  fu_instr_t     fu_instr,
  input  logic          bcv_valid,
  output logic          bcv_ready,
  input  bconv_instr_t  bcv_instr,
  // ---- HBM channels to the constant scratchpads ----
  input  logic          ch_valid [NCH],
  input  compr_e        ch_rate  [NCH],
  input  logic [CSAW-1:0] ch_base [NCH],
  input  logic [CSAW+1:0] ch_idx  [NCH],
  input  word_t         ch_data  [NCH],
  // ---- DMA to / from the lane memories ----
  input  logic          dma_wr_valid,
  output logic          dma_wr_ready,
  input  loc_e          dma_wr_loc,
  input  addr_t         dma_wr_addr,
  input  word_t         dma_wr_data [R],
  input  logic          dma_rd_valid,
  output logic          dma_rd_ready,
  input  loc_e          dma_rd_loc,
  input  addr_t         dma_rd_addr,
  output logic          dma_rd_rvalid,
  output word_t         dma_rd_data [R],
  // ---- status ----
  output logic          busy,
  output logic [31:0]   cnt_bank_stall,    // cycles a read lost its bank
  output logic [31:0]   cnt_mode_stall,    // cycles waiting for an NTT<->INTT switch
  output logic [31:0]   cnt_unit_stall,    // cycles waiting for an NTTU<->AutoU switch
  output logic [31:0]   cnt_ptxt_words,    // plaintext words received from HBM
  output logic [31:0]   cnt_ptxt_fills     // group SRAM words written from them
);
  // ==================================================================
  // Per-lane signals
  // ==================================================================
  logic      lane_ewe_issue [R];
  logic      lane_fu_gnt    [R];
  word_t     lane_fu_data   [R];
  logic      lane_bcv_gnt   [R];
  logic      lane_bcv_ovalid [R];
  logic      lane_ewe_ovalid [R];
  word_t     cst_word  [R];
  word_t     prng_word [R];

  // ==================================================================
  // Constant scratchpad groups, PRNGs and HBM-channel fan-outs
  // ==================================================================
  logic            cs_re;
  logic [CSAW-1:0] cs_raddr;
  logic            prng_next;
  logic            cs_we    [NCH*4];
  logic [CSAW-1:0] cs_waddr [NCH*4];
  word_t           cs_wdata [NCH*4];

  for (genvar h = 0; h < NCH; h++) begin : g_ch
    logic [3:0]      we;
    logic [CSAW-1:0] wa [4];
    word_t           wd [4];
    ptxt_fanout #(.AW(CSAW)) u_fanout (
      .in_valid(ch_valid[h]), .rate(ch_rate[h]), .base(ch_base[h]), .idx(ch_idx[h]),
      .in_data(ch_data[h]), .we(we), .waddr(wa), .wdata(wd));
    // slot s of channel h is group h + NCH*s
    for (genvar s = 0; s < 4; s++) begin : g_slot
      assign cs_we[h + NCH*s]    = we[s];
      assign cs_waddr[h + NCH*s] = wa[s];
      assign cs_wdata[h + NCH*s] = wd[s];
    end
  end

  for (genvar g = 0; g < NGROUP; g++) begin : g_grp
    word_t bc [8];
    word_t rn [8];
    const_spad #(.DEPTH(CS_DEPTH), .LANES(8)) u_cs (
      .clk, .we(cs_we[g]), .waddr(cs_waddr[g]), .wdata(cs_wdata[g]),
      .re(cs_re), .raddr(cs_raddr), .bcast(bc));
    prng #(.NOUT(8)) u_prng (
      .clk, .rst_n, .m, .load(prng_load), .seed(prng_seed ^ 64'(g)), .next(prng_next), .rnd(rn));
    // group g serves lanes g, g + NGROUP, ..., g + 7*NGROUP
    for (genvar i = 0; i < 8; i++) begin : g_bc
      assign cst_word[g + NGROUP*i]  = bc[i];
      assign prng_word[g + NGROUP*i] = rn[i];
    end
  end

  // ==================================================================
  // EWE sequencer
  // ==================================================================
  logic        e_act;
  ewe_instr_t  e_ins;
  logic [15:0] e_t;
  logic        e_issue;
  assign e_issue   = lane_ewe_issue[0];
  assign ewe_ready = !e_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_act <= 1'b0;
      e_t   <= '0;
    end else if (!e_act) begin
      if (ewe_valid) begin
        e_act <= (ewe_instr.len != 0);
        e_ins <= ewe_instr;
        e_t   <= '0;
      end
    end else if (e_issue) begin
      if (e_t == e_ins.len - 1) e_act <= 1'b0;
      e_t <= e_t + 1;
    end
  end
  assign cs_re     = e_act && e_ins.cst_en;
  assign cs_raddr  = CSAW'(e_ins.cst_base + e_t);
  assign prng_next = e_issue && e_ins.prng_en;

  port_req_t e_rd [4], e_km_rd [2], e_km_wr [2], e_wr;
  always_comb begin
    for (int k = 0; k < 4; k++) begin
      e_rd[k].en = e_ins.x_en[k]; e_rd[k].addr = e_ins.x_base[k] + e_t;
    end
    for (int k = 0; k < 2; k++) begin
      e_km_rd[k].en = e_ins.km_en[k];  e_km_rd[k].addr = e_ins.km_base[k] + e_t;
      e_km_wr[k].en = e_ins.kmw_en[k]; e_km_wr[k].addr = e_ins.kmw_base[k] + e_t;
    end
    e_wr.en = e_ins.wr_en; e_wr.addr = e_ins.wr_base + e_t;
  end

  // ==================================================================
  // FU (NTTU / AutoU) sequencer
  // ==================================================================
  logic        f_act;
  fu_instr_t   f_ins;
  int unsigned f_t;
  logic        last_inv;          // direction of the last limb sent to the NTTU
  fu_e         last_unit;         // unit that received the last limb
  logic        nttu_idle, autou_idle;
  logic        f_mode_wait, f_unit_wait, f_try, f_gnt, f_go;

  assign f_unit_wait = f_act && (f_t == 0) && (f_ins.unit != last_unit) &&
                       !((last_unit == FU_NTTU) ? nttu_idle : autou_idle);
  assign f_mode_wait = f_act && (f_t == 0) && (f_ins.unit == FU_NTTU) &&
                       (f_ins.inverse != last_inv) && !nttu_idle && !f_unit_wait;
  assign f_try = f_act && !f_unit_wait && !f_mode_wait;
  assign f_gnt = lane_fu_gnt[0];
  assign f_go  = f_try && f_gnt;
  assign fu_ready = !f_act;

  // descriptors of limbs whose results are still to be written
  typedef struct packed { loc_e dst; addr_t base; } wb_desc_t;
  wb_desc_t    n_q [4], a_q [2];
  logic [2:0]  n_cnt;
  logic [1:0]  a_cnt;
  int unsigned n_ocnt, a_ocnt;
  logic        n_push, a_push, n_pop, a_pop;
  logic        nttu_ov, autou_ov;
  word_t       nttu_od [R], autou_od [R];

  assign n_push = f_go && f_t == 0 && f_ins.unit == FU_NTTU;
  assign a_push = f_go && f_t == 0 && f_ins.unit == FU_AUTOU;
  assign n_pop  = nttu_ov  && n_ocnt == R - 1;
  assign a_pop  = autou_ov && a_ocnt == R - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_act <= 1'b0; f_t <= 0; last_inv <= 1'b0; last_unit <= FU_NTTU;
      n_cnt <= '0; a_cnt <= '0; n_ocnt <= 0; a_ocnt <= 0;
    end else begin
      if (!f_act) begin
        if (fu_valid) begin f_act <= 1'b1; f_ins <= fu_instr; f_t <= 0; end
      end else if (f_go) begin
        if (f_t == 0) begin
          last_unit <= f_ins.unit;
          if (f_ins.unit == FU_NTTU) last_inv <= f_ins.inverse;
        end
        if (f_t == R - 1) f_act <= 1'b0;
        f_t <= f_t + 1;
      end
      // NTTU write-back descriptor queue
      if (n_pop) for (int i = 0; i < 3; i++) n_q[i] <= n_q[i+1];
      if (n_push) n_q[2'(n_pop ? n_cnt - 3'd1 : n_cnt)] <= '{dst: f_ins.dst, base: f_ins.dst_base};
      n_cnt <= n_cnt + 3'(n_push) - 3'(n_pop);
      if (nttu_ov) n_ocnt <= (n_ocnt == R - 1) ? 0 : n_ocnt + 1;
      // AutoU write-back descriptor queue
      if (a_pop) a_q[0] <= a_q[1];
      if (a_push) a_q[1'(a_pop ? a_cnt - 2'd1 : a_cnt)] <= '{dst: f_ins.dst, base: f_ins.dst_base};
      a_cnt <= a_cnt + 2'(a_push) - 2'(a_pop);
      if (autou_ov) a_ocnt <= (a_ocnt == R - 1) ? 0 : a_ocnt + 1;
    end
  end

  // read pipeline: data of a granted read arrives one cycle later
  logic fr_v, fr_unit, dr_v;
  logic fr_inv;
  logic [LOGN:0] fr_g;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fr_v <= 1'b0; dr_v <= 1'b0;
    end else begin
      fr_v <= f_go;
      dr_v <= dma_rd_valid && dma_rd_ready && f_gnt;
    end
  end
  always_ff @(posedge clk) begin
    fr_unit <= f_ins.unit;
    fr_inv  <= f_ins.inverse;
    fr_g    <= (LOGN+1)'(f_ins.g);
  end

  logic nttu_in_ready, nttu_bubble;
  nttu #(.R(R)) u_nttu (
    .clk, .rst_n, .m, .cfg_start(ntt_cfg_start), .psi, .psi_inv, .n_inv,
    .cfg_done(ntt_cfg_done),
    .in_valid(fr_v && fr_unit == FU_NTTU), .in_inverse(fr_inv), .in_ready(nttu_in_ready),
    .in_data(lane_fu_data), .out_valid(nttu_ov), .out_data(nttu_od),
    .mode_bubble(nttu_bubble), .idle(nttu_idle));

  autou #(.R(R)) u_autou (
    .clk, .rst_n, .in_valid(fr_v && fr_unit == FU_AUTOU), .g(fr_g),
    .in_data(lane_fu_data), .out_valid(autou_ov), .out_data(autou_od), .idle(autou_idle));

  // the FU read port is shared with DMA reads
  port_req_t fu_rd;
  loc_e      fu_src;
  assign dma_rd_ready = !f_try;
  always_comb begin
    if (f_try) begin
      fu_rd.en = 1'b1; fu_rd.addr = f_ins.src_base + addr_t'(f_t); fu_src = f_ins.src;
    end else begin
      fu_rd.en = dma_rd_valid; fu_rd.addr = dma_rd_addr; fu_src = dma_rd_loc;
    end
  end
  assign dma_rd_rvalid = dr_v;
  assign dma_rd_data   = lane_fu_data;

  // result write port: NTTU, AutoU or DMA
  port_req_t fu_wr;
  loc_e      fu_dst;
  word_t     fu_wd [R];
  assign dma_wr_ready = !nttu_ov && !autou_ov;
  always_comb begin
    if (nttu_ov) begin
      fu_wr.en = 1'b1; fu_wr.addr = n_q[0].base + addr_t'(n_ocnt); fu_dst = n_q[0].dst;
      fu_wd = nttu_od;
    end else if (autou_ov) begin
      fu_wr.en = 1'b1; fu_wr.addr = a_q[0].base + addr_t'(a_ocnt); fu_dst = a_q[0].dst;
      fu_wd = autou_od;
    end else begin
      fu_wr.en = dma_wr_valid; fu_wr.addr = dma_wr_addr; fu_dst = dma_wr_loc;
      fu_wd = dma_wr_data;
    end
  end

  // ==================================================================
  // BConv sequencer
  // ==================================================================
  logic          b_act;
  bconv_instr_t  b_ins;
  logic [15:0]   b_p;        // coefficient pair
  logic [5:0]    b_i;        // input limb
  logic          b_pend;     // a group's results are on their way
  logic [3:0]    d_rem;      // result words left to drain
  logic [15:0]   d_p;        // pair being drained
  logic [15:0]   b_pdone;    // pairs whose results have appeared
  logic          b_is_last, b_hold, b_try, b_go;
  word_t         bct_b_tab [64][6];
  logic [95:0]   bct_q_tab [64];
  word_t         bcv_b_q [6];
  logic [95:0]   bcv_qhat_q;

  always_ff @(posedge clk)
    if (bct_we) begin
      bct_b_tab[bct_idx] <= bct_b;
      bct_q_tab[bct_idx] <= bct_qhat;
    end

  assign b_is_last = (b_i == b_ins.nlimbs - 1);
  // the last limb of a pair may only go when the previous results are drained
  assign b_hold = b_is_last && (b_pend || d_rem > 4'd9);
  assign b_try  = b_act && !b_hold;
  assign b_go   = b_try && lane_bcv_gnt[0];
  assign bcv_ready = !b_act && !b_pend && d_rem == 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_act <= 1'b0; b_p <= '0; b_i <= '0; b_pend <= 1'b0; d_rem <= '0; d_p <= '0;
      b_pdone <= '0;
    end else begin
      if (!b_act) begin
        if (bcv_valid && bcv_ready) begin
          b_act <= (bcv_instr.npairs != 0) && (bcv_instr.nlimbs != 0);
          b_ins <= bcv_instr; b_p <= '0; b_i <= '0; b_pdone <= '0;
        end
      end else if (b_go) begin
        if (b_is_last) begin
          b_i <= '0;
          b_p <= b_p + 1;
          if (b_p == b_ins.npairs - 1) b_act <= 1'b0;
        end else b_i <= b_i + 1;
      end
      if (b_go && b_is_last) b_pend <= 1'b1;
      if (lane_bcv_ovalid[0]) begin
        b_pend  <= 1'b0;
        d_rem   <= 4'd12;
        d_p     <= b_pdone;
        b_pdone <= b_pdone + 1;
      end else if (d_rem != 0) d_rem <= d_rem - 1;
    end
  end
  always_ff @(posedge clk) begin
    bcv_b_q    <= bct_b_tab[b_i];
    bcv_qhat_q <= bct_q_tab[b_i];
  end

  port_req_t b_rd [2], b_wr;
  logic [3:0] b_sel;
  always_comb begin
    for (int r = 0; r < 2; r++) begin
      b_rd[r].en   = 1'b1;
      b_rd[r].addr = b_ins.src_base + addr_t'(b_i) * b_ins.stride + addr_t'(2 * b_p) + addr_t'(r);
    end
    b_sel     = 4'd12 - d_rem;                 // r*6 + j
    b_wr.en   = (d_rem != 0);
    b_wr.addr = b_ins.dst_base + addr_t'(int'(b_sel) % 6) * b_ins.stride + addr_t'(2 * d_p)
                + addr_t'(int'(b_sel) / 6);
  end

  // ==================================================================
  // Lanes
  // ==================================================================
  for (genvar l = 0; l < R; l++) begin : g_lane
    lane #(.MAIN_DEPTH(MAIN_DEPTH), .KM_DEPTH(KM_DEPTH), .BC_DEPTH(BC_DEPTH)) u_lane (
      .clk, .rst_n, .m,
      .ewe_req(e_act), .ewe_op(e_ins.op), .ewe_rd(e_rd), .ewe_km_rd(e_km_rd),
      .ewe_wr(e_wr), .ewe_km_wr(e_km_wr), .ewe_c0(e_ins.c0), .ewe_c1(e_ins.c1),
      .cst_word(cst_word[l]), .prng_word(prng_word[l]), .ewe_issue(lane_ewe_issue[l]),
      .fu_rd(fu_rd), .fu_src(fu_src), .fu_rd_gnt(lane_fu_gnt[l]), .fu_rd_data(lane_fu_data[l]),
      .fu_wr(fu_wr), .fu_dst(fu_dst), .fu_wr_data(fu_wd[l]),
      .bcv_rd(b_rd), .bcv_rd_gnt(lane_bcv_gnt[l]),
      .bcv_valid(b_try), .bcv_first(b_i == 0), .bcv_last(b_is_last), .bcv_recon(b_ins.recon),
      .bcv_p(bc_p), .bcv_qmodp(bc_qmodp), .bcv_qbig(bc_qbig),
      .bcv_b(bcv_b_q), .bcv_qhat(bcv_qhat_q), .bcv_out_valid(lane_bcv_ovalid[l]),
      .bcv_wr(b_wr), .bcv_wr_sel(b_sel),
      .ewe_out_valid(lane_ewe_ovalid[l]));
  end

  // ==================================================================
  // Status
  // ==================================================================
  assign busy = e_act || f_act || b_act || b_pend || d_rem != 0 || !nttu_idle || !autou_idle
                || lane_ewe_ovalid[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_bank_stall <= '0; cnt_mode_stall <= '0; cnt_unit_stall <= '0;
      cnt_ptxt_words <= '0; cnt_ptxt_fills <= '0;
    end else begin
      cnt_bank_stall <= cnt_bank_stall + 32'(e_act && !e_issue) + 32'(f_try && !f_gnt)
                        + 32'(b_try && !lane_bcv_gnt[0]);
      cnt_mode_stall <= cnt_mode_stall + 32'(f_mode_wait);
      cnt_unit_stall <= cnt_unit_stall + 32'(f_unit_wait);
      begin
        logic [31:0] w, f;
        w = '0; f = '0;
        for (int h = 0; h < NCH; h++) w += 32'(ch_valid[h]);
        for (int g = 0; g < NGROUP; g++) f += 32'(cs_we[g]);
        cnt_ptxt_words <= cnt_ptxt_words + w;
        cnt_ptxt_fills <= cnt_ptxt_fills + f;
      end
    end
  end

  // The sequencer keeps the NTTU from ever refusing a vector.
  a_nttu_accepts: assert property (@(posedge clk) disable iff (!rst_n)
    !nttu_bubble && (!(fr_v && fr_unit == FU_NTTU) || nttu_in_ready))
    else $error("NTTU refused an input vector");
endmodule
