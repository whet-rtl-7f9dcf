// whet_top: the WHET FHE accelerator - eight vector clusters.
//
// The chip is eight identical clusters of R = 256 lanes (2048 lanes in all),
// each with its own NTT unit, automorphism unit, 256 lanes of main
// scratchpad (128 MiB in all), KeyMult buffer (32 MiB), BConv buffer
// (18 MiB), extended element-wise engines and 2x6 base-conversion arrays, and
// 32 constant-scratchpad + PRNG groups (6 MiB) fed by eight HBM
// pseudo-channels per cluster (64 over two HBM3 stacks).  The HBM PHYs and
// stacks, the chip-level NoC between clusters and the instruction scheduler
// are outside this RTL: their connections are the ports below, one set per
// cluster (arrays indexed by cluster).  In this model every cluster works on
// whole limbs of its own, so no data crosses between clusters.
module whet_top
  import whet_pkg::*;
#(
  parameter int unsigned NCLUSTER   = 8,
  parameter int unsigned R          = 256,
  parameter int unsigned MAIN_DEPTH = 16384,
  parameter int unsigned KM_DEPTH   = 4096,
  parameter int unsigned BC_DEPTH   = 2304,
  parameter int unsigned CS_DEPTH   = 6144,
  localparam int unsigned NCH       = (R / 8 + 3) / 4,
  localparam int unsigned CSAW      = $clog2(CS_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  modulus_t      m             [NCLUSTER],
  input  logic          ntt_cfg_start [NCLUSTER],
  input  word_t         psi           [NCLUSTER],
  input  word_t         psi_inv       [NCLUSTER],
  input  word_t         n_inv         [NCLUSTER],
  output logic          ntt_cfg_done  [NCLUSTER],
  input  logic          prng_load     [NCLUSTER],
  input  logic [63:0]   prng_seed     [NCLUSTER],
  input  logic          bct_we        [NCLUSTER],
  input  logic [5:0]    bct_idx       [NCLUSTER],
  input  word_t         bct_b         [NCLUSTER][6],
  input  logic [95:0]   bct_qhat      [NCLUSTER],
  input  modulus_t      bc_p          [NCLUSTER][6],
  input  word_t         bc_qmodp      [NCLUSTER][6],
  input  logic [95:0]   bc_qbig       [NCLUSTER],
  input  logic          ewe_valid     [NCLUSTER],
  output logic          ewe_ready     [NCLUSTER],
  input  ewe_instr_t    ewe_instr     [NCLUSTER],
  input  logic          fu_valid      [NCLUSTER],
  output logic          fu_ready      [NCLUSTER],
  input  fu_instr_t     fu_instr      [NCLUSTER],
  input  logic          bcv_valid     [NCLUSTER],
  output logic          bcv_ready     [NCLUSTER],
  input  bconv_instr_t  bcv_instr     [NCLUSTER],
  input  logic          ch_valid      [NCLUSTER][NCH],
  input  compr_e        ch_rate       [NCLUSTER][NCH],
  input  logic [CSAW-1:0] ch_base     [NCLUSTER][NCH],
  input  logic [CSAW+1:0] ch_idx      [NCLUSTER][NCH],
  input  word_t         ch_data       [NCLUSTER][NCH],
  input  logic          dma_wr_valid  [NCLUSTER],
  output logic          dma_wr_ready  [NCLUSTER],
  input  loc_e          dma_wr_loc    [NCLUSTER],
  input  addr_t         dma_wr_addr   [NCLUSTER],
  input  word_t         dma_wr_data   [NCLUSTER][R],
  input  logic          dma_rd_valid  [NCLUSTER],
  output logic          dma_rd_ready  [NCLUSTER],
  input  loc_e          dma_rd_loc    [NCLUSTER],
  input  addr_t         dma_rd_addr   [NCLUSTER],
  output logic          dma_rd_rvalid [NCLUSTER],
  output word_t         dma_rd_data   [NCLUSTER][R],
  output logic          busy          [NCLUSTER],
  output logic [31:0]   cnt_bank_stall [NCLUSTER],
  output logic [31:0]   cnt_mode_stall [NCLUSTER],
  output logic [31:0]   cnt_unit_stall [NCLUSTER],
  output logic [31:0]   cnt_ptxt_words [NCLUSTER],
  output logic [31:0]   cnt_ptxt_fills [NCLUSTER]
);
  for (genvar c = 0; c < NCLUSTER; c++) begin : g_cluster
    cluster #(.R(R), .MAIN_DEPTH(MAIN_DEPTH), .KM_DEPTH(KM_DEPTH), .BC_DEPTH(BC_DEPTH),
              .CS_DEPTH(CS_DEPTH)) u_cluster (
      .clk, .rst_n,
      .m(m[c]), .ntt_cfg_start(ntt_cfg_start[c]), .psi(psi[c]), .psi_inv(psi_inv[c]),
      .n_inv(n_inv[c]), .ntt_cfg_done(ntt_cfg_done[c]),
      .prng_load(prng_load[c]), .prng_seed(prng_seed[c]),
      .bct_we(bct_we[c]), .bct_idx(bct_idx[c]), .bct_b(bct_b[c]), .bct_qhat(bct_qhat[c]),
      .bc_p(bc_p[c]), .bc_qmodp(bc_qmodp[c]), .bc_qbig(bc_qbig[c]),
      .ewe_valid(ewe_valid[c]), .ewe_ready(ewe_ready[c]), .ewe_instr(ewe_instr[c]),
      .fu_valid(fu_valid[c]), .fu_ready(fu_ready[c]), .fu_instr(fu_instr[c]),
      .bcv_valid(bcv_valid[c]), .bcv_ready(bcv_ready[c]), .bcv_instr(bcv_instr[c]),
      .ch_valid(ch_valid[c]), .ch_rate(ch_rate[c]), .ch_base(ch_base[c]), .ch_idx(ch_idx[c]),
      .ch_data(ch_data[c]),
      .dma_wr_valid(dma_wr_valid[c]), .dma_wr_ready(dma_wr_ready[c]), .dma_wr_loc(dma_wr_loc[c]),
      .dma_wr_addr(dma_wr_addr[c]), .dma_wr_data(dma_wr_data[c]),
      .dma_rd_valid(dma_rd_valid[c]), .dma_rd_ready(dma_rd_ready[c]), .dma_rd_loc(dma_rd_loc[c]),
      .dma_rd_addr(dma_rd_addr[c]), .dma_rd_rvalid(dma_rd_rvalid[c]), .dma_rd_data(dma_rd_data[c]),
      .busy(busy[c]), .cnt_bank_stall(cnt_bank_stall[c]), .cnt_mode_stall(cnt_mode_stall[c]),
      .cnt_unit_stall(cnt_unit_stall[c]), .cnt_ptxt_words(cnt_ptxt_words[c]),
      .cnt_ptxt_fills(cnt_ptxt_fills[c]));
  end
endmodule
