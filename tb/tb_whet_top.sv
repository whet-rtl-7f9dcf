// tb_whet_top: end-to-end test of the accelerator at reduced size
// (2 clusters, R = 16 lanes, N = 256, small memories).
//
// Both clusters run the same instruction stream (the clusters work in
// lock-step on different limbs) on different random data.  The program:
//   1. configures the NTT twiddles, the PRNGs and the BConv constant table;
//   2. loads limbs into the main scratchpad and KeyMult buffer by DMA;
//   3. FU slot: forward NTT of two limbs back to back, an inverse NTT
//      (NTT -> INTT mode switch), an automorphism (NTTU -> AutoU switch) and
//      a forward NTT of its result into the BConv buffer (AutoU -> NTTU);
//   4. streams plaintext constants over the HBM channel at 32x, 8x and 16x
//      compression into the constant scratchpads;
//   5. EWE slot: MAD with two operands in one bank (bank-conflict stalls),
//      KEYMULT with PRNG words, PMAC_KM with the three constant regions,
//      CSUBC;
//   6. BConv slot: a plain base conversion of 3 limbs into 6, then a RECON
//      (ModRaise reconstruction) of 3 residues into 6 new primes;
// and reads every result back by DMA and compares it with a model computed
// here: a direct O(N^2) negacyclic NTT, the automorphism index rule, 64-bit
// modular arithmetic, the xorshift PRNG streams, the fan-out rule of the
// compressed plaintext stream, and a CRT reconstruction with 96-bit integers.
// Every mechanism (each FU operation and switch stall, bank stalls, each
// compression rate, each EWE op, BConv, RECON, DMA) is counted, and one that
// never happened counts as a failure.
module tb_whet_top;
  import whet_pkg::*;
  localparam int unsigned NC = 2, R = 16, N = R * R, NGROUP = R / 8, NCH = (NGROUP + 3) / 4;
  localparam int unsigned MD = 128, KD = 128, BD = 160, CD = 64, CSAW = $clog2(CD);
  localparam longint unsigned Q = 64'd2013265921;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- DUT signals ----------------
  modulus_t      m             [NC];
  logic          ntt_cfg_start [NC];
  word_t         psi [NC], psi_inv [NC], n_inv [NC];
  logic          ntt_cfg_done  [NC];
  logic          prng_load     [NC];
  logic [63:0]   prng_seed     [NC];
  logic          bct_we        [NC];
  logic [5:0]    bct_idx       [NC];
  word_t         bct_b         [NC][6];
  logic [95:0]   bct_qhat      [NC];
  modulus_t      bc_p          [NC][6];
  word_t         bc_qmodp      [NC][6];
  logic [95:0]   bc_qbig       [NC];
  logic          ewe_valid [NC], ewe_ready [NC];
  ewe_instr_t    ewe_instr [NC];
  logic          fu_valid [NC], fu_ready [NC];
  fu_instr_t     fu_instr [NC];
  logic          bcv_valid [NC], bcv_ready [NC];
  bconv_instr_t  bcv_instr [NC];
  logic          ch_valid [NC][NCH];
  compr_e        ch_rate  [NC][NCH];
  logic [CSAW-1:0] ch_base [NC][NCH];
  logic [CSAW+1:0] ch_idx  [NC][NCH];
  word_t         ch_data  [NC][NCH];
  logic          dma_wr_valid [NC], dma_wr_ready [NC];
  loc_e          dma_wr_loc [NC];
  addr_t         dma_wr_addr [NC];
  word_t         dma_wr_data [NC][R];
  logic          dma_rd_valid [NC], dma_rd_ready [NC];
  loc_e          dma_rd_loc [NC];
  addr_t         dma_rd_addr [NC];
  logic          dma_rd_rvalid [NC];
  word_t         dma_rd_data [NC][R];
  logic          busy [NC];
  logic [31:0]   cnt_bank_stall [NC], cnt_mode_stall [NC], cnt_unit_stall [NC];
  logic [31:0]   cnt_ptxt_words [NC], cnt_ptxt_fills [NC];

  whet_top #(.NCLUSTER(NC), .R(R), .MAIN_DEPTH(MD), .KM_DEPTH(KD), .BC_DEPTH(BD),
             .CS_DEPTH(CD)) dut (.*);

  // ---------------- reference state ----------------
  int checks = 0, failures = 0;
  longint unsigned mref [NC][3][R][BD];   // [cluster][loc][lane][addr]
  longint unsigned csref [NC][NGROUP][CD];
  logic [63:0]     pst [NC][NGROUP][8];   // PRNG stream states
  longint unsigned pw [2*N];              // psi^e
  localparam longint unsigned PR [6] = '{998244353, 754974721, 167772161,
                                         1004535809, 595591169, 645922817};
  localparam longint unsigned QI [3] = '{2013265921, 469762049, 1811939329};

  typedef enum int {M_NTT, M_INTT, M_AUTO, M_MODE_STALL, M_UNIT_STALL, M_BANK_STALL,
                    M_C8, M_C16, M_C32, M_MAD, M_KEYMULT, M_PMAC, M_CSUBC,
                    M_BCONV, M_RECON, M_DMA_WR, M_DMA_RD, M_NMECH} mech_e;
  int mech [M_NMECH];
  string mech_name [M_NMECH] = '{"NTT", "INTT", "automorphism", "NTT/INTT mode stall",
                                 "NTTU/AutoU switch stall", "bank-conflict stall",
                                 "8x plaintext", "16x plaintext", "32x plaintext",
                                 "EWE MAD", "EWE KEYMULT", "EWE PMAC_KM", "EWE CSUBC",
                                 "BConv", "RECON", "DMA write", "DMA read"};

  function automatic longint unsigned mq(longint unsigned a, longint unsigned b);
    return (a * b) % Q;
  endfunction
  function automatic longint unsigned powmod(longint unsigned a, longint unsigned e,
                                             longint unsigned q);
    longint unsigned r = 1;
    a = a % q;
    while (e != 0) begin
      if (e[0]) r = (r * a) % q;
      a = (a * a) % q;
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic logic [63:0] xs(input logic [63:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 7); x = x ^ (x << 17);
    return x;
  endfunction

  task automatic check(input string what, input longint unsigned got, input longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d (cycle %0d)", what, got, exp, cyc);
    end
  endtask

  // ---------------- drivers ----------------
  task automatic clear_inputs();
    for (int c = 0; c < NC; c++) begin
      ntt_cfg_start[c] = 0; prng_load[c] = 0; bct_we[c] = 0; bct_idx[c] = '0; bct_qhat[c] = '0;
      for (int j = 0; j < 6; j++) bct_b[c][j] = '0;
      ewe_valid[c] = 0; ewe_instr[c] = '0; fu_valid[c] = 0; fu_instr[c] = '0;
      bcv_valid[c] = 0; bcv_instr[c] = '0;
      for (int h = 0; h < NCH; h++) begin
        ch_valid[c][h] = 0; ch_rate[c][h] = COMPR_8X; ch_base[c][h] = '0; ch_idx[c][h] = '0;
        ch_data[c][h] = '0;
      end
      dma_wr_valid[c] = 0; dma_wr_loc[c] = LOC_MAIN; dma_wr_addr[c] = '0;
      dma_rd_valid[c] = 0; dma_rd_loc[c] = LOC_MAIN; dma_rd_addr[c] = '0;
      for (int l = 0; l < R; l++) dma_wr_data[c][l] = '0;
    end
  endtask

  task automatic wait_idle();
    int quiet = 0;
    while (quiet < 4) begin
      @(negedge clk);
      quiet = 0;
      for (int c = 0; c < NC; c++) if (busy[c]) quiet = -100;
      if (quiet == 0) quiet = 4;
    end
    repeat (2) @(negedge clk);
  endtask

  // write R words of one limb slice region (addresses base..base+R-1)
  task automatic dma_write(input loc_e loc, input int unsigned base);
    for (int t = 0; t < R; t++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        dma_wr_valid[c] = 1; dma_wr_loc[c] = loc; dma_wr_addr[c] = addr_t'(base + t);
        for (int l = 0; l < R; l++) dma_wr_data[c][l] = word_t'(mref[c][loc][l][base + t]);
      end
      #1 while (!dma_wr_ready[0]) begin @(negedge clk); #1; end
      mech[M_DMA_WR]++;
    end
    @(negedge clk);
    for (int c = 0; c < NC; c++) dma_wr_valid[c] = 0;
  endtask

  // read a region back and compare it with the reference
  task automatic dma_check(input string what, input loc_e loc, input int unsigned base,
                           input int unsigned len);
    for (int t = 0; t < len; t++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        dma_rd_valid[c] = 1; dma_rd_loc[c] = loc; dma_rd_addr[c] = addr_t'(base + t);
      end
      #1 while (!dma_rd_ready[0]) begin @(negedge clk); #1; end
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        dma_rd_valid[c] = 0;
        check({what, " rvalid"}, dma_rd_rvalid[c], 1);
        for (int l = 0; l < R; l++) check(what, dma_rd_data[c][l], mref[c][loc][l][base + t]);
      end
      mech[M_DMA_RD]++;
    end
  endtask

  task automatic issue_fu(input fu_instr_t fi);
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin fu_valid[c] = 1; fu_instr[c] = fi; end
    #1 while (!fu_ready[0]) begin @(negedge clk); #1; end
    @(negedge clk);
    for (int c = 0; c < NC; c++) fu_valid[c] = 0;
  endtask

  task automatic issue_ewe(input ewe_instr_t ei);
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin ewe_valid[c] = 1; ewe_instr[c] = ei; end
    #1 while (!ewe_ready[0]) begin @(negedge clk); #1; end
    @(negedge clk);
    for (int c = 0; c < NC; c++) ewe_valid[c] = 0;
  endtask

  task automatic issue_bcv(input bconv_instr_t bi);
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin bcv_valid[c] = 1; bcv_instr[c] = bi; end
    #1 while (!bcv_ready[0]) begin @(negedge clk); #1; end
    @(negedge clk);
    for (int c = 0; c < NC; c++) bcv_valid[c] = 0;
  endtask

  // ---------------- reference models ----------------
  // limb element n <-> (lane n / R, address base + n % R)
  function automatic longint unsigned el(int c, int loc, int base, int n);
    return mref[c][loc][n / R][base + n % R];
  endfunction

  task automatic model_ntt(int c, int sl, int sb, int dl, int db, bit inv);
    longint unsigned a [N], f [N];
    for (int n = 0; n < N; n++) a[n] = el(c, sl, sb, n);
    for (int k = 0; k < N; k++) begin
      f[k] = 0;
      if (!inv)
        for (int n = 0; n < N; n++) f[k] = (f[k] + mq(a[n], pw[(n * (2*k + 1)) % (2*N)])) % Q;
      else begin
        // a[n] = N^-1 sum_k f[k] psi^-(n(2k+1))
        for (int n = 0; n < N; n++) f[k] = (f[k] + mq(a[n], pw[(2*N - (k * (2*n + 1)) % (2*N)) % (2*N)])) % Q;
        f[k] = mq(f[k], powmod(N, Q - 2, Q));
      end
    end
    for (int n = 0; n < N; n++) mref[c][dl][n / R][db + n % R] = f[n];
  endtask

  task automatic model_aut(int c, int sl, int sb, int dl, int db, int g);
    longint unsigned o [N];
    for (int k = 0; k < N; k++) o[k] = el(c, sl, sb, ((((2*k + 1) * g) % (2*N)) - 1) / 2);
    for (int n = 0; n < N; n++) mref[c][dl][n / R][db + n % R] = o[n];
  endtask

  // one EWE instruction over all lanes, following the ISA definition
  task automatic model_ewe(int c, ewe_instr_t ei);
    for (int t = 0; t < ei.len; t++) begin
      for (int l = 0; l < R; l++) begin
        longint unsigned x [4], km [2], cst, rnd, d, r0, r1, r2;
        int g, s;
        g = l % NGROUP; s = l / NGROUP;
        for (int k = 0; k < 4; k++) x[k] = mref[c][LOC_MAIN][l][ei.x_base[k] + t];
        for (int k = 0; k < 2; k++) km[k] = mref[c][LOC_KM][l][ei.km_base[k] + t];
        cst = csref[c][g][ei.cst_base + t];
        rnd = 64'(pst[c][g][s][30:0]) % Q;
        r0 = 0; r1 = 0; r2 = 0;
        case (ei.op)
          EWE_MAD: r0 = (mq(x[0], x[1]) + x[2]) % Q;
          EWE_KEYMULT: begin
            r1 = (km[0] + mq(x[0], rnd)) % Q;
            r2 = (km[1] + mq(x[0], x[1])) % Q;
          end
          EWE_PMAC_KM: begin
            d  = (mq(cst, x[0]) + x[1]) % Q;
            r0 = d; r1 = mq(d, rnd);
            r2 = (mq(d, x[3]) + (mq(cst, x[2]) + km[0]) % Q) % Q;
          end
          EWE_CSUBC: r0 = mq((mq(ei.c0, x[0]) + Q - x[1]) % Q, ei.c1);
          default: ;
        endcase
        if (ei.wr_en)     mref[c][LOC_MAIN][l][ei.wr_base + t] = r0;
        if (ei.kmw_en[0]) mref[c][LOC_KM][l][ei.kmw_base[0] + t] = r1;
        if (ei.kmw_en[1]) mref[c][LOC_KM][l][ei.kmw_base[1] + t] = r2;
      end
      if (ei.prng_en)
        for (int g = 0; g < NGROUP; g++) for (int s = 0; s < 8; s++) pst[c][g][s] = xs(pst[c][g][s]);
    end
  endtask

  // ---------------- the program ----------------
  initial begin
    longint unsigned ps;
    logic [95:0] Q3, qh [3];
    longint unsigned bt [3][6];
    fu_instr_t fi;
    ewe_instr_t ei;
    bconv_instr_t bi;

    for (int k = 0; k < M_NMECH; k++) mech[k] = 0;
    ps = powmod(31, (Q - 1) / (2 * N), Q);
    pw[0] = 1;
    for (int e = 1; e < 2*N; e++) pw[e] = mq(pw[e-1], ps);
    Q3 = 96'(QI[0]) * 96'(QI[1]) * 96'(QI[2]);
    for (int i = 0; i < 3; i++) qh[i] = Q3 / 96'(QI[i]);
    clear_inputs();
    for (int c = 0; c < NC; c++) begin
      m[c].q = word_t'(Q); m[c].mu = mu_t'((128'(1) << BARRETT_K) / Q);
      psi[c] = word_t'(ps); psi_inv[c] = word_t'(powmod(ps, Q - 2, Q));
      n_inv[c] = word_t'(powmod(N, Q - 2, Q));
      prng_seed[c] = {$urandom, $urandom};
      for (int j = 0; j < 6; j++) begin
        bc_p[c][j].q = word_t'(PR[j]); bc_p[c][j].mu = mu_t'((128'(1) << BARRETT_K) / PR[j]);
        bc_qmodp[c][j] = word_t'(Q3 % 96'(PR[j]));
      end
      bc_qbig[c] = Q3;
      for (int loc = 0; loc < 3; loc++)
        for (int l = 0; l < R; l++)
          for (int a = 0; a < BD; a++) mref[c][loc][l][a] = $urandom % Q;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1. configuration ----
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin ntt_cfg_start[c] = 1; prng_load[c] = 1; end
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin ntt_cfg_start[c] = 0; prng_load[c] = 0; end
    for (int c = 0; c < NC; c++)
      for (int g = 0; g < NGROUP; g++)
        for (int s = 0; s < 8; s++) begin
          pst[c][g][s] = (prng_seed[c] ^ 64'(g)) ^ (64'(s) * 64'h9E37_79B9_7F4A_7C15);
          if (pst[c][g][s] == 0) pst[c][g][s] = 1;
        end
    while (!ntt_cfg_done[0]) @(negedge clk);

    // ---- 2. DMA: A, B into main, two KeyMult limbs ----
    dma_write(LOC_MAIN, 0);  dma_write(LOC_MAIN, 8);  dma_write(LOC_MAIN, 16);
    dma_write(LOC_MAIN, 24); dma_write(LOC_MAIN, 32);
    dma_write(LOC_KM, 0);    dma_write(LOC_KM, 16);
    // (regions at 0 and 16 overlap the first 16-word limb; the limbs used
    //  below are A = main 0..15, B = main 16..31, K0 = km 0..15, K1 = km 16..31)

    // ---- 3. NTTU / AutoU ----
    fi = '0;
    fi.unit = FU_NTTU; fi.inverse = 0; fi.src = LOC_MAIN; fi.src_base = 0;  fi.dst = LOC_MAIN; fi.dst_base = 32;
    issue_fu(fi);
    fi.src_base = 16; fi.dst_base = 48;
    issue_fu(fi);
    fi.inverse = 1; fi.src_base = 32; fi.dst_base = 64;
    issue_fu(fi);
    fi = '0; fi.unit = FU_AUTOU; fi.g = 18'd5; fi.src = LOC_MAIN; fi.src_base = 32; fi.dst = LOC_KM; fi.dst_base = 32;
    issue_fu(fi);
    fi = '0; fi.unit = FU_NTTU; fi.inverse = 0; fi.src = LOC_KM; fi.src_base = 32; fi.dst = LOC_BCONV; fi.dst_base = 0;
    issue_fu(fi);
    wait_idle();
    for (int c = 0; c < NC; c++) begin
      model_ntt(c, LOC_MAIN, 0, LOC_MAIN, 32, 0);
      model_ntt(c, LOC_MAIN, 16, LOC_MAIN, 48, 0);
      model_ntt(c, LOC_MAIN, 32, LOC_MAIN, 64, 1);
      model_aut(c, LOC_MAIN, 32, LOC_KM, 32, 5);
      model_ntt(c, LOC_KM, 32, LOC_BCONV, 0, 0);
    end
    dma_check("NTT", LOC_MAIN, 32, 32);
    dma_check("INTT", LOC_MAIN, 64, 16);
    dma_check("AutoU", LOC_KM, 32, 16);
    dma_check("NTT of AutoU", LOC_BCONV, 0, 16);
    for (int k = 0; k < N; k++) check("INTT(NTT(A)) = A", el(0, LOC_MAIN, 64, k), el(0, LOC_MAIN, 0, k));
    mech[M_NTT] = 3; mech[M_INTT] = 1; mech[M_AUTO] = 1;

    // ---- 4. plaintext constants over the HBM channel ----
    begin
      compr_e rates [3] = '{COMPR_32X, COMPR_8X, COMPR_16X};
      int unsigned bases [3] = '{0, 32, 48};
      int unsigned cnts [3] = '{16, 32, 16};
      for (int k = 0; k < 3; k++)
        for (int i = 0; i < cnts[k]; i++) begin
          @(negedge clk);
          for (int c = 0; c < NC; c++) begin
            int unsigned per;
            word_t w;
            w = word_t'($urandom % Q);
            ch_valid[c][0] = 1; ch_rate[c][0] = rates[k];
            ch_base[c][0] = CSAW'(bases[k]); ch_idx[c][0] = (CSAW+2)'(i); ch_data[c][0] = w;
            per = (rates[k] == COMPR_8X) ? 4 : (rates[k] == COMPR_16X) ? 2 : 1;
            for (int s = 0; s < 4; s++)
              if (s < NGROUP && (i % per) == (s % per)) csref[c][s][bases[k] + i / per] = w;
          end
          case (rates[k]) COMPR_8X: mech[M_C8]++; COMPR_16X: mech[M_C16]++; default: mech[M_C32]++; endcase
        end
      @(negedge clk);
      for (int c = 0; c < NC; c++) ch_valid[c][0] = 0;
      // words at 8x fill one group slot each, 16x two, 32x four (of which
      // NGROUP exist at this size)
      check("plaintext words", cnt_ptxt_words[0], 64);
      check("group fills", cnt_ptxt_fills[0], 16 * 2 + 32 / 2 + 16);
    end

    // ---- 5. element-wise operations ----
    ei = '0; ei.op = EWE_MAD; ei.len = 16'(R);
    ei.x_en = 4'b0111; ei.x_base[0] = 0; ei.x_base[1] = 32; ei.x_base[2] = 16;  // 0 and 32: one bank
    ei.wr_en = 1; ei.wr_base = 80;
    issue_ewe(ei); for (int c = 0; c < NC; c++) model_ewe(c, ei); mech[M_MAD]++;
    ei = '0; ei.op = EWE_KEYMULT; ei.len = 16'(R); ei.prng_en = 1;
    ei.x_en = 4'b0011; ei.x_base[0] = 16; ei.x_base[1] = 48;
    ei.km_en = 2'b11; ei.km_base[0] = 0; ei.km_base[1] = 16;
    ei.kmw_en = 2'b11; ei.kmw_base[0] = 48; ei.kmw_base[1] = 64;
    issue_ewe(ei); for (int c = 0; c < NC; c++) model_ewe(c, ei); mech[M_KEYMULT]++;
    wait_idle();
    ei = '0; ei.op = EWE_PMAC_KM; ei.len = 16'(R); ei.prng_en = 1; ei.cst_en = 1; ei.cst_base = 0;
    ei.x_en = 4'b1111; ei.x_base[0] = 0; ei.x_base[1] = 17; ei.x_base[2] = 34; ei.x_base[3] = 51;
    ei.km_en = 2'b01; ei.km_base[0] = 0;
    ei.wr_en = 1; ei.wr_base = 96; ei.kmw_en = 2'b11; ei.kmw_base[0] = 80; ei.kmw_base[1] = 100;   // banks 2+t and 4+t
    issue_ewe(ei); for (int c = 0; c < NC; c++) model_ewe(c, ei); mech[M_PMAC]++;
    wait_idle();
    ei = '0; ei.op = EWE_CSUBC; ei.len = 16'(R); ei.c0 = word_t'($urandom % Q); ei.c1 = word_t'($urandom % Q);
    ei.x_en = 4'b0011; ei.x_base[0] = 80; ei.x_base[1] = 96; ei.wr_en = 1; ei.wr_base = 112;
    issue_ewe(ei); for (int c = 0; c < NC; c++) model_ewe(c, ei); mech[M_CSUBC]++;
    wait_idle();
    // the 8x and 16x constant regions (8 words each)
    ei = '0; ei.op = EWE_PMAC_KM; ei.len = 16'd8; ei.cst_en = 1; ei.cst_base = 32;
    ei.x_en = 4'b1111; ei.x_base[0] = 1; ei.x_base[1] = 18; ei.x_base[2] = 35; ei.x_base[3] = 52;
    ei.wr_en = 1; ei.wr_base = 64;
    issue_ewe(ei); for (int c = 0; c < NC; c++) model_ewe(c, ei); mech[M_PMAC]++;
    ei.cst_base = 48; ei.wr_base = 72;
    issue_ewe(ei); for (int c = 0; c < NC; c++) model_ewe(c, ei); mech[M_PMAC]++;
    wait_idle();
    dma_check("MAD", LOC_MAIN, 80, 16);
    dma_check("KEYMULT", LOC_KM, 48, 32);
    dma_check("PMAC_KM r0", LOC_MAIN, 96, 16);
    dma_check("PMAC_KM r1", LOC_KM, 80, 16);
    dma_check("PMAC_KM r2", LOC_KM, 100, 16);
    dma_check("CSUBC", LOC_MAIN, 112, 16);
    dma_check("PMAC_KM 8x/16x", LOC_MAIN, 64, 16);

    // ---- 6a. plain base conversion: limbs at BC 0, 16, 32 -> 6 limbs at 48 ----
    dma_write(LOC_BCONV, 16); dma_write(LOC_BCONV, 32);
    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      for (int j = 0; j < 6; j++) bt[i][j] = $urandom % PR[j];
      for (int c = 0; c < NC; c++) begin
        bct_we[c] = 1; bct_idx[c] = 6'(i); bct_qhat[c] = '0;
        for (int j = 0; j < 6; j++) bct_b[c][j] = word_t'(bt[i][j]);
      end
    end
    @(negedge clk);
    for (int c = 0; c < NC; c++) bct_we[c] = 0;
    bi = '0; bi.nlimbs = 6'd3; bi.npairs = 16'(R / 2); bi.src_base = 0; bi.dst_base = 48; bi.stride = 16;
    issue_bcv(bi);
    wait_idle();
    for (int c = 0; c < NC; c++)
      for (int l = 0; l < R; l++)
        for (int w = 0; w < R; w++)
          for (int j = 0; j < 6; j++) begin
            longint unsigned acc;
            acc = 0;
            for (int i = 0; i < 3; i++)
              acc = (acc + (mref[c][LOC_BCONV][l][16*i + w] % PR[j]) * bt[i][j]) % PR[j];
            mref[c][LOC_BCONV][l][48 + 16*j + w] = acc;
          end
    dma_check("BConv", LOC_BCONV, 48, 96);
    mech[M_BCONV]++;

    // ---- 6b. RECON: residues of random integers below q0*q1*q2 ----
    for (int c = 0; c < NC; c++)
      for (int l = 0; l < R; l++)
        for (int w = 0; w < R; w++) begin
          logic [95:0] A;
          A = {$urandom, $urandom, $urandom} % Q3;
          for (int i = 0; i < 3; i++)
            mref[c][LOC_BCONV][l][16*i + w] =
              ((64'(A % 96'(QI[i]))) * powmod(64'(qh[i] % 96'(QI[i])), QI[i] - 2, QI[i])) % QI[i];
          for (int j = 0; j < 6; j++) begin
            longint unsigned am, qm;
            am = 64'(A % 96'(PR[j])); qm = 64'(Q3 % 96'(PR[j]));
            mref[c][LOC_BCONV][l][48 + 16*j + w] = (A >= (Q3 + 1) / 2) ? (am + PR[j] - qm) % PR[j] : am;
          end
        end
    dma_write(LOC_BCONV, 0); dma_write(LOC_BCONV, 16); dma_write(LOC_BCONV, 32);
    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        bct_we[c] = 1; bct_idx[c] = 6'(i); bct_qhat[c] = qh[i];
        for (int j = 0; j < 6; j++) bct_b[c][j] = word_t'(qh[i] % 96'(PR[j]));
      end
    end
    @(negedge clk);
    for (int c = 0; c < NC; c++) bct_we[c] = 0;
    bi.recon = 1;
    issue_bcv(bi);
    wait_idle();
    dma_check("RECON", LOC_BCONV, 48, 96);
    mech[M_RECON]++;

    // ---- mechanisms ----
    mech[M_MODE_STALL] = cnt_mode_stall[0];
    mech[M_UNIT_STALL] = cnt_unit_stall[0];
    mech[M_BANK_STALL] = cnt_bank_stall[0];
    for (int c = 1; c < NC; c++) begin
      check("clusters in lock-step (bank stalls)", cnt_bank_stall[c], cnt_bank_stall[0]);
      check("clusters in lock-step (mode stalls)", cnt_mode_stall[c], cnt_mode_stall[0]);
    end
    for (int k = 0; k < M_NMECH; k++) begin
      $display("%-26s %0d", mech_name[k], mech[k]);
      checks++;
      if (mech[k] == 0) begin failures++; $display("  never happened"); end
    end
    $display("cycles: %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
