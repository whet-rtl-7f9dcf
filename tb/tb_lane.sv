// tb_lane: directed and random test of one vector lane with reduced memory
// depths.  Through the functional-unit write and read ports it loads and
// reads back all three memories; it then runs element-wise operations (MAD,
// KEYMULT with its two results going to the KeyMult buffer, PMAC_KM, CSUBC),
// checks each result by reading it back and comparing with 64-bit modular
// arithmetic computed here; it provokes bank conflicts (two EWE reads in one
// bank, an FU read against an EWE read) and checks that the element does not
// issue or the lower-priority read is refused; and it runs a two-limb base
// conversion out of the BConv buffer and drains its twelve results back into
// the buffer, checking them against sum_i x_i * b_ij mod p_j.
module tb_lane;
  import whet_pkg::*;
  localparam int unsigned MD = 256, KD = 96, BD = 80;
  localparam longint unsigned Q = 64'd1073479681;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  modulus_t m;
  logic ewe_req, ewe_issue, ewe_out_valid;
  ewe_op_e ewe_op;
  port_req_t ewe_rd [4], ewe_km_rd [2], ewe_wr, ewe_km_wr [2];
  word_t ewe_c0, ewe_c1, cst_word, prng_word;
  port_req_t fu_rd, fu_wr;
  loc_e fu_src, fu_dst;
  logic fu_rd_gnt;
  word_t fu_rd_data, fu_wr_data;
  port_req_t bcv_rd [2], bcv_wr;
  logic bcv_rd_gnt, bcv_valid, bcv_first, bcv_last, bcv_recon, bcv_out_valid;
  modulus_t bcv_p [6];
  word_t bcv_qmodp [6], bcv_b [6];
  logic [95:0] bcv_qbig, bcv_qhat;
  logic [3:0] bcv_wr_sel;

  lane #(.MAIN_DEPTH(MD), .KM_DEPTH(KD), .BC_DEPTH(BD)) dut (.*);

  int checks = 0, failures = 0, n_conflict = 0;
  word_t mref [MD], kref [KD];
  localparam longint unsigned PR [6] = '{998244353, 754974721, 167772161,
                                         1004535809, 595591169, 645922817};

  task automatic check(input string what, input longint unsigned got, input longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic idle_inputs();
    ewe_req = 0; ewe_op = EWE_NOP; ewe_c0 = '0; ewe_c1 = '0; cst_word = '0; prng_word = '0;
    for (int i = 0; i < 4; i++) ewe_rd[i] = '0;
    for (int i = 0; i < 2; i++) begin ewe_km_rd[i] = '0; ewe_km_wr[i] = '0; bcv_rd[i] = '0; end
    ewe_wr = '0; fu_rd = '0; fu_wr = '0; fu_src = LOC_MAIN; fu_dst = LOC_MAIN; fu_wr_data = '0;
    bcv_valid = 0; bcv_first = 0; bcv_last = 0; bcv_recon = 0; bcv_wr = '0; bcv_wr_sel = '0;
    for (int j = 0; j < 6; j++) bcv_b[j] = '0;
    bcv_qhat = '0;
  endtask

  task automatic fu_write(input loc_e loc, input int unsigned a, input word_t d);
    @(negedge clk);
    fu_wr.en = 1; fu_wr.addr = addr_t'(a); fu_dst = loc; fu_wr_data = d;
    @(negedge clk);
    fu_wr = '0;
  endtask

  task automatic fu_read(input loc_e loc, input int unsigned a, output word_t d);
    @(negedge clk);
    fu_rd.en = 1; fu_rd.addr = addr_t'(a); fu_src = loc;
    #1 check("fu read grant", fu_rd_gnt, 1);
    @(negedge clk);
    fu_rd = '0;
    d = fu_rd_data;
  endtask

  // one EWE element: x addresses (main), km addresses (KeyMult), destinations
  task automatic ewe_elem(input ewe_op_e op, input int unsigned xa [4], input logic [3:0] xen,
                          input int unsigned ka [2], input logic [1:0] ken,
                          input int unsigned wa, input logic wen,
                          input int unsigned kwa [2], input logic [1:0] kwen,
                          input word_t c0, input word_t c1, input word_t cst, input word_t rnd);
    @(negedge clk);
    ewe_req = 1; ewe_op = op; ewe_c0 = c0; ewe_c1 = c1; prng_word = rnd;
    for (int i = 0; i < 4; i++) begin ewe_rd[i].en = xen[i]; ewe_rd[i].addr = addr_t'(xa[i]); end
    for (int i = 0; i < 2; i++) begin
      ewe_km_rd[i].en = ken[i]; ewe_km_rd[i].addr = addr_t'(ka[i]);
      ewe_km_wr[i].en = kwen[i]; ewe_km_wr[i].addr = addr_t'(kwa[i]);
    end
    ewe_wr.en = wen; ewe_wr.addr = addr_t'(wa);
    #1 check("ewe issue", ewe_issue, 1);
    @(negedge clk);
    ewe_req = 0; cst_word = cst;
    for (int i = 0; i < 4; i++) ewe_rd[i] = '0;
    for (int i = 0; i < 2; i++) begin ewe_km_rd[i] = '0; ewe_km_wr[i] = '0; end
    ewe_wr = '0;
    repeat (3) @(negedge clk);
  endtask

  function automatic longint unsigned mm(longint unsigned a, longint unsigned b);
    return (a * b) % Q;
  endfunction

  initial begin
    word_t d;
    int unsigned xa [4], ka [2], kwa [2];
    longint unsigned ex, dd;
    m.q = word_t'(Q); m.mu = mu_t'((128'(1) << BARRETT_K) / Q);
    for (int j = 0; j < 6; j++) begin
      bcv_p[j].q = word_t'(PR[j]); bcv_p[j].mu = mu_t'((128'(1) << BARRETT_K) / PR[j]);
      bcv_qmodp[j] = '0;
    end
    bcv_qbig = '0;
    idle_inputs();
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- fill and read back main and KeyMult memories ----
    for (int a = 0; a < MD; a++) begin mref[a] = word_t'($urandom % Q); fu_write(LOC_MAIN, a, mref[a]); end
    for (int a = 0; a < KD; a++) begin kref[a] = word_t'($urandom % Q); fu_write(LOC_KM, a, kref[a]); end
    for (int it = 0; it < 50; it++) begin
      int unsigned a;
      a = $urandom % MD; fu_read(LOC_MAIN, a, d); check("main readback", d, mref[a]);
      a = $urandom % KD; fu_read(LOC_KM, a, d);   check("km readback", d, kref[a]);
    end

    // ---- random element-wise operations ----
    for (int it = 0; it < 200; it++) begin
      ewe_op_e op;
      word_t c0, c1, cst, rnd;
      int unsigned wa;
      // x reads in distinct banks (addresses 8 apart in bank terms)
      for (int i = 0; i < 4; i++) xa[i] = (($urandom % (MD / 8)) * 8 + i) % MD;
      for (int i = 0; i < 2; i++) ka[i] = (($urandom % (KD / 6)) * 6 + i) % KD;
      kwa[0] = (($urandom % (KD / 6)) * 6 + 2); kwa[1] = (($urandom % (KD / 6)) * 6 + 3);
      wa = $urandom % MD;
      c0 = word_t'($urandom % Q); c1 = word_t'($urandom % Q);
      cst = word_t'($urandom % Q); rnd = word_t'($urandom % Q);
      case (it % 4)
        0: begin
          op = EWE_MAD;
          ewe_elem(op, xa, 4'b0111, ka, 2'b00, wa, 1, kwa, 2'b00, c0, c1, cst, rnd);
          ex = (mm(mref[xa[0]], mref[xa[1]]) + mref[xa[2]]) % Q;
          mref[wa] = word_t'(ex);
          fu_read(LOC_MAIN, wa, d); check("MAD", d, ex);
        end
        1: begin
          op = EWE_KEYMULT;
          ewe_elem(op, xa, 4'b0011, ka, 2'b11, wa, 0, kwa, 2'b11, c0, c1, cst, rnd);
          ex = (kref[ka[0]] + mm(mref[xa[0]], rnd)) % Q;
          dd = (kref[ka[1]] + mm(mref[xa[0]], mref[xa[1]])) % Q;
          kref[kwa[0]] = word_t'(ex); kref[kwa[1]] = word_t'(dd);
          fu_read(LOC_KM, kwa[0], d); check("KEYMULT r1", d, ex);
          fu_read(LOC_KM, kwa[1], d); check("KEYMULT r2", d, dd);
        end
        2: begin
          longint unsigned r1, r2;
          op = EWE_PMAC_KM;
          ewe_elem(op, xa, 4'b1111, ka, 2'b01, wa, 1, kwa, 2'b11, c0, c1, cst, rnd);
          dd = (mm(cst, mref[xa[0]]) + mref[xa[1]]) % Q;
          r1 = mm(dd, rnd);
          r2 = (mm(dd, mref[xa[3]]) + (mm(cst, mref[xa[2]]) + kref[ka[0]]) % Q) % Q;
          mref[wa] = word_t'(dd); kref[kwa[0]] = word_t'(r1); kref[kwa[1]] = word_t'(r2);
          fu_read(LOC_MAIN, wa, d); check("PMAC r0", d, dd);
          fu_read(LOC_KM, kwa[0], d); check("PMAC r1", d, r1);
          fu_read(LOC_KM, kwa[1], d); check("PMAC r2", d, r2);
        end
        default: begin
          op = EWE_CSUBC;
          ewe_elem(op, xa, 4'b0011, ka, 2'b00, wa, 1, kwa, 2'b00, c0, c1, cst, rnd);
          ex = mm((mm(c0, mref[xa[0]]) + Q - mref[xa[1]]) % Q, c1);
          mref[wa] = word_t'(ex);
          fu_read(LOC_MAIN, wa, d); check("CSUBC", d, ex);
        end
      endcase
    end

    // ---- bank conflicts ----
    // x0 and x1 in one bank (3 and 11): the first attempt must not issue,
    // the second must, and the sum must use both operands
    @(negedge clk);
    ewe_req = 1; ewe_op = EWE_ADD;
    ewe_rd[0].en = 1; ewe_rd[0].addr = 16'd3; ewe_rd[1].en = 1; ewe_rd[1].addr = 16'd11;
    ewe_wr.en = 1; ewe_wr.addr = 16'd100;
    fu_rd.en = 1; fu_rd.addr = 16'd19; fu_src = LOC_MAIN;   // bank 3, as x0
    #1 check("EWE reads in one bank must not issue", ewe_issue, 0);
    check("FU read loses its bank to the EWE", fu_rd_gnt, 0);
    n_conflict += !ewe_issue;
    n_conflict += !fu_rd_gnt;
    fu_rd = '0;
    @(negedge clk);
    #1 check("EWE issues on the second attempt", ewe_issue, 1);
    @(negedge clk);
    ewe_req = 0; ewe_rd[0] = '0; ewe_rd[1] = '0; ewe_wr = '0;
    repeat (3) @(negedge clk);
    ex = (64'(mref[3]) + mref[11]) % Q; mref[100] = word_t'(ex);
    fu_read(LOC_MAIN, 100, d); check("ADD after conflict", d, ex);
    repeat (2) @(negedge clk);

    // ---- base conversion: two limbs, one coefficient pair ----
    begin
      word_t xv [2][2], bv [2][6];
      longint unsigned ey [2][6];
      for (int i = 0; i < 2; i++) for (int r = 0; r < 2; r++) begin
        xv[i][r] = $urandom; fu_write(LOC_BCONV, 10 * i + r, xv[i][r]);
      end
      for (int i = 0; i < 2; i++) for (int j = 0; j < 6; j++) bv[i][j] = word_t'($urandom % PR[j]);
      for (int r = 0; r < 2; r++) for (int j = 0; j < 6; j++)
        ey[r][j] = ((64'(xv[0][r]) % PR[j]) * bv[0][j] + (64'(xv[1][r]) % PR[j]) * bv[1][j]) % PR[j];
      for (int i = 0; i < 2; i++) begin
        @(negedge clk);
        bcv_valid = 1; bcv_first = (i == 0); bcv_last = (i == 1);
        for (int r = 0; r < 2; r++) begin bcv_rd[r].en = 1; bcv_rd[r].addr = addr_t'(10 * i + r); end
        #1 check("bconv read grant", bcv_rd_gnt, 1);
        @(negedge clk);
        bcv_valid = 0; bcv_rd[0] = '0; bcv_rd[1] = '0;
        bcv_b = bv[i];   // constants follow the read by one cycle
      end
      while (!bcv_out_valid) @(negedge clk);
      bcv_b = '{default: '0};
      for (int s = 0; s < 12; s++) begin
        bcv_wr.en = 1; bcv_wr.addr = addr_t'(40 + s); bcv_wr_sel = 4'(s);
        @(negedge clk);
      end
      bcv_wr = '0;
      for (int s = 0; s < 12; s++) begin
        fu_read(LOC_BCONV, 40 + s, d);
        check("bconv result", d, ey[s / 6][s % 6]);
      end
    end

    check("bank conflicts seen", n_conflict, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
