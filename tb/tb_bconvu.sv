// tb_bconvu: checks the base-conversion unit in both of its modes.
//
// Plain BConv: conversions of random length (1 to 12 input limbs) with random
// coefficients and constants; the expected output is
// sum_i x_i * b_ij mod p_j, computed here term by term with 64-bit modular
// arithmetic.
// RECON: a random integer A below Q = q0*q1*q2 is split into residues
// a_i = A mod q_i, scaled to y_i = a_i * (Q/q_i)^-1 mod q_i (the inverse by
// Fermat's little theorem); the unit must return the centred value of A
// (A, or A - Q when A >= Q/2) reduced modulo each output prime.
// Conversions are sent back to back and mixed between the modes; the test
// checks that every result appears exactly 8 cycles after its last input.
module tb_bconvu;
  import whet_pkg::*;
  localparam int unsigned ROWS = 2, COLS = 6, NCONV = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  modulus_t    p [COLS];
  word_t       q_mod_p [COLS];
  logic [95:0] q_big, qhat_big;
  logic        in_valid, in_first, in_last, recon, out_valid;
  word_t       x [ROWS], b [COLS];
  word_t       y [ROWS][COLS];
  bconvu dut (.*);

  localparam longint unsigned PR [COLS] = '{998244353, 754974721, 167772161,
                                            1004535809, 595591169, 645922817};
  localparam longint unsigned QI [3] = '{2013265921, 469762049, 1811939329};

  int checks = 0, failures = 0, n_recon = 0, n_plain = 0, n_neg = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  typedef struct { word_t v [ROWS][COLS]; int due; } exp_t;
  exp_t expq [$];

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

  initial begin
    logic [95:0] Q, A [ROWS], qh [3];
    longint unsigned yv [3][ROWS];
    exp_t e;
    Q = 96'(QI[0]) * 96'(QI[1]) * 96'(QI[2]);
    for (int i = 0; i < 3; i++) qh[i] = Q / 96'(QI[i]);
    for (int j = 0; j < COLS; j++) begin
      p[j].q  = word_t'(PR[j]);
      p[j].mu = mu_t'((128'(1) << BARRETT_K) / PR[j]);
      q_mod_p[j] = word_t'(Q % 96'(PR[j]));
    end
    q_big = Q;
    in_valid = 0; in_first = 0; in_last = 0; recon = 0; qhat_big = '0;
    for (int r = 0; r < ROWS; r++) x[r] = '0;
    for (int j = 0; j < COLS; j++) b[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCONV; c++) begin
      bit is_rec;
      int unsigned len;
      is_rec = ($urandom % 3) == 0;
      len = is_rec ? 3 : 1 + $urandom % 12;
      if (is_rec) begin
        n_recon++;
        for (int r = 0; r < ROWS; r++) begin
          A[r] = {$urandom, $urandom, $urandom} % Q;
          if (($urandom % 4) == 0) A[r] = Q - 96'(1 + $urandom % 1000);  // near Q
          if (A[r] >= (Q + 1) / 2) n_neg++;
          for (int i = 0; i < 3; i++)
            yv[i][r] = ((64'(A[r] % 96'(QI[i]))) *
                        powmod(64'(qh[i] % 96'(QI[i])), QI[i] - 2, QI[i])) % QI[i];
          for (int j = 0; j < COLS; j++) begin
            longint unsigned am, qm;
            am = 64'(A[r] % 96'(PR[j]));
            qm = 64'(Q % 96'(PR[j]));
            e.v[r][j] = (A[r] >= (Q + 1) / 2) ? word_t'((am + PR[j] - qm) % PR[j])
                                              : word_t'(am);
          end
        end
      end else begin
        n_plain++;
        for (int r = 0; r < ROWS; r++) for (int j = 0; j < COLS; j++) e.v[r][j] = '0;
      end
      for (int i = 0; i < len; i++) begin
        in_valid = 1; in_first = (i == 0); in_last = (i == len - 1); recon = is_rec;
        if (is_rec) begin
          for (int r = 0; r < ROWS; r++) x[r] = word_t'(yv[i][r]);
          for (int j = 0; j < COLS; j++) b[j] = word_t'(qh[i] % 96'(PR[j]));
          qhat_big = qh[i];
        end else begin
          for (int r = 0; r < ROWS; r++) x[r] = $urandom;
          for (int j = 0; j < COLS; j++) b[j] = word_t'($urandom % PR[j]);
          qhat_big = {$urandom, $urandom, $urandom};
          for (int r = 0; r < ROWS; r++)
            for (int j = 0; j < COLS; j++)
              e.v[r][j] = word_t'((64'(e.v[r][j]) + (64'(x[r]) % PR[j]) * 64'(b[j])) % PR[j]);
        end
        @(negedge clk);
        // cyc already counts the edge that took in_last: output 8 cycles
        // after the in_last cycle is 7 edges later
        if (i == len - 1) begin e.due = cyc + 7; expq.push_back(e); end
      end
      // occasionally leave a gap
      if (($urandom % 4) == 0) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = expq.pop_front();
        if (cyc != e.due) begin
          failures++;
          if (failures < 5) $display("result at cycle %0d, expected %0d", cyc, e.due);
        end
        for (int r = 0; r < ROWS; r++)
          for (int j = 0; j < COLS; j++) begin
            checks++;
            if (y[r][j] !== e.v[r][j]) begin
              failures++;
              if (failures < 8) $display("y[%0d][%0d]=%0d exp %0d", r, j, y[r][j], e.v[r][j]);
            end
          end
      end
      if (n_recon + n_plain == NCONV && expq.size() == 0) begin
        checks++;
        if (n_recon == 0 || n_neg == 0) failures++;
        $display("plain %0d, recon %0d (negative lifts %0d)", n_plain, n_recon, n_neg);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
