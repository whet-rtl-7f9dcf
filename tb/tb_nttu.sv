// tb_nttu: self-checking test of the four-step NTT unit at R = 8 (N = 64).
//
// Configures the unit for q = 2013265921 and a primitive 2N-th root psi,
// streams three limbs back to back (forward, forward, then inverse of the
// first result), and compares every output word with a direct O(N^2)
// negacyclic NTT computed here.  It also checks the first-output latency
// (R + 2*log2(R) + 5 cycles), that back-to-back limbs of one direction leave
// no gap, and that switching to the inverse direction stalls the input until
// the unit is empty (mode_bubble seen).
module tb_nttu;
  import whet_pkg::*;
  localparam int unsigned R = 8;
  localparam int unsigned N = R * R;
  localparam longint unsigned Q = 64'd2013265921;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  modulus_t m;
  logic cfg_start, cfg_done, in_valid, in_inverse, in_ready, out_valid, mode_bubble, idle;
  word_t psi, psi_inv, n_inv;
  word_t in_data [R], out_data [R];

  nttu #(.R(R)) dut (.*);

  int checks = 0, failures = 0;

  function automatic longint unsigned mulq(longint unsigned a, longint unsigned b);
    return (a * b) % Q;
  endfunction
  function automatic longint unsigned powq(longint unsigned b, longint unsigned e);
    longint unsigned r = 1;
    while (e != 0) begin
      if (e[0]) r = mulq(r, b);
      b = mulq(b, b);
      e = e >> 1;
    end
    return r;
  endfunction

  longint unsigned a0 [N], a1 [N], f0 [N], f1 [N];
  longint unsigned got [3][N];
  int unsigned ocount = 0;
  int unsigned bubbles = 0;
  int first_in_cycle = -1, first_out_cycle = -1, cyc = 0;
  int out_cycles [3*R];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (mode_bubble) bubbles <= bubbles + 1;
    if (out_valid) begin
      for (int l = 0; l < R; l++) got[ocount / R][R*l + (ocount % R)] = out_data[l];
      out_cycles[ocount] = cyc;
      if (first_out_cycle < 0) first_out_cycle = cyc;
      ocount <= ocount + 1;
    end
  end

  task automatic send_limb(input longint unsigned v [N], input logic inv);
    for (int t = 0; t < R; t++) begin
      in_valid   <= 1'b1;
      in_inverse <= inv;
      for (int l = 0; l < R; l++) in_data[l] <= word_t'(v[R*l + t]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (first_in_cycle < 0) first_in_cycle = cyc - 1;
    end
    in_valid <= 1'b0;
  endtask

  initial begin
    longint unsigned ps;
    ps = powq(31, (Q - 1) / (2 * N));
    m.q  = word_t'(Q);
    m.mu = mu_t'((64'd1 << 62) / Q);
    psi = word_t'(ps); psi_inv = word_t'(powq(ps, Q - 2)); n_inv = word_t'(powq(N, Q - 2));
    cfg_start = 0; in_valid = 0; in_inverse = 0;
    for (int l = 0; l < R; l++) in_data[l] = '0;
    for (int n = 0; n < N; n++) begin
      a0[n] = $urandom % Q;
      a1[n] = $urandom % Q;
    end
    for (int k = 0; k < N; k++) begin
      f0[k] = 0; f1[k] = 0;
      for (int n = 0; n < N; n++) begin
        f0[k] = (f0[k] + mulq(a0[n], powq(ps, (n * (2 * k + 1)) % (2 * N)))) % Q;
        f1[k] = (f1[k] + mulq(a1[n], powq(ps, (n * (2 * k + 1)) % (2 * N)))) % Q;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    cfg_start <= 1; @(posedge clk); cfg_start <= 0;
    while (!cfg_done) @(posedge clk);
    send_limb(a0, 1'b0);
    send_limb(a1, 1'b0);
    send_limb(f0, 1'b1);
    while (ocount < 3 * R) @(posedge clk);
    repeat (2) @(posedge clk);
    for (int k = 0; k < N; k++) begin
      checks += 3;
      if (got[0][k] != f0[k]) begin failures++; if (failures < 5) $display("fwd0 k=%0d got %0d exp %0d", k, got[0][k], f0[k]); end
      if (got[1][k] != f1[k]) failures++;
      if (got[2][k] != a0[k]) begin failures++; if (failures < 5) $display("inv k=%0d got %0d exp %0d", k, got[2][k], a0[k]); end
    end
    checks++;
    if (first_out_cycle - first_in_cycle != int'(R + 2 * $clog2(R) + 5)) begin
      failures++; $display("latency %0d", first_out_cycle - first_in_cycle);
    end
    checks++;
    if (out_cycles[2*R-1] - out_cycles[0] != int'(2*R - 1)) begin failures++; $display("gap between limbs"); end
    checks++;
    if (!idle) begin failures++; $display("not idle after the last limb"); end
    checks++;
    if (bubbles == 0) begin failures++; $display("no mode bubble"); end
    $display("mode-switch bubble cycles: %0d", bubbles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
