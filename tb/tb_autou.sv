// tb_autou: checks the automorphism unit at R = 8 (N = 64).  Four limbs of
// random data are streamed back to back, each with its own odd g (including
// g = 2N-1, the conjugation).  The expected output is worked out here
// directly from the rule out[k] = in[j] with 2j+1 = (2k+1)*g mod 2N, with
// element n in lane n / R at cycle n % R.  The test also checks that each
// permuted limb leaves as R consecutive vectors starting two clock edges
// after the edge that takes its last input vector, and that idle returns when everything has left.
module tb_autou;
  import whet_pkg::*;
  localparam int unsigned R = 8, N = R * R, LOGN = 2 * $clog2(R), NL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid, idle;
  logic [LOGN:0] g;
  word_t in_data [R], out_data [R];
  autou #(.R(R)) dut (.*);

  int checks = 0, failures = 0;
  word_t limb [NL][N];
  int unsigned gs [NL] = '{5, 25, 2*N-1, 3};
  int unsigned last_in [NL];
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    in_valid = 0; g = '0;
    for (int l = 0; l < R; l++) in_data[l] = '0;
    for (int i = 0; i < NL; i++) for (int n = 0; n < N; n++) limb[i][n] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (!idle) begin failures++; $display("not idle after reset"); end
    for (int i = 0; i < NL; i++)
      for (int t = 0; t < R; t++) begin
        in_valid = 1; g = (LOGN+1)'(gs[i]);
        for (int l = 0; l < R; l++) in_data[l] = limb[i][l*R + t];
        @(negedge clk);
        if (t == R-1) last_in[i] = cyc;
      end
    in_valid = 0;
  end

  // checker: samples at the falling edge, after the outputs have settled
  int unsigned oi = 0, ot = 0, first_out [NL];
  always @(negedge clk) begin
    if (rst_n && out_valid && oi < NL) begin
      if (ot == 0) begin
        first_out[oi] = cyc;
        checks++;
        if (cyc - last_in[oi] != 2) begin
          failures++;
          $display("limb %0d latency %0d", oi, cyc - last_in[oi]);
        end
      end else begin
        checks++;   // consecutive vectors
        if (cyc != first_out[oi] + ot) failures++;
      end
      for (int l = 0; l < R; l++) begin
        int unsigned k, j;
        k = l*R + ot;
        j = (((2*k+1) * gs[oi]) % (2*N) - 1) / 2;
        checks++;
        if (out_data[l] !== limb[oi][j]) begin
          failures++;
          if (failures < 5) $display("limb %0d k %0d got %h exp %h", oi, k, out_data[l], limb[oi][j]);
        end
      end
      if (ot == R-1) begin ot = 0; oi++; end else ot++;
    end
  end

  initial begin
    wait (oi == NL);
    repeat (3) @(negedge clk);
    checks++;
    if (!idle) begin failures++; $display("not idle at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
