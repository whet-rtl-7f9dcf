// tb_mmad: random test of the MMAD unit against (a*b + c) % q computed with
// 64-bit integer arithmetic, for several primes between 2^22 and 2^31,
// including the extreme operands q-1.  Checks the one-cycle latency and that
// en low holds the output.
module tb_mmad;
  import whet_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  modulus_t m;
  logic en;
  word_t a, b, c, y;
  mmad dut (.*);

  int checks = 0, failures = 0;
  longint unsigned primes [4] = '{64'd2013265921, 64'd469762049, 64'd1073479681, 64'd4194353};

  initial begin
    en = 1;
    for (int pi = 0; pi < 4; pi++) begin
      longint unsigned q;
      q = primes[pi];
      m.q = word_t'(q);
      m.mu = mu_t'((64'd1 << 62) / q);
      for (int it = 0; it < 400; it++) begin
        longint unsigned ea;
        word_t na, nb, nc;
        if (it == 0) begin na = word_t'(q-1); nb = word_t'(q-1); nc = word_t'(q-1); end
        else begin na = word_t'($urandom % q); nb = word_t'($urandom % q); nc = word_t'($urandom % q); end
        ea = (64'(na) * 64'(nb) + 64'(nc)) % q;
        @(negedge clk);
        a = na; b = nb; c = nc;
        @(negedge clk);
        checks++;
        if (y != word_t'(ea)) begin
          failures++;
          if (failures < 5) $display("q=%0d a=%0d b=%0d c=%0d got %0d exp %0d", q, na, nb, nc, y, ea);
        end
      end
    end
    // hold when disabled
    begin
      word_t held;
      held = y;
      @(negedge clk);
      en = 0; a = 5; b = 7; c = 1;
      repeat (3) @(negedge clk);
      checks++;
      if (y != held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
