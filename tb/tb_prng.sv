// tb_prng: checks the per-group random-number generator against its
// definition.  The reference keeps its own copy of the eight xorshift64
// streams (x ^= x<<13; x ^= x>>7; x ^= x<<17), seeded with
// seed ^ (k * 0x9E3779B97F4A7C15), and reduces the low 31 bits of each state
// modulo q with the % operator.  The test checks the value after reset, after
// a load, after every advance and while the generator is held.
module tb_prng;
  import whet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int unsigned NOUT = 8;
  localparam longint unsigned Q = 64'd2013265921;
  modulus_t m;
  logic load, next;
  logic [63:0] seed;
  word_t rnd [NOUT];
  prng #(.NOUT(NOUT)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] st [NOUT];

  function automatic logic [63:0] xs(input logic [63:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 7); x = x ^ (x << 17);
    return x;
  endfunction

  task automatic seed_ref(input logic [63:0] sd);
    for (int k = 0; k < NOUT; k++) begin
      st[k] = sd ^ (64'(k) * 64'h9E37_79B9_7F4A_7C15);
      if (st[k] == 0) st[k] = 1;
    end
  endtask

  task automatic compare();
    for (int k = 0; k < NOUT; k++) begin
      checks++;
      if (64'(rnd[k]) != 64'(st[k][30:0]) % Q) begin
        failures++;
        if (failures < 5) $display("stream %0d got %0d exp %0d", k, rnd[k], 64'(st[k][30:0]) % Q);
      end
    end
  endtask

  initial begin
    m.q = word_t'(Q);
    m.mu = mu_t'((128'(1) << BARRETT_K) / Q);
    load = 0; next = 0; seed = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    seed_ref(64'h0123_4567_89AB_CDEF);
    compare();
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      if (it % 100 == 0) begin
        load = 1; next = 0; seed = {$urandom, $urandom};
        if (it == 200) seed = 64'h0;  // stream 0 must fall back to 1
      end else begin
        load = 0; next = ($urandom % 4) != 0;
      end
      @(posedge clk);
      if (load) seed_ref(seed);
      else if (next) for (int k = 0; k < NOUT; k++) st[k] = xs(st[k]);
      #1 compare();
    end
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
