// tb_ewe: random test of the extended element-wise engine.  Every cycle a
// random instruction (ADD, SUB, MUL, MAD, KEYMULT, PMAC_KM, CSUBC) with random
// operands is issued; the expected result is computed here with 64-bit
// arithmetic and compared two cycles later, when it must come out.
module tb_ewe;
  import whet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  modulus_t m;
  logic in_valid, out_valid;
  ewe_op_e op, out_op;
  ewe_in_t in;
  ewe_out_t out;
  ewe dut (.*);

  localparam longint unsigned Q = 64'd1073479681;
  int checks = 0, failures = 0;
  ewe_out_t expq [$];
  ewe_op_e  opq  [$];
  int unsigned seen [8];

  function automatic longint unsigned mq(longint unsigned a, longint unsigned b);
    return (a * b) % Q;
  endfunction

  function automatic ewe_out_t model(ewe_op_e o, ewe_in_t x);
    ewe_out_t r;
    longint unsigned d, pb;
    r = '0;
    case (o)
      EWE_ADD: r.r0 = word_t'((longint'(x.x0) + x.x1) % Q);
      EWE_SUB: r.r0 = word_t'((longint'(x.x0) + Q - x.x1) % Q);
      EWE_MUL: r.r0 = word_t'(mq(x.x0, x.x1));
      EWE_MAD: r.r0 = word_t'((mq(x.x0, x.x1) + x.x2) % Q);
      EWE_KEYMULT: begin
        r.r1 = word_t'((x.km0 + mq(x.x0, x.prng)) % Q);
        r.r2 = word_t'((x.km1 + mq(x.x0, x.x1)) % Q);
      end
      EWE_PMAC_KM: begin
        d  = (mq(x.cst, x.x0) + x.x1) % Q;
        pb = (mq(x.cst, x.x2) + x.km0) % Q;
        r.r0 = word_t'(d);
        r.r1 = word_t'(mq(d, x.prng));
        r.r2 = word_t'((mq(d, x.x3) + pb) % Q);
      end
      EWE_CSUBC: r.r0 = word_t'(mq((mq(x.c0, x.x0) + Q - x.x1) % Q, x.c1));
      default: r = '0;
    endcase
    return r;
  endfunction

  initial begin
    m.q = word_t'(Q); m.mu = mu_t'((64'd1 << 62) / Q);
    in_valid = 0; op = EWE_NOP; in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      ewe_in_t x;
      ewe_op_e o;
      o = ewe_op_e'(1 + ($urandom % 7));
      x.x0 = word_t'($urandom % Q); x.x1 = word_t'($urandom % Q);
      x.x2 = word_t'($urandom % Q); x.x3 = word_t'($urandom % Q);
      x.km0 = word_t'($urandom % Q); x.km1 = word_t'($urandom % Q);
      x.cst = word_t'($urandom % Q); x.prng = word_t'($urandom % Q);
      x.c0 = word_t'($urandom % Q); x.c1 = word_t'($urandom % Q);
      in_valid <= 1; op <= o; in <= x;
      expq.push_back(model(o, x));
      opq.push_back(o);
      seen[o]++;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    for (int o = 1; o < 8; o++) begin
      checks++;
      if (seen[o] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned issue_cyc [$];
  int unsigned cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid) issue_cyc.push_back(cyc);
    if (out_valid) begin
      ewe_out_t e;
      ewe_op_e  eo;
      int unsigned ic;
      e = expq.pop_front();
      eo = opq.pop_front();
      ic = issue_cyc.pop_front();
      checks += 3;
      if (out_op != eo) failures++;
      if (out != e) begin
        failures++;
        if (failures < 6) $display("op %s got %h exp %h", eo.name(), out, e);
      end
      if (cyc - ic != 2) failures++;
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
