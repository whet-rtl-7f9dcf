// tb_ptxt_fanout: exhaustive-in-index test of the plaintext fan-out that
// expands a compressed plaintext stream into the constant scratchpads.  For
// every compression rate and many word indices the expected set of written
// group slots and the write address are worked out here from the rule
// "at compression c (8, 16, 32) a word is stored in c/8 of the four slots,
// slot s receiving words i with i mod (32/c) == s mod (32/c), at address
// base + i / (32/c)"; the data on every slot must be the input word.
module tb_ptxt_fanout;
  import whet_pkg::*;
  localparam int unsigned AW = 13;
  logic in_valid;
  compr_e rate;
  logic [AW-1:0] base;
  logic [AW+1:0] idx;
  word_t in_data;
  logic [3:0] we;
  logic [AW-1:0] waddr [4];
  word_t wdata [4];
  ptxt_fanout #(.AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  int hits [3];

  initial begin
    for (int r = 0; r < 3; r++) begin
      hits[r] = 0;
      for (int it = 0; it < 3000; it++) begin
        int unsigned per;
        logic [3:0] ew;
        logic [AW-1:0] ea;
        rate = compr_e'(r);
        per = (r == 0) ? 4 : (r == 1) ? 2 : 1;   // words sharing one address
        in_valid = ($urandom % 8) != 0;
        base = AW'($urandom % 1024);
        idx = (AW+2)'($urandom % 4096);
        in_data = $urandom;
        #1;
        ew = '0;
        for (int s = 0; s < 4; s++) if (in_valid && (idx % per) == (s % per)) ew[s] = 1'b1;
        ea = base + AW'(idx / per);
        checks++;
        if (we !== ew) begin
          failures++;
          if (failures < 5) $display("rate %0d idx %0d we %b exp %b", r, idx, we, ew);
        end
        for (int s = 0; s < 4; s++)
          if (ew[s]) begin
            hits[r]++;
            checks++;
            if (waddr[s] !== ea || wdata[s] !== in_data) begin
              failures++;
              if (failures < 5) $display("rate %0d slot %0d addr %0d exp %0d", r, s, waddr[s], ea);
            end
          end
        #1;
      end
    end
    // the expansion factor: slot writes per valid word must be 1, 2, 4
    checks++;
    if (!(hits[1] > hits[0] && hits[2] > hits[1])) failures++;
    $display("slot writes per rate: %0d %0d %0d", hits[0], hits[1], hits[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
