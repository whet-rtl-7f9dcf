// tb_banked_sram: random test of the word-interleaved multi-port SRAM in the
// three configurations the lane uses: the main scratchpad (8 banks, 7 ports),
// the key-multiplication buffer (6 banks, 6 ports) and the base-conversion
// buffer (5 banks, 5 ports).  Depths are cut down so that addresses collide
// often.  Every cycle each port asks at random for a read or a write at a
// random address.  The expected grants are worked out here from the rule
// "a port gets its bank unless a lower-numbered port asks for the same bank";
// a granted read must return, one cycle later, the last value written there
// according to a reference array.  Writes are only made to locations whose
// value the reference knows, so all reads are checkable.  The number of
// refused requests (bank conflicts) is counted and must not be zero.
module tb_banked_sram;
  import whet_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, conflicts = 0;
  logic [2:0] done = '0;

  localparam int unsigned NB [3] = '{8, 6, 5};
  localparam int unsigned NP [3] = '{7, 6, 5};
  localparam int unsigned DEP [3] = '{64, 48, 40};

  for (genvar cfg = 0; cfg < 3; cfg++) begin : g_cfg
    localparam int unsigned NBANKS = NB[cfg];
    localparam int unsigned NPORTS = NP[cfg];
    localparam int unsigned DEPTH  = DEP[cfg];
    localparam int unsigned AW     = $clog2(DEPTH);
    logic [NPORTS-1:0] req, we, gnt;
    logic [AW-1:0]     addr  [NPORTS];
    word_t             wdata [NPORTS];
    word_t             rdata [NPORTS];
    word_t             ref_mem [DEPTH];

    banked_sram #(.DEPTH(DEPTH), .NBANKS(NBANKS), .NPORTS(NPORTS)) dut (.*);

    initial begin
      logic [NPORTS-1:0] exp_gnt, was_rd;
      word_t exp_rd [NPORTS];
      logic [NBANKS-1:0] taken;
      req = '0; we = '0;
      for (int p = 0; p < NPORTS; p++) begin addr[p] = '0; wdata[p] = '0; end
      // fill every location through port 0 so the reference knows all
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        req = 1; we = 1; addr[0] = AW'(a); wdata[0] = $urandom; ref_mem[a] = wdata[0];
      end
      @(negedge clk);
      req = '0;
      for (int it = 0; it < 3000; it++) begin
        @(negedge clk);
        taken = '0;
        for (int p = 0; p < NPORTS; p++) begin
          req[p]   = ($urandom % 4) != 0;
          we[p]    = ($urandom % 3) == 0;
          addr[p]  = AW'($urandom % DEPTH);
          wdata[p] = $urandom;
        end
        // two granted writes to one address cannot happen (same bank)
        #1;
        for (int p = 0; p < NPORTS; p++) begin
          exp_gnt[p] = req[p] && !taken[addr[p] % NBANKS];
          if (req[p]) taken[addr[p] % NBANKS] = 1'b1;
        end
        checks++;
        if (gnt !== exp_gnt) begin
          failures++;
          if (failures < 5) $display("cfg%0d gnt %b exp %b", cfg, gnt, exp_gnt);
        end
        conflicts += $countones(req & ~exp_gnt);
        was_rd = exp_gnt & ~we;
        for (int p = 0; p < NPORTS; p++) exp_rd[p] = ref_mem[addr[p]];
        @(posedge clk);
        for (int p = 0; p < NPORTS; p++)
          if (exp_gnt[p] && we[p]) ref_mem[addr[p]] = wdata[p];
        #1;
        for (int p = 0; p < NPORTS; p++)
          if (was_rd[p]) begin
            checks++;
            if (rdata[p] !== exp_rd[p]) begin
              failures++;
              if (failures < 5) $display("cfg%0d port%0d read %h exp %h", cfg, p, rdata[p], exp_rd[p]);
            end
          end
      end
      done[cfg] = 1'b1;
    end
  end

  initial begin
    wait (done == 3'b111);
    checks++;
    if (conflicts == 0) begin failures++; $display("no bank conflict seen"); end
    $display("bank conflicts: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
