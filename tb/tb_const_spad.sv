// tb_const_spad: random test of the constant scratchpad of one lane group.
// Random words are written to random addresses of a reduced-depth array and
// kept in a reference copy; reads are issued at random, and one cycle later
// all eight broadcast outputs must carry the addressed word.  When no read is
// issued the outputs must hold their previous value.
module tb_const_spad;
  import whet_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int unsigned DEPTH = 96, LANES = 8, AW = $clog2(DEPTH);
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  word_t wdata;
  word_t bcast [LANES];
  const_spad #(.DEPTH(DEPTH), .LANES(LANES)) dut (.*);

  int checks = 0, failures = 0;
  word_t ref_mem [DEPTH];
  word_t exp_out;

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = $urandom; ref_mem[a] = wdata;
    end
    @(negedge clk);
    we = 0; re = 1; raddr = '0;
    @(posedge clk);
    exp_out = ref_mem[0];
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      we = ($urandom % 2) == 0; waddr = AW'($urandom % DEPTH); wdata = $urandom;
      re = ($urandom % 3) != 0; raddr = AW'($urandom % DEPTH);
      if (we && re && waddr == raddr) re = 0;
      @(posedge clk);
      if (re) exp_out = ref_mem[raddr];
      if (we) ref_mem[waddr] = wdata;
      #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (bcast[l] !== exp_out) begin
          failures++;
          if (failures < 5) $display("lane %0d got %h exp %h", l, bcast[l], exp_out);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
