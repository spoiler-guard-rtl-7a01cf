// tb_sg_mask_gen: feeds the mask generator from a testbench xorshift that steps
// whenever rnd_next is high, rebuilds the expected mask from the same random words
// with an independent reference (scale to an index, probe upward for a free bit),
// and checks the mask, its population count and the SEL_BITS-cycle run time.
module tb_sg_mask_gen;
  import sg_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [63:0] rnd = 64'h1234_5678_9ABC_DEF1;
  logic rnd_next, busy, done;
  logic [POOL_BITS-1:0] mask_out;
  int checks = 0, failures = 0;

  sg_mask_gen dut (.*);

  always #5 clk = ~clk;

  always_ff @(posedge clk)
    if (rnd_next) begin
      logic [63:0] x;
      x = rnd; x ^= x << 13; x ^= x >> 7; x ^= x << 17;
      rnd <= x;
    end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [POOL_BITS-1:0] exp;
    int cyc, idx;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int run = 0; run < 300; run++) begin
      #1 start = 1;
      @(posedge clk); #1 start = 0;          // run begins at this edge
      exp = '0;
      cyc = 0;
      check(busy, "busy after start");
      while (!done) begin
        // the word on rnd now is consumed at the next edge
        idx = (int'(rnd[31:16]) * POOL_BITS) >> 16;
        while (exp[idx]) idx = (idx + 1) % POOL_BITS;
        exp[idx] = 1'b1;
        @(posedge clk); #1;
        cyc++;
        if (cyc > 100) break;
      end
      check(cyc == PARTIAL_BITS, $sformatf("run took %0d cycles", cyc));
      check(mask_out == exp, $sformatf("mask %h expected %h", mask_out, exp));
      check($countones(mask_out) == PARTIAL_BITS, "popcount");
      check(!busy, "idle after done");
      @(posedge clk); #1;
      check(!done, "done is one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
