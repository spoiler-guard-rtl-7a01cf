// tb_sg_remask_ctrl: checks the start-up mask (ready exactly SEL_BITS+2 cycles after
// reset is released), that a remask request installs a new 12-bit mask exactly
// SEL_BITS+1 cycles later while the old mask stays in use until then, and that a
// request arriving during a remask is not lost.
module tb_sg_remask_ctrl;
  import sg_pkg::*;
  logic clk = 0, rst_n = 0, remask_req = 0;
  logic [63:0] rnd = 64'hDEAD_BEEF_0BAD_F00D;
  logic rnd_next, mask_ready, remask_busy;
  logic [POOL_BITS-1:0] active_mask, old;
  logic [31:0] remask_count;
  int checks = 0, failures = 0;

  sg_remask_ctrl dut (.*);

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
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    cyc = 0;
    while (!mask_ready && cyc < 100) begin @(posedge clk); #1; cyc++; end
    check(cyc == PARTIAL_BITS + 2, $sformatf("initial mask after %0d cycles", cyc));
    check($countones(active_mask) == PARTIAL_BITS, "initial popcount");
    check(remask_count == 1, "count after init");
    check(!remask_busy, "idle after init");

    // single requests
    for (int r = 0; r < 200; r++) begin
      repeat ($urandom % 5) @(posedge clk);
      #1 old = active_mask;
      remask_req = 1;
      @(posedge clk); #1 remask_req = 0;
      cyc = 0;  // edges after the one that sampled the request
      while (active_mask == old && cyc < 100) begin
        check(remask_busy, "busy while remasking");
        @(posedge clk); #1; cyc++;
      end
      check(cyc == PARTIAL_BITS + 1, $sformatf("remask took %0d cycles", cyc));
      check($countones(active_mask) == PARTIAL_BITS, "popcount");
      check(remask_count == 32'(r + 2), "count");
    end

    // a request during a remask starts another one straight after
    #1 remask_req = 1;
    @(posedge clk); #1 remask_req = 0;
    repeat (4) @(posedge clk);
    #1 remask_req = 1;
    @(posedge clk); #1 remask_req = 0;
    repeat (4 * PARTIAL_BITS) @(posedge clk);
    #1;
    check(remask_count == 32'(203), $sformatf("queued request: count %0d", remask_count));
    check(!remask_busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
