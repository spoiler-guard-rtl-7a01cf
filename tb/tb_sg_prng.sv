// tb_sg_prng: checks the xorshift64 generator against a reference model kept in
// the testbench: reset value, one step per next, hold without next, reseeding and
// the all-zero-seed substitution.
module tb_sg_prng;
  logic clk = 0, rst_n = 0, seed_valid = 0, next = 0;
  logic [63:0] seed = '0, rnd, model;
  int checks = 0, failures = 0;

  sg_prng dut (.*);

  always #5 clk = ~clk;

  function automatic logic [63:0] ref_step(input logic [63:0] x);
    x ^= x << 13; x ^= x >> 7; x ^= x << 17;
    return x;
  endfunction

  task automatic check(input logic [63:0] exp, input string what);
    checks++;
    if (rnd !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rnd, exp);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check(64'h9E37_79B9_7F4A_7C15, "reset value");
    model = 64'h9E37_79B9_7F4A_7C15;
    for (int i = 0; i < 200; i++) begin
      next = ($urandom % 4) != 0;
      @(posedge clk); #1;
      if (next) model = ref_step(model);
      check(model, "step");
    end
    next = 0;
    seed_valid = 1; seed = 64'h0123_4567_89AB_CDEF;
    @(posedge clk); #1; seed_valid = 0;
    check(64'h0123_4567_89AB_CDEF, "seed");
    model = seed;
    next = 1;
    repeat (10) begin @(posedge clk); #1; model = ref_step(model); check(model, "step after seed"); end
    next = 0;
    seed_valid = 1; seed = '0;
    @(posedge clk); #1; seed_valid = 0;
    check(64'h9E37_79B9_7F4A_7C15, "zero seed replaced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
