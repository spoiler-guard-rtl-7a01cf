// tb_sg_pa_extract: drives random physical addresses and random 12-of-27 masks
// (plus all-bits and no-bits masks) into the bit-gather and compares with a
// reference that walks the mask from the least significant bit.
module tb_sg_pa_extract;
  import sg_pkg::*;
  logic [PA_BITS-1:0]   pa;
  logic [POOL_BITS-1:0] mask;
  logic [PARTIAL_BITS-1:0] partial, exp;
  int checks = 0, failures = 0;

  sg_pa_extract dut (.pa(pa), .mask(mask), .partial(partial));

  function automatic logic [POOL_BITS-1:0] rand_mask();
    logic [POOL_BITS-1:0] m = '0;
    int n = 0;
    while (n < PARTIAL_BITS) begin
      int b = $urandom % POOL_BITS;
      if (!m[b]) begin m[b] = 1'b1; n++; end
    end
    return m;
  endfunction

  function automatic logic [PARTIAL_BITS-1:0] ref_gather(input logic [PA_BITS-1:0] a,
                                                          input logic [POOL_BITS-1:0] m);
    logic [PARTIAL_BITS-1:0] r = '0;
    int k = 0;
    for (int i = 0; i < POOL_BITS; i++)
      if (m[i]) begin
        if (k < PARTIAL_BITS) r[k] = a[PAGE_BITS + i];
        k++;
      end
    return r;
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      pa = {$urandom, $urandom};
      case (t % 50)
        0:       mask = '1;
        1:       mask = '0;
        default: mask = rand_mask();
      endcase
      #1;
      exp = ref_gather(pa, mask);
      checks++;
      if (partial !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL pa=%h mask=%h got %h exp %h", pa, mask, partial, exp);
      end
    end
    // the classic 8-bit baseline window pa[19:12] lands in the low byte
    mask = POOL_BITS'(8'hFF); pa = 39'h00_000A_5000; #1;
    checks++;
    if (partial !== 12'h0A5) begin failures++; $display("FAIL window %h", partial); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
