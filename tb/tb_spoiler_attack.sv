// tb_spoiler_attack: the SPOILER timing experiment run against the unit at full
// size. An attacker buffer of PAGES 4 KB pages is mapped to random physical frames
// (so a few of them alias the probe's frame modulo 1 MB, as real allocations do).
// For each page p and each of ROUNDS rounds the attacker fills the store buffer
// with stores to pages p, p-1, ... at one fixed page offset and then issues the
// probe load (one fixed PC) to a separate page at that offset; the testbench times
// the probe from first issue to completion.
//
// Load pipeline model (own choice): a redispatch retries the next cycle, a squash
// costs SQUASH_PENALTY cycles before the retry, and a load forwarded on a partial
// match is re-checked once the store's full PA is known. A store's full PA is known
// RESOLVE_DELAY cycles after it is written and stores commit in order after that.
//
// Checks: every answer is consistent with the testbench's own view (a speculative
// forward only when the masked bits agree, a squash only after a speculative
// forward of that store to the probe), misspeculations stay rare and the probe on
// the 1 MB-aliased pages is not measurably slower than on the others, which is
// the defense's claim (no latency peak where an undefended core shows one).
module tb_spoiler_attack;
  import sg_pkg::*;
  localparam int N              = SAB_ENTRIES;
  localparam int PAGES          = 1024;
  localparam int ROUNDS         = 100;
  localparam int STORES         = N;
  localparam int RESOLVE_DELAY  = 12;
  localparam int SQUASH_PENALTY = 15;
  localparam logic [11:0] OFF   = 12'h2C0;

  logic clk = 0, rst_n = 0;
  logic seed_valid = 0;
  logic [63:0] seed = '0;
  logic st_alloc = 0, st_addr_wr = 0, st_resolve = 0, st_commit = 0;
  logic [SAB_PTR_BITS-1:0] st_alloc_ptr, sab_count;
  logic sab_full, sab_empty;
  logic [SAB_IDX_BITS-1:0] st_addr_idx = '0, st_res_idx = '0;
  logic [VA_BITS-1:0] st_addr_va = '0;
  logic [PA_BITS-1:0] st_addr_pa = '0, st_res_pa = '0;
  logic [7:0] st_addr_bmask = '0;
  logic ld_ready, ld_valid = 0;
  load_req_t ld = '0;
  logic ld_resp_valid, squash, remask_busy;
  ld_action_e ld_resp_action;
  fwd_kind_e ld_resp_kind;
  logic [SAB_IDX_BITS-1:0] ld_resp_idx;
  logic [PC_BITS-1:0] ld_resp_pc;
  logic [POOL_BITS-1:0] active_mask;
  logic [31:0] remask_count, spec_fwd_count, squash_count, redispatch_count;

  spoiler_guard dut (.*);

  always #5 clk = ~clk;

  logic [PA_BITS-13:0] frame [PAGES];
  logic [PA_BITS-13:0] probe_frame;
  longint cyc = 0;
  longint wr_cyc [N];
  logic [PA_BITS-1:0] st_pa [N];
  bit spec_on [N];
  int checks = 0, failures = 0;
  int violations = 0, spec = 0;
  longint lat_alias = 0, lat_other = 0;
  int n_alias = 0, n_other = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [PARTIAL_BITS-1:0] gather(input logic [PA_BITS-1:0] a, input logic [POOL_BITS-1:0] mk);
    logic [PARTIAL_BITS-1:0] r = '0;
    int k = 0;
    for (int i = 0; i < POOL_BITS; i++)
      if (mk[i] && k < PARTIAL_BITS) begin r[k] = a[PAGE_BITS + i]; k++; end
    return r;
  endfunction

  // Background store-side engine: resolve each store RESOLVE_DELAY cycles after its
  // address write (oldest first) and commit resolved stores in order.
  int res_next = 0, n_inflight = 0;   // slot of the next store to resolve
  bit engine_on = 0;

  task automatic idle_cycle_store_side(output bit did_resolve);
    did_resolve = 0;
    st_resolve = 0; st_commit = 0;
    if (n_inflight > 0 && cyc - wr_cyc[res_next] >= RESOLVE_DELAY) begin
      st_resolve = 1; st_res_idx = SAB_IDX_BITS'(res_next); st_res_pa = st_pa[res_next];
      did_resolve = 1;
      res_next = (res_next + 1) % N;
      n_inflight--;
    end else if (sab_count > SAB_PTR_BITS'(n_inflight)) begin
      st_commit = 1;       // oldest entry is resolved
    end
  endtask

  initial begin
    repeat (200000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [PC_BITS-1:0] probe_pc = 48'h0000_0040_1ABC;
    logic [VA_BITS-1:0] probe_va = {36'h0_7FFF_0000, OFF};
    int aliased_pages = 0;
    bit dr;
    probe_frame = 27'($urandom);
    for (int p = 0; p < PAGES; p++) begin
      frame[p] = 27'($urandom);
      if (frame[p][7:0] == probe_frame[7:0]) aliased_pages++;
    end
    // make sure the run contains 1 MB aliases: every 256th page aliases the probe
    for (int p = 100; p < PAGES; p += 256)
      if (frame[p][7:0] != probe_frame[7:0]) begin frame[p][7:0] = probe_frame[7:0]; aliased_pages++; end

    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    seed_valid = 1; seed = 64'hC0FF_EE00_1234_5678;
    @(posedge clk); #1 seed_valid = 0;
    while (!ld_ready) begin @(posedge clk); #1; end

    for (int p = 0; p < PAGES; p++) begin
      for (int rd = 0; rd < ROUNDS; rd++) begin
        longint t0;
        bit done;
        bit pend_verify;
        load_req_t l;
        // attacker stores: pages p, p-1, ... at the probe's offset
        for (int s = 0; s < STORES; s++) begin
          automatic int pg = (p - s + PAGES) % PAGES;
          while (sab_full) begin
            idle_cycle_store_side(dr);
            @(posedge clk); #1;
          end
          idle_cycle_store_side(dr);
          st_alloc = 1; st_addr_wr = 1;
          st_addr_idx = st_alloc_ptr[SAB_IDX_BITS-1:0];
          st_addr_va = {36'h0_1000_0000 + 36'(pg), OFF};
          st_addr_pa = {frame[pg], OFF};
          st_addr_bmask = 8'hFF;
          st_pa[st_addr_idx] = st_addr_pa;
          wr_cyc[st_addr_idx] = cyc;
          spec_on[st_addr_idx] = 0;
          n_inflight++;
          @(posedge clk); #1;
          st_alloc = 0; st_addr_wr = 0;
        end
        // the probe load
        l.pc = probe_pc; l.va = probe_va; l.pa = {probe_frame, OFF}; l.bmask = 8'h0F;
        l.sq_ptr = st_alloc_ptr;
        t0 = cyc;
        done = 0; pend_verify = 0;
        while (!done) begin
          logic [POOL_BITS-1:0] mk;
          idle_cycle_store_side(dr);
          mk = active_mask;
          ld_valid = 1; ld = l;
          @(posedge clk); #1;
          ld_valid = 0;
          check(ld_resp_valid, "response");
          case (ld_resp_action)
            LD_EXECUTE: done = 1;
            LD_FORWARD: begin
              if (ld_resp_kind == FWD_PARTIAL) begin
                // independent view: the masked bits must agree and the store be unresolved
                check(gather(st_pa[ld_resp_idx], mk) == gather(l.pa, mk), "partial forward without masked match");
                spec++;
                spec_on[ld_resp_idx] = 1;
                pend_verify = 1;          // re-check once the store resolves
              end else begin
                check(ld_resp_kind == FWD_FULLPA &&
                      st_pa[ld_resp_idx][PA_BITS-1:12] == l.pa[PA_BITS-1:12], "exact forward");
                done = 1;
              end
            end
            LD_SQUASH: begin
              check(spec_on[ld_resp_idx], "squash without a speculative forward");
              check(st_pa[ld_resp_idx][PA_BITS-1:12] != l.pa[PA_BITS-1:12], "squash on a true match");
              spec_on[ld_resp_idx] = 0;
              violations++;
              pend_verify = 0;
              repeat (SQUASH_PENALTY) begin idle_cycle_store_side(dr); @(posedge clk); #1; end
            end
            default: ;                    // redispatch: retry next cycle
          endcase
          if (pend_verify) begin
            // wait until the speculatively used store has resolved, then re-check
            while (!dut.u_sab.entries[ld_resp_idx].pa_resolved) begin
              idle_cycle_store_side(dr); @(posedge clk); #1;
            end
            pend_verify = 0;
          end
          if (cyc - t0 > 100000) begin check(0, "probe never completed"); done = 1; end
        end
        if (frame[p][7:0] == probe_frame[7:0]) begin lat_alias += cyc - t0; n_alias++; end
        else begin lat_other += cyc - t0; n_other++; end
      end
    end
    st_resolve = 0; st_commit = 0;
    $display("pages %0d rounds %0d aliased pages %0d", PAGES, ROUNDS, aliased_pages);
    $display("probe latency: aliased pages %0.1f cycles, other pages %0.1f cycles",
             real'(lat_alias) / n_alias, real'(lat_other) / n_other);
    $display("speculative forwards %0d, misspeculations (squashes) %0d, remasks %0d",
             spec, violations, remask_count - 1);
    check(n_alias > 0 && n_other > 0, "both page classes measured");
    check(squash_count == 32'(violations), "squash counter");
    check(violations * 100 < PAGES * ROUNDS, "misspeculations stay under 1% of probes");
    check(real'(lat_alias) / n_alias < 1.10 * real'(lat_other) / n_other,
          "aliased pages show no latency peak");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
