// tb_sg_sab: random allocate / address-write / resolve / tag / flag / commit traffic
// on the 56-entry store address buffer, checked every cycle against a shadow copy
// of every entry, the head and tail pointers (with wrap bit), count, full and empty.
module tb_sg_sab;
  import sg_pkg::*;
  localparam int N = SAB_ENTRIES;
  logic clk = 0, rst_n = 0;
  logic alloc = 0, commit = 0, addr_wr = 0, resolve = 0, tag_wr = 0, vuln_wr = 0;
  logic [SAB_IDX_BITS-1:0] addr_idx = '0, res_idx = '0, tag_idx = '0, vuln_idx = '0;
  logic [VA_BITS-1:0] addr_va = '0;
  logic [7:0] addr_bmask = '0;
  logic [PARTIAL_BITS-1:0] addr_partial = '0;
  logic [PA_BITS-1:0] res_pa = '0;
  logic [PC_BITS-1:0] tag_pc = '0;
  sab_entry_t entries [N];
  logic [SAB_PTR_BITS-1:0] head_ptr, tail_ptr, count;
  logic full, empty;

  sab_entry_t m [N];
  int mhead = 0, mtail = 0, mcount = 0, mhw = 0, mtw = 0;
  int checks = 0, failures = 0, n_full = 0;

  sg_sab dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) m[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      // phase: bias towards filling in the first half of each 400-cycle window
      automatic bit fillp = (t % 400) < 200;
      alloc   = ($urandom % 100) < (fillp ? 70 : 30) && mcount < N;
      commit  = ($urandom % 100) < (fillp ? 30 : 70) && mcount > 0;
      addr_wr = ($urandom % 3) == 0;  addr_idx = SAB_IDX_BITS'($urandom % N);
      resolve = ($urandom % 3) == 0;  res_idx  = SAB_IDX_BITS'($urandom % N);
      tag_wr  = ($urandom % 4) == 0;  tag_idx  = SAB_IDX_BITS'($urandom % N);
      vuln_wr = ($urandom % 6) == 0;  vuln_idx = SAB_IDX_BITS'($urandom % N);
      // keep the per-entry writes on distinct entries and off the alloc/commit slots
      if (addr_idx == SAB_IDX_BITS'(mtail) || addr_idx == SAB_IDX_BITS'(mhead)) addr_wr = 0;
      if (res_idx == SAB_IDX_BITS'(mtail) || res_idx == SAB_IDX_BITS'(mhead) || res_idx == addr_idx) resolve = 0;
      if (tag_idx == SAB_IDX_BITS'(mtail) || tag_idx == SAB_IDX_BITS'(mhead) || tag_idx == addr_idx) tag_wr = 0;
      if (vuln_idx == SAB_IDX_BITS'(mtail) || vuln_idx == SAB_IDX_BITS'(mhead) || vuln_idx == addr_idx || vuln_idx == tag_idx) vuln_wr = 0;
      addr_va = {$urandom, $urandom}; addr_bmask = 8'($urandom); addr_partial = 12'($urandom);
      res_pa = {$urandom, $urandom}; tag_pc = {$urandom, $urandom};
      @(posedge clk);
      // model
      if (alloc) begin m[mtail] = '0; m[mtail].valid = 1; mtail++; if (mtail == N) begin mtail = 0; mtw ^= 1; end end
      if (commit) begin m[mhead].valid = 0; mhead++; if (mhead == N) begin mhead = 0; mhw ^= 1; end end
      mcount += int'(alloc) - int'(commit);
      if (addr_wr) begin
        m[addr_idx].addr_valid = 1; m[addr_idx].va = addr_va; m[addr_idx].bmask = addr_bmask;
        m[addr_idx].partial_pa = addr_partial; m[addr_idx].pa_resolved = 0;
        m[addr_idx].pc_tag = '0; m[addr_idx].spec_fwd = 0; m[addr_idx].vuln = 0;
      end
      if (resolve) begin m[res_idx].pa = res_pa; m[res_idx].pa_resolved = 1; end
      if (tag_wr)  begin m[tag_idx].pc_tag = tag_pc; m[tag_idx].spec_fwd = 1; end
      if (vuln_wr) begin m[vuln_idx].vuln = 1; m[vuln_idx].spec_fwd = 0; end
      #1;
      check(head_ptr == SAB_PTR_BITS'({mhw[0], SAB_IDX_BITS'(mhead)}), "head");
      check(tail_ptr == SAB_PTR_BITS'({mtw[0], SAB_IDX_BITS'(mtail)}), "tail");
      check(count == SAB_PTR_BITS'(mcount), "count");
      check(full == (mcount == N) && empty == (mcount == 0), "full/empty");
      if (full) n_full++;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (entries[i] !== m[i]) begin
          failures++;
          if (failures < 20) $display("FAIL entry %0d at t=%0d: %h vs %h", i, t, entries[i], m[i]);
        end
      end
    end
    check(n_full > 0, "buffer was filled at least once");
    $display("full cycles %0d", n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
