// tb_sg_dep_predictor: random store-buffer contents and loads, drawn from small
// value sets so that every branch of the decision chart is taken, checked against
// a reference that scans the stores older than the load from the youngest down.
// Every outcome (execute, finenet / full-PA / speculative partial forward, the two
// kinds of redispatch, squash) must be seen at least once.
module tb_sg_dep_predictor;
  import sg_pkg::*;
  localparam int N = SAB_ENTRIES;
  logic ld_valid;
  load_req_t ld;
  logic [POOL_BITS-1:0] mask;
  sab_entry_t entries [N];
  logic [SAB_PTR_BITS-1:0] head_ptr;
  ld_action_e action;
  fwd_kind_e fwd_kind;
  logic [SAB_IDX_BITS-1:0] hit_idx;
  logic tag_wr, vuln_wr, remask_req;
  int checks = 0, failures = 0;
  int seen [8];   // 0 exec 1 finenet 2 fullpa 3 partial 4 redisp-miss 5 redisp-vuln 6 squash

  sg_dep_predictor dut (.*);

  function automatic logic [POOL_BITS-1:0] rand_mask();
    logic [POOL_BITS-1:0] mm = '0;
    int n = 0;
    while (n < PARTIAL_BITS) begin
      int b = $urandom % POOL_BITS;
      if (!mm[b]) begin mm[b] = 1'b1; n++; end
    end
    return mm;
  endfunction

  function automatic logic [PARTIAL_BITS-1:0] gather(input logic [PA_BITS-1:0] a);
    logic [PARTIAL_BITS-1:0] r = '0;
    int k = 0;
    for (int i = 0; i < POOL_BITS; i++)
      if (mask[i] && k < PARTIAL_BITS) begin r[k] = a[PAGE_BITS + i]; k++; end
    return r;
  endfunction

  // small value pools
  function automatic logic [PA_BITS-1:0] rand_pa(input logic [11:0] off);
    logic [PA_BITS-PAGE_BITS-1:0] pg;
    case ($urandom % 4)
      0: pg = 27'h0000_123;
      1: pg = 27'h0ABC_123;    // 1 MB alias of page 0 (same pa[19:12])
      2: pg = 27'h0000_456;
      default: pg = 27'($urandom);
    endcase
    return {pg, off};
  endfunction

  initial begin
    int head, nolder, exp_idx, cls;
    bit found, flagged;
    ld_action_e ea;
    fwd_kind_e ek;
    logic [PC_BITS-1:0] pcs [2] = '{48'h0000_4000_1000, 48'h0000_4000_2000};
    ld_valid = 1;
    for (int t = 0; t < 20000; t++) begin
      mask = rand_mask();
      head = $urandom % N;
      head_ptr = SAB_PTR_BITS'({1'($urandom), SAB_IDX_BITS'(head)});
      nolder = $urandom % (N + 1);
      if (t % 3 == 0) nolder = $urandom % 4;
      ld.sq_ptr = (head + nolder >= N) ? SAB_PTR_BITS'({~head_ptr[SAB_IDX_BITS], SAB_IDX_BITS'(head + nolder - N)})
                                     : SAB_PTR_BITS'({head_ptr[SAB_IDX_BITS], SAB_IDX_BITS'(head + nolder)});
      ld.pc    = pcs[$urandom % 2];
      ld.va    = {36'h7F0_0000_0 + 36'($urandom % 3), 12'h5A8};
      ld.pa    = rand_pa(12'h5A8);
      ld.bmask = 8'h0F << ($urandom % 5);
      for (int i = 0; i < N; i++) begin
        entries[i] = '0;
        entries[i].valid       = ($urandom % 8) != 0;
        entries[i].addr_valid  = ($urandom % 8) != 0;
        entries[i].va          = {36'h7F0_0000_0 + 36'($urandom % 3), (($urandom % 3) == 0) ? 12'h5A0 : 12'h5A8};
        entries[i].bmask       = 8'hF0 >> ($urandom % 5);
        entries[i].pa          = rand_pa(entries[i].va[11:0]);
        entries[i].pa_resolved = ($urandom % 2) != 0;
        entries[i].partial_pa  = (($urandom % 2) != 0) ? gather(ld.pa) : 12'($urandom);
        entries[i].pc_tag      = pcs[$urandom % 2];
        entries[i].spec_fwd    = ($urandom % 3) == 0;
        entries[i].vuln        = ($urandom % 40) == 0;
      end
      #1;
      // reference
      found = 0; exp_idx = 0;
      for (int k = nolder - 1; k >= 0 && !found; k--) begin
        int i;
        bit loose, pend, indep;
        i = (head + k) % N;
        loose = entries[i].valid && entries[i].addr_valid &&
                entries[i].va[11:3] == ld.va[11:3] && (entries[i].bmask & ld.bmask) != 0;
        pend  = entries[i].spec_fwd && entries[i].pc_tag == ld.pc;
        indep = entries[i].pa_resolved && entries[i].pa[PA_BITS-1:12] != ld.pa[PA_BITS-1:12] && !pend;
        if (loose && !indep) begin found = 1; exp_idx = i; end
      end
      flagged = 0;
      foreach (entries[j]) if (entries[j].valid && entries[j].vuln && entries[j].pc_tag == ld.pc) flagged = 1;
      ek = FWD_NONE;
      if (!found) begin ea = LD_EXECUTE; cls = 0; end
      else if (entries[exp_idx].va[VA_BITS-1:3] == ld.va[VA_BITS-1:3]) begin ea = LD_FORWARD; ek = FWD_FINENET; cls = 1; end
      else if (entries[exp_idx].pa_resolved) begin
        if (entries[exp_idx].pa[PA_BITS-1:12] == ld.pa[PA_BITS-1:12]) begin ea = LD_FORWARD; ek = FWD_FULLPA; cls = 2; end
        else begin ea = LD_SQUASH; cls = 6; end
      end
      else if (flagged) begin ea = LD_REDISPATCH; cls = 5; end
      else if (entries[exp_idx].partial_pa == gather(ld.pa)) begin ea = LD_FORWARD; ek = FWD_PARTIAL; cls = 3; end
      else begin ea = LD_REDISPATCH; cls = 4; end
      seen[cls]++;
      checks++;
      if (action !== ea || fwd_kind !== ek || (found && hit_idx !== SAB_IDX_BITS'(exp_idx)) ||
          tag_wr !== (cls == 3) || vuln_wr !== (cls == 6) || remask_req !== (cls == 6)) begin
        failures++;
        if (failures < 20)
          $display("FAIL t=%0d: got %s/%s idx %0d, expected %s/%s idx %0d", t, action.name(), fwd_kind.name(),
                   hit_idx, ea.name(), ek.name(), exp_idx);
      end
    end
    // an invalid load does nothing
    ld_valid = 0; #1;
    checks++;
    if (action != LD_EXECUTE || tag_wr || vuln_wr || remask_req) failures++;
    for (int c = 0; c < 7; c++) begin
      checks++;
      $display("outcome class %0d seen %0d times", c, seen[c]);
      if (seen[c] == 0) begin failures++; $display("FAIL outcome class %0d never seen", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
