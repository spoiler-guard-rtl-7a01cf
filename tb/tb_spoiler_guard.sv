// tb_spoiler_guard: end-to-end test of the SPOILER-GUARD unit at its full size
// (56-entry store address buffer, 12-of-27 masked partial compare).
//
// A random program of stores (allocate + address, later full-PA resolution, in-order
// commit) and loads runs against the unit. Stores and loads share a page offset
// most of the time and come from a small page table that holds a 1 MB alias pair
// and a synonym pair, and some loads are crafted to agree with an unresolved store
// on exactly the bits the current mask selects, so the random compare is fooled on
// purpose. Loads that are told to redispatch or squash, or that were forwarded on a
// partial match, are issued again later, which walks the whole decision chart.
// Every response is checked against a reference model of the buffer and of the
// decision, and so are the unit's event counters. Each mechanism - execute,
// finenet / full-PA / speculative forward, redispatch on a partial miss or a
// flagged PC, squash, remask, a full buffer - must occur at least once.
module tb_spoiler_guard;
  import sg_pkg::*;
  localparam int N = SAB_ENTRIES;
  localparam int CYCLES = 40000;

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

  // ---------------- reference model ----------------
  sab_entry_t m [N];
  logic [PA_BITS-1:0] true_pa [N];
  int mhead = 0, mtail = 0, mcount = 0, mhw = 0, mtw = 0;
  load_req_t pend [$];
  int checks = 0, failures = 0;
  int n_exec, n_fine, n_full, n_part, n_rmiss, n_rflag, n_squash, n_sabfull;
  int m_spec = 0, m_squash = 0, m_redisp = 0;

  logic [VA_BITS-13:0] vpage [8];
  logic [PA_BITS-13:0] ppage [8];
  logic [PC_BITS-1:0] pcs [4] = '{48'h0000_0040_1000, 48'h0000_0040_1010, 48'h0000_0040_2000, 48'h0000_0040_2abc};
  logic [11:0] offs [3] = '{12'h5A8, 12'h5A0, 12'h100};

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

  function automatic int ptr_dist(input logic [SAB_PTR_BITS-1:0] p);
    int pi = int'(p[SAB_IDX_BITS-1:0]);
    if (p[SAB_IDX_BITS] == 1'(mhw)) return pi - mhead;
    return pi + N - mhead;
  endfunction

  // reference decision; returns class 0 exec 1 finenet 2 full-PA 3 partial
  // 4 redispatch on miss 5 redispatch on flagged PC 6 squash
  function automatic int decide(input load_req_t l, input logic [POOL_BITS-1:0] mk, output int idx);
    int nold = ptr_dist(l.sq_ptr);
    bit flagged = 0;
    idx = -1;
    for (int k = nold - 1; k >= 0 && idx < 0; k--) begin
      int i;
      bit loose, pnd, ind;
      i = (mhead + k) % N;
      loose = m[i].valid && m[i].addr_valid && m[i].va[11:3] == l.va[11:3] && (m[i].bmask & l.bmask) != 0;
      pnd   = m[i].spec_fwd && m[i].pc_tag == l.pc;
      ind   = m[i].pa_resolved && m[i].pa[PA_BITS-1:12] != l.pa[PA_BITS-1:12] && !pnd;
      if (loose && !ind) idx = i;
    end
    for (int i = 0; i < N; i++) if (m[i].valid && m[i].vuln && m[i].pc_tag == l.pc) flagged = 1;
    if (idx < 0) return 0;
    if (m[idx].va[VA_BITS-1:3] == l.va[VA_BITS-1:3]) return 1;
    if (m[idx].pa_resolved) return (m[idx].pa[PA_BITS-1:12] == l.pa[PA_BITS-1:12]) ? 2 : 6;
    if (flagged) return 5;
    if (m[idx].partial_pa == gather(l.pa, mk)) return 3;
    return 4;
  endfunction

  initial begin
    repeat (CYCLES * 3) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cls, idx, exp_cls, exp_idx, cyc, last_squash_cyc;
    logic [POOL_BITS-1:0] mk, mask_at_squash;
    bit want_remask;
    load_req_t l;
    for (int i = 0; i < N; i++) m[i] = '0;
    for (int i = 0; i < 8; i++) begin
      vpage[i] = 36'h7F00_0000 + 36'(i * 3);
      ppage[i] = 27'($urandom);
    end
    ppage[1] = {ppage[1][26:8], ppage[0][7:0]};   // 1 MB alias of page 0 (pa[19:12] equal)
    ppage[7] = ppage[0];                          // synonym: two virtual pages, one frame
    n_exec = 0; n_fine = 0; n_full = 0; n_part = 0; n_rmiss = 0; n_rflag = 0; n_squash = 0; n_sabfull = 0;
    want_remask = 0; last_squash_cyc = 0; mask_at_squash = '0;

    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    seed_valid = 1; seed = 64'h5EED_1234_ABCD_0001;
    @(posedge clk); #1 seed_valid = 0;
    cyc = 0;
    while (!ld_ready && cyc < 100) begin @(posedge clk); #1; cyc++; end
    check(ld_ready, "initial mask ready");
    check($countones(active_mask) == PARTIAL_BITS, "initial mask has 12 bits");

    for (int t = 0; t < CYCLES; t++) begin
      int r;
      bit fillp;
      // ---- drive one operation (all inputs change 1 time unit after the edge) ----
      st_alloc = 0; st_addr_wr = 0; st_resolve = 0; st_commit = 0; ld_valid = 0;
      mk = active_mask;
      fillp = (t % 2000) < 600;
      r = $urandom % 100;
      exp_cls = -1;
      if (r < (fillp ? 40 : 12)) begin
        if (mcount < N) begin
          automatic int vp = $urandom % 8;
          automatic logic [11:0] o = offs[$urandom % 3];
          st_alloc = 1; st_addr_wr = 1; st_addr_idx = SAB_IDX_BITS'(mtail);
          st_addr_va = {vpage[vp], o}; st_addr_pa = {ppage[vp], o};
          st_addr_bmask = 8'hFF;
          m[mtail] = '0; m[mtail].valid = 1; m[mtail].addr_valid = 1;
          m[mtail].va = st_addr_va; m[mtail].bmask = st_addr_bmask;
          m[mtail].partial_pa = gather(st_addr_pa, mk);
          true_pa[mtail] = st_addr_pa;
          mtail++; if (mtail == N) begin mtail = 0; mtw ^= 1; end
          mcount++;
        end
      end else if (r < (fillp ? 50 : 30)) begin
        automatic int i = $urandom % N;
        // mostly resolve the oldest unresolved store
        if (($urandom % 4) != 0)
          for (int k = mcount - 1; k >= 0; k--)
            if (!m[(mhead + k) % N].pa_resolved) i = (mhead + k) % N;
        if (m[i].valid && !m[i].pa_resolved) begin
          st_resolve = 1; st_res_idx = SAB_IDX_BITS'(i); st_res_pa = true_pa[i];
          m[i].pa = true_pa[i]; m[i].pa_resolved = 1;
        end
      end else if (r < (fillp ? 55 : 45)) begin
        if (mcount > 0 && m[mhead].pa_resolved) begin
          st_commit = 1;
          m[mhead].valid = 0;
          mhead++; if (mhead == N) begin mhead = 0; mhw ^= 1; end
          mcount--;
        end
      end else begin
        // a load: re-issue a waiting one or make a new one
        automatic bit have = 0;
        while (pend.size() > 0 && !have) begin
          l = pend.pop_front();
          if (ptr_dist(l.sq_ptr) >= 0 && ptr_dist(l.sq_ptr) <= mcount) have = 1;
        end
        if (!have || ($urandom % 3) == 0) begin
          automatic int kind = $urandom % 8;
          automatic int vp = $urandom % 8;
          automatic logic [11:0] o = offs[$urandom % 3];
          if (have) pend.push_back(l);
          l = '0;
          l.pc = pcs[$urandom % 4];
          l.bmask = 8'h0F << ($urandom % 5);
          l.sq_ptr = SAB_PTR_BITS'({mtw[0], SAB_IDX_BITS'(mtail)});
          l.va = {vpage[vp], o}; l.pa = {ppage[vp], o};
          if (kind < 3 && mcount > 0) begin
            // crafted: agree with the youngest unresolved store on the masked bits only
            for (int k = mcount - 1; k >= 0; k--) begin
              automatic int i = (mhead + k) % N;
              if (!m[i].pa_resolved) begin
                automatic logic [POOL_BITS-1:0] rnd = POOL_BITS'({$urandom, $urandom});
                automatic logic [POOL_BITS-1:0] pg = true_pa[i][PA_BITS-1:12];
                if ((rnd & ~mk) == (pg & ~mk)) rnd = rnd ^ (~mk & (~mk - 1) ^ ~mk);
                l.pa = {(pg & mk) | (rnd & ~mk), true_pa[i][11:0]};
                l.va = {36'hABC_0000, true_pa[i][11:0]};
                break;
              end
            end
          end
        end
        ld_valid = 1; ld = l;
        exp_cls = decide(l, mk, exp_idx);
        // model updates made at this edge
        if (exp_cls == 3) begin m[exp_idx].pc_tag = l.pc; m[exp_idx].spec_fwd = 1; end
        if (exp_cls == 6) begin m[exp_idx].vuln = 1; m[exp_idx].spec_fwd = 0; end
        if (exp_cls >= 3) pend.push_back(l);
        if (pend.size() > 16) void'(pend.pop_front());
      end
      if (mcount == N) n_sabfull++;

      @(posedge clk); #1;
      // ---- check the response to the load driven before this edge ----
      if (exp_cls >= 0) begin
        ld_action_e ea;
        fwd_kind_e ek;
        case (exp_cls)
          0: begin ea = LD_EXECUTE; ek = FWD_NONE; n_exec++; end
          1: begin ea = LD_FORWARD; ek = FWD_FINENET; n_fine++; end
          2: begin ea = LD_FORWARD; ek = FWD_FULLPA; n_full++; end
          3: begin ea = LD_FORWARD; ek = FWD_PARTIAL; n_part++; m_spec++; end
          4: begin ea = LD_REDISPATCH; ek = FWD_NONE; n_rmiss++; m_redisp++; end
          5: begin ea = LD_REDISPATCH; ek = FWD_NONE; n_rflag++; m_redisp++; end
          default: begin ea = LD_SQUASH; ek = FWD_NONE; n_squash++; m_squash++; end
        endcase
        checks++;
        if (!ld_resp_valid || ld_resp_action !== ea || ld_resp_kind !== ek || ld_resp_pc !== l.pc ||
            (exp_cls != 0 && ld_resp_idx !== SAB_IDX_BITS'(exp_idx)) || squash !== (exp_cls == 6)) begin
          failures++;
          if (failures < 20)
            $display("FAIL t=%0d load pc %h: got %s/%s idx %0d, expected %s/%s idx %0d", t, l.pc,
                     ld_resp_action.name(), ld_resp_kind.name(), ld_resp_idx, ea.name(), ek.name(), exp_idx);
        end
        if (exp_cls == 6 && !want_remask) begin
          want_remask = 1; last_squash_cyc = t; mask_at_squash = mk;
        end
      end else begin
        check(!ld_resp_valid, "no response without a load");
      end
      // a misspeculation must be followed by a new mask within two remask runs
      if (want_remask && active_mask != mask_at_squash) want_remask = 0;
      if (want_remask && t - last_squash_cyc > 2 * (PARTIAL_BITS + 2)) begin
        check(0, $sformatf("no remask after squash at t=%0d", last_squash_cyc));
        want_remask = 0;
      end
      check(sab_count == SAB_PTR_BITS'(mcount) && sab_full == (mcount == N) && sab_empty == (mcount == 0),
            "buffer occupancy");
      check(st_alloc_ptr == SAB_PTR_BITS'({mtw[0], SAB_IDX_BITS'(mtail)}), "tail pointer");
    end
    ld_valid = 0; st_alloc = 0; st_addr_wr = 0; st_resolve = 0; st_commit = 0;
    repeat (4 * PARTIAL_BITS) @(posedge clk);
    #1;
    check(spec_fwd_count == 32'(m_spec), $sformatf("spec_fwd_count %0d vs %0d", spec_fwd_count, m_spec));
    check(squash_count == 32'(m_squash), $sformatf("squash_count %0d vs %0d", squash_count, m_squash));
    check(redispatch_count == 32'(m_redisp), $sformatf("redispatch_count %0d vs %0d", redispatch_count, m_redisp));
    check(remask_count >= 2 && remask_count <= 32'(m_squash + 1), $sformatf("remask_count %0d", remask_count));
    $display("execute %0d  finenet %0d  full-PA %0d  speculative %0d  redispatch-miss %0d  redispatch-flagged %0d",
             n_exec, n_fine, n_full, n_part, n_rmiss, n_rflag);
    $display("squash %0d  remask %0d  cycles with full buffer %0d", n_squash, remask_count - 1, n_sabfull);
    check(n_exec > 0, "execute never happened");
    check(n_fine > 0, "finenet forward never happened");
    check(n_full > 0, "full-PA forward never happened");
    check(n_part > 0, "speculative partial forward never happened");
    check(n_rmiss > 0, "redispatch on partial miss never happened");
    check(n_rflag > 0, "redispatch of a flagged PC never happened");
    check(n_squash > 0, "misspeculation squash never happened");
    check(remask_count > 1, "remask never happened");
    check(n_sabfull > 0, "buffer never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
