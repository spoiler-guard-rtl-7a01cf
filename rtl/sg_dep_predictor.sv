// sg_dep_predictor: the SPOILER-GUARD memory-dependence decision for one load.
//
// It walks the decision chart of the defense for an issuing load against the
// stores that are older than it in the Store Address Buffer:
//   1. Loosenet: an older store whose address is known, whose page offset
//      (va[11:3]) equals the load's and whose byte mask overlaps. No such store:
//      LD_EXECUTE. Otherwise the youngest such store is examined.
//   2. Finenet: the full virtual addresses match -> LD_FORWARD (block or forward).
//   3. Store's full PA known: a match -> LD_FORWARD. A mismatch on a store that
//      was forwarded speculatively to this same load PC is a misspeculation ->
//      LD_SQUASH, which sets the store's vulnerability flag (vuln_wr) and requests
//      a new mask (remask_req).
//   4. Store's full PA not yet known: compare the masked 12-bit partial PAs.
//      A match -> LD_FORWARD speculatively, and the store is tagged with the
//      load's PC (tag_wr). No match -> LD_REDISPATCH (re-issue later).
// Steps 1-4 and the squash/remask/tag actions follow the paper's flow chart.
// Own choices where the paper is silent: a store whose full PA is known to differ
// and that has no pending speculation for this load is not a loosenet candidate
// (so a re-dispatched load moves on instead of looping); once any SAB entry
// carries the vulnerability flag with this load's PC in its tag, loads from that
// PC no longer speculate on partial matches and wait for the full PA instead
// (LD_REDISPATCH) for as long as the flagged store stays in the buffer. Stores
// older than the load are those between the SAB head and the load's sq_ptr.
//
// Purely combinational; the action outputs are only meaningful when ld_valid.
module sg_dep_predictor #(
  parameter int unsigned ENTRIES = sg_pkg::SAB_ENTRIES
) (
  input  logic                         ld_valid,
  input  sg_pkg::load_req_t            ld,
  input  logic [sg_pkg::POOL_BITS-1:0] mask,
  input  sg_pkg::sab_entry_t           entries [ENTRIES],
  input  logic [$clog2(ENTRIES):0]     head_ptr,
  output sg_pkg::ld_action_e           action,
  output sg_pkg::fwd_kind_e            fwd_kind,
  output logic [$clog2(ENTRIES)-1:0]   hit_idx,
  output logic                         tag_wr,
  output logic                         vuln_wr,
  output logic                         remask_req
);
  import sg_pkg::*;

  localparam int unsigned IW = $clog2(ENTRIES);

  logic [PARTIAL_BITS-1:0] ld_partial;
  logic [IW:0]             ld_dist;
  logic                    any;
  logic                    pc_flagged;
  logic [IW-1:0]           sel;
  sab_entry_t              e;

  sg_pa_extract u_ext (.pa(ld.pa), .mask(mask), .partial(ld_partial));

  // Number of stores between the SAB head and the load (0..ENTRIES).
  always_comb begin
    if (ld.sq_ptr[IW] == head_ptr[IW])
      ld_dist = (IW+1)'(ld.sq_ptr[IW-1:0]) - (IW+1)'(head_ptr[IW-1:0]);
    else
      ld_dist = (IW+1)'(ld.sq_ptr[IW-1:0]) + (IW+1)'(ENTRIES) - (IW+1)'(head_ptr[IW-1:0]);
  end

  // Youngest older loosenet candidate.
  always_comb begin
    logic [IW:0] d, best;
    logic        loose, indep, pending;
    any  = 1'b0;
    sel  = '0;
    best = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (IW'(i) >= head_ptr[IW-1:0]) d = (IW+1)'(i) - (IW+1)'(head_ptr[IW-1:0]);
      else                            d = (IW+1)'(i) + (IW+1)'(ENTRIES) - (IW+1)'(head_ptr[IW-1:0]);
      loose   = entries[i].valid && entries[i].addr_valid && (d < ld_dist) &&
                (entries[i].va[PAGE_BITS-1:3] == ld.va[PAGE_BITS-1:3]) &&
                ((entries[i].bmask & ld.bmask) != 8'h00);
      pending = entries[i].spec_fwd && (entries[i].pc_tag == ld.pc);
      indep   = entries[i].pa_resolved &&
                (entries[i].pa[PA_BITS-1:PAGE_BITS] != ld.pa[PA_BITS-1:PAGE_BITS]) && !pending;
      if (loose && !indep && (!any || d >= best)) begin
        any  = 1'b1;
        sel  = IW'(i);
        best = d;
      end
    end
  end

  // Has this load PC already misspeculated on a store still in the buffer?
  always_comb begin
    pc_flagged = 1'b0;
    for (int unsigned i = 0; i < ENTRIES; i++)
      if (entries[i].valid && entries[i].vuln && entries[i].pc_tag == ld.pc) pc_flagged = 1'b1;
  end

  assign e       = entries[sel];
  assign hit_idx = sel;

  always_comb begin
    action     = LD_EXECUTE;
    fwd_kind   = FWD_NONE;
    tag_wr     = 1'b0;
    vuln_wr    = 1'b0;
    remask_req = 1'b0;
    if (ld_valid && any) begin
      if (e.va[VA_BITS-1:3] == ld.va[VA_BITS-1:3]) begin
        action   = LD_FORWARD;                       // finenet hit
        fwd_kind = FWD_FINENET;
      end else if (e.pa_resolved) begin
        if (e.pa[PA_BITS-1:PAGE_BITS] == ld.pa[PA_BITS-1:PAGE_BITS]) begin
          action   = LD_FORWARD;                     // full PA match
          fwd_kind = FWD_FULLPA;
        end else begin
          action     = LD_SQUASH;                    // misspeculation
          vuln_wr    = 1'b1;
          remask_req = 1'b1;
        end
      end else if (pc_flagged) begin
        action = LD_REDISPATCH;                      // flagged PC: wait for full PA
      end else if (e.partial_pa == ld_partial) begin
        action   = LD_FORWARD;                       // speculative partial hit
        fwd_kind = FWD_PARTIAL;
        tag_wr   = 1'b1;
      end else begin
        action = LD_REDISPATCH;                      // partial miss
      end
    end
  end

endmodule
