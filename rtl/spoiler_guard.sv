// spoiler_guard: the SPOILER-GUARD additions to a load/store queue, as one unit.
//
// SPOILER times loads that falsely depend on older stores whose physical
// addresses agree with the load on a fixed set of partial address bits; the
// repeated squash-and-reissue that such aliasing causes makes it visible. This unit
// makes the partial compare use 12 physical page-number bits picked by a random
// mask, draws a new mask after every misspeculation, and tags the store involved
// with the load's PC and a vulnerability flag; while that flagged store is in the
// buffer, loads with that PC wait for full addresses instead of speculating.
//
// Inside: sg_prng (seeded from an external true random source through
// seed_valid/seed), sg_remask_ctrl with sg_mask_gen (initial mask after reset,
// a new one per misspeculation), sg_sab (56-entry enhanced store address buffer),
// sg_pa_extract (masked partial PA of a store at address generation) and
// sg_dep_predictor (the load decision).
//
// Store side: st_alloc takes the tail entry (st_alloc_ptr is the pointer the store
// receives; loads dispatched after it carry the new tail in ld.sq_ptr);
// st_addr_wr writes a store's VA, byte mask and the partial PA of st_addr_pa made
// with the mask active in that cycle; st_resolve delivers the store's full PA;
// st_commit frees the oldest entry.
// Load side: a load may be issued when ld_ready (the initial mask is in place).
// The answer comes one cycle after ld_valid on ld_resp_*; SAB tag/flag updates and
// the remask request are made at the same clock edge. LD_REDISPATCH and LD_SQUASH
// ask the load pipeline to issue the load again; squash also pulses for
// LD_SQUASH (the pipeline flush itself belongs to the core). One load per cycle.
// Event counters are 32 bits and wrap.
module spoiler_guard (
  input  logic                          clk,
  input  logic                          rst_n,
  // entropy from the true random source
  input  logic                          seed_valid,
  input  logic [63:0]                   seed,
  // store address buffer
  input  logic                          st_alloc,
  output logic [sg_pkg::SAB_PTR_BITS-1:0] st_alloc_ptr,
  output logic                          sab_full,
  output logic                          sab_empty,
  output logic [sg_pkg::SAB_PTR_BITS-1:0] sab_count,
  input  logic                          st_addr_wr,
  input  logic [sg_pkg::SAB_IDX_BITS-1:0] st_addr_idx,
  input  logic [sg_pkg::VA_BITS-1:0]    st_addr_va,
  input  logic [sg_pkg::PA_BITS-1:0]    st_addr_pa,
  input  logic [7:0]                    st_addr_bmask,
  input  logic                          st_resolve,
  input  logic [sg_pkg::SAB_IDX_BITS-1:0] st_res_idx,
  input  logic [sg_pkg::PA_BITS-1:0]    st_res_pa,
  input  logic                          st_commit,
  // load lookup
  output logic                          ld_ready,
  input  logic                          ld_valid,
  input  sg_pkg::load_req_t             ld,
  output logic                          ld_resp_valid,
  output sg_pkg::ld_action_e            ld_resp_action,
  output sg_pkg::fwd_kind_e             ld_resp_kind,
  output logic [sg_pkg::SAB_IDX_BITS-1:0] ld_resp_idx,
  output logic [sg_pkg::PC_BITS-1:0]    ld_resp_pc,
  output logic                          squash,
  // status and event counters
  output logic [sg_pkg::POOL_BITS-1:0]  active_mask,
  output logic                          remask_busy,
  output logic [31:0]                   remask_count,
  output logic [31:0]                   spec_fwd_count,
  output logic [31:0]                   squash_count,
  output logic [31:0]                   redispatch_count
);
  import sg_pkg::*;

  logic [63:0]             rnd;
  logic                    rnd_next;
  logic                    mask_ready;
  logic [PARTIAL_BITS-1:0] st_partial;
  sab_entry_t              entries [SAB_ENTRIES];
  logic [SAB_PTR_BITS-1:0] head_ptr, tail_ptr;
  ld_action_e              action;
  fwd_kind_e               kind;
  logic [SAB_IDX_BITS-1:0] hit_idx;
  logic                    tag_wr, vuln_wr, remask_req;
  logic                    lookup;

  assign lookup = ld_valid && mask_ready;

  sg_prng u_prng (
    .clk(clk), .rst_n(rst_n), .seed_valid(seed_valid), .seed(seed),
    .next(rnd_next), .rnd(rnd)
  );

  sg_remask_ctrl u_remask (
    .clk(clk), .rst_n(rst_n), .remask_req(lookup && remask_req), .rnd(rnd),
    .rnd_next(rnd_next), .active_mask(active_mask), .mask_ready(mask_ready),
    .remask_busy(remask_busy), .remask_count(remask_count)
  );

  sg_pa_extract u_st_ext (.pa(st_addr_pa), .mask(active_mask), .partial(st_partial));

  sg_sab u_sab (
    .clk(clk), .rst_n(rst_n),
    .alloc(st_alloc), .commit(st_commit),
    .addr_wr(st_addr_wr), .addr_idx(st_addr_idx), .addr_va(st_addr_va),
    .addr_bmask(st_addr_bmask), .addr_partial(st_partial),
    .resolve(st_resolve), .res_idx(st_res_idx), .res_pa(st_res_pa),
    .tag_wr(lookup && tag_wr), .tag_idx(hit_idx), .tag_pc(ld.pc),
    .vuln_wr(lookup && vuln_wr), .vuln_idx(hit_idx),
    .entries(entries), .head_ptr(head_ptr), .tail_ptr(tail_ptr),
    .count(sab_count), .full(sab_full), .empty(sab_empty)
  );

  sg_dep_predictor u_pred (
    .ld_valid(lookup), .ld(ld), .mask(active_mask),
    .entries(entries), .head_ptr(head_ptr),
    .action(action), .fwd_kind(kind), .hit_idx(hit_idx),
    .tag_wr(tag_wr), .vuln_wr(vuln_wr), .remask_req(remask_req)
  );

  assign st_alloc_ptr = tail_ptr;
  assign ld_ready     = mask_ready;
  assign squash       = ld_resp_valid && (ld_resp_action == LD_SQUASH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_resp_valid    <= 1'b0;
      ld_resp_action   <= LD_EXECUTE;
      ld_resp_kind     <= FWD_NONE;
      ld_resp_idx      <= '0;
      ld_resp_pc       <= '0;
      spec_fwd_count   <= '0;
      squash_count     <= '0;
      redispatch_count <= '0;
    end else begin
      ld_resp_valid <= lookup;
      if (lookup) begin
        ld_resp_action <= action;
        ld_resp_kind   <= kind;
        ld_resp_idx    <= hit_idx;
        ld_resp_pc     <= ld.pc;
        if (kind == FWD_PARTIAL)        spec_fwd_count   <= spec_fwd_count + 1;
        if (action == LD_SQUASH)        squash_count     <= squash_count + 1;
        if (action == LD_REDISPATCH)    redispatch_count <= redispatch_count + 1;
      end
    end
  end

  // Loads are only accepted once the initial mask is in place.
  assert property (@(posedge clk) disable iff (!rst_n) ld_valid |-> ld_ready);

endmodule
