// sg_sab: the enhanced Store Address Buffer (SAB) of SPOILER-GUARD.
//
// A circular buffer of ENTRIES store-address entries in program order. Besides
// the usual store address fields it holds the three additions the paper makes per
// entry: the partial physical-address field widened from 8 to 12 bits, a 48-bit
// tag with the PC of the load that speculated on the store, and a 1-bit
// spoiler-vulnerability flag. One extra bit, spec_fwd, says that the PC tag is
// live (own choice: the paper counts 53 added bits, this makes 54).
//
// Interface (all writes on the rising clock edge):
//   alloc           allocate the entry at the tail (ignored when full); tail_ptr is
//                   the pointer, with wrap bit, that the new store receives
//   addr_wr         write va, bmask and the masked partial PA of entry addr_idx
//                   (sets addr_valid);
//                   clears pa_resolved, pc_tag, spec_fwd and vuln
//   resolve         full PA of entry res_idx is known: store pa, set pa_resolved
//   tag_wr          a load was forwarded speculatively from entry tag_idx: pc_tag
//                   <= tag_pc, spec_fwd <= 1
//   vuln_wr         misspeculation on entry vuln_idx: vuln <= 1, spec_fwd <= 0
//   commit          free the head entry (ignored when empty)
// entries, head_ptr, tail_ptr and count show the state; lookups are done outside
// by sg_dep_predictor, so a write is seen by lookups from the next cycle.
module sg_sab #(
  parameter int unsigned ENTRIES = sg_pkg::SAB_ENTRIES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // allocation and retirement
  input  logic                       alloc,
  input  logic                       commit,
  // store address generation (partial PA made with the active mask)
  input  logic                       addr_wr,
  input  logic [$clog2(ENTRIES)-1:0] addr_idx,
  input  logic [sg_pkg::VA_BITS-1:0] addr_va,
  input  logic [7:0]                 addr_bmask,
  input  logic [sg_pkg::PARTIAL_BITS-1:0] addr_partial,
  // full physical address resolution
  input  logic                       resolve,
  input  logic [$clog2(ENTRIES)-1:0] res_idx,
  input  logic [sg_pkg::PA_BITS-1:0] res_pa,
  // predictor updates
  input  logic                       tag_wr,
  input  logic [$clog2(ENTRIES)-1:0] tag_idx,
  input  logic [sg_pkg::PC_BITS-1:0] tag_pc,
  input  logic                       vuln_wr,
  input  logic [$clog2(ENTRIES)-1:0] vuln_idx,
  // state
  output sg_pkg::sab_entry_t         entries [ENTRIES],
  output logic [$clog2(ENTRIES):0]   head_ptr,
  output logic [$clog2(ENTRIES):0]   tail_ptr,
  output logic [$clog2(ENTRIES):0]   count,
  output logic                       full,
  output logic                       empty
);

  localparam int unsigned IW = $clog2(ENTRIES);

  function automatic logic [IW:0] ptr_inc(input logic [IW:0] p);
    if (p[IW-1:0] == IW'(ENTRIES - 1)) return {~p[IW], {IW{1'b0}}};
    else                               return {p[IW], p[IW-1:0] + 1'b1};
  endfunction

  logic do_alloc, do_commit;

  assign full      = (count == (IW+1)'(ENTRIES));
  assign empty     = (count == '0);
  assign do_alloc  = alloc && !full;
  assign do_commit = commit && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_ptr <= '0;
      tail_ptr <= '0;
      count    <= '0;
      for (int i = 0; i < int'(ENTRIES); i++) entries[i] <= '0;
    end else begin
      if (do_alloc) begin
        entries[tail_ptr[IW-1:0]]       <= '0;
        entries[tail_ptr[IW-1:0]].valid <= 1'b1;
        tail_ptr <= ptr_inc(tail_ptr);
      end
      if (do_commit) begin
        entries[head_ptr[IW-1:0]].valid <= 1'b0;
        head_ptr <= ptr_inc(head_ptr);
      end
      count <= count + (IW+1)'(do_alloc) - (IW+1)'(do_commit);

      if (addr_wr) begin
        entries[addr_idx].addr_valid  <= 1'b1;
        entries[addr_idx].va          <= addr_va;
        entries[addr_idx].bmask       <= addr_bmask;
        entries[addr_idx].partial_pa  <= addr_partial;
        entries[addr_idx].pa_resolved <= 1'b0;
        entries[addr_idx].pc_tag      <= '0;
        entries[addr_idx].spec_fwd    <= 1'b0;
        entries[addr_idx].vuln        <= 1'b0;
      end
      if (resolve) begin
        entries[res_idx].pa          <= res_pa;
        entries[res_idx].pa_resolved <= 1'b1;
      end
      if (tag_wr) begin
        entries[tag_idx].pc_tag   <= tag_pc;
        entries[tag_idx].spec_fwd <= 1'b1;
      end
      if (vuln_wr) begin
        entries[vuln_idx].vuln     <= 1'b1;
        entries[vuln_idx].spec_fwd <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(alloc && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(commit && empty));

endmodule
