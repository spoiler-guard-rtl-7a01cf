// sg_pkg: shared sizes and types of the SPOILER-GUARD load/store dependency unit.
//
// The defense replaces the fixed 8-bit partial physical-address (PA) compare of a
// store address buffer (SAB) with a compare of 12 PA bits picked at random from the
// page-number bits, re-picked after every misspeculation, and tags each SAB entry
// with the PC of the load that speculated on it plus a vulnerability flag.
//
// From the paper: 56 SAB entries, a 12-bit partial PA field (baseline 8), a 48-bit
// load PC tag and a 1-bit vulnerability flag per entry.
// Own choices: 48-bit virtual and 39-bit physical addresses (the desktop core the
// paper downsizes reports 39 physical bits), 8-byte access granules with a byte mask,
// and the pool of maskable bits being PA[38:12], the physical page number.
package sg_pkg;

  localparam int unsigned SAB_ENTRIES  = 56;  // paper, Sec. III-D
  localparam int unsigned PARTIAL_BITS = 12;  // paper, Sec. II / III-D
  localparam int unsigned PC_BITS      = 48;  // paper, Sec. III-D
  localparam int unsigned VA_BITS      = 48;  // assumed
  localparam int unsigned PA_BITS      = 39;  // assumed
  localparam int unsigned PAGE_BITS    = 12;  // 4 KB pages; bits below are shared by VA and PA
  localparam int unsigned POOL_BITS    = PA_BITS - PAGE_BITS;  // maskable PA bits
  localparam int unsigned SAB_IDX_BITS = $clog2(SAB_ENTRIES);
  localparam int unsigned SAB_PTR_BITS = SAB_IDX_BITS + 1;  // index plus wrap bit

  // Result of one dependency-predictor lookup (Fig. 1 end boxes).
  typedef enum logic [1:0] {
    LD_EXECUTE    = 2'd0,  // no older aliasing store: read the cache
    LD_FORWARD    = 2'd1,  // "Block Load (or) Forward Store" from the chosen entry
    LD_REDISPATCH = 2'd2,  // wait and re-issue later
    LD_SQUASH     = 2'd3   // misspeculation: squash, remask, re-issue
  } ld_action_e;

  // Why a load was told to forward (for statistics and the testbenches).
  typedef enum logic [1:0] {
    FWD_NONE    = 2'd0,
    FWD_FINENET = 2'd1,  // full virtual-address match
    FWD_FULLPA  = 2'd2,  // resolved full physical-address match
    FWD_PARTIAL = 2'd3   // speculative: masked 12-bit partial PA match
  } fwd_kind_e;

  // One enhanced SAB entry. pc_tag, vuln and the widened partial_pa are the
  // paper's additions; spec_fwd marks the pc_tag as live (own choice).
  typedef struct packed {
    logic                     valid;
    logic                     addr_valid; // address written (baseline field)
    logic [VA_BITS-1:0]       va;        // store virtual address (8-byte granule in va[2:0]=0)
    logic [7:0]               bmask;     // bytes written inside the granule
    logic [PARTIAL_BITS-1:0]  partial_pa;
    logic                     pa_resolved;
    logic [PA_BITS-1:0]       pa;        // full PA, meaningful once pa_resolved
    logic [PC_BITS-1:0]       pc_tag;    // PC of the load that speculated on this store
    logic                     spec_fwd;  // pc_tag holds a load that was forwarded speculatively
    logic                     vuln;      // spoiler-vulnerability flag
  } sab_entry_t;

  // An issuing load as seen by the predictor.
  typedef struct packed {
    logic [PC_BITS-1:0]      pc;
    logic [VA_BITS-1:0]      va;
    logic [PA_BITS-1:0]      pa;
    logic [7:0]              bmask;
    logic [SAB_PTR_BITS-1:0] sq_ptr;   // SAB tail pointer (with wrap bit) at load dispatch
  } load_req_t;

endpackage
