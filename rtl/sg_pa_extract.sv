// sg_pa_extract: forms the masked partial physical address used by SPOILER-GUARD.
//
// The paper replaces the fixed 8-bit partial-PA compare with a compare of 12 PA
// bits chosen by a random mask. This block gathers the page-number bits of pa
// (pa[PA_BITS-1:12]) whose mask bit is set, lowest first, into a packed field of
// SEL_BITS bits (a bit-gather, like a parallel-extract instruction). Two addresses
// extracted with the same mask have equal fields exactly when they agree on every
// selected bit. If the mask has more than SEL_BITS ones the surplus high ones are
// ignored; with fewer, the top of the field is zero. Purely combinational.
module sg_pa_extract #(
  parameter int unsigned PA_BITS   = sg_pkg::PA_BITS,
  parameter int unsigned PAGE_BITS = sg_pkg::PAGE_BITS,
  parameter int unsigned SEL_BITS  = sg_pkg::PARTIAL_BITS
) (
  input  logic [PA_BITS-1:0]           pa,
  input  logic [PA_BITS-PAGE_BITS-1:0] mask,
  output logic [SEL_BITS-1:0]          partial
);

  localparam int unsigned POOL = PA_BITS - PAGE_BITS;

  always_comb begin
    int unsigned k;
    partial = '0;
    k = 0;
    for (int unsigned i = 0; i < POOL; i++) begin
      if (mask[i] && k < SEL_BITS) begin
        partial[k] = pa[PAGE_BITS + i];
        k = k + 1;
      end
    end
  end

endmodule
