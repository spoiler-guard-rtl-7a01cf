// sg_mask_gen: draws a fresh random mask that selects SEL_BITS of the POOL_BITS
// maskable physical-address bits.
//
// The paper says the mask picks 12 PA bits at random for the partial-address
// compare, but not how the pick is made in hardware. This engine picks one new bit
// per cycle: it scales a 16-bit slice of the random word to an index in
// [0, POOL_BITS) and, if that bit is already taken, takes the next free bit above it
// (wrapping round). So every run takes exactly SEL_BITS cycles and ends with
// exactly SEL_BITS ones. The linear probing slightly favours bits that follow a
// taken bit; that bias is this design's choice, not the paper's.
//
// Interface: start (one cycle) begins a run; busy is high while it runs; rnd_next
// asks the PRNG for a new word in each working cycle; done pulses for one cycle
// with mask_out valid in the same cycle (mask_out holds the last mask afterwards).
module sg_mask_gen #(
  parameter int unsigned POOL_BITS = sg_pkg::POOL_BITS,
  parameter int unsigned SEL_BITS  = sg_pkg::PARTIAL_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [63:0]          rnd,
  output logic                 rnd_next,
  output logic                 busy,
  output logic                 done,
  output logic [POOL_BITS-1:0] mask_out
);

  localparam int unsigned IW = $clog2(POOL_BITS);
  localparam int unsigned CW = $clog2(SEL_BITS + 1);

  logic [POOL_BITS-1:0] work;
  logic [CW-1:0]        count;
  logic [IW-1:0]        draw, pick;
  logic [31:0]          scaled;

  // Uniform-ish index in [0, POOL_BITS): (r16 * POOL_BITS) >> 16.
  assign scaled = 32'(rnd[31:16]) * 32'(POOL_BITS);
  assign draw   = IW'(scaled >> 16);

  // First free bit at or above draw, circularly.
  always_comb begin
    logic found;
    int unsigned pos;
    pick  = draw;
    found = 1'b0;
    for (int unsigned k = 0; k < POOL_BITS; k++) begin
      pos = 32'(draw) + k;
      if (pos >= POOL_BITS) pos = pos - POOL_BITS;
      if (!found && !work[pos]) begin
        pick  = IW'(pos);
        found = 1'b1;
      end
    end
  end

  assign rnd_next = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      count    <= '0;
      work     <= '0;
      mask_out <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        count <= '0;
        work  <= '0;
      end else if (busy) begin
        work[pick] <= 1'b1;
        count      <= count + 1'b1;
        if (count == CW'(SEL_BITS - 1)) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          mask_out <= work | (POOL_BITS'(1) << pick);
        end
      end
    end
  end

  // A finished mask always selects exactly SEL_BITS bits.
  assert property (@(posedge clk) disable iff (!rst_n) done |-> $countones(mask_out) == SEL_BITS);

endmodule
