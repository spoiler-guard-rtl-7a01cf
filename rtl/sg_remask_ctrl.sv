// sg_remask_ctrl: owns the active partial-address mask of SPOILER-GUARD.
//
// Following the paper, an initial random mask is set up once at start-up and a
// new one is drawn after every misspeculation. This controller runs sg_mask_gen
// once after reset and raises mask_ready when that first mask is in place. Each
// remask_req pulse then starts another run; when the run finishes the new mask
// replaces the active one in a single cycle. Until then the old mask stays in use,
// so lookups never see a half-built mask. A request that arrives while a run is
// in progress is remembered and starts another run right after (own choice: the
// paper does not say what happens to back-to-back misspeculations).
//
// Timing: a remask takes SEL_BITS cycles in the generator plus one cycle to
// install, so active_mask changes SEL_BITS+1 cycles after the request edge when
// the generator was idle. remask_count counts installed masks (the initial one
// included) and wraps.
module sg_remask_ctrl #(
  parameter int unsigned POOL_BITS = sg_pkg::POOL_BITS,
  parameter int unsigned SEL_BITS  = sg_pkg::PARTIAL_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 remask_req,
  input  logic [63:0]          rnd,
  output logic                 rnd_next,
  output logic [POOL_BITS-1:0] active_mask,
  output logic                 mask_ready,
  output logic                 remask_busy,
  output logic [31:0]          remask_count
);

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_GEN} state_e;

  state_e               state;
  logic                 pending;
  logic                 gen_start, gen_busy, gen_done;
  logic [POOL_BITS-1:0] gen_mask;

  sg_mask_gen #(.POOL_BITS(POOL_BITS), .SEL_BITS(SEL_BITS)) u_gen (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (gen_start),
    .rnd      (rnd),
    .rnd_next (rnd_next),
    .busy     (gen_busy),
    .done     (gen_done),
    .mask_out (gen_mask)
  );

  assign gen_start   = (state == S_INIT) || (state == S_IDLE && (remask_req || pending));
  assign remask_busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_INIT;
      pending      <= 1'b0;
      active_mask  <= '0;
      mask_ready   <= 1'b0;
      remask_count <= '0;
    end else begin
      unique case (state)
        S_INIT: state <= S_GEN;              // initial mask at system setup
        S_IDLE: if (remask_req || pending) begin
                  state   <= S_GEN;
                  pending <= 1'b0;
                end
        S_GEN: begin
          if (remask_req) pending <= 1'b1;
          if (gen_done) begin
            active_mask  <= gen_mask;
            mask_ready   <= 1'b1;
            remask_count <= remask_count + 1;
            state        <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The generator is only started when it is idle.
  assert property (@(posedge clk) disable iff (!rst_n) gen_start |-> !gen_busy);

endmodule
