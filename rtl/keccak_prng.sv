// keccak_prng -- Keccak-based pseudo-random number generator (SHAKE-style
// sponge squeezing with a 1088-bit rate).
//
// 'start' absorbs the 1600-bit seed: the flat seed is loaded into the 5x5
// array of 64-bit lanes that forms the state register. The Round Unit then
// applies one Keccak-f[1600] round per clock; after 24 rounds the first
// RATE_W = 1088 state bits are offered as a block (blk_valid). When the block
// is taken (blk_ready) the next permutation starts from the current state,
// so an unbounded stream of blocks follows from one seed: one block per
// 25 cycles (24 rounds + 1 hand-over cycle).
// With seed = a padded SHAKE256 input block, the blocks equal SHAKE256 output.
module keccak_prng #(
  parameter int unsigned STATE_W = 1600,
  parameter int unsigned RATE_W  = 1088
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [STATE_W-1:0] seed,
  output logic               blk_valid,
  input  logic               blk_ready,
  output logic [RATE_W-1:0]  blk
);
  typedef enum logic [1:0] {K_IDLE, K_PERM, K_HOLD} kstate_e;
  kstate_e       st;
  logic [1599:0] state, nxt;
  logic [4:0]    rnd;

  keccak_round u_round (.state_in(state), .round(rnd), .state_out(nxt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= K_IDLE; rnd <= '0; state <= '0;
    end else if (start) begin
      st <= K_PERM; rnd <= '0; state <= 1600'(seed);
    end else begin
      unique case (st)
        K_PERM: begin
          state <= nxt;
          rnd   <= rnd + 1'b1;
          if (rnd == 5'd23) begin
            st  <= K_HOLD;
            rnd <= '0;
          end
        end
        K_HOLD: if (blk_ready) st <= K_PERM;
        default: ;
      endcase
    end
  end

  assign blk_valid = (st == K_HOLD);
  assign blk       = state[RATE_W-1:0];
endmodule
