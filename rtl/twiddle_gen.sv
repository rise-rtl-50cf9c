// twiddle_gen -- on-the-fly twiddle factor generator with its own modular
// multiplier (separate from the BFU's, so butterflies never share it).
//
// setup: omega_m = base^(2^sq) is formed by sq repeated squarings, then
// omega = 1. step: omega <= omega * omega_m. The product omega*omega_m is
// computed ahead of time into a "next" register, so a step is free as long
// as steps are at least LAT+1 cycles apart; 'ready' is low while the setup
// or the look-ahead product is still in the multiplier, and the caller
// stalls on it.
module twiddle_gen #(
  parameter int unsigned W = 30
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [W-1:0]   q,
  input  logic [2*W-1:0] mu,
  input  logic           setup,      // pulse: start with base, sq
  input  logic [W-1:0]   base,
  input  logic [3:0]     sq,
  input  logic           step,       // advance omega (only when ready)
  output logic [W-1:0]   omega,
  output logic [W-1:0]   omega_m,
  output logic           ready
);
  typedef enum logic [1:0] {T_IDLE, T_SQ, T_NEXT} tstate_e;
  tstate_e      st;
  logic [3:0]   sq_left;
  logic [W-1:0] nxt;
  logic         nxt_ok;
  logic         busy;              // a product is in the multiplier
  logic         mm_in_v, mm_out_v;
  logic [W-1:0] mm_a, mm_b, mm_p;

  always_comb begin
    mm_in_v = 1'b0;
    mm_a    = omega_m;
    mm_b    = omega_m;
    if (!busy) begin
      if (st == T_SQ && sq_left != 0) begin
        mm_in_v = 1'b1;
      end else if (st == T_NEXT && !nxt_ok) begin
        mm_in_v = 1'b1;
        mm_a    = omega;
      end
    end
  end

  modmul #(.W(W), .TAG_W(1)) u_mul (
    .clk, .rst_n, .q, .mu,
    .in_valid(mm_in_v), .a(mm_a), .b(mm_b), .in_tag(1'b0),
    .out_valid(mm_out_v), .p(mm_p), .out_tag()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; sq_left <= '0; busy <= 1'b0; nxt_ok <= 1'b0;
      omega <= '0; omega_m <= '0; nxt <= '0;
    end else begin
      if (mm_in_v) busy <= 1'b1;
      if (mm_out_v) busy <= 1'b0;
      unique case (st)
        T_IDLE: ;
        T_SQ: begin
          if (mm_out_v) begin
            omega_m <= mm_p;
            sq_left <= sq_left - 1'b1;
          end else if (!busy && sq_left == 0) begin
            st <= T_NEXT;
          end
        end
        T_NEXT: begin
          if (mm_out_v) begin
            nxt    <= mm_p;
            nxt_ok <= 1'b1;
          end
          if (step) begin
            omega  <= nxt;
            nxt_ok <= 1'b0;
          end
        end
        default: st <= T_IDLE;
      endcase
      if (setup) begin
        st      <= T_SQ;
        omega_m <= base;
        omega   <= W'(1);
        sq_left <= sq;
        nxt_ok  <= 1'b0;
      end
    end
  end

  assign ready = (st == T_NEXT) && nxt_ok;

  // a step is only legal when the next factor is available
  assert property (@(posedge clk) disable iff (!rst_n) step |-> ready);
endmodule
