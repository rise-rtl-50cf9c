// comp_ctrl -- computation controller: an FSM that runs one operation of the
// unified en/decryption datapath over the two bank groups.
//
// NTT / INTT (in place, on BG0 or BG1) follow NTT_swap4: log2(N) stages; in a
// stage the butterflies are issued in the order j (step 4, < 2m), k (step 4m,
// < N), l = 0..3 with position idx = j + k + {0, 2, 2m, 2m+2}[l]; butterfly
// (idx, idx+1) reads banks idx[1:0] and idx[1:0]+1 of row idx>>2, so
// consecutive butterflies alternate between banks {0,1} and {2,3}. m starts at
// 2, doubles each stage and wraps from N/4 back to 2. omega starts at 1 per
// stage and is multiplied by omega_m = omega_n^(2^(logN-1-stage)) after every
// N/2^(stage+1) butterflies; omega_m is formed by the twiddle generator at the
// start of each stage. A butterfly that needs a new omega before the
// generator has it is held back (stall). After the last butterfly of a stage
// the FSM waits until the BFU pipeline, the re-ordering unit and the write
// buffers are empty. INTT is the same with omega_n^-1 (1/N is a separate SCALE
// pass). Pointwise ADD, MUL (BG1 <- BG0 op BG1) and SCALE (BG1 <- c * BG1)
// stream i = 0..N-1, one element per cycle.
// Interface: bank read requests go out in cycle t; the side band r_* that
// describes the operands is valid in t+1, together with the bank read data.
module comp_ctrl
  import rise_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 14,
  parameter int unsigned W        = 30,
  localparam int unsigned ROW_W   = LOGN_MAX - 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  comp_op_e         op,
  input  logic             bg_sel,      // NTT/INTT target bank group
  input  logic [3:0]       logn,
  input  logic [W-1:0]     w_n,
  input  logic [W-1:0]     w_n_inv,
  output logic             busy,
  output logic             done,        // one-cycle pulse
  // bank read requests (cycle t)
  output logic [3:0]       rd_en_bg0,
  output logic [3:0]       rd_en_bg1,
  output logic [ROW_W-1:0] rd_row,
  // operand side band (cycle t+1)
  output logic             r_valid,
  output logic [1:0]       r_bank,
  output logic [ROW_W-1:0] r_row,
  output logic [W-1:0]     r_omega,
  output comp_op_e         r_op,
  output logic             r_bg,
  output logic [1:0]       bfu_mode,
  output logic             ru_active,
  output logic             wr_bg,       // bank group the results go to
  // twiddle generator
  output logic             tw_setup,
  output logic [W-1:0]     tw_base,
  output logic [3:0]       tw_sq,
  output logic             tw_step,
  input  logic [W-1:0]     tw_omega,
  input  logic             tw_ready,
  // datapath status
  input  logic             bfu_out_valid,
  input  logic             ru_empty,
  input  logic             bg_idle,
  // performance counters
  output logic [31:0]      stall_cycles,
  output logic [31:0]      busy_cycles
);
  typedef enum logic [2:0] {C_IDLE, C_SETUP, C_TWAIT, C_RUN, C_DRAIN} cstate_e;
  cstate_e st;

  comp_op_e            op_q;
  logic                bg_q;
  logic [3:0]          s, lm;
  logic [LOGN_MAX-1:0] jc, kc, upd, i;
  logic [1:0]          l;
  logic [7:0]          inflight;

  logic is_ntt;
  assign is_ntt = (op_q == CMP_NTT) || (op_q == CMP_INTT);

  // --- NTT position of the current butterfly
  logic [LOGN_MAX-1:0] off, idx, jmax, kmax, period;
  always_comb begin
    unique case (l)
      2'd0: off = '0;
      2'd1: off = LOGN_MAX'(2);
      2'd2: off = LOGN_MAX'(1) << (lm + 1);
      default: off = (LOGN_MAX'(1) << (lm + 1)) + LOGN_MAX'(2);
    endcase
    idx    = (jc << 2) + (kc << (lm + 2)) + off;
    jmax   = (LOGN_MAX'(1) << (lm - 1)) - 1'b1;
    kmax   = (LOGN_MAX'(1) << (logn - 4'd2 - lm)) - 1'b1;
    period = LOGN_MAX'(1) << (logn - 4'd1 - s);
  end

  logic need_step, issue, last;
  assign need_step = is_ntt && (upd == period);
  assign issue     = (st == C_RUN) && (!need_step || tw_ready);
  assign last      = is_ntt ? (l == 2'd3 && kc == kmax && jc == jmax)
                            : (i == (LOGN_MAX'(1) << logn) - 1'b1);

  // --- read requests
  always_comb begin
    rd_en_bg0 = '0;
    rd_en_bg1 = '0;
    rd_row    = is_ntt ? ROW_W'(idx >> 2) : ROW_W'(i >> 2);
    if (issue) begin
      if (is_ntt) begin
        if (bg_q) rd_en_bg1 = 4'b0011 << idx[1:0];
        else      rd_en_bg0 = 4'b0011 << idx[1:0];
      end else begin
        rd_en_bg1 = 4'b0001 << i[1:0];
        if (op_q != CMP_SCALE) rd_en_bg0 = 4'b0001 << i[1:0];
      end
    end
  end

  assign tw_setup  = (st == C_SETUP);
  assign tw_base   = (op_q == CMP_INTT) ? w_n_inv : w_n;
  assign tw_sq     = logn - 4'd1 - s;
  assign tw_step   = issue && need_step;
  assign busy      = (st != C_IDLE);
  assign ru_active = is_ntt;
  assign wr_bg     = is_ntt ? bg_q : 1'b1;
  assign r_op      = op_q;
  assign r_bg      = bg_q;
  assign bfu_mode  = is_ntt ? 2'b00 : (op_q == CMP_ADD) ? 2'b10 : 2'b11;

  logic drained;
  assign drained = (inflight == 0) && !r_valid && ru_empty && bg_idle && (!is_ntt || tw_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; op_q <= CMP_NTT; bg_q <= 1'b0;
      s <= '0; lm <= 4'd1; jc <= '0; kc <= '0; l <= '0; upd <= LOGN_MAX'(1); i <= '0;
      inflight <= '0; done <= 1'b0; r_valid <= 1'b0;
      stall_cycles <= '0; busy_cycles <= '0;
    end else begin
      done    <= 1'b0;
      r_valid <= issue;
      inflight <= inflight + 8'(issue) - 8'(bfu_out_valid);
      if (st != C_IDLE) busy_cycles <= busy_cycles + 1'b1;
      if (st == C_RUN && !issue) stall_cycles <= stall_cycles + 1'b1;
      unique case (st)
        C_IDLE: if (start) begin
          op_q <= op; bg_q <= bg_sel;
          s <= '0; lm <= 4'd1; jc <= '0; kc <= '0; l <= '0; upd <= LOGN_MAX'(1); i <= '0;
          st <= ((op == CMP_NTT) || (op == CMP_INTT)) ? C_SETUP : C_RUN;
        end
        C_SETUP: st <= C_TWAIT;
        C_TWAIT: if (tw_ready) st <= C_RUN;
        C_RUN: if (issue) begin
          if (is_ntt) begin
            upd <= need_step ? LOGN_MAX'(1) : upd + 1'b1;
            l   <= l + 1'b1;
            if (l == 2'd3) begin
              if (kc == kmax) begin
                kc <= '0;
                jc <= jc + 1'b1;
              end else begin
                kc <= kc + 1'b1;
              end
            end
          end else begin
            i <= i + 1'b1;
          end
          if (last) st <= C_DRAIN;
        end
        C_DRAIN: if (drained) begin
          if (is_ntt && s != logn - 4'd1) begin
            s   <= s + 1'b1;
            lm  <= (lm == logn - 4'd2) ? 4'd1 : lm + 1'b1;
            jc  <= '0; kc <= '0; l <= '0; upd <= LOGN_MAX'(1);
            st  <= C_SETUP;
          end else begin
            st   <= C_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    r_bank  <= is_ntt ? idx[1:0] : i[1:0];
    r_row   <= rd_row;
    r_omega <= tw_omega;
  end
endmodule
