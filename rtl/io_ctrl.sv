// io_ctrl -- I/O controller: turns a host command into the sequence of
// sampling, DMA and compute steps of the unified en/decryption flow, using
// only the two bank groups (memory reuse).
//
// Encryption half (c1 = pk1*mu + e1, or c0 = pk0*mu + m + e0), all products in
// the NTT domain:
//   1 sample mu (ternary) -> BG0, in parallel start loading pk -> BG1
//   2 NTT BG0 (the pk load may still be running)   3 NTT BG1   4 MUL: BG1 <- BG0*BG1
//   5 sample e1 -> BG0   (c0: load m, adding e0 on the fly, -> BG0)
//   6 NTT BG0   7 ADD: BG1 <- BG0+BG1   8 store BG1 -> out
// Decryption (m = c0 + c1*s, inputs already in the NTT domain):
//   1 load c1 -> BG0   2 load s -> BG1   3 MUL   4 load c0 -> BG0   5 ADD
//   6 INTT BG1   7 SCALE BG1 by 1/N   8 store BG1 -> out
// A step starts when the previous step's units have all finished and the
// write buffers are empty; 'done' pulses after the store. The one exception
// is the pk load of an encryption: as in the paper's memory-reuse timeline
// it overlaps both the sampling of mu and the NTT of mu, so step 1 ends when
// the sampler and BG0 are done, and step 3 (NTT of BG1) waits for the load.
// smp_domain is a byte because it is XORed into the seed top byte; only the
// values 0..2 are used, so its upper six bits are constant zero.
module io_ctrl
  import rise_pkg::*;
#(
  parameter int unsigned AW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  rise_op_e      op,
  input  logic [AW-1:0] addr_a,
  input  logic [AW-1:0] addr_b,
  input  logic [AW-1:0] addr_c,
  input  logic [AW-1:0] addr_out,
  output logic          busy,
  output logic          done,
  // error sampler
  output logic          smp_start,
  output smp_dist_e     smp_dist,
  output logic [7:0]    smp_domain,
  output logic          smp_to_dma,    // stream goes to the DMA adder, not to BG0
  input  logic          smp_done,
  // DMA
  output logic          dma_start,
  output logic          dma_store,
  output logic          dma_add,
  output logic [AW-1:0] dma_base,
  output logic          dma_bg,        // load target bank group
  input  logic          dma_done,
  // computation controller
  output logic          cmp_start,
  output comp_op_e      cmp_op,
  output logic          cmp_bg,
  input  logic          cmp_done,
  input  logic [1:0]    bg_idle,       // [g]: bank group g has no buffered write
  // step counter, for observation
  output logic [3:0]    step
);
  typedef enum logic [1:0] {I_IDLE, I_LAUNCH, I_WAIT} istate_e;
  istate_e  st;
  rise_op_e op_q;
  logic     use_smp, use_dma, use_cmp;
  logic     w_smp, w_dma, w_cmp;      // still waiting for
  logic     dma_lag;                  // this step may end while the pk load runs

  assign dma_lag = (op_q != OP_DEC) && (step == 4'd1);

  // step table
  always_comb begin
    use_smp = 1'b0; use_dma = 1'b0; use_cmp = 1'b0;
    smp_dist = SMP_UNIFORM; smp_domain = 8'd0; smp_to_dma = 1'b0;
    dma_store = 1'b0; dma_add = 1'b0; dma_base = addr_a; dma_bg = 1'b1;
    cmp_op = CMP_NTT; cmp_bg = 1'b0;
    if (op_q != OP_DEC) begin
      unique case (step)
        4'd1: begin use_smp = 1'b1; use_dma = 1'b1; dma_base = addr_a; dma_bg = 1'b1; end
        4'd2: begin use_cmp = 1'b1; cmp_op = CMP_NTT; cmp_bg = 1'b0; end
        4'd3: begin use_cmp = 1'b1; cmp_op = CMP_NTT; cmp_bg = 1'b1; end
        4'd4: begin use_cmp = 1'b1; cmp_op = CMP_MUL; end
        4'd5: begin
          use_smp  = 1'b1; smp_dist = SMP_BINOMIAL;
          if (op_q == OP_ENC_C0) begin
            smp_domain = 8'd1; smp_to_dma = 1'b1;
            use_dma = 1'b1; dma_add = 1'b1; dma_base = addr_b; dma_bg = 1'b0;
          end else begin
            smp_domain = 8'd2;
          end
        end
        4'd6: begin use_cmp = 1'b1; cmp_op = CMP_NTT; cmp_bg = 1'b0; end
        4'd7: begin use_cmp = 1'b1; cmp_op = CMP_ADD; end
        4'd8: begin use_dma = 1'b1; dma_store = 1'b1; dma_base = addr_out; end
        default: ;
      endcase
    end else begin
      unique case (step)
        4'd1: begin use_dma = 1'b1; dma_base = addr_a; dma_bg = 1'b0; end
        4'd2: begin use_dma = 1'b1; dma_base = addr_b; dma_bg = 1'b1; end
        4'd3: begin use_cmp = 1'b1; cmp_op = CMP_MUL; end
        4'd4: begin use_dma = 1'b1; dma_base = addr_c; dma_bg = 1'b0; end
        4'd5: begin use_cmp = 1'b1; cmp_op = CMP_ADD; end
        4'd6: begin use_cmp = 1'b1; cmp_op = CMP_INTT; cmp_bg = 1'b1; end
        4'd7: begin use_cmp = 1'b1; cmp_op = CMP_SCALE; end
        4'd8: begin use_dma = 1'b1; dma_store = 1'b1; dma_base = addr_out; end
        default: ;
      endcase
    end
  end

  assign smp_start = (st == I_LAUNCH) && use_smp;
  assign dma_start = (st == I_LAUNCH) && use_dma;
  assign cmp_start = (st == I_LAUNCH) && use_cmp;
  assign busy      = (st != I_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= I_IDLE; op_q <= OP_NONE; step <= '0; done <= 1'b0;
      w_smp <= 1'b0; w_dma <= 1'b0; w_cmp <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        I_IDLE: if (start && op != OP_NONE) begin
          op_q <= op; step <= 4'd1; st <= I_LAUNCH;
        end
        I_LAUNCH: begin
          w_smp <= use_smp; w_cmp <= use_cmp;
          w_dma <= use_dma || (w_dma && !dma_done);   // a pk load may still run
          st    <= I_WAIT;
        end
        I_WAIT: begin
          if (smp_done) w_smp <= 1'b0;
          if (dma_done) w_dma <= 1'b0;
          if (cmp_done) w_cmp <= 1'b0;
          if (!w_smp && !w_cmp && (!w_dma || dma_lag) && bg_idle[0] && (bg_idle[1] || dma_lag)) begin
            if (step == 4'd8) begin
              st <= I_IDLE; done <= 1'b1; step <= '0;
            end else begin
              step <= step + 1'b1; st <= I_LAUNCH;
            end
          end
        end
        default: st <= I_IDLE;
      endcase
    end
  end
endmodule
