// rise_top -- the RISE accelerator: error sampling, unified en/decryption
// datapath and two-bank-group on-chip memory behind a CSR (MMIO) port and a
// DMA memory port. The host core and its memory system attach to these ports.
//
// Blocks: rise_csr (registers, irq), io_ctrl (step sequencer), comp_ctrl
// (NTT_swap4 / pointwise FSM), twiddle_gen, bfu, reorder_unit, two
// bank_groups (BG0, BG1: 4 x 1RW banks with write buffers each),
// error_sampler (Keccak PRNG, converter, binomial and ternary samplers) and
// dma. The glue here routes bank reads to the BFU operands, BFU results via
// the RU to the destination bank group, and gives each bank group's write
// port to the unit that owns it in the current step (sampler, DMA or RU).
// Operation: program CSRs, write CTRL; irq rises when the result polynomial
// has been written to memory at ADDR_OUT (N 32-bit words).
// mem_wdata[31:30] are always zero: stored coefficients are below 2^30.
module rise_top
  import rise_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 14,
  parameter int unsigned W        = Q_W,
  localparam int unsigned ROW_W   = LOGN_MAX - 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // host CSR bus
  input  logic              csr_en,
  input  logic              csr_we,
  input  logic [7:0]        csr_addr,
  input  logic [63:0]       csr_wdata,
  output logic [63:0]       csr_rdata,
  output logic              irq,
  // DMA memory port
  output logic              mem_req,
  output logic              mem_we,
  output logic [MEM_AW-1:0] mem_addr,
  output logic [MEM_DW-1:0] mem_wdata,
  input  logic              mem_gnt,
  input  logic              mem_rvalid,
  input  logic [MEM_DW-1:0] mem_rdata
);
  rise_cfg_t     cfg;
  logic [1599:0] seed;
  logic          cmd_start, io_busy, io_done;
  rise_op_e      cmd_op;

  rise_csr u_csr (
    .clk, .rst_n, .csr_en, .csr_we, .csr_addr, .csr_wdata, .csr_rdata,
    .cfg, .seed, .cmd_start, .cmd_op, .busy(io_busy), .cmd_done(io_done), .irq);

  // ---------------- I/O controller
  logic       smp_start, smp_to_dma, smp_done;
  smp_dist_e  smp_dist;
  logic [7:0] smp_domain;
  logic       dma_start, dma_store, dma_add, dma_bg, dma_done, dma_busy;
  logic [MEM_AW-1:0] dma_base;
  logic       cmp_start, cmp_bg, cmp_done, cmp_busy;
  comp_op_e   cmp_op;
  logic       bg0_idle, bg1_idle, bg_wr_idle;
  logic [3:0] io_step;

  io_ctrl #(.AW(MEM_AW)) u_io (
    .clk, .rst_n, .start(cmd_start), .op(cmd_op),
    .addr_a(cfg.addr_a), .addr_b(cfg.addr_b), .addr_c(cfg.addr_c), .addr_out(cfg.addr_out),
    .busy(io_busy), .done(io_done),
    .smp_start, .smp_dist, .smp_domain, .smp_to_dma, .smp_done,
    .dma_start, .dma_store, .dma_add, .dma_base, .dma_bg, .dma_done,
    .cmp_start, .cmp_op, .cmp_bg, .cmp_done, .bg_idle({bg1_idle, bg0_idle}), .step(io_step));


  // ---------------- bank groups
  logic [3:0]       bg0_rd_en, bg1_rd_en, bg0_push, bg1_push, bg0_rdy, bg1_rdy;
  logic [ROW_W-1:0] bg0_rd_row [4];
  logic [ROW_W-1:0] bg1_rd_row [4];
  logic [ROW_W-1:0] bg0_wr_row [4];
  logic [ROW_W-1:0] bg1_wr_row [4];
  logic [W-1:0]     bg0_rd_data [4];
  logic [W-1:0]     bg1_rd_data [4];
  logic [W-1:0]     bg0_wr_data [4];
  logic [W-1:0]     bg1_wr_data [4];

  bank_group #(.LOGN_MAX(LOGN_MAX), .W(W)) u_bg0 (
    .clk, .rst_n, .rd_en(bg0_rd_en), .rd_row(bg0_rd_row), .rd_data(bg0_rd_data),
    .wr_push(bg0_push), .wr_row(bg0_wr_row), .wr_data(bg0_wr_data), .wr_ready(bg0_rdy),
    .idle(bg0_idle));
  bank_group #(.LOGN_MAX(LOGN_MAX), .W(W)) u_bg1 (
    .clk, .rst_n, .rd_en(bg1_rd_en), .rd_row(bg1_rd_row), .rd_data(bg1_rd_data),
    .wr_push(bg1_push), .wr_row(bg1_wr_row), .wr_data(bg1_wr_data), .wr_ready(bg1_rdy),
    .idle(bg1_idle));

  // ---------------- computation controller, twiddles, BFU, RU
  // the controller drains only the group it writes: the other one may be
  // taking a DMA load at the same time
  logic [3:0]       c_rd0, c_rd1;
  logic [ROW_W-1:0] c_rd_row, r_row;
  logic             r_valid, r_bg, ru_active, wr_bg;
  logic [1:0]       r_bank, bfu_mode;
  logic [W-1:0]     r_omega;
  comp_op_e         r_op;
  logic             tw_setup, tw_step, tw_ready;
  logic [W-1:0]     tw_base, tw_omega;
  logic [3:0]       tw_sq;
  logic             bfu_ov, ru_empty;
  logic [W-1:0]     bfu_o0, bfu_o1;
  logic [ROW_W+1:0] bfu_otag;
  logic [31:0]      stall_cycles, busy_cycles;

  assign bg_wr_idle = wr_bg ? bg1_idle : bg0_idle;

  comp_ctrl #(.LOGN_MAX(LOGN_MAX), .W(W)) u_comp (
    .clk, .rst_n, .start(cmp_start), .op(cmp_op), .bg_sel(cmp_bg), .logn(cfg.logn),
    .w_n(cfg.w_n), .w_n_inv(cfg.w_n_inv), .busy(cmp_busy), .done(cmp_done),
    .rd_en_bg0(c_rd0), .rd_en_bg1(c_rd1), .rd_row(c_rd_row),
    .r_valid, .r_bank, .r_row, .r_omega, .r_op, .r_bg, .bfu_mode, .ru_active, .wr_bg,
    .tw_setup, .tw_base, .tw_sq, .tw_step, .tw_omega, .tw_ready,
    .bfu_out_valid(bfu_ov), .ru_empty, .bg_idle(bg_wr_idle), .stall_cycles, .busy_cycles);

  twiddle_gen #(.W(W)) u_tw (
    .clk, .rst_n, .q(cfg.q), .mu(cfg.mu), .setup(tw_setup), .base(tw_base), .sq(tw_sq),
    .step(tw_step), .omega(tw_omega), .omega_m(), .ready(tw_ready));

  // operand selection from the bank read data
  logic [W-1:0] op_u, op_v;
  always_comb begin
    if (r_op == CMP_NTT || r_op == CMP_INTT) begin
      op_u = r_bg ? bg1_rd_data[r_bank]        : bg0_rd_data[r_bank];
      op_v = r_bg ? bg1_rd_data[r_bank + 2'd1] : bg0_rd_data[r_bank + 2'd1];
    end else if (r_op == CMP_SCALE) begin
      op_u = cfg.n_inv;
      op_v = bg1_rd_data[r_bank];
    end else begin
      op_u = bg0_rd_data[r_bank];
      op_v = bg1_rd_data[r_bank];
    end
  end

  bfu #(.W(W), .TAG_W(ROW_W + 2)) u_bfu (
    .clk, .rst_n, .q(cfg.q), .mu(cfg.mu), .in_valid(r_valid), .mode(bfu_mode),
    .u(op_u), .v(op_v), .w(r_omega), .in_tag({r_row, r_bank}),
    .out_valid(bfu_ov), .out0(bfu_o0), .out1(bfu_o1), .out_tag(bfu_otag));

  logic [3:0]       ru_wv, ru_rdy;
  logic [ROW_W-1:0] ru_row  [4];
  logic [W-1:0]     ru_data [4];

  reorder_unit #(.W(W), .ROW_W(ROW_W)) u_ru (
    .clk, .rst_n, .clear(cmp_start), .active(ru_active), .in_valid(bfu_ov),
    .in_x(bfu_o0), .in_y(bfu_o1), .in_row(bfu_otag[ROW_W+1:2]), .in_bank(bfu_otag[1:0]),
    .wr_valid(ru_wv), .wr_row(ru_row), .wr_data(ru_data), .wr_ready(ru_rdy), .empty(ru_empty));

  // ---------------- error sampler and DMA
  logic         smp_v, smp_r, dma_smp_r;
  logic [W-1:0] smp_d;
  logic [LOGN_MAX-1:0] smp_idx, smp_pos;

  error_sampler #(.W(W), .CNT_W(LOGN_MAX + 1)) u_smp (
    .clk, .rst_n, .start(smp_start), .distr(smp_dist), .domain(smp_domain),
    .count((LOGN_MAX+1)'(1) << cfg.logn), .seed, .q(cfg.q),
    .out_valid(smp_v), .out_ready(smp_r), .out_data(smp_d), .done(smp_done));

  logic [3:0]       d_push, d_rd;
  logic [ROW_W-1:0] d_wr_row, d_rd_row;
  logic [W-1:0]     d_wr_data;

  dma #(.LOGN_MAX(LOGN_MAX), .W(W), .AW(MEM_AW), .DW(MEM_DW)) u_dma (
    .clk, .rst_n, .start(dma_start), .store(dma_store), .add_smp(dma_add), .base(dma_base),
    .logn(cfg.logn), .q(cfg.q), .busy(dma_busy), .done(dma_done),
    .smp_valid(smp_v), .smp_ready(dma_smp_r), .smp_data(smp_d),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .wr_push(d_push), .wr_row(d_wr_row), .wr_data(d_wr_data),
    .wr_ready(dma_bg ? bg1_rdy : bg0_rdy),
    .rd_en(d_rd), .rd_row(d_rd_row), .rd_data(bg1_rd_data));

  // sampler writes coefficient i to position bitrev(i) of BG0
  assign smp_pos = bitrev_n(smp_idx, cfg.logn);
  assign smp_r   = smp_to_dma ? dma_smp_r : bg0_rdy[smp_pos[1:0]];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         smp_idx <= '0;
    else if (smp_start)                 smp_idx <= '0;
    else if (smp_v && smp_r && !smp_to_dma) smp_idx <= smp_idx + 1'b1;
  end

  // ---------------- bank group port routing
  logic ru_to0, ru_to1, dma_to0, dma_to1;
  assign ru_to0  = cmp_busy && !wr_bg;
  assign ru_to1  = cmp_busy &&  wr_bg;
  assign dma_to0 = dma_busy && !dma_store && !dma_bg;
  assign dma_to1 = dma_busy && !dma_store &&  dma_bg;

  always_comb begin
    bg0_rd_en = c_rd0;
    bg1_rd_en = c_rd1 | d_rd;
    for (int b = 0; b < 4; b++) begin
      bg0_rd_row[b] = c_rd_row;
      bg1_rd_row[b] = (dma_busy && dma_store) ? d_rd_row : c_rd_row;
      // BG0 writers
      if (ru_to0) begin
        bg0_push[b] = ru_wv[b]; bg0_wr_row[b] = ru_row[b]; bg0_wr_data[b] = ru_data[b];
      end else if (dma_to0) begin
        bg0_push[b] = d_push[b]; bg0_wr_row[b] = d_wr_row; bg0_wr_data[b] = d_wr_data;
      end else begin
        bg0_push[b]    = smp_v && !smp_to_dma && (smp_pos[1:0] == 2'(b));
        bg0_wr_row[b]  = ROW_W'(smp_pos >> 2);
        bg0_wr_data[b] = smp_d;
      end
      // BG1 writers
      if (ru_to1) begin
        bg1_push[b] = ru_wv[b]; bg1_wr_row[b] = ru_row[b]; bg1_wr_data[b] = ru_data[b];
      end else begin
        bg1_push[b] = dma_to1 && d_push[b]; bg1_wr_row[b] = d_wr_row; bg1_wr_data[b] = d_wr_data;
      end
    end
    ru_rdy = wr_bg ? bg1_rdy : bg0_rdy;
  end
endmodule
