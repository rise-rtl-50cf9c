// rise_csr -- memory-mapped control and status registers of the accelerator
// (the MMIO side of the host interface).
//
// 64-bit registers on a simple synchronous bus (csr_en, csr_we, csr_addr,
// csr_wdata; csr_rdata is combinational). Register map (word index):
//   0x00 CTRL    write: bit0 start, bits[2:1] op (1 enc c0, 2 enc c1, 3 dec)
//   0x01 STATUS  read: bit0 busy, bit1 done; write bit1 = 1 clears done
//   0x02 LOGN    0x03 Q    0x04 MU (floor(2^60/q))    0x05 W_N
//   0x06 W_N_INV 0x07 N_INV
//   0x08 ADDR_A  0x09 ADDR_B 0x0A ADDR_C 0x0B ADDR_OUT (DMA word addresses)
//   0x10..0x28   SEED lanes 0..24 (1600-bit PRNG seed)
// 'irq' is the done flag: it rises when a command completes and stays until
// the host clears it. A start is ignored while busy.
module rise_csr
  import rise_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         csr_en,
  input  logic         csr_we,
  input  logic [7:0]   csr_addr,
  input  logic [63:0]  csr_wdata,
  output logic [63:0]  csr_rdata,
  output rise_cfg_t    cfg,
  output logic [1599:0] seed,
  output logic         cmd_start,
  output rise_op_e     cmd_op,
  input  logic         busy,
  input  logic         cmd_done,
  output logic         irq
);
  logic done_q;
  logic wr;
  assign wr = csr_en && csr_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0; seed <= '0; done_q <= 1'b0; cmd_start <= 1'b0; cmd_op <= OP_NONE;
    end else begin
      cmd_start <= 1'b0;
      if (cmd_done) done_q <= 1'b1;
      if (wr) begin
        unique case (csr_addr)
          8'h00: if (csr_wdata[0] && !busy) begin
            cmd_start <= 1'b1;
            cmd_op    <= rise_op_e'(csr_wdata[2:1]);
            done_q    <= 1'b0;
          end
          8'h01: if (csr_wdata[1]) done_q <= 1'b0;
          8'h02: cfg.logn     <= csr_wdata[3:0];
          8'h03: cfg.q        <= csr_wdata[Q_W-1:0];
          8'h04: cfg.mu       <= csr_wdata[2*Q_W-1:0];
          8'h05: cfg.w_n      <= csr_wdata[Q_W-1:0];
          8'h06: cfg.w_n_inv  <= csr_wdata[Q_W-1:0];
          8'h07: cfg.n_inv    <= csr_wdata[Q_W-1:0];
          8'h08: cfg.addr_a   <= csr_wdata[MEM_AW-1:0];
          8'h09: cfg.addr_b   <= csr_wdata[MEM_AW-1:0];
          8'h0A: cfg.addr_c   <= csr_wdata[MEM_AW-1:0];
          8'h0B: cfg.addr_out <= csr_wdata[MEM_AW-1:0];
          default: if (csr_addr >= 8'h10 && csr_addr < 8'h29)
            seed[64*(csr_addr-8'h10) +: 64] <= csr_wdata;
        endcase
      end
    end
  end

  always_comb begin
    csr_rdata = '0;
    unique case (csr_addr)
      8'h00: csr_rdata = {61'd0, cmd_op, 1'b0};
      8'h01: csr_rdata = {62'd0, done_q, busy};
      8'h02: csr_rdata = 64'(cfg.logn);
      8'h03: csr_rdata = 64'(cfg.q);
      8'h04: csr_rdata = 64'(cfg.mu);
      8'h05: csr_rdata = 64'(cfg.w_n);
      8'h06: csr_rdata = 64'(cfg.w_n_inv);
      8'h07: csr_rdata = 64'(cfg.n_inv);
      8'h08: csr_rdata = 64'(cfg.addr_a);
      8'h09: csr_rdata = 64'(cfg.addr_b);
      8'h0A: csr_rdata = 64'(cfg.addr_c);
      8'h0B: csr_rdata = 64'(cfg.addr_out);
      default: if (csr_addr >= 8'h10 && csr_addr < 8'h29)
        csr_rdata = seed[64*(csr_addr-8'h10) +: 64];
    endcase
  end

  assign irq = done_q;
endmodule
