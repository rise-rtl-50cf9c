// dma -- moves one polynomial between main memory and a bank group.
//
// Load: for i = 0..N-1 read word base+i from memory and write it to position
// bitrev(i) of the target bank group (the bit-reversed input order that
// NTT_swap4 expects). With add_smp set, each word is first added modulo q to
// the next coefficient of the error-sampler stream (this forms m + e0 while m
// is loaded). Store: for i = 0..N-1 read position phy_addr(i) of BG1 (the
// output permutation of NTT_swap4) and write it to word base+i.
// Memory port: req/we/addr/wdata with gnt; read data returns with rvalid.
// One request is outstanding at a time, so a load takes about 3 cycles per
// coefficient plus the memory latency.
// mem_wdata carries a coefficient (< q < 2^30) in a 32-bit word; its two top
// bits are always zero.
module dma
  import rise_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 14,
  parameter int unsigned W        = 30,
  parameter int unsigned AW       = 32,
  parameter int unsigned DW       = 32,
  localparam int unsigned ROW_W   = LOGN_MAX - 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             store,        // 0: load, 1: store
  input  logic             add_smp,
  input  logic [AW-1:0]    base,
  input  logic [3:0]       logn,
  input  logic [W-1:0]     q,
  output logic             busy,
  output logic             done,         // one-cycle pulse
  // sampler stream (load with add)
  input  logic             smp_valid,
  output logic             smp_ready,
  input  logic [W-1:0]     smp_data,
  // memory port
  output logic             mem_req,
  output logic             mem_we,
  output logic [AW-1:0]    mem_addr,
  output logic [DW-1:0]    mem_wdata,
  input  logic             mem_gnt,
  input  logic             mem_rvalid,
  input  logic [DW-1:0]    mem_rdata,
  // bank group write (load)
  output logic [3:0]       wr_push,
  output logic [ROW_W-1:0] wr_row,
  output logic [W-1:0]     wr_data,
  input  logic [3:0]       wr_ready,
  // bank group read (store, BG1)
  output logic [3:0]       rd_en,
  output logic [ROW_W-1:0] rd_row,
  input  logic [W-1:0]     rd_data [4]
);
  typedef enum logic [2:0] {D_IDLE, D_REQ, D_WAIT, D_ADD, D_PUSH, D_RD, D_CAP, D_WR} dstate_e;
  dstate_e             st;
  logic                add_q;
  logic [AW-1:0]       base_q;
  logic [LOGN_MAX:0]   i;
  logic [W-1:0]        data;
  logic [LOGN_MAX-1:0] wpos, rpos;
  logic [W:0]          sum;

  assign wpos = bitrev_n(i[LOGN_MAX-1:0], logn);
  assign rpos = phy_addr(i[LOGN_MAX-1:0], logn);
  assign sum  = {1'b0, data} + {1'b0, smp_data};

  assign busy      = (st != D_IDLE);
  assign mem_req   = (st == D_REQ) || (st == D_WR);
  assign mem_we    = (st == D_WR);
  assign mem_addr  = base_q + AW'(i);
  assign mem_wdata = DW'(data);
  assign smp_ready = (st == D_ADD);
  assign wr_push   = (st == D_PUSH) ? (4'b0001 << wpos[1:0]) : 4'b0000;
  assign wr_row    = ROW_W'(wpos >> 2);
  assign wr_data   = data;
  assign rd_en     = (st == D_RD) ? (4'b0001 << rpos[1:0]) : 4'b0000;
  assign rd_row    = ROW_W'(rpos >> 2);

  logic last;
  assign last = (i == (LOGN_MAX+1)'((LOGN_MAX+1)'(1) << logn) - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; i <= '0; done <= 1'b0; add_q <= 1'b0;
      base_q <= '0; data <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (start) begin
          add_q <= add_smp; base_q <= base; i <= '0;
          st <= store ? D_RD : D_REQ;
        end
        D_REQ:  if (mem_gnt) st <= D_WAIT;
        D_WAIT: if (mem_rvalid) begin
          data <= W'(mem_rdata);
          st   <= add_q ? D_ADD : D_PUSH;
        end
        D_ADD: if (smp_valid) begin
          data <= (sum >= {1'b0, q}) ? W'(sum - {1'b0, q}) : sum[W-1:0];
          st   <= D_PUSH;
        end
        D_PUSH: if (wr_ready[wpos[1:0]]) begin
          i <= i + 1'b1;
          if (last) begin st <= D_IDLE; done <= 1'b1; end
          else st <= D_REQ;
        end
        D_RD:  st <= D_CAP;
        D_CAP: begin data <= rd_data[rpos[1:0]]; st <= D_WR; end
        D_WR:  if (mem_gnt) begin
          i <= i + 1'b1;
          if (last) begin st <= D_IDLE; done <= 1'b1; end
          else st <= D_RD;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
