// tb_rise_top -- end-to-end test of the RISE accelerator at LOGN_MAX = 8.
//
// rise_tb_host programs the CSRs, holds the main memory and checks every
// output polynomial: ENC_C1, ENC_C0 and DEC exactly against a reference
// computed from the definitions, at N = 32, 64 and 256 (the ring size is a
// run-time register), plus a full encrypt/decrypt round trip with a real
// key pair at each size. This module counts the mechanisms of the design by
// watching the datapath and fails the test if one of them never happened:
//   twiddle stalls (butterflies held back while the next w is computed),
//   BFU mode switches (butterfly <-> add <-> multiply),
//   reorder-unit swaps (NTT) and reorder-unit bypass (pointwise ops),
//   write-buffer holds (a bank read taking the port from a buffered write),
//   ternary rejections, the on-the-fly add of e0 during the load of m,
//   sampling in parallel with a DMA load, a DMA load running on during the
//   NTT of the other bank group, memory back-pressure, and each
//   host operation and compute operation.
module tb_rise_top;
  import rise_pkg::*;
  localparam int LMAX = 8;
  logic clk = 0, rst_n = 1;
  logic csr_en, csr_we, irq;
  logic [7:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic finished;
  int h_checks, h_failures;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rise_top #(.LOGN_MAX(LMAX)) dut (.*);

  rise_tb_host #(.LMAX(LMAX), .NLOG(3), .LOGNS(32'h865)) host (
    .clk, .rst_n, .csr_en, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .irq,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .finished, .checks(h_checks), .failures(h_failures));

  // ---------------- mechanism counters
  int n_stall = 0, n_mode_sw = 0, n_ru_swap = 0, n_ru_bypass = 0, n_wb_hold = 0;
  int n_overlap = 0, n_reject = 0, n_dma_add = 0, n_par_load = 0, n_backpressure = 0;
  int n_enc0 = 0, n_enc1 = 0, n_dec = 0;
  int n_cmp [5] = '{0, 0, 0, 0, 0};
  logic [1:0] last_mode = 2'b00;

  always @(posedge clk) if (rst_n) begin
    n_stall = int'(dut.stall_cycles);
    if (dut.u_bfu.in_valid) begin
      if (dut.u_bfu.mode != last_mode) n_mode_sw++;
      last_mode <= dut.u_bfu.mode;
    end
    if (dut.bfu_ov &&  dut.ru_active) n_ru_swap++;
    if (dut.bfu_ov && !dut.ru_active) n_ru_bypass++;
    n_wb_hold += $countones(dut.u_bg0.wb_v & dut.u_bg0.rd_en) + $countones(dut.u_bg1.wb_v & dut.u_bg1.rd_en);
    if (dut.u_smp.wv && dut.u_smp.wr && !dut.u_smp.wide && !dut.u_smp.uni_ok) n_reject++;
    if (dut.u_dma.smp_valid && dut.u_dma.smp_ready) n_dma_add++;
    if (dut.smp_v && dut.smp_r && !dut.smp_to_dma && dut.dma_busy && !dut.dma_store) n_par_load++;
    if (mem_req && !mem_gnt) n_backpressure++;
    if (dut.dma_busy && !dut.dma_store && dut.cmp_busy) n_overlap++;
    if (dut.cmd_start) begin
      if (dut.cmd_op == OP_ENC_C0) n_enc0++;
      if (dut.cmd_op == OP_ENC_C1) n_enc1++;
      if (dut.cmd_op == OP_DEC)    n_dec++;
    end
    if (dut.cmp_start) n_cmp[int'(dut.cmp_op)]++;
  end

  task automatic need(input int cnt, input string what);
    checks++;
    $display("  %-28s %0d", what, cnt);
    if (cnt == 0) begin failures++; $display("FAIL: %s never happened", what); end
  endtask

  initial begin
    #400000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h_checks, failures + h_failures); $finish;
  end

  initial begin
    #1 rst_n = 0;
    #20 rst_n = 1;
    wait (finished);
    $display("mechanisms:");
    need(n_stall, "twiddle stall cycles");
    need(n_mode_sw, "BFU mode switches");
    need(n_ru_swap, "RU swapped pairs");
    need(n_ru_bypass, "RU bypassed results");
    need(n_wb_hold, "write-buffer holds");
    need(n_reject, "ternary rejections");
    need(n_dma_add, "e0 added during load");
    need(n_par_load, "samples during DMA load");
    need(n_backpressure, "memory back-pressure");
    need(n_overlap, "DMA load during NTT");
    need(n_enc0, "ENC_C0 operations");
    need(n_enc1, "ENC_C1 operations");
    need(n_dec, "DEC operations");
    need(n_cmp[0], "NTT passes");
    need(n_cmp[1], "INTT passes");
    need(n_cmp[2], "ADD passes");
    need(n_cmp[3], "MUL passes");
    need(n_cmp[4], "SCALE passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h_checks, failures + h_failures); $finish;
  end
endmodule
