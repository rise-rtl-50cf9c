// tb_rise_top_full -- the RISE top at its default size (LOGN_MAX = 14, 30-bit
// modulus), run at the largest ring, N = 16384: one encryption half (ENC_C1)
// and one decryption, each checked coefficient by coefficient against the
// reference in rise_tb_host (cyclic NTT by direct summation, software Keccak
// for the sampled polynomials). Also reports the cycle count of each
// operation.
module tb_rise_top_full;
  import rise_pkg::*;
  logic clk = 0, rst_n = 1;
  logic csr_en, csr_we, irq;
  logic [7:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic finished;
  int h_checks, h_failures;
  int checks = 0, failures = 0;
  longint cyc = 0, op_start = 0;

  always #5 clk = ~clk;

  rise_top dut (.*);

  rise_tb_host #(.LMAX(14), .NLOG(1), .LOGNS(32'he), .ROUNDTRIP(1'b0), .DO_ENC_C0(1'b0)) host (
    .clk, .rst_n, .csr_en, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .irq,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .finished, .checks(h_checks), .failures(h_failures));

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.cmd_start) op_start <= cyc;
    if (dut.io_done) $display("operation %0d took %0d cycles", dut.cmd_op, cyc - op_start);
  end

  initial begin
    #400000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h_checks, failures + h_failures); $finish;
  end

  initial begin
    #1 rst_n = 0;
    #20 rst_n = 1;
    wait (finished);
    checks++;
    if (h_checks < 2 * 16384) begin failures++; $display("FAIL: not every coefficient was checked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks + h_checks, failures + h_failures); $finish;
  end
endmodule
