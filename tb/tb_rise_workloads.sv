// tb_rise_workloads -- the RISE top at its default size running the ring
// sizes and modulus sizes of the evaluated parameter sets: (N, log Q) =
// (1024, 27), (2048, 30), (4096, 90), (8192, 180), (16384, 390), one 30-bit
// (27-bit for the first) RNS limb per accelerator call, so 1, 1, 3, 6 and 13
// limbs; plus N = 256 and 512 with one 30-bit limb. Every limb runs ENC_C1,
// ENC_C0 and DEC with its own prime; 16 random coefficients of every result
// are checked against the reference in rise_tb_host. Prints the cycle count
// of each operation and of the first NTT pass at each N. Host checks per
// limb: 3 x 16 coefficients, 3 completions and the order of w.
module tb_rise_workloads;
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
  longint cyc = 0, t0 = 0;
  logic [3:0] last_logn = 0;

  always #5 clk = ~clk;

  rise_top dut (.*);

  rise_tb_host #(.LMAX(14), .NLOG(7), .LOGNS(32'hEDCBA98), .LIMBS(32'hD631111),
                 .QBITS(64'h001e1e1e1e1b1e1e), .ROUNDTRIP(1'b0), .SPOT(16)) host (
    .clk, .rst_n, .csr_en, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .irq,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .finished, .checks(h_checks), .failures(h_failures));

  // cycle count of the first forward NTT at each ring size
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.cmp_start && dut.cmp_op == CMP_NTT) t0 <= cyc;
    if (dut.cmp_done && dut.u_comp.op_q == CMP_NTT && dut.cfg.logn != last_logn) begin
      $display("NTT N=%0d: %0d cycles", 1 << dut.cfg.logn, cyc - t0);
      last_logn <= dut.cfg.logn;
    end
  end

  initial begin
    #2000000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h_checks, failures + h_failures); $finish;
  end

  initial begin
    #1 rst_n = 0;
    #20 rst_n = 1;
    wait (finished);
    checks++;
    if (h_checks != 26 * (3 * 16 + 3 + 1)) begin failures++; $display("FAIL: %0d coefficients checked", h_checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks + h_checks, failures + h_failures); $finish;
  end
endmodule
