// tb_rise_csr -- the memory-mapped register file. Random values are written
// to every configuration register and seed lane and read back (masked to the
// field widths) and compared with the cfg/seed outputs; CTRL.start must give
// a one-cycle cmd_start with the written op, be ignored while busy, and a
// cmd_done must set STATUS.done and irq until it is cleared by a write of 1 to
// STATUS bit 1 or by the next start.
module tb_rise_csr;
  import rise_pkg::*;
  logic clk = 0, rst_n = 1;
  logic csr_en = 0, csr_we = 0;
  logic [7:0] csr_addr = 0;
  logic [63:0] csr_wdata = 0, csr_rdata;
  rise_cfg_t cfg;
  logic [1599:0] seed;
  logic cmd_start, busy = 0, cmd_done = 0, irq;
  rise_op_e cmd_op;
  int checks = 0, failures = 0;
  int n_start = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (cmd_start) n_start++;

  rise_csr dut (.*);

  initial begin
    #1000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); csr_en = 1; csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_en = 0; csr_we = 0;
  endtask
  task automatic rd_check(input logic [7:0] a, input logic [63:0] e, input string what);
    @(negedge clk); csr_en = 1; csr_we = 0; csr_addr = a; #1;
    checks++;
    if (csr_rdata !== e) begin failures++; $display("FAIL: %s read %h exp %h", what, csr_rdata, e); end
    @(negedge clk); csr_en = 0;
  endtask
  function automatic logic [63:0] mask(input int w);
    return (w >= 64) ? '1 : ((64'd1 << w) - 1);
  endfunction

  initial begin
    logic [63:0] v [12];
    logic [63:0] s [25];
    int widths [12] = '{0, 0, 4, 30, 60, 30, 30, 30, 32, 32, 32, 32};
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int a = 2; a < 12; a++) begin
        v[a] = {$urandom, $urandom} & mask(widths[a]);
        wr(8'(a), {$urandom, $urandom} & ~mask(widths[a]) | v[a]);
      end
      for (int l = 0; l < 25; l++) begin s[l] = {$urandom, $urandom}; wr(8'(16 + l), s[l]); end
      for (int a = 2; a < 12; a++) rd_check(8'(a), v[a], $sformatf("reg %0d", a));
      for (int l = 0; l < 25; l++) begin
        rd_check(8'(16 + l), s[l], "seed");
        checks++;
        if (seed[64*l +: 64] !== s[l]) begin failures++; $display("FAIL: seed lane %0d", l); end
      end
      checks++;
      if (64'(cfg.logn) !== v[2] || 64'(cfg.q) !== v[3] || 64'(cfg.mu) !== v[4] || 64'(cfg.w_n) !== v[5] ||
          64'(cfg.w_n_inv) !== v[6] || 64'(cfg.n_inv) !== v[7] || 64'(cfg.addr_a) !== v[8] ||
          64'(cfg.addr_b) !== v[9] || 64'(cfg.addr_c) !== v[10] || 64'(cfg.addr_out) !== v[11]) begin
        failures++; $display("FAIL: cfg outputs");
      end
      // command
      begin
        int n0, o;
        n0 = n_start; o = 1 + rep % 3;
        wr(8'h00, 64'(1 + 2 * o));
        @(negedge clk);
        checks++;
        if (n_start != n0 + 1 || cmd_op !== rise_op_e'(o)) begin failures++; $display("FAIL: start"); end
        busy = 1;
        wr(8'h00, 64'(1 + 2 * o));
        @(negedge clk);
        checks++;
        if (n_start != n0 + 1) begin failures++; $display("FAIL: start accepted while busy"); end
        rd_check(8'h01, 64'h1, "status busy");
        @(negedge clk); cmd_done = 1; busy = 0; @(negedge clk); cmd_done = 0;
        checks++;
        if (!irq) begin failures++; $display("FAIL: irq"); end
        rd_check(8'h01, 64'h2, "status done");
        if (rep % 2 == 0) wr(8'h01, 64'h2);
        else wr(8'h00, 64'(1 + 2 * o));
        checks++;
        if (irq) begin failures++; $display("FAIL: irq not cleared"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
