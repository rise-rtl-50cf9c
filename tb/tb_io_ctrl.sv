// tb_io_ctrl -- the I/O controller's step sequences. Behavioural sampler, DMA
// and compute units answer each start with a done after a random delay, and
// bg_idle drops at random. For each operation the launches seen are compared
// with the expected schedule (unit, distribution, domain, address, bank
// group, compute operation), one line per step; the checker also fails if a
// step is launched while a unit of the previous step is still busy or the
// bank groups are not idle (step 1 follows a store, which leaves them
// idle), and checks busy/done. The one allowed overlap: in an encryption the
// pk load of step 1 may still run (into BG1) when the NTT of BG0 (step 2)
// starts; the test requires that this happened and that step 3 never starts
// before the load is done.
module tb_io_ctrl;
  import rise_pkg::*;
  logic clk = 0, rst_n = 1;
  logic start = 0;
  rise_op_e op = OP_NONE;
  logic [31:0] addr_a = 32'h100, addr_b = 32'h200, addr_c = 32'h300, addr_out = 32'h400;
  logic busy, done;
  logic smp_start, smp_to_dma, smp_done = 0;
  smp_dist_e smp_dist;
  logic [7:0] smp_domain;
  logic dma_start, dma_store, dma_add, dma_bg, dma_done = 0;
  logic [31:0] dma_base;
  logic cmp_start, cmp_bg, cmp_done = 0;
  logic [1:0] bg_idle = 2'b11;
  comp_op_e cmp_op;
  logic [3:0] step;
  int checks = 0, failures = 0;
  string seen [$];
  bit smp_busy = 0, dma_busy = 0, cmp_busy = 0;
  int n_done = 0;
  logic [1:0] idle_prev = 2'b11;
  int n_overlap = 0;
  bit enc;

  always #5 clk = ~clk;

  io_ctrl dut (.*);

  initial begin
    #2000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // record launches
  always @(posedge clk) begin
    string s;
    if (smp_start || dma_start || cmp_start) begin
      s = "";
      if (smp_start) s = {s, $sformatf("S%0d.%0d.%0d ", smp_dist, smp_domain, smp_to_dma)};
      if (dma_start) s = {s, $sformatf("D%0d.%0d.%0h.%0d ", dma_store, dma_add, dma_base, dma_bg)};
      if (cmp_start) s = {s, $sformatf("C%0d.%0d", cmp_op, cmp_bg)};
      seen.push_back(s);
      checks++;
      enc = (dut.op_q != OP_DEC);
      if (dma_busy && enc && step == 4'd2) n_overlap++;
      if (smp_busy || cmp_busy || (dma_busy && !(enc && step == 4'd2)) ||
          (step != 4'd1 && (!idle_prev[0] || (!idle_prev[1] && !(enc && step == 4'd2))))) begin
        failures++; $display("FAIL: launch %s while a unit is busy %0d%0d%0d %0d", s, smp_busy, dma_busy, cmp_busy, idle_prev);
      end
    end
    if (done) n_done++;
    idle_prev <= bg_idle;
  end

  // behavioural units
  initial forever begin
    @(negedge clk);
    if (smp_start) fork begin
      @(posedge clk); #1 smp_busy = 1; repeat (1 + $urandom % 20) @(negedge clk);
      smp_done = 1; smp_busy = 0; @(negedge clk); smp_done = 0;
    end join_none
    if (dma_start) fork begin
      @(posedge clk); #1 dma_busy = 1; repeat (1 + $urandom % 20) @(negedge clk);
      dma_done = 1; dma_busy = 0; @(negedge clk); dma_done = 0;
    end join_none
    if (cmp_start) fork begin
      @(posedge clk); #1 cmp_busy = 1; repeat (1 + $urandom % 20) @(negedge clk);
      cmp_done = 1; cmp_busy = 0; @(negedge clk); cmp_done = 0;
    end join_none
  end
  always @(negedge clk) bg_idle = {1'($urandom % 4 != 0), 1'($urandom % 4 != 0)};

  task automatic run(input rise_op_e o, input string exp [8]);
    int d0;
    d0 = n_done;
    seen.delete();
    @(negedge clk);
    op = o; start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL: not busy"); end
    wait (n_done == d0 + 1);
    repeat (2) @(negedge clk);
    checks++;
    if (busy || seen.size() != 8) begin failures++; $display("FAIL: op %0d: %0d steps", o, seen.size()); end
    for (int i = 0; i < 8 && i < seen.size(); i++) begin
      checks++;
      if (seen[i] != exp[i]) begin failures++; $display("FAIL: op %0d step %0d: '%s' expected '%s'", o, i+1, seen[i], exp[i]); end
    end
  endtask

  initial begin
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      // c1 = NTT(pk1)*NTT(mu) + NTT(e1); sampler domain 0 for mu, 2 for e1
      run(OP_ENC_C1, '{"S0.0.0 D0.0.100.1 ", "C0.0", "C0.1", "C3.0", "S1.2.0 ", "C0.0", "C2.0", "D1.0.400.1 "});
      // c0 = NTT(pk0)*NTT(mu) + NTT(m + e0); e0 from domain 1 added during the load of m
      run(OP_ENC_C0, '{"S0.0.0 D0.0.100.1 ", "C0.0", "C0.1", "C3.0", "S1.1.1 D0.1.200.0 ", "C0.0", "C2.0", "D1.0.400.1 "});
      // m = INTT(c0 + c1*s) / N
      run(OP_DEC, '{"D0.0.100.0 ", "D0.0.200.1 ", "C3.0", "D0.0.300.0 ", "C2.0", "C1.1", "C4.0", "D1.0.400.1 "});
    end
    checks++;
    if (n_overlap == 0) begin failures++; $display("FAIL: pk load never overlapped the NTT of mu"); end
    // OP_NONE is ignored
    @(negedge clk); op = OP_NONE; start = 1; @(negedge clk); start = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL: OP_NONE started"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
