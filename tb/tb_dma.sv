// tb_dma -- the DMA between a behavioural memory and a behavioural bank group.
// The memory grants requests at random and returns read data 1..3 cycles
// later; the bank-group model drops wr_ready at random and answers reads one
// cycle after rd_en. Checked: a load puts word base+i at bank bitrev(i)[1:0],
// row bitrev(i)>>2; a load with add_smp adds the sampler stream mod q in
// order; a store writes position phy_addr(i) to word base+i; 'done' pulses
// once per transfer and the stream handshake is never used in a plain load.
module tb_dma;
  import rise_pkg::*;
  localparam int LMAX = 8;
  localparam logic [29:0] Q = 30'd1073643521;
  logic clk = 0, rst_n = 1;
  logic start = 0, store = 0, add_smp = 0;
  logic [31:0] base = 0;
  logic [3:0] logn = 5;
  logic busy, done;
  logic smp_valid = 0, smp_ready;
  logic [29:0] smp_data = 0;
  logic mem_req, mem_we, mem_gnt = 0, mem_rvalid = 0;
  logic [31:0] mem_addr, mem_wdata, mem_rdata = 0;
  logic [3:0] wr_push, wr_ready = 4'hF, rd_en;
  logic [LMAX-3:0] wr_row, rd_row;
  logic [29:0] wr_data, rd_data [4];
  int checks = 0, failures = 0;

  logic [31:0] mem [4096];
  logic [29:0] bank [4][1 << (LMAX-2)];
  logic [29:0] smp_q [$];
  int n_done = 0;

  always #5 clk = ~clk;

  dma #(.LOGN_MAX(LMAX)) dut (.*, .q(Q));

  initial begin
    #20000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // memory: random grant, read data after 1..3 cycles
  initial begin
    forever begin
      @(negedge clk);
      mem_rvalid = 0;
      mem_gnt = mem_req && ($urandom % 2 == 0);
      if (mem_req && mem_gnt) begin
        logic [31:0] a;
        logic we;
        a = mem_addr; we = mem_we;
        if (we) mem[a[11:0]] = mem_wdata;
        @(negedge clk);
        mem_gnt = 0;
        if (!we) begin
          repeat ($urandom % 3) @(negedge clk);
          mem_rdata = mem[a[11:0]]; mem_rvalid = 1;
        end
      end
    end
  end

  // bank group: random back-pressure, reads answered next cycle
  always @(posedge clk) begin
    for (int b = 0; b < 4; b++) begin
      if (wr_push[b] && wr_ready[b]) bank[b][wr_row] <= wr_data;
      if (rd_en[b]) rd_data[b] <= bank[b][rd_row];
    end
    if (done) n_done++;
  end
  always @(negedge clk) wr_ready = 4'($urandom);

  // sampler stream
  always @(negedge clk) begin
    if (smp_valid && smp_ready) smp_valid = 0;
    else if (!smp_valid && $urandom % 2 == 0) begin
      smp_data = 30'($urandom % Q); smp_valid = 1;
    end
  end
  always @(posedge clk) if (smp_ready && smp_valid) smp_q.push_back(smp_data);
  always @(posedge clk) if (smp_ready && !add_smp) begin failures++; $display("FAIL: stream used in a plain transfer"); end

  task automatic xfer(input bit st, input bit add, input int ln, input int b);
    int d0;
    d0 = n_done;
    @(negedge clk);
    store = st; add_smp = add; logn = 4'(ln); base = 32'(b); start = 1;
    @(negedge clk);
    start = 0;
    wait (n_done == d0 + 1);
    repeat (3) @(negedge clk);
    checks++;
    if (n_done != d0 + 1 || busy) begin failures++; $display("FAIL: done count"); end
  endtask

  initial begin
    int n;
    for (int b = 0; b < 4; b++) for (int r = 0; r < (1 << (LMAX-2)); r++) bank[b][r] = '0;
    for (int i = 0; i < 4096; i++) mem[i] = $urandom % Q;
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int ln = 5; ln <= LMAX; ln++) begin
      n = 1 << ln;
      // plain load
      xfer(0, 0, ln, 100);
      for (int i = 0; i < n; i++) begin
        int p;
        p = int'(bitrev_n(LOGN_MAX'(i), 4'(ln)));
        checks++;
        if (bank[p % 4][p / 4] !== 30'(mem[100 + i])) begin
          failures++; $display("FAIL: load logn=%0d i=%0d", ln, i);
        end
      end
      // load with the sampler stream added
      smp_q.delete();
      xfer(0, 1, ln, 1000);
      for (int i = 0; i < n; i++) begin
        int p;
        logic [30:0] s;
        p = int'(bitrev_n(LOGN_MAX'(i), 4'(ln)));
        s = 31'(mem[1000 + i]) + 31'(smp_q[i]);
        if (s >= 31'(Q)) s = s - 31'(Q);
        checks++;
        if (bank[p % 4][p / 4] !== 30'(s)) begin
          failures++; $display("FAIL: load+add logn=%0d i=%0d", ln, i);
        end
      end
      // store
      xfer(1, 0, ln, 2500);
      for (int i = 0; i < n; i++) begin
        int p;
        p = int'(phy_addr(LOGN_MAX'(i), 4'(ln)));
        checks++;
        if (mem[2500 + i] !== 32'(bank[p % 4][p / 4])) begin
          failures++; $display("FAIL: store logn=%0d i=%0d", ln, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
