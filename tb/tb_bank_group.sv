// tb_bank_group -- random reads and buffered writes on a small bank group
// with a shadow model. Each cycle every bank may get a read and a write push;
// the test checks read data (one cycle later, with the write-buffer rules:
// a read wins, the buffered write lands on the next free cycle), that a
// push is refused only when the buffer is full and the bank is being read,
// and that 'idle' reports empty buffers.
module tb_bank_group;
  localparam int LOGN_MAX = 6, W = 30, ROW_W = LOGN_MAX - 2;
  logic clk = 0, rst_n = 1;
  logic [3:0] rd_en, wr_push, wr_ready;
  logic [ROW_W-1:0] rd_row [4];
  logic [ROW_W-1:0] wr_row [4];
  logic [W-1:0] rd_data [4];
  logic [W-1:0] wr_data [4];
  logic idle;
  int checks = 0, failures = 0, refused = 0;

  bank_group #(.LOGN_MAX(LOGN_MAX), .W(W)) dut (.clk, .rst_n, .rd_en, .rd_row, .rd_data,
                                                .wr_push, .wr_row, .wr_data, .wr_ready, .idle);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference: memory + one-entry buffer per bank
  logic [W-1:0] mem [4][1 << ROW_W];
  logic         bv [4];
  logic [ROW_W-1:0] brow [4];
  logic [W-1:0] bdat [4];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W-1:0] exp_rd [4];
    logic         exp_v  [4];
    #1 rst_n = 0;
    rd_en = 0; wr_push = 0;
    for (int b = 0; b < 4; b++) begin bv[b] = 0; rd_row[b] = 0; wr_row[b] = 0; wr_data[b] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // fill every location (no reads: every push is accepted)
    for (int r = 0; r < (1 << ROW_W); r++) begin
      @(negedge clk);
      for (int b = 0; b < 4; b++) begin
        wr_push[b] = 1; wr_row[b] = ROW_W'(r); wr_data[b] = W'($urandom);
        check(wr_ready[b], "push refused with no reads");
        mem[b][r] = wr_data[b];
      end
    end
    @(negedge clk) wr_push = 0;
    @(negedge clk);
    check(idle, "idle after fill");
    for (int b = 0; b < 4; b++) bv[b] = 0;
    // random traffic
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      for (int b = 0; b < 4; b++) begin
        rd_en[b]   = ($urandom_range(0, 2) != 0);
        rd_row[b]  = ROW_W'($urandom);
        wr_push[b] = ($urandom_range(0, 1) == 1);
        wr_row[b]  = ROW_W'($urandom);
        wr_data[b] = W'($urandom);
      end
      #1;
      for (int b = 0; b < 4; b++) begin
        // expected ready and read value (read sees memory, not the buffer)
        check(wr_ready[b] == (!bv[b] || !rd_en[b]), $sformatf("wr_ready bank %0d", b));
        exp_v[b]  = rd_en[b];
        exp_rd[b] = mem[b][rd_row[b]];
        if (bv[b] && !rd_en[b]) begin mem[b][brow[b]] = bdat[b]; end
        if (wr_push[b] && wr_ready[b]) begin
          bv[b] = 1; brow[b] = wr_row[b]; bdat[b] = wr_data[b];
        end else if (bv[b] && !rd_en[b]) bv[b] = 0;
        if (wr_push[b] && !wr_ready[b]) refused++;
      end
      @(posedge clk); #1;
      for (int b = 0; b < 4; b++)
        if (exp_v[b]) check(rd_data[b] == exp_rd[b], $sformatf("read bank %0d", b));
    end
    @(negedge clk) rd_en = 0; wr_push = 0;
    for (int b = 0; b < 4; b++) if (bv[b]) mem[b][brow[b]] = bdat[b];
    @(negedge clk);
    check(idle, "idle after drain");
    check(refused > 0, "no push was ever refused");
    // read everything back
    for (int r = 0; r < (1 << ROW_W); r++) begin
      @(negedge clk) rd_en = 4'hF; for (int b = 0; b < 4; b++) rd_row[b] = ROW_W'(r);
      @(posedge clk); #1;
      for (int b = 0; b < 4; b++) check(rd_data[b] == mem[b][r], "final contents");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
