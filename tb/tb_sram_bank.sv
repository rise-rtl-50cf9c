// tb_sram_bank -- writes random words to random addresses of a small bank,
// keeping a shadow copy, and checks every read one cycle later; also checks
// that a disabled cycle leaves both contents and read data unchanged.
module tb_sram_bank;
  localparam int DEPTH = 64, W = 30;
  logic clk = 0, en = 0, we = 0;
  logic [5:0] addr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sram_bank #(.DEPTH(DEPTH), .W(W)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) en = 1; we = 1; addr = 6'(a); wdata = W'($urandom); shadow[a] = wdata;
    end
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      en = 1; we = $urandom_range(0, 1) == 1; addr = 6'($urandom); wdata = W'($urandom);
      if (we) shadow[addr] = wdata;
      else begin
        logic [W-1:0] e; e = shadow[addr];
        @(negedge clk) en = 0;
        checks++;
        if (rdata !== e) begin failures++; $display("FAIL: addr %0d", addr); end
        @(negedge clk);
        checks++;
        if (rdata !== e) begin failures++; $display("FAIL: rdata changed while idle"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
