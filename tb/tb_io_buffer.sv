// tb_io_buffer -- random valid/ready on both sides of the one-block buffer;
// every block must come out once, in order, unchanged; flush must empty it.
module tb_io_buffer;
  localparam int W = 1088;
  logic clk = 0, rst_n = 1, flush = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0, nin = 0, nout = 0;
  logic [W-1:0] q [$];

  io_buffer #(.W(W)) dut (.clk, .rst_n, .flush, .in_valid, .in_ready, .in_data,
                          .out_valid, .out_ready, .out_data);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin q.push_back(in_data); nin++; end
    if (out_valid && out_ready) begin
      logic [W-1:0] e; e = q.pop_front(); nout++;
      checks++;
      if (out_data !== e) begin failures++; $display("FAIL: block %0d", nout); end
    end
  end

  initial begin
    #1 rst_n = 0; repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = $urandom_range(0, 1) == 1;
        for (int i = 0; i < W / 32; i++) in_data[32*i +: 32] = $urandom;
      end
      out_ready = $urandom_range(0, 2) != 0;
    end
    @(negedge clk) in_valid = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (nin != nout || nin < 500) begin failures++; $display("FAIL: in %0d out %0d", nin, nout); end
    out_ready = 0; in_valid = 1;
    @(negedge clk) in_valid = 0;
    checks++; if (!out_valid) begin failures++; $display("FAIL: not holding"); end
    flush = 1; @(negedge clk) flush = 0;
    checks++; if (out_valid) begin failures++; $display("FAIL: flush"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
