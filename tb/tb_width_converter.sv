// tb_width_converter -- feeds known 1088-bit blocks and checks the word
// stream: 25 words of 42 bits (wide) or 136 words of 8 bits per block, taken
// from the low end upward, leftover bits dropped; random output ready.
module tb_width_converter;
  localparam int IN_W = 1088;
  logic clk = 0, rst_n = 1, flush = 0, wide = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [IN_W-1:0] in_data;
  logic [41:0] out_data;
  int checks = 0, failures = 0;

  width_converter dut (.clk, .rst_n, .flush, .wide, .in_valid, .in_ready, .in_data,
                       .out_valid, .out_ready, .out_data);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [41:0] expq [$];
  // out_ready is set just after each falling edge; a word offered then is
  // taken at the next rising edge, so it is checked while it is stable
  always @(negedge clk) begin
    out_ready <= $urandom_range(0, 3) != 0;
    #1;
    if (rst_n && out_valid && out_ready) chk();
  end
  task automatic chk();
    logic [41:0] e; e = expq.pop_front();
    checks++;
    if (out_data !== e) begin failures++; $display("FAIL: word %h exp %h left %0d t=%0t", out_data, e, expq.size(), $time); end
  endtask

  initial begin
    #1 rst_n = 0; repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      bit w; w = (pass == 0);
      wide = w;
      for (int k = 0; k < 6; k++) begin
        int per, ww;
        ww = w ? 42 : 8; per = IN_W / ww;
        for (int i = 0; i < IN_W / 32; i++) in_data[32*i +: 32] = $urandom;
        for (int j = 0; j < per; j++) expq.push_back(42'((in_data >> (j*ww)) & ((64'(1) << ww) - 1)));
        in_valid = 1;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk) in_valid = 0;
      end
      while (expq.size() != 0) @(negedge clk);
      flush = 1; @(negedge clk) flush = 0;
      checks++;
      if (out_valid) begin failures++; $display("FAIL: flush"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
