// tb_keccak_prng -- checks the Keccak PRNG against SHAKE256 of the empty
// message: the seed is the padded SHAKE256 input block (0x1F at byte 0, 0x80
// at byte 135), so the first two 1088-bit blocks must equal the first 272
// bytes of SHAKE256(""). Also checks 24 cycles per permutation and that the
// block is held while blk_ready is low.
module tb_keccak_prng;
  logic clk = 0, rst_n = 0, start = 0, blk_ready = 0;
  logic [1599:0] seed;
  logic blk_valid;
  logic [1087:0] blk;
  int checks = 0, failures = 0;

  localparam logic [1087:0] EXP0 = 1088'hdd1f3b9e1022d1f386cf16cd6b2a5295e51151c185c146d810502c46385c77c2b78ff54655c79e34532886ab0ebc84ef7b93928e3c2207dce35ab4d0edc72c695739b16f61961e14bec4b7b3ac2e294086b49a47491c82fcf692b5679d0105cb00f2c0d8ddc45dd72f76d56e64270cb5821bb862ea52cd3f24eb3e74eb3f3b23138da80b2bddb946;
  localparam logic [1087:0] EXP1 = 1088'h0fcdcd73c1360989ccea13d396aa1a5a7ffb85e7ed39d348d25fa178379c41286b26ac537f1fa92854e50af570c9bd03a22eebe9b83fb53c3fcf8f1d4b1f0f65b8010f308e9f094bab3d08d94e31aeaa5c2f67134785be6ca4b9e1e4fd8e4e868dc5e0a9b7ea8cb6937214f695132377d66775e83bfcda542bc657a9c6067c1a622d8a46ec6a3b94;

  keccak_prng dut (.clk, .rst_n, .start, .seed, .blk_valid, .blk_ready, .blk);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    seed = '0;
    seed[7:0] = 8'h1F;
    seed[1087] = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!blk_valid) begin @(negedge clk); cyc++; end
    check(cyc == 25, $sformatf("first block after %0d cycles, expected 25", cyc));
    check(blk == EXP0, "block 0 != SHAKE256 bytes 0..135");
    repeat (5) @(negedge clk);
    check(blk_valid && blk == EXP0, "block not held while blk_ready low");
    blk_ready = 1;
    @(negedge clk) blk_ready = 0;
    cyc = 1;
    while (!blk_valid) begin @(negedge clk); cyc++; end
    check(cyc == 25, $sformatf("second block after %0d cycles, expected 25", cyc));
    check(blk == EXP1, "block 1 != SHAKE256 bytes 136..271");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
