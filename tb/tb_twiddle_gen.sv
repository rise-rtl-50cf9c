// tb_twiddle_gen -- sets up omega_m = base^(2^sq) for several sq values and
// then steps omega as fast as 'ready' allows, comparing every omega with
// base^(2^sq * k) computed by the testbench's own square-and-multiply.
// Checks that ready returns within the multiplier latency after a step.
module tb_twiddle_gen;
  localparam int W = 30;
  localparam logic [W-1:0] Q = 30'd1073643521;
  logic clk = 0, rst_n = 1;
  logic setup = 0, step = 0, ready;
  logic [W-1:0] base, omega, omega_m;
  logic [3:0] sq;
  logic [2*W-1:0] mu;
  int checks = 0, failures = 0;

  twiddle_gen #(.W(W)) dut (.clk, .rst_n, .q(Q), .mu, .setup, .base, .sq, .step,
                            .omega, .omega_m, .ready);
  always #5 clk = ~clk;

  function automatic logic [63:0] powmod(input logic [63:0] b, input logic [63:0] e);
    logic [63:0] r = 1;
    b = b % Q;
    while (e != 0) begin
      if (e[0]) r = (r * b) % Q;
      b = (b * b) % Q;
      e = e >> 1;
    end
    return r;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mu = 60'((128'(1) << 60) / 128'(Q));
    #1 rst_n = 0; repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      logic [63:0] wm;
      int wait_c;
      @(negedge clk);
      base = W'(powmod(6, (Q - 1) / 64));    // a 64th root of unity
      sq = 4'(t);
      setup = 1;
      @(negedge clk) setup = 0;
      while (!ready) @(negedge clk);
      wm = powmod(base, 64'(1) << t);
      check(omega_m == W'(wm), $sformatf("omega_m for sq=%0d", t));
      check(omega == 1, "omega starts at 1");
      for (int k = 1; k <= 20; k++) begin
        step = 1;
        @(negedge clk) step = 0;
        check(omega == W'(powmod(wm, 64'(k))), $sformatf("omega^%0d, sq=%0d", k, t));
        wait_c = 0;
        while (!ready) begin @(negedge clk); wait_c++; end
        check(wait_c <= 5, $sformatf("ready after %0d cycles", wait_c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
