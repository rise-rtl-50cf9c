// tb_error_sampler -- the Error Sampling Unit against an independent software
// model of the whole chain (keccak_ref_pkg). Five runs with random seeds mix
// both distributions, different domain bytes and counts, and a sink that is
// ready at random; every coefficient is compared, 'done' must rise only after
// the last one, and with an always-ready sink the binomial stream must keep
// up with one coefficient per cycle on average (the permutation of the next
// block overlaps the draining of the current one).
module tb_error_sampler;
  import rise_pkg::*;
  import keccak_ref_pkg::*;
  localparam logic [29:0] Q = 30'd1073643521;
  logic clk = 0, rst_n = 1;
  logic start = 0, out_ready = 0;
  smp_dist_e distr = SMP_UNIFORM;
  logic [7:0] domain = 0;
  logic [14:0] count = 0;
  logic [1599:0] seed = '0;
  logic out_valid, done;
  logic [29:0] out_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  error_sampler dut (.clk, .rst_n, .start, .distr, .domain, .count, .seed, .q(Q),
                     .out_valid, .out_ready, .out_data, .done);

  initial begin
    #5000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input bit binomial, input int n, input logic [7:0] dom, input bit busy_sink);
    logic [29:0] exp_q [$];
    int got = 0, cyc = 0;
    for (int i = 0; i < 50; i++) seed[32*i +: 32] = $urandom;
    smp_stream(seed, dom, binomial, n, Q, exp_q);
    @(negedge clk);
    distr = binomial ? SMP_BINOMIAL : SMP_UNIFORM; domain = dom; count = 15'(n);
    start = 1;
    @(negedge clk);
    start = 0;
    while (got < n && cyc < 40000) begin
      out_ready = busy_sink ? 1'b1 : 1'($urandom % 3 != 0);
      #1;
      if (done) begin failures++; $display("FAIL: done before the last sample"); end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== exp_q[got]) begin
          failures++;
          if (failures < 10) $display("FAIL: sample %0d got %0d exp %0d", got, out_data, exp_q[got]);
        end
        got++;
      end
      @(negedge clk);
      cyc++;
    end
    out_ready = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (!done || got != n) begin failures++; $display("FAIL: done=%0d got=%0d of %0d", done, got, n); end
    if (busy_sink && binomial) begin
      checks++;
      if (cyc > n + n / 10 + 60) begin failures++; $display("FAIL: %0d samples took %0d cycles", n, cyc); end
    end
  endtask

  initial begin
    #1 rst_n = 0;
    #20 rst_n = 1;
    run(1'b1, 1024, 8'd2, 1'b1);
    run(1'b0, 600, 8'd0, 1'b1);
    run(1'b1, 300, 8'd1, 1'b0);
    run(1'b0, 300, 8'd0, 1'b0);
    run(1'b1, 7, 8'd5, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
