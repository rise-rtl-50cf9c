// tb_binomial_sampler -- random 42-bit inputs plus the extremes (all ones in
// one half) against $countones(a) - $countones(b) mod q; also checks the
// sample mean and variance over 20000 draws (variance k/2 = 10.5).
module tb_binomial_sampler;
  localparam int K = 21, W = 30;
  localparam logic [W-1:0] Q = 30'd1073643521;
  logic [2*K-1:0] rnd;
  logic [W-1:0] sample;
  int checks = 0, failures = 0;
  real sum = 0, sum2 = 0;

  binomial_sampler #(.K(K), .W(W)) dut (.rnd, .q(Q), .sample);

  initial begin
    #1000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < 20000; k++) begin
      int d;
      logic [W-1:0] e;
      rnd = {10'($urandom), $urandom};
      if (k == 0) rnd = {{K{1'b0}}, {K{1'b1}}};
      if (k == 1) rnd = {{K{1'b1}}, {K{1'b0}}};
      #1;
      d = $countones(rnd[K-1:0]) - $countones(rnd[2*K-1:K]);
      e = (d >= 0) ? W'(d) : W'(Q - W'(-d));
      checks++;
      if (sample !== e) begin failures++; $display("FAIL: rnd=%h sample=%0d exp=%0d", rnd, sample, e); end
      if (k >= 2) begin sum += d; sum2 += d * d; end
    end
    begin
      real mean, var_;
      mean = sum / 19998.0; var_ = sum2 / 19998.0 - mean * mean;
      checks++;
      if (mean > 0.15 || mean < -0.15 || var_ < 9.8 || var_ > 11.2) begin
        failures++; $display("FAIL: mean %f variance %f", mean, var_);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
