// tb_uniform_sampler -- all 256 inputs: accept must be r < 255 and the
// sample must be r mod 3 mapped to {0, 1, q-1}; the accepted inputs must hit
// each of the three values exactly 85 times (exact uniformity).
module tb_uniform_sampler;
  localparam int W = 30;
  logic [7:0] rnd;
  logic accept;
  logic [W-1:0] sample, q;
  int checks = 0, failures = 0;
  int hist [3];

  uniform_sampler #(.W(W)) dut (.rnd, .q, .accept, .sample);

  initial begin
    #1000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 2; t++) begin
      q = (t == 0) ? 30'd1073643521 : 30'd12289;
      hist = '{0, 0, 0};
      for (int r = 0; r < 256; r++) begin
        logic [W-1:0] e;
        rnd = 8'(r);
        #1;
        e = (r % 3 == 0) ? '0 : (r % 3 == 1) ? W'(1) : q - 1;
        checks++;
        if (accept !== (r < 255) || sample !== e) begin
          failures++; $display("FAIL: r=%0d accept=%0d sample=%0d", r, accept, sample);
        end
        if (accept) hist[r % 3]++;
      end
      checks++;
      if (hist[0] != 85 || hist[1] != 85 || hist[2] != 85) begin failures++; $display("FAIL: histogram"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
