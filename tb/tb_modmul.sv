// tb_modmul -- random and corner-case products a*b mod q for two moduli,
// compared with a reference computed by 64-bit arithmetic in the testbench.
// Checks the 4-cycle latency, back-to-back throughput and tag transport.
module tb_modmul;
  localparam int W = 30;
  logic clk = 0, rst_n = 1;
  logic [W-1:0] q, a, b, p;
  logic [2*W-1:0] mu;
  logic in_valid = 0, out_valid;
  logic [15:0] in_tag, out_tag;
  int checks = 0, failures = 0;

  modmul #(.W(W), .TAG_W(16)) dut (.clk, .rst_n, .q, .mu, .in_valid, .a, .b, .in_tag,
                                  .out_valid, .p, .out_tag);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [W-1:0] exp_q [$];
  logic [15:0]  tag_q [$];
  int cyc = 0, issue_cyc [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid) begin
      logic [W-1:0] e; logic [15:0] t; int ic;
      e = exp_q.pop_front(); t = tag_q.pop_front(); ic = issue_cyc.pop_front();
      checks++;
      if (p !== e || out_tag !== t || cyc - ic != 4) begin
        failures++;
        $display("FAIL: p=%0d exp=%0d tag=%0h/%0h lat=%0d", p, e, out_tag, t, cyc - ic);
      end
    end
  end

  task automatic run(input logic [W-1:0] qq, input int n);
    q  = qq;
    mu = 60'((128'(1) << 60) / 128'(qq));
    for (int k = 0; k < n; k++) begin
      logic [63:0] x, y;
      @(negedge clk);
      case (k)
        0: begin x = 0; y = qq - 1; end
        1: begin x = qq - 1; y = qq - 1; end
        2: begin x = 1; y = qq - 1; end
        default: begin x = 64'($urandom) % qq; y = 64'($urandom) % qq; end
      endcase
      a = W'(x); b = W'(y); in_valid = 1; in_tag = 16'(k);
      exp_q.push_back(W'((x * y) % 64'(qq)));
      tag_q.push_back(16'(k));
      issue_cyc.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (8) @(negedge clk);
  endtask

  initial begin
    #1 rst_n = 0; repeat (3) @(posedge clk); rst_n = 1;
    run(30'd1073643521, 500);
    run(30'd12289, 200);
    run(30'd134215681, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
