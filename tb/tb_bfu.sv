// tb_bfu -- drives all three BFU modes back to back with random operands and
// compares out0/out1 with reference values from 64-bit arithmetic:
// butterfly (u+v*w, u-v*w), add (u+v) and multiply (u*v), all mod q.
// Checks the 5-cycle latency and one result per cycle.
module tb_bfu;
  localparam int W = 30;
  localparam logic [W-1:0] Q = 30'd1073643521;
  logic clk = 0, rst_n = 1;
  logic in_valid = 0, out_valid;
  logic [1:0] mode;
  logic [W-1:0] u, v, w, out0, out1;
  logic [7:0] in_tag, out_tag;
  logic [2*W-1:0] mu;
  int checks = 0, failures = 0, cyc = 0;
  int n_mode [4];

  bfu #(.W(W), .TAG_W(8)) dut (.clk, .rst_n, .q(Q), .mu, .in_valid, .mode, .u, .v, .w, .in_tag,
                              .out_valid, .out0, .out1, .out_tag);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { logic [W-1:0] o0, o1; logic chk1; int c; logic [7:0] t; } exp_t;
  exp_t eq [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid) begin
      exp_t e;
      e = eq.pop_front();
      checks++;
      if (out0 !== e.o0 || (e.chk1 && out1 !== e.o1) || out_tag !== e.t || cyc - e.c != 5) begin
        failures++;
        $display("FAIL: out0=%0d/%0d out1=%0d/%0d lat=%0d", out0, e.o0, out1, e.o1, cyc - e.c);
      end
    end
  end

  initial begin
    mu = 60'((128'(1) << 60) / 128'(Q));
    #1 rst_n = 0; repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 600; k++) begin
      logic [63:0] uu, vv, ww, t;
      exp_t e;
      @(negedge clk);
      uu = 64'($urandom) % Q; vv = 64'($urandom) % Q; ww = 64'($urandom) % Q;
      if (k < 4) begin uu = Q - 1; vv = Q - 1; end
      mode = 2'($urandom);
      u = W'(uu); v = W'(vv); w = W'(ww); in_valid = 1; in_tag = 8'(k);
      n_mode[mode]++;
      case (mode)
        2'b10: begin e.o0 = W'((uu + vv) % Q); e.chk1 = 0; end
        2'b11: begin e.o0 = W'((uu * vv) % Q); e.chk1 = 0; end
        default: begin
          t = (vv * ww) % Q;
          e.o0 = W'((uu + t) % Q); e.o1 = W'((uu + Q - t) % Q); e.chk1 = 1;
        end
      endcase
      e.c = cyc; e.t = 8'(k);
      eq.push_back(e);
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (eq.size() != 0 || n_mode[2] == 0 || n_mode[3] == 0) begin
      failures++; $display("FAIL: %0d results missing", eq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
