// rise_tb_host -- testbench-only host for the RISE top: plays the CPU (CSR
// writes, waiting for irq) and the main memory (random grant, 1..3 cycles of
// read latency), and checks every result polynomial against a reference
// computed here from first principles.
//
// Reference: the accelerator's NTT is the cyclic transform
// X[k] = sum_i x[i] w^(ik) mod q with w = 6^((q-1)/N) (6 generates Z_q^* for
// q = 1073643521), computed here by the O(N^2) sum; the inverse is the same
// sum with w^-1 followed by N^-1. Sampled polynomials come from the software
// Keccak model in keccak_ref_pkg. Checked operations:
//   ENC_C1: out = NTT(pk1) * NTT(mu) + NTT(e1)
//   ENC_C0: out = NTT(pk0) * NTT(mu) + NTT(m + e0)
//   DEC:    out = INTT(c0 + c1 * s)
// ROUNDTRIP=1 adds a real encrypt/decrypt: a ternary secret s, pk = (-a*s+e, a)
// built here by cyclic convolution, a scaled message, both encryption halves
// and a decryption of their outputs, after which the decoded message must
// equal the original (the remaining noise is e0 + e1*s + e*mu).
// LOGNS lists the ring sizes to run and LIMBS how many RNS limbs (moduli) to
// run at each size: limb l uses the l-th largest prime q < 2^QBITS with
// q = 1 mod 2^15, found here by trial division, and w = g^((q-1)/N) for the
// first g that gives an element of order exactly N. SPOT > 0 checks SPOT
// random coefficients of each result instead of all N (each one is a single
// O(N) evaluation), which keeps the largest workloads short. The host raises
// 'finished' at the end and prints the cycle count of every operation.
module rise_tb_host
  import rise_pkg::*;
  import keccak_ref_pkg::*;
#(
  parameter int unsigned LMAX      = 8,
  parameter int unsigned NLOG      = 1,
  parameter logic [31:0] LOGNS     = 32'h5,   // 4 bits per ring size, first in [3:0]
  parameter bit          ROUNDTRIP = 1'b1,
  parameter bit          DO_ENC_C0 = 1'b1,
  parameter bit          DO_DEC    = 1'b1,
  parameter logic [31:0] LIMBS     = 32'h11111111,   // 4 bits per ring size
  parameter logic [63:0] QBITS     = 64'h1e1e1e1e1e1e1e1e,   // 8 bits per ring size
  parameter int unsigned SPOT      = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        csr_en,
  output logic        csr_we,
  output logic [7:0]  csr_addr,
  output logic [63:0] csr_wdata,
  input  logic [63:0] csr_rdata,
  input  logic        irq,
  input  logic        mem_req,
  input  logic        mem_we,
  input  logic [31:0] mem_addr,
  input  logic [31:0] mem_wdata,
  output logic        mem_gnt,
  output logic        mem_rvalid,
  output logic [31:0] mem_rdata,
  output logic        finished,
  output int          checks,
  output int          failures
);
  localparam int NMAX = 1 << LMAX;
  localparam int A_A = 0, A_B = NMAX, A_C = 2 * NMAX, A_O = 3 * NMAX;

  logic [31:0] mem [4 * NMAX];
  logic [1599:0] seed;
  int n, logn;
  longint unsigned Q, w_n, w_inv, n_inv;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    csr_en = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    mem_gnt = 0; mem_rvalid = 0; mem_rdata = 0; finished = 0;
    checks = 0; failures = 0;
    for (int i = 0; i < 4 * NMAX; i++) mem[i] = '0;
  end

  // ---------------- memory model
  initial begin
    forever begin
      @(negedge clk);
      mem_rvalid = 0;
      mem_gnt = mem_req && ($urandom % 4 != 0);
      if (mem_req && mem_gnt) begin
        logic [31:0] a;
        logic we;
        a = mem_addr; we = mem_we;
        if (we) mem[a] = mem_wdata;
        @(negedge clk);
        mem_gnt = 0;
        if (!we) begin
          repeat ($urandom % 3) @(negedge clk);
          mem_rdata = mem[a]; mem_rvalid = 1;
        end
      end
    end
  end

  // ---------------- arithmetic
  function automatic longint unsigned mm(input longint unsigned a, input longint unsigned b);
    return (a * b) % Q;
  endfunction
  function automatic longint unsigned pw(input longint unsigned b, input longint unsigned e);
    longint unsigned r = 1;
    while (e != 0) begin
      if (e[0]) r = mm(r, b);
      b = mm(b, b); e = e >> 1;
    end
    return r;
  endfunction
  function automatic longint unsigned sgn(input int v);
    return (v >= 0) ? longint'(v) % Q : Q - (longint'(-v) % Q);
  endfunction

  typedef longint unsigned poly_t [];

  // X[k] = sum_i x[i] w^(ik)
  function automatic longint unsigned ev(input poly_t x, input longint unsigned w, input int k);
    longint unsigned p = 1, acc = 0, wk;
    wk = pw(w, longint'(k));
    for (int i = 0; i < n; i++) begin
      acc = (acc + mm(x[i], p)) % Q;
      p = mm(p, wk);
    end
    return acc;
  endfunction
  function automatic poly_t dft(input poly_t x, input longint unsigned w);
    poly_t y = new[n];
    for (int k = 0; k < n; k++) y[k] = ev(x, w, k);
    return y;
  endfunction

  function automatic bit is_prime(input longint unsigned v);
    for (longint unsigned d = 3; d * d <= v; d += 2) if (v % d == 0) return 1'b0;
    return 1'b1;
  endfunction
  // limb-th largest prime below 2^bits that is 1 mod 2^15
  function automatic longint unsigned find_prime(input int bits, input int limb);
    longint unsigned c;
    int found = -1;
    c = ((64'd1 << bits) - 1) & ~64'h7fff;
    forever begin
      c = c - 64'h8000;
      if (is_prime(c + 1)) begin found++; if (found == limb) return c + 1; end
    end
  endfunction

  // ---------------- host bus
  task automatic csr_wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); csr_en = 1; csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_en = 0; csr_we = 0;
  endtask

  task automatic configure(input int ln, input int bits, input int limb);
    longint unsigned g = 2;
    logn = ln; n = 1 << ln;
    Q = find_prime(bits, limb);
    while (pw(pw(g, (Q - 1) / longint'(n)), longint'(n / 2)) == 1) g++;
    w_n = pw(g, (Q - 1) / longint'(n));
    w_inv = pw(w_n, Q - 2);
    n_inv = pw(longint'(n), Q - 2);
    checks++;
    if (pw(w_n, longint'(n / 2)) != Q - 1) begin failures++; $display("FAIL: w_n has the wrong order"); end
    csr_wr(8'h02, 64'(ln));
    csr_wr(8'h03, Q);
    $display("N=%0d limb %0d: q=%0d", n, limb, Q);
    csr_wr(8'h04, (64'd1 << 60) / Q);
    csr_wr(8'h05, w_n);
    csr_wr(8'h06, w_inv);
    csr_wr(8'h07, n_inv);
    csr_wr(8'h08, 64'(A_A));
    csr_wr(8'h09, 64'(A_B));
    csr_wr(8'h0A, 64'(A_C));
    csr_wr(8'h0B, 64'(A_O));
  endtask

  task automatic new_seed();
    for (int l = 0; l < 25; l++) begin
      seed[64*l +: 64] = {$urandom, $urandom};
      csr_wr(8'(8'h10 + l), seed[64*l +: 64]);
    end
  endtask

  // run one operation: op code in CTRL[2:1], wait for irq, clear it
  task automatic run_op(input rise_op_e op);
    int t = 0;
    longint c0;
    c0 = cyc;
    csr_wr(8'h00, 64'(1 + 2 * int'(op)));
    while (!irq && t < 50000000) begin @(negedge clk); t++; end
    $display("  N=%0d op %0d: %0d cycles", n, op, cyc - c0);
    checks++;
    if (!irq) begin failures++; $display("FAIL: op %0d never finished", op); end
    csr_wr(8'h01, 64'h2);
  endtask

  task automatic put(input int base, input poly_t x);
    for (int i = 0; i < n; i++) mem[base + i] = 32'(x[i]);
  endtask
  // coefficients to check: all, or SPOT random ones
  function automatic void pick(ref int ks [$]);
    ks.delete();
    if (SPOT == 0 || SPOT >= n) for (int k = 0; k < n; k++) ks.push_back(k);
    else for (int j = 0; j < SPOT; j++) ks.push_back(int'($urandom % n));
  endfunction
  task automatic check_one(input int k, input longint unsigned e, input string what, inout int bad);
    checks++;
    if (longint'(mem[A_O + k]) != e) begin
      failures++; bad++;
      if (bad < 5) $display("FAIL: %s N=%0d coeff %0d: got %0d exp %0d", what, n, k, mem[A_O + k], e);
    end
  endtask
  function automatic poly_t rnd_poly();
    poly_t x = new[n];
    for (int i = 0; i < n; i++) x[i] = longint'({$urandom, $urandom} % Q);
    return x;
  endfunction
  function automatic poly_t sampled(input logic [7:0] dom, input bit binomial);
    logic [29:0] s [$];
    poly_t x = new[n];
    smp_stream(seed, dom, binomial, n, 30'(Q), s);
    for (int i = 0; i < n; i++) x[i] = longint'(s[i]);
    return x;
  endfunction

  // ---------------- the test
  task automatic exact_tests();
    poly_t pk, m, c0, c1, s, e, mu, t;
    int ks [$];
    int bad = 0;
    mu = sampled(8'd0, 1'b0);
    // ENC_C1: NTT(pk1) * NTT(mu) + NTT(e1)
    pk = rnd_poly(); put(A_A, pk);
    run_op(OP_ENC_C1);
    e = sampled(8'd2, 1'b1);
    pick(ks);
    foreach (ks[j]) check_one(ks[j], (mm(ev(pk, w_n, ks[j]), ev(mu, w_n, ks[j])) + ev(e, w_n, ks[j])) % Q, "ENC_C1", bad);
    if (DO_ENC_C0) begin
      // ENC_C0: NTT(pk0) * NTT(mu) + NTT(m + e0)
      pk = rnd_poly(); put(A_A, pk);
      m = rnd_poly(); put(A_B, m);
      run_op(OP_ENC_C0);
      e = sampled(8'd1, 1'b1);
      for (int i = 0; i < n; i++) e[i] = (e[i] + m[i]) % Q;
      pick(ks);
      foreach (ks[j]) check_one(ks[j], (mm(ev(pk, w_n, ks[j]), ev(mu, w_n, ks[j])) + ev(e, w_n, ks[j])) % Q, "ENC_C0", bad);
    end
    if (DO_DEC) begin
      // DEC: N^-1 * INTT(c0 + c1 * s)
      c1 = rnd_poly(); s = rnd_poly(); c0 = rnd_poly();
      put(A_A, c1); put(A_B, s); put(A_C, c0);
      run_op(OP_DEC);
      t = new[n];
      for (int i = 0; i < n; i++) t[i] = (c0[i] + mm(c1[i], s[i])) % Q;
      pick(ks);
      foreach (ks[j]) check_one(ks[j], mm(ev(t, w_inv, ks[j]), n_inv), "DEC", bad);
    end
  endtask

  task automatic roundtrip();
    poly_t a, sk, e, pk0, msg, c0, c1, out;
    int delta = 1 << 20;
    int bad = 0;
    a = rnd_poly();
    sk = new[n]; e = new[n]; msg = new[n]; pk0 = new[n]; out = new[n];
    for (int i = 0; i < n; i++) begin
      sk[i] = sgn(int'($urandom % 3) - 1);
      e[i]  = sgn(int'($urandom % 7) - 3);
      msg[i] = sgn(delta * (int'($urandom % 17) - 8));
    end
    // pk0 = -(a*sk) + e, cyclic convolution
    for (int k = 0; k < n; k++) begin
      longint unsigned acc = 0;
      for (int i = 0; i < n; i++) acc = (acc + mm(a[i], sk[(k - i + n) % n])) % Q;
      pk0[k] = (e[k] + Q - acc) % Q;
    end
    new_seed();
    put(A_A, a);   run_op(OP_ENC_C1);
    c1 = new[n]; for (int i = 0; i < n; i++) c1[i] = longint'(mem[A_O + i]);
    put(A_A, pk0); put(A_B, msg); run_op(OP_ENC_C0);
    c0 = new[n]; for (int i = 0; i < n; i++) c0[i] = longint'(mem[A_O + i]);
    put(A_A, c1); put(A_B, dft(sk, w_n)); put(A_C, c0);
    run_op(OP_DEC);
    for (int i = 0; i < n; i++) begin
      longint d;
      d = longint'(mem[A_O + i]) - longint'(msg[i]);
      if (d > longint'(Q / 2)) d -= longint'(Q);
      if (d < -longint'(Q / 2)) d += longint'(Q);
      checks++;
      if (d > 32 * n || d < -32 * n) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL: round trip N=%0d coeff %0d noise %0d", n, i, d);
      end
    end
  endtask

  initial begin
    @(posedge rst_n);
    repeat (3) @(negedge clk);
    for (int k = 0; k < NLOG; k++) begin
      for (int l = 0; l < int'(LIMBS[4*k +: 4]); l++) begin
        configure(int'(LOGNS[4*k +: 4]), int'(QBITS[8*k +: 8]), l);
        new_seed();
        exact_tests();
        if (ROUNDTRIP) roundtrip();
      end
    end
    finished = 1;
  end
endmodule
