// tb_comp_ctrl -- the computation controller driving the real compute path
// (twiddle_gen, bfu, reorder_unit and two bank_groups) at LOGN_MAX = 7.
// The testbench owns the bank-group write ports while the controller is idle
// (to load operands) and reads results back through the read ports.
// Checked, for N = 32, 64 and 128:
//   NTT of BG0 and of BG1 (input at bitrev(i), output read at phy_addr(k))
//   equals X[k] = sum_i x[i] w^(ik) computed here by direct summation;
//   INTT equals the same sum with w^-1 (no 1/N);
//   ADD and MUL give BG1 = BG0 op BG1 and SCALE gives BG1 = c * BG1;
//   every NTT issues exactly N/2 * log2(N) butterflies, two consecutive
//   butterflies never read the same bank pair, and the busy time equals the
//   butterflies plus the counted stall cycles plus a fixed per-stage overhead.
module tb_comp_ctrl;
  import rise_pkg::*;
  localparam int LMAX = 7, ROW_W = LMAX - 2, W = 30;
  localparam longint unsigned Q = 64'd1073643521;
  logic clk = 0, rst_n = 1;
  logic start = 0, bg_sel = 0;
  comp_op_e op = CMP_NTT;
  logic [3:0] logn = 5;
  logic [W-1:0] w_n = 0, w_n_inv = 0, n_inv = 0;
  logic [W-1:0] qv = W'(Q);
  logic [59:0] mu = 60'((64'd1 << 60) / Q);
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // ---------------- device under test and compute path
  logic [3:0] c_rd0, c_rd1;
  logic [ROW_W-1:0] c_rd_row, r_row;
  logic r_valid, r_bg, ru_active, wr_bg;
  logic [1:0] r_bank, bfu_mode;
  logic [W-1:0] r_omega, tw_base, tw_omega;
  comp_op_e r_op;
  logic tw_setup, tw_step, tw_ready, bfu_ov, ru_empty, bg_idle, bg0_idle, bg1_idle;
  logic [3:0] tw_sq;
  logic [31:0] stall_cycles, busy_cycles;
  logic [W-1:0] bfu_o0, bfu_o1;
  logic [ROW_W+1:0] bfu_otag;

  comp_ctrl #(.LOGN_MAX(LMAX), .W(W)) dut (
    .clk, .rst_n, .start, .op, .bg_sel, .logn, .w_n, .w_n_inv, .busy, .done,
    .rd_en_bg0(c_rd0), .rd_en_bg1(c_rd1), .rd_row(c_rd_row),
    .r_valid, .r_bank, .r_row, .r_omega, .r_op, .r_bg, .bfu_mode, .ru_active, .wr_bg,
    .tw_setup, .tw_base, .tw_sq, .tw_step, .tw_omega, .tw_ready,
    .bfu_out_valid(bfu_ov), .ru_empty, .bg_idle, .stall_cycles, .busy_cycles);

  twiddle_gen #(.W(W)) u_tw (
    .clk, .rst_n, .q(qv), .mu, .setup(tw_setup), .base(tw_base), .sq(tw_sq),
    .step(tw_step), .omega(tw_omega), .omega_m(), .ready(tw_ready));

  logic [3:0] bg0_rd_en, bg1_rd_en, bg0_push, bg1_push, bg0_rdy, bg1_rdy;
  logic [ROW_W-1:0] bg0_rd_row [4], bg1_rd_row [4], bg0_wr_row [4], bg1_wr_row [4];
  logic [W-1:0] bg0_rd_data [4], bg1_rd_data [4], bg0_wr_data [4], bg1_wr_data [4];
  // testbench access
  logic [3:0] t_rd0 = 0, t_rd1 = 0, t_push0 = 0, t_push1 = 0;
  logic [ROW_W-1:0] t_row = 0;
  logic [W-1:0] t_data = 0;

  bank_group #(.LOGN_MAX(LMAX), .W(W)) u_bg0 (
    .clk, .rst_n, .rd_en(bg0_rd_en), .rd_row(bg0_rd_row), .rd_data(bg0_rd_data),
    .wr_push(bg0_push), .wr_row(bg0_wr_row), .wr_data(bg0_wr_data), .wr_ready(bg0_rdy), .idle(bg0_idle));
  bank_group #(.LOGN_MAX(LMAX), .W(W)) u_bg1 (
    .clk, .rst_n, .rd_en(bg1_rd_en), .rd_row(bg1_rd_row), .rd_data(bg1_rd_data),
    .wr_push(bg1_push), .wr_row(bg1_wr_row), .wr_data(bg1_wr_data), .wr_ready(bg1_rdy), .idle(bg1_idle));
  assign bg_idle = bg0_idle && bg1_idle;

  logic [W-1:0] op_u, op_v;
  always_comb begin
    if (r_op == CMP_NTT || r_op == CMP_INTT) begin
      op_u = r_bg ? bg1_rd_data[r_bank]        : bg0_rd_data[r_bank];
      op_v = r_bg ? bg1_rd_data[r_bank + 2'd1] : bg0_rd_data[r_bank + 2'd1];
    end else if (r_op == CMP_SCALE) begin
      op_u = n_inv; op_v = bg1_rd_data[r_bank];
    end else begin
      op_u = bg0_rd_data[r_bank]; op_v = bg1_rd_data[r_bank];
    end
  end

  bfu #(.W(W), .TAG_W(ROW_W + 2)) u_bfu (
    .clk, .rst_n, .q(qv), .mu, .in_valid(r_valid), .mode(bfu_mode),
    .u(op_u), .v(op_v), .w(r_omega), .in_tag({r_row, r_bank}),
    .out_valid(bfu_ov), .out0(bfu_o0), .out1(bfu_o1), .out_tag(bfu_otag));

  logic [3:0] ru_wv, ru_rdy;
  logic [ROW_W-1:0] ru_row [4];
  logic [W-1:0] ru_data [4];
  reorder_unit #(.W(W), .ROW_W(ROW_W)) u_ru (
    .clk, .rst_n, .clear(start), .active(ru_active), .in_valid(bfu_ov),
    .in_x(bfu_o0), .in_y(bfu_o1), .in_row(bfu_otag[ROW_W+1:2]), .in_bank(bfu_otag[1:0]),
    .wr_valid(ru_wv), .wr_row(ru_row), .wr_data(ru_data), .wr_ready(ru_rdy), .empty(ru_empty));

  always_comb begin
    bg0_rd_en = c_rd0 | t_rd0;
    bg1_rd_en = c_rd1 | t_rd1;
    for (int b = 0; b < 4; b++) begin
      bg0_rd_row[b] = busy ? c_rd_row : t_row;
      bg1_rd_row[b] = busy ? c_rd_row : t_row;
      bg0_push[b] = busy ? (ru_wv[b] && !wr_bg) : t_push0[b];
      bg1_push[b] = busy ? (ru_wv[b] &&  wr_bg) : t_push1[b];
      bg0_wr_row[b] = busy ? ru_row[b] : t_row;
      bg1_wr_row[b] = busy ? ru_row[b] : t_row;
      bg0_wr_data[b] = busy ? ru_data[b] : t_data;
      bg1_wr_data[b] = busy ? ru_data[b] : t_data;
    end
    ru_rdy = wr_bg ? bg1_rdy : bg0_rdy;
  end

  // ---------------- reference arithmetic
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

  // ---------------- bank access by position p: bank p[1:0], row p>>2
  task automatic put(input bit g, input int p, input longint unsigned v);
    @(negedge clk);
    t_row = ROW_W'(p >> 2); t_data = W'(v);
    if (g) t_push1 = 4'b1 << (p % 4); else t_push0 = 4'b1 << (p % 4);
    @(negedge clk);
    t_push0 = 0; t_push1 = 0;
  endtask
  task automatic get(input bit g, input int p, output longint unsigned v);
    @(negedge clk);
    t_row = ROW_W'(p >> 2);
    if (g) t_rd1 = 4'b1 << (p % 4); else t_rd0 = 4'b1 << (p % 4);
    @(negedge clk);
    t_rd0 = 0; t_rd1 = 0;
    v = g ? longint'(bg1_rd_data[p % 4]) : longint'(bg0_rd_data[p % 4]);
  endtask

  // ---------------- order checks during an NTT
  int n_bf = 0;
  logic [3:0] last_rd = 0;
  always @(posedge clk) begin
    logic [3:0] rd;
    rd = c_rd0 | c_rd1;
    if (busy && (r_op == CMP_NTT || r_op == CMP_INTT) && rd != 0) begin
      n_bf++;
      if (rd == last_rd) begin failures++; $display("FAIL: two butterflies in a row on banks %b", rd); end
      last_rd <= rd;
    end
    if (start) last_rd <= 0;
  end

  task automatic run(input comp_op_e o, input bit g, output int cyc);
    @(negedge clk); op = o; bg_sel = g; start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("FAIL: op %0d never finished", o); end
    @(negedge clk);
  endtask

  initial begin
    #50000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint unsigned x [], y [], e [];
    int n, cyc;
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int ln = 5; ln <= LMAX; ln++) begin
      n = 1 << ln; logn = 4'(ln);
      w_n = W'(pw(6, (Q - 1) / longint'(n)));
      w_n_inv = W'(pw(longint'(w_n), Q - 2));
      n_inv = W'($urandom % Q);
      x = new[n]; y = new[n]; e = new[n];
      for (int dir = 0; dir < 2; dir++) begin
        for (int g = 0; g < 2; g++) begin
          int bf0, st0, f0;
          for (int i = 0; i < n; i++) begin
            x[i] = longint'($urandom % Q);
            put(g[0], int'(bitrev_n(LOGN_MAX'(i), 4'(ln))), x[i]);
          end
          bf0 = n_bf; st0 = int'(stall_cycles);
          begin
            int b0;
            b0 = int'(busy_cycles);
            run(dir ? CMP_INTT : CMP_NTT, g[0], cyc);
            checks++;
            if (n_bf - bf0 != n / 2 * ln) begin failures++; $display("FAIL: %0d butterflies", n_bf - bf0); end
            checks++;
            // per stage: setup, twiddle wait, drain of BFU + RU + buffers
            if (int'(busy_cycles) - b0 - (n / 2 * ln) - (int'(stall_cycles) - st0) > 40 * ln) begin
              failures++; $display("FAIL: NTT overhead %0d cycles", int'(busy_cycles) - b0 - (n / 2 * ln) - (int'(stall_cycles) - st0));
            end
            if (ln == LMAX && g == 0) $display("N=%0d %s: %0d cycles, %0d stalls", n, dir ? "INTT" : "NTT", int'(busy_cycles) - b0, int'(stall_cycles) - st0);
          end
          f0 = failures;
          for (int k = 0; k < n; k++) begin
            longint unsigned acc, wk, p;
            acc = 0; p = 1;
            wk = pw(dir ? longint'(w_n_inv) : longint'(w_n), longint'(k));
            for (int i = 0; i < n; i++) begin acc = (acc + mm(x[i], p)) % Q; p = mm(p, wk); end
            get(g[0], int'(phy_addr(LOGN_MAX'(k), 4'(ln))), y[k]);
            checks++;
            if (y[k] != acc) begin
              failures++;
              if (failures < 8) $display("FAIL: N=%0d dir=%0d bg=%0d X[%0d]=%0d exp %0d", n, dir, g, k, y[k], acc);
            end
          end
          if (failures != f0) $display("FAIL: N=%0d dir=%0d bg=%0d: %0d wrong", n, dir, g, failures - f0);
        end
      end
      // pointwise
      for (int o = 2; o <= 4; o++) begin
        for (int i = 0; i < n; i++) begin
          x[i] = longint'($urandom % Q); y[i] = longint'($urandom % Q);
          put(0, i, x[i]); put(1, i, y[i]);
        end
        run(comp_op_e'(o), 1'b0, cyc);
        checks++;
        if (cyc > n + 20) begin failures++; $display("FAIL: pointwise op took %0d cycles", cyc); end
        for (int i = 0; i < n; i++) begin
          longint unsigned r, ex;
          get(1, i, r);
          ex = (o == 2) ? (x[i] + y[i]) % Q : (o == 3) ? mm(x[i], y[i]) : mm(longint'(n_inv), y[i]);
          checks++;
          if (r != ex) begin failures++; if (failures < 8) $display("FAIL: op %0d i=%0d got %0d exp %0d", o, i, r, ex); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
