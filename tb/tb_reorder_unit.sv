// tb_reorder_unit -- feeds groups of four butterfly results (x_l, y_l) with
// the rows of butterflies 0 and 2 and checks the NTT_swap4 write-back:
// bank l receives x_l at row A and then y_l at row B. Banks accept writes at
// random (wr_ready), and groups arrive back to back when possible, so both
// halves of the register array are used. Then checks the bypass (inactive)
// mode routes each result to its own bank and row.
module tb_reorder_unit;
  localparam int W = 30, ROW_W = 6;
  logic clk = 0, rst_n = 1;
  logic clear = 0, active = 1, in_valid = 0, empty;
  logic [W-1:0] in_x, in_y;
  logic [ROW_W-1:0] in_row;
  logic [1:0] in_bank;
  logic [3:0] wr_valid, wr_ready;
  logic [ROW_W-1:0] wr_row [4];
  logic [W-1:0] wr_data [4];
  int checks = 0, failures = 0;

  reorder_unit #(.W(W), .ROW_W(ROW_W)) dut (.clk, .rst_n, .clear, .active, .in_valid, .in_x, .in_y,
    .in_row, .in_bank, .wr_valid, .wr_row, .wr_data, .wr_ready, .empty);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { logic [ROW_W-1:0] row; logic [W-1:0] d; } wr_t;
  wr_t expq [4][$];
  int got = 0, sent = 0;

  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < 4; b++)
      if (wr_valid[b] && wr_ready[b]) begin
        wr_t e;
        checks++; got++;
        if (expq[b].size() == 0) begin failures++; $display("FAIL: unexpected write bank %0d", b); end
        else begin
          e = expq[b].pop_front();
          if (wr_row[b] !== e.row || wr_data[b] !== e.d) begin
            failures++;
            $display("FAIL: bank %0d row %0d/%0d data %0d/%0d", b, wr_row[b], e.row, wr_data[b], e.d);
          end
        end
      end
  end

  // banks free every other cycle in alternating pairs, like during an NTT
  int cyc = 0;
  always @(negedge clk) begin
    cyc++;
    wr_ready = cyc[0] ? 4'b0011 : 4'b1100;
  end

  initial begin
    #1 rst_n = 0; repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    for (int g = 0; g < 40; g++) begin
      logic [ROW_W-1:0] ra, rb;
      ra = ROW_W'($urandom); rb = ROW_W'($urandom);
      for (int l = 0; l < 4; l++) begin
        wr_t ex, ey;
        in_valid = 1; in_x = W'($urandom); in_y = W'($urandom);
        in_row = (l < 2) ? ra : rb;
        ex.row = ra; ex.d = in_x; ey.row = rb; ey.d = in_y;
        expq[l].push_back(ex); expq[l].push_back(ey);
        sent += 2;
        @(negedge clk);
      end
      in_valid = 0;
    end
    repeat (20) @(negedge clk);
    checks++;
    if (got != sent || !empty) begin failures++; $display("FAIL: %0d of %0d written", got, sent); end
    // bypass
    active = 0;
    for (int k = 0; k < 100; k++) begin
      wr_t e;
      in_valid = 1; in_x = W'($urandom); in_bank = 2'($urandom); in_row = ROW_W'($urandom);
      e.row = in_row; e.d = in_x;
      #1;
      checks++;
      if (!wr_valid[in_bank] || wr_row[in_bank] !== in_row || wr_data[in_bank] !== in_x ||
          $countones(wr_valid) != 1) begin failures++; $display("FAIL: bypass"); end
      in_valid = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
