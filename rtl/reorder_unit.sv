// reorder_unit -- Re-ordering Unit (RU) of the NTT_swap4 scheme.
//
// While 'active' (NTT/iNTT), the RU gathers the two results (x_l, y_l) of four
// consecutive butterflies l = 0..3 in a register array and then writes them
// back swapped: x_l goes to bank l at the row of butterfly 0, y_l to bank l at
// the row of butterfly 2. This is the "(a[i0[0]],a[i1[0]],...) =
// (a[i0[0]],a[i0[1]],...)" swap of NTT_swap4: the next stage then finds the
// inputs of consecutive butterflies in different banks, so every bank is
// free every other cycle and a one-element write buffer per bank suffices.
// The register array holds 8 pairs as two halves of 4 (one filling, one
// draining); each bank takes at most one element per cycle (wr_ready).
// When not active the RU is a bypass: out0 of the BFU goes straight to the
// bank and row given with it (pointwise operations).
module reorder_unit #(
  parameter int unsigned W     = 30,
  parameter int unsigned ROW_W = 12,
  localparam int unsigned NB   = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,      // start of an operation
  input  logic                active,     // NTT/iNTT
  input  logic                in_valid,
  input  logic [W-1:0]        in_x,
  input  logic [W-1:0]        in_y,
  input  logic [ROW_W-1:0]    in_row,
  input  logic [1:0]          in_bank,    // bypass only
  output logic [NB-1:0]       wr_valid,
  output logic [ROW_W-1:0]    wr_row  [NB],
  output logic [W-1:0]        wr_data [NB],
  input  logic [NB-1:0]       wr_ready,
  output logic                empty
);
  logic [W-1:0]     xr   [2][NB];
  logic [W-1:0]     yr   [2][NB];
  logic [ROW_W-1:0] rowa [2];
  logic [ROW_W-1:0] rowb [2];
  logic [1:0]       full;
  logic [1:0]       ptr  [NB];    // per bank: 0 -> x pending, 1 -> y pending, 2 -> done
  logic             fh, dh;       // fill half, drain half
  logic [1:0]       l;

  // drain / bypass outputs
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      wr_valid[b] = 1'b0;
      wr_row[b]   = '0;
      wr_data[b]  = '0;
      if (!active) begin
        wr_valid[b] = in_valid && (in_bank == 2'(b));
        wr_row[b]   = in_row;
        wr_data[b]  = in_x;
      end else if (full[dh] && ptr[b] != 2'd2) begin
        wr_valid[b] = 1'b1;
        wr_row[b]   = (ptr[b] == 2'd0) ? rowa[dh] : rowb[dh];
        wr_data[b]  = (ptr[b] == 2'd0) ? xr[dh][b] : yr[dh][b];
      end
    end
  end

  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int b = 0; b < NB; b++)
      if (!(ptr[b] == 2'd2 || (ptr[b] == 2'd1 && wr_ready[b]))) all_done = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; fh <= 1'b0; dh <= 1'b0; l <= '0;
      for (int b = 0; b < NB; b++) ptr[b] <= '0;
    end else if (clear) begin
      full <= '0; fh <= 1'b0; dh <= 1'b0; l <= '0;
      for (int b = 0; b < NB; b++) ptr[b] <= '0;
    end else if (active) begin
      // fill
      if (in_valid) begin
        l <= l + 1'b1;
        if (l == 2'd3) begin
          full[fh] <= 1'b1;
          fh       <= ~fh;
        end
      end
      // drain
      if (full[dh]) begin
        if (all_done) begin
          full[dh] <= 1'b0;
          dh       <= ~dh;
          for (int b = 0; b < NB; b++) ptr[b] <= '0;
        end else begin
          for (int b = 0; b < NB; b++)
            if (wr_valid[b] && wr_ready[b]) ptr[b] <= ptr[b] + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (active && in_valid) begin
      xr[fh][l] <= in_x;
      yr[fh][l] <= in_y;
      if (l == 2'd0) rowa[fh] <= in_row;
      if (l == 2'd2) rowb[fh] <= in_row;
    end
  end

  assign empty = (full == 2'b00) && (l == 2'd0);

  // the half being filled must be free (the schedule guarantees it)
  assert property (@(posedge clk) disable iff (!rst_n)
                   active && in_valid && l == 2'd0 |-> !full[fh]);
  // in bypass mode the addressed bank must accept the element
  assert property (@(posedge clk) disable iff (!rst_n)
                   !active && in_valid |-> wr_ready[in_bank]);
endmodule
