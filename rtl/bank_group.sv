// bank_group -- one bank group (BG0 or BG1): storage for one polynomial of up
// to 2^LOGN_MAX coefficients, split over NBANK = 4 single-port banks
// (position p -> bank p[1:0], row p >> 2), each fronted by a one-element
// write buffer.
//
// Per bank and cycle: a read request (rd_en, rd_row) always wins and returns
// rd_data one cycle later; otherwise a buffered write is performed. A new
// write may be pushed when the buffer is empty or is being written this
// cycle (wr_ready); a push while wr_ready is low is not taken and the
// source must hold it. 'idle' says every write buffer is empty.
module bank_group #(
  parameter int unsigned LOGN_MAX = 14,
  parameter int unsigned W        = 30,
  localparam int unsigned NB      = 4,
  localparam int unsigned ROW_W   = LOGN_MAX - 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NB-1:0]    rd_en,
  input  logic [ROW_W-1:0] rd_row  [NB],
  output logic [W-1:0]     rd_data [NB],
  input  logic [NB-1:0]    wr_push,
  input  logic [ROW_W-1:0] wr_row  [NB],
  input  logic [W-1:0]     wr_data [NB],
  output logic [NB-1:0]    wr_ready,
  output logic             idle
);
  logic [NB-1:0]    wb_v;
  logic [ROW_W-1:0] wb_row  [NB];
  logic [W-1:0]     wb_data [NB];

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic do_wr;
    assign do_wr       = wb_v[b] && !rd_en[b];
    assign wr_ready[b] = !wb_v[b] || do_wr;

    sram_bank #(.DEPTH(1 << ROW_W), .W(W)) u_bank (
      .clk,
      .en   (rd_en[b] || do_wr),
      .we   (!rd_en[b]),
      .addr (rd_en[b] ? rd_row[b] : wb_row[b]),
      .wdata(wb_data[b]),
      .rdata(rd_data[b])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                        wb_v[b] <= 1'b0;
      else if (wr_push[b] && wr_ready[b]) wb_v[b] <= 1'b1;
      else if (do_wr)                    wb_v[b] <= 1'b0;
    end
    always_ff @(posedge clk) begin
      if (wr_push[b] && wr_ready[b]) begin
        wb_row[b]  <= wr_row[b];
        wb_data[b] <= wr_data[b];
      end
    end
  end

  assign idle = (wb_v == '0);
endmodule
