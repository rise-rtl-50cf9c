// sram_bank -- one single-port (1RW) memory bank of a bank group.
//
// One access per cycle: a read (en & !we) returns rdata on the next clock
// edge, a write (en & we) stores wdata. It stands for a compiled single-port
// SRAM macro; the paper's point is that NTT_swap4 lets every bank be 1RW.
// Contents are not reset (as in an SRAM).
module sram_bank #(
  parameter int unsigned DEPTH = 4096,   // N/4 for N = 2^14
  parameter int unsigned W     = 30,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
