// io_buffer -- one-block buffer between the PRNG and the multi-width
// converter. It takes a 1088-bit block as soon as it is free, which lets the
// Keccak core start its next permutation while the converter is still
// cutting the previous block into samples. Valid/ready on both sides;
// 'flush' empties it (new seed).
module io_buffer #(
  parameter int unsigned W = 1088
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    out_valid <= 1'b0;
    else if (flush)                out_valid <= 1'b0;
    else if (in_valid && in_ready) out_valid <= 1'b1;
    else if (out_ready)            out_valid <= 1'b0;
  end
  always_ff @(posedge clk)
    if (in_valid && in_ready) out_data <= in_data;
endmodule
