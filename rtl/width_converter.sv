// width_converter -- multi-width converter between the PRNG block stream and
// the samplers. A 1088-bit block is loaded into a shift register and handed
// out from its low end as 42-bit words (wide = 1, two 21-bit strings for the
// binomial sampler) or 8-bit words (wide = 0, uniform sampler). A new block
// is loaded only when fewer bits than one word remain; those leftover bits
// are dropped. One word per cycle; valid/ready on both sides.
module width_converter #(
  parameter int unsigned IN_W   = 1088,
  parameter int unsigned WIDE_W = 42,
  parameter int unsigned NARR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  input  logic              wide,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [IN_W-1:0]   in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WIDE_W-1:0] out_data
);
  localparam int unsigned CW = $clog2(IN_W + 1);
  logic [IN_W-1:0] sr;
  logic [CW-1:0]   cnt;
  logic [CW-1:0]   need;

  assign need      = wide ? CW'(WIDE_W) : CW'(NARR_W);
  assign out_valid = cnt >= need;
  assign in_ready  = !out_valid;
  assign out_data  = wide ? sr[WIDE_W-1:0] : {{(WIDE_W-NARR_W){1'b0}}, sr[NARR_W-1:0]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (flush) cnt <= '0;
    else if (in_valid && in_ready) cnt <= CW'(IN_W);
    else if (out_valid && out_ready) cnt <= cnt - need;
  end
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) sr <= in_data;
    else if (out_valid && out_ready) sr <= wide ? (sr >> WIDE_W) : (sr >> NARR_W);
  end
endmodule
