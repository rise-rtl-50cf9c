// error_sampler -- Error Sampling Unit: seed in, a stream of N polynomial
// coefficients in Z_q out.
//
// Chain: keccak_prng -> io_buffer -> width_converter -> (binomial_sampler |
// uniform_sampler) -> output register. 'start' re-seeds the PRNG with
// seed ^ (domain << 1592), i.e. a domain byte in the top byte of the last
// lane, so one host seed yields the same mu in both encryption calls while
// e0 and e1 differ. distr selects the distribution (uniform ternary for mu,
// centred binomial for e0/e1); 'count' samples are produced, rejected uniform
// draws do not count, and 'done' rises after the last one is taken.
// Output is valid/ready; rate is one sample per cycle while a block lasts.
module error_sampler
  import rise_pkg::*;
#(
  parameter int unsigned W       = 30,
  parameter int unsigned STATE_W = 1600,
  parameter int unsigned RATE_W  = 1088,
  parameter int unsigned K       = 21,
  parameter int unsigned CNT_W   = 15
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  smp_dist_e          distr,
  input  logic [7:0]         domain,
  input  logic [CNT_W-1:0]   count,
  input  logic [STATE_W-1:0] seed,
  input  logic [W-1:0]       q,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [W-1:0]       out_data,
  output logic               done
);
  logic              kv, kr;
  logic [RATE_W-1:0] kblk;
  logic              bv, br;
  logic [RATE_W-1:0] bblk;
  logic              wv, wr;
  logic [2*K-1:0]    wdat;
  logic              wide;
  logic [CNT_W-1:0]  left;
  smp_dist_e         dist_q;

  assign wide = (dist_q == SMP_BINOMIAL);

  keccak_prng #(.STATE_W(STATE_W), .RATE_W(RATE_W)) u_prng (
    .clk, .rst_n, .start,
    .seed     (seed ^ (STATE_W'(domain) << (STATE_W - 8))),
    .blk_valid(kv), .blk_ready(kr), .blk(kblk));

  io_buffer #(.W(RATE_W)) u_iobuf (
    .clk, .rst_n, .flush(start),
    .in_valid(kv), .in_ready(kr), .in_data(kblk),
    .out_valid(bv), .out_ready(br), .out_data(bblk));

  width_converter #(.IN_W(RATE_W), .WIDE_W(2*K), .NARR_W(8)) u_conv (
    .clk, .rst_n, .flush(start), .wide,
    .in_valid(bv), .in_ready(br), .in_data(bblk),
    .out_valid(wv), .out_ready(wr), .out_data(wdat));

  logic [W-1:0] s_bin, s_uni;
  logic         uni_ok;
  binomial_sampler #(.K(K), .W(W)) u_bin (.rnd(wdat), .q, .sample(s_bin));
  uniform_sampler  #(.W(W))        u_uni (.rnd(wdat[7:0]), .q, .accept(uni_ok), .sample(s_uni));

  // take a word when there are samples left and the output register is free
  assign wr = (left != 0) && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left <= '0; out_valid <= 1'b0; dist_q <= SMP_UNIFORM; done <= 1'b0;
    end else if (start) begin
      left <= count; out_valid <= 1'b0; dist_q <= distr; done <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (wv && wr && (wide || uni_ok)) begin
        out_valid <= 1'b1;
        out_data  <= wide ? s_bin : s_uni;
        left      <= left - 1'b1;
      end
      if (left == 0 && (!out_valid || out_ready)) done <= 1'b1;
    end
  end
endmodule
