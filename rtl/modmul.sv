// modmul -- pipelined modular multiplier p = a*b mod q with Barrett reduction.
//
// The reduction follows the classic Barrett scheme: with k = 2*W and
// mu = floor(2^k / q) (supplied by the host, so q is freely configurable),
// t = (x*mu) >> k underestimates x/q by at most one, so r = x - t*q lies in
// [0, 2q) and one conditional subtraction finishes the job: two multiplies,
// a shift, a subtraction and a conditional subtraction.
// Pipeline (LAT = 4 cycles, one result per cycle):
//   1: x = a*b   2: t = (x*mu)>>k   3: r = x - t*q   4: p = r>=q ? r-q : r
// Inputs must satisfy a, b < q. A TAG_W-bit side band travels with the data.
module modmul #(
  parameter int unsigned W     = 30,
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [W-1:0]     q,
  input  logic [2*W-1:0]   mu,
  input  logic             in_valid,
  input  logic [W-1:0]     a,
  input  logic [W-1:0]     b,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [W-1:0]     p,
  output logic [TAG_W-1:0] out_tag
);
  logic [3:0]           v;
  logic [TAG_W-1:0]     tag [4];
  logic [2*W-1:0]       x1, x2;
  logic [2*W-1:0]       t2;
  logic [W:0]           r3;
  logic [4*W-1:0]       xm;

  assign xm = {{(2*W){1'b0}}, x1} * {{(2*W){1'b0}}, mu};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    // stage 1: product
    x1     <= {{W{1'b0}}, a} * {{W{1'b0}}, b};
    tag[0] <= in_tag;
    // stage 2: quotient estimate
    t2     <= xm[4*W-1:2*W];
    x2     <= x1;
    tag[1] <= tag[0];
    // stage 3: remainder estimate, in [0, 2q)
    r3     <= (W+1)'(x2 - t2 * {{W{1'b0}}, q});
    tag[2] <= tag[1];
    // stage 4: conditional subtraction
    p      <= (r3 >= {1'b0, q}) ? W'(r3 - {1'b0, q}) : r3[W-1:0];
    tag[3] <= tag[2];
  end

  assign out_valid = v[3];
  assign out_tag   = tag[3];
endmodule
