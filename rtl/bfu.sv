// bfu -- Butterfly Unit: the one arithmetic datapath shared by NTT, iNTT,
// pointwise modular addition and pointwise modular multiplication.
//
// mode[1:0] is decoded into three mux selects (decode table of the design):
//   mode 0x: s0=0 s1=0 s2=0  butterfly  out0 = u + v*w,  out1 = u - v*w (mod q)
//   mode 10: s1=1 s2=0       addition   out0 = u + v (mod q)
//   mode 11: s0=1 s2=1       multiply   out0 = u * v (mod q)
// s0 picks the second multiplier operand (w or u), s1 picks what ADD_RED adds
// to u (the product or v), s2 picks the out0 source (ADD_RED or the product).
// The multiplier is the 4-stage Barrett modmul; u and v are delayed alongside
// it and a final stage holds the conditional-subtract adder/subtractor
// (ADD_RED, SUB_RED). Fully pipelined: one operation per cycle, LAT = 5.
// TAG_W bits of caller side band (addresses) ride along.
module bfu
  import rise_pkg::*;
#(
  parameter int unsigned W     = 30,
  parameter int unsigned TAG_W = 1,
  localparam int unsigned LAT  = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [W-1:0]     q,
  input  logic [2*W-1:0]   mu,
  input  logic             in_valid,
  input  logic [1:0]       mode,
  input  logic [W-1:0]     u,
  input  logic [W-1:0]     v,
  input  logic [W-1:0]     w,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [W-1:0]     out0,
  output logic [W-1:0]     out1,
  output logic [TAG_W-1:0] out_tag
);
  logic s0, s1, s2;
  always_comb begin
    s0 = 1'b0; s1 = 1'b0; s2 = 1'b0;
    unique case (mode)
      2'b10:   s1 = 1'b1;
      2'b11:   begin s0 = 1'b1; s2 = 1'b1; end
      default: ;
    endcase
  end

  localparam int unsigned SB = TAG_W + 2*W + 2;   // tag, u, v, s1, s2
  logic [W-1:0]  prod;
  logic [SB-1:0] sb_out;
  logic          mm_valid;

  modmul #(.W(W), .TAG_W(SB)) u_mul (
    .clk, .rst_n, .q, .mu,
    .in_valid (in_valid),
    .a        (v),
    .b        (s0 ? u : w),
    .in_tag   ({in_tag, u, v, s1, s2}),
    .out_valid(mm_valid),
    .p        (prod),
    .out_tag  (sb_out)
  );

  logic [TAG_W-1:0] d_tag;
  logic [W-1:0]     d_u, d_v;
  logic             d_s1, d_s2;
  assign {d_tag, d_u, d_v, d_s1, d_s2} = sb_out;

  // ADD_RED / SUB_RED with reduction by a conditional operator
  logic [W-1:0] add_b;
  logic [W:0]   sum;
  logic [W-1:0] add_red, sub_red;
  assign add_b   = d_s1 ? d_v : prod;
  assign sum     = {1'b0, d_u} + {1'b0, add_b};
  assign add_red = (sum >= {1'b0, q}) ? W'(sum - {1'b0, q}) : sum[W-1:0];
  assign sub_red = (d_u >= prod) ? (d_u - prod) : W'({1'b0, d_u} + {1'b0, q} - {1'b0, prod});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= mm_valid;
  end
  always_ff @(posedge clk) begin
    out0    <= d_s2 ? prod : add_red;
    out1    <= sub_red;
    out_tag <= d_tag;
  end
endmodule
