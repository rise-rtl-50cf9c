// uniform_sampler -- ternary uniform sampler by rejection (combinational).
//
// An 8-bit random value r is compared with BOUND (255 = 3*85): r >= BOUND is
// rejected (accept = 0) so that the accepted values are exactly uniform
// modulo 3. The remainder r mod 3 is computed in constant time by summing
// base-4 digits (4 = 1 mod 3) twice, and mapped into Z_q as 0 -> 0, 1 -> 1,
// 2 -> q-1 (i.e. -1): a coefficient of R_3 = {-1, 0, 1}.
module uniform_sampler #(
  parameter int unsigned W      = 30,
  parameter int unsigned BOUND  = 255,
  localparam int unsigned BYTE_W = 8
) (
  input  logic [BYTE_W-1:0] rnd,
  input  logic [W-1:0]      q,
  output logic              accept,
  output logic [W-1:0]      sample
);
  logic [3:0] s1;
  logic [2:0] s2;
  logic [2:0] s3;
  logic [1:0] r3;

  always_comb begin
    accept = rnd < BYTE_W'(BOUND);
    s1 = 4'(rnd[1:0]) + 4'(rnd[3:2]) + 4'(rnd[5:4]) + 4'(rnd[7:6]);   // <= 12
    s2 = 3'(s1[1:0]) + 3'(s1[3:2]);                                   // <= 6
    s3 = 3'(s2[1:0]) + 3'(s2[2]);                                     // <= 4
    unique case (s3)
      3'd3:    r3 = 2'd0;
      3'd4:    r3 = 2'd1;
      default: r3 = s3[1:0];
    endcase
    unique case (r3)
      2'd1:    sample = W'(1);
      2'd2:    sample = q - W'(1);
      default: sample = '0;
    endcase
  end
endmodule
