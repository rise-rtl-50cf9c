// binomial_sampler -- centred binomial error sampler (combinational).
//
// The 2K random input bits form two K-bit strings a = rnd[K-1:0] and
// b = rnd[2K-1:K]; the sample is HW(a) - HW(b), a centred binomial value in
// [-K, K] with variance K/2 (K = 21 gives the standard deviation sqrt(21/2)
// of the HE security standard). The two Hamming weights are subtracted and a
// negative difference is brought into Z_q by adding q, so the output is the
// coefficient in [0, q). Constant time: no data-dependent control.
module binomial_sampler #(
  parameter int unsigned K = 21,
  parameter int unsigned W = 30
) (
  input  logic [2*K-1:0] rnd,
  input  logic [W-1:0]   q,
  output logic [W-1:0]   sample
);
  localparam int unsigned HW_W = $clog2(K + 1);
  logic [HW_W-1:0] hw_a, hw_b;

  always_comb begin
    hw_a = '0;
    hw_b = '0;
    for (int i = 0; i < K; i++) begin
      hw_a = hw_a + HW_W'(rnd[i]);
      hw_b = hw_b + HW_W'(rnd[K+i]);
    end
    if (hw_a >= hw_b) sample = W'(hw_a - hw_b);
    else              sample = q - W'(hw_b - hw_a);
  end
endmodule
