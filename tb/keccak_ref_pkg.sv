// keccak_ref_pkg -- testbench-only reference models for the sampling path.
//
// keccak_f() is a Keccak-f[1600] written the compact software way (in-place
// rho+pi walk with a lane-order table, round constants generated from the
// degree-8 LFSR of the Keccak specification), so it shares no code or table
// with the hardware round. smp_stream() reproduces the sampler's output
// stream: block k of the PRNG is f^(k+1)(seed ^ domain<<1592) truncated to its
// 1088-bit rate, cut LSB-first into 42-bit words (25 per block, the rest
// dropped) for the centred binomial or into bytes (136 per block) for the
// ternary sampler, which rejects the byte 255 and maps r mod 3 to {0, 1, q-1}.
package keccak_ref_pkg;

  function automatic logic [63:0] rotl64(input logic [63:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  // bit t of the LFSR x^8 + x^6 + x^5 + x^4 + 1 sequence
  function automatic logic lfsr_rc(input int t);
    logic [8:0] r;
    r = 9'h1;
    for (int i = 1; i <= t % 255; i++) begin
      r = r << 1;
      if (r[8]) r = r ^ 9'h171;
    end
    return r[0];
  endfunction

  function automatic logic [1599:0] keccak_f(input logic [1599:0] s_in);
    int rotc [24] = '{1, 3, 6, 10, 15, 21, 28, 36, 45, 55, 2, 14, 27, 41, 56, 8, 25, 43, 62, 18, 39, 61, 20, 44};
    int piln [24] = '{10, 7, 11, 17, 18, 3, 5, 16, 8, 21, 24, 4, 15, 23, 19, 13, 12, 2, 20, 14, 22, 9, 6, 1};
    logic [63:0] st [25];
    logic [63:0] bc [5];
    logic [63:0] t, rc;
    logic [1599:0] s_out;
    for (int i = 0; i < 25; i++) st[i] = s_in[64*i +: 64];
    for (int r = 0; r < 24; r++) begin
      for (int i = 0; i < 5; i++) bc[i] = st[i] ^ st[i+5] ^ st[i+10] ^ st[i+15] ^ st[i+20];
      for (int i = 0; i < 5; i++) begin
        t = bc[(i+4)%5] ^ rotl64(bc[(i+1)%5], 1);
        for (int j = 0; j < 25; j += 5) st[j+i] ^= t;
      end
      t = st[1];
      for (int i = 0; i < 24; i++) begin
        logic [63:0] keep;
        keep = st[piln[i]];
        st[piln[i]] = rotl64(t, rotc[i]);
        t = keep;
      end
      for (int j = 0; j < 25; j += 5) begin
        for (int i = 0; i < 5; i++) bc[i] = st[j+i];
        for (int i = 0; i < 5; i++) st[j+i] ^= (~bc[(i+1)%5]) & bc[(i+2)%5];
      end
      rc = '0;
      for (int j = 0; j < 7; j++) rc[(1 << j) - 1] = lfsr_rc(j + 7*r);
      st[0] ^= rc;
    end
    for (int i = 0; i < 25; i++) s_out[64*i +: 64] = st[i];
    return s_out;
  endfunction

  // expected sampler output: 'count' coefficients mod q
  function automatic void smp_stream(input logic [1599:0] seed, input logic [7:0] domain,
                                     input bit binomial, input int count,
                                     input logic [29:0] q, ref logic [29:0] out [$]);
    logic [1599:0] st;
    out.delete();
    st = seed ^ (1600'(domain) << 1592);
    while (out.size() < count) begin
      st = keccak_f(st);
      if (binomial) begin
        for (int w = 0; w < 25 && out.size() < count; w++) begin
          int d;
          logic [41:0] word;
          word = st[42*w +: 42];
          d = $countones(word[20:0]) - $countones(word[41:21]);
          out.push_back(d >= 0 ? 30'(d) : q - 30'(-d));
        end
      end else begin
        for (int b = 0; b < 136 && out.size() < count; b++) begin
          int r;
          r = int'(st[8*b +: 8]);
          if (r < 255) out.push_back(r % 3 == 0 ? 30'd0 : r % 3 == 1 ? 30'd1 : q - 30'd1);
        end
      end
    end
  endfunction
endpackage
