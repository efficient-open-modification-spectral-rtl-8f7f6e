// oms_model_pkg: reference model used by the testbenches. It computes, apart
// from the RTL, what the accelerator should produce:
//  * lv_bit: bit of level hypervector l_j in chunk c. l_0 is the xorshift32
//    sequence of the seed (one value per chunk, bit 31), chunk c is flipped in
//    l_j when (c*37 mod NCHUNK) < j*D/(2*Q*CHUNK).
//  * id_weight: signed element held by a cell level (-4..-1,1..4 for 3 bits).
//  * adc: ideal voltage-ADC transfer floor(mac*FS/(n*wmax)), FS = 2^(bits-1)-1.
package oms_model_pkg;

  function automatic bit lv_bit(int j, int c, int D, int Q, int CHUNK, int unsigned seed);
    int nchunk, f, rank;
    logic [31:0] s;
    bit l0;
    nchunk = D / CHUNK;
    f = D / (2 * Q * CHUNK);
    s = (seed == 0) ? 32'd1 : seed;
    l0 = 1'b0;
    for (int i = 0; i <= c; i++) begin
      s = s ^ (s << 13); s = s ^ (s >> 17); s = s ^ (s << 5);
      l0 = s[31];
    end
    rank = (c * 37) % nchunk;
    return l0 ^ (rank < j * f);
  endfunction

  function automatic int id_weight(int level, int bits);
    int wmax;
    wmax = 1 << (bits - 1);
    return (level < wmax) ? level - wmax : level - wmax + 1;
  endfunction

  function automatic int adc(int mac, int n, int wmax, int bits);
    int fs;
    fs = (1 << (bits - 1)) - 1;
    if (n == 0) return 0;
    return int'($floor(real'(mac) * fs / (real'(n) * wmax)));
  endfunction

endpackage
