// tb_herp_pkg: helpers shared by the testbenches: deterministic hypervector generation and
// a software reference of one bucket's search (minimum Hamming distance, lowest index).
package tb_herp_pkg;
  localparam int unsigned MAXD = 2048;

  // 64-bit mix (splitmix64 finaliser)
  function automatic logic [63:0] mix64(logic [63:0] x);
    x = (x ^ (x >> 30)) * 64'hbf58476d1ce4e5b9;
    x = (x ^ (x >> 27)) * 64'h94d049bb133111eb;
    return x ^ (x >> 31);
  endfunction

  // consensus HV of cluster `row` of bucket `b` as stored in main memory initially
  function automatic logic [MAXD-1:0] gen_hv(int unsigned b, int unsigned row);
    logic [MAXD-1:0] h;
    for (int w = 0; w < MAXD/64; w++)
      h[w*64 +: 64] = mix64({b[23:0], row[15:0], w[15:0], 8'h5a});
    return h;
  endfunction

  // initial number of clusters of bucket b (kept small and varied)
  function automatic int unsigned gen_count(int unsigned b, int unsigned cap);
    int unsigned c;
    c = (mix64(64'(b) + 64'd77) % 64'd5) + 1;
    return (c > cap) ? cap : c;
  endfunction

  // flip `n` distinct-ish bits (positions from a seed) inside the low `dim` bits
  function automatic logic [MAXD-1:0] flip_bits(logic [MAXD-1:0] h, int unsigned n, int unsigned dim, int unsigned seed);
    for (int i = 0; i < int'(n); i++) begin
      int unsigned p;
      p = int'(mix64(64'(seed) * 64'd1000003 + 64'(i)) % 64'(dim));
      h[p] = ~h[p];
    end
    return h;
  endfunction

  function automatic int unsigned hdist(logic [MAXD-1:0] a, logic [MAXD-1:0] b, int unsigned dim);
    int unsigned d = 0;
    for (int i = 0; i < int'(dim); i++) d += int'(a[i] ^ b[i]);
    return d;
  endfunction
endpackage
