// sha256_pkg -- constants and step functions of SHA-256 (FIPS 180-4).
//
// K holds the 64 round constants (first 32 bits of the fractional parts of
// the cube roots of the first 64 primes), H0 the initial hash value (same for
// the square roots of the first 8 primes). The functions are the standard
// sigma/choice/majority functions of the compression round.
package sha256_pkg;

  typedef logic [31:0] w32_t;

  localparam logic [63:0][31:0] K = {
    32'hc67178f2, 32'hbef9a3f7, 32'ha4506ceb, 32'h90befffa,
    32'h8cc70208, 32'h84c87814, 32'h78a5636f, 32'h748f82ee,
    32'h682e6ff3, 32'h5b9cca4f, 32'h4ed8aa4a, 32'h391c0cb3,
    32'h34b0bcb5, 32'h2748774c, 32'h1e376c08, 32'h19a4c116,
    32'h106aa070, 32'hf40e3585, 32'hd6990624, 32'hd192e819,
    32'hc76c51a3, 32'hc24b8b70, 32'ha81a664b, 32'ha2bfe8a1,
    32'h92722c85, 32'h81c2c92e, 32'h766a0abb, 32'h650a7354,
    32'h53380d13, 32'h4d2c6dfc, 32'h2e1b2138, 32'h27b70a85,
    32'h14292967, 32'h06ca6351, 32'hd5a79147, 32'hc6e00bf3,
    32'hbf597fc7, 32'hb00327c8, 32'ha831c66d, 32'h983e5152,
    32'h76f988da, 32'h5cb0a9dc, 32'h4a7484aa, 32'h2de92c6f,
    32'h240ca1cc, 32'h0fc19dc6, 32'hefbe4786, 32'he49b69c1,
    32'hc19bf174, 32'h9bdc06a7, 32'h80deb1fe, 32'h72be5d74,
    32'h550c7dc3, 32'h243185be, 32'h12835b01, 32'hd807aa98,
    32'hab1c5ed5, 32'h923f82a4, 32'h59f111f1, 32'h3956c25b,
    32'he9b5dba5, 32'hb5c0fbcf, 32'h71374491, 32'h428a2f98
  };

  // H0[0] = a ... H0[7] = h
  localparam logic [7:0][31:0] H0 = {
    32'h5be0cd19, 32'h1f83d9ab, 32'h9b05688c, 32'h510e527f,
    32'ha54ff53a, 32'h3c6ef372, 32'hbb67ae85, 32'h6a09e667
  };

  function automatic w32_t rotr(input w32_t x, input int unsigned n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic w32_t bsig0(input w32_t x);
    return rotr(x, 2) ^ rotr(x, 13) ^ rotr(x, 22);
  endfunction

  function automatic w32_t bsig1(input w32_t x);
    return rotr(x, 6) ^ rotr(x, 11) ^ rotr(x, 25);
  endfunction

  function automatic w32_t ssig0(input w32_t x);
    return rotr(x, 7) ^ rotr(x, 18) ^ (x >> 3);
  endfunction

  function automatic w32_t ssig1(input w32_t x);
    return rotr(x, 17) ^ rotr(x, 19) ^ (x >> 10);
  endfunction

  function automatic w32_t ch(input w32_t x, input w32_t y, input w32_t z);
    return (x & y) ^ (~x & z);
  endfunction

  function automatic w32_t maj(input w32_t x, input w32_t y, input w32_t z);
    return (x & y) ^ (x & z) ^ (y & z);
  endfunction

endpackage
