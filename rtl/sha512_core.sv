// sha512_core: SHA-512 compression function, one round per clock.
//
// Integrity and authenticity of a protected SSA are checked with
// HMAC-SHA512; this core is its hash engine. It computes the FIPS 180-4
// SHA-512 compression of one 128-byte block: h_out = h_in + rounds(h_in, W).
// The block is given as sixteen big-endian 64-bit words, word 0 (the first
// eight message bytes) in block[1023:960]; h_in/h_out hold H0 in [511:448].
// Padding and the HMAC construction are done by the caller (hw_att).
//
// Timing: pulse start with the inputs valid; the 80 rounds take one cycle
// each and the final addition one more, so done pulses 81 cycles after
// start, and h_out holds until the next start. The message schedule is a
// 16-word sliding window. The one-round-per-cycle structure is this design's
// choice; the paper gives only the algorithm's name.
module sha512_core (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [511:0]  h_in,
  input  logic [1023:0] block,
  output logic [511:0]  h_out,
  output logic          busy,
  output logic          done
);
  import byot_pkg::rotr64;

  // K[t]: first 64 bits of the fractional parts of the cube roots of the
  // first 80 primes (FIPS 180-4, 4.2.3). Entry 0 is the last one listed.
  localparam logic [79:0][63:0] K = '{
    64'h6C44198C4A475817, 64'h5FCB6FAB3AD6FAEC, 64'h597F299CFC657E2A, 64'h4CC5D4BECB3E42B6,
    64'h431D67C49C100D4C, 64'h3C9EBE0A15C9BEBC, 64'h32CAAB7B40C72493, 64'h28DB77F523047D84,
    64'h1B710B35131C471B, 64'h113F9804BEF90DAE, 64'h0A637DC5A2C898A6, 64'h06F067AA72176FBA,
    64'hF57D4F7FEE6ED178, 64'hEADA7DD6CDE0EB1E, 64'hD186B8C721C0C207, 64'hCA273ECEEA26619C,
    64'hC67178F2E372532B, 64'hBEF9A3F7B2C67915, 64'hA4506CEBDE82BDE9, 64'h90BEFFFA23631E28,
    64'h8CC702081A6439EC, 64'h84C87814A1F0AB72, 64'h78A5636F43172F60, 64'h748F82EE5DEFB2FC,
    64'h682E6FF3D6B2B8A3, 64'h5B9CCA4F7763E373, 64'h4ED8AA4AE3418ACB, 64'h391C0CB3C5C95A63,
    64'h34B0BCB5E19B48A8, 64'h2748774CDF8EEB99, 64'h1E376C085141AB53, 64'h19A4C116B8D2D0C8,
    64'h106AA07032BBD1B8, 64'hF40E35855771202A, 64'hD69906245565A910, 64'hD192E819D6EF5218,
    64'hC76C51A30654BE30, 64'hC24B8B70D0F89791, 64'hA81A664BBC423001, 64'hA2BFE8A14CF10364,
    64'h92722C851482353B, 64'h81C2C92E47EDAEE6, 64'h766A0ABB3C77B2A8, 64'h650A73548BAF63DE,
    64'h53380D139D95B3DF, 64'h4D2C6DFC5AC42AED, 64'h2E1B21385C26C926, 64'h27B70A8546D22FFC,
    64'h142929670A0E6E70, 64'h06CA6351E003826F, 64'hD5A79147930AA725, 64'hC6E00BF33DA88FC2,
    64'hBF597FC7BEEF0EE4, 64'hB00327C898FB213F, 64'hA831C66D2DB43210, 64'h983E5152EE66DFAB,
    64'h76F988DA831153B5, 64'h5CB0A9DCBD41FBD4, 64'h4A7484AA6EA6E483, 64'h2DE92C6F592B0275,
    64'h240CA1CC77AC9C65, 64'h0FC19DC68B8CD5B5, 64'hEFBE4786384F25E3, 64'hE49B69C19EF14AD2,
    64'hC19BF174CF692694, 64'h9BDC06A725C71235, 64'h80DEB1FE3B1696B1, 64'h72BE5D74F27B896F,
    64'h550C7DC3D5FFB4E2, 64'h243185BE4EE4B28C, 64'h12835B0145706FBE, 64'hD807AA98A3030242,
    64'hAB1C5ED5DA6D8118, 64'h923F82A4AF194F9B, 64'h59F111F1B605D019, 64'h3956C25BF348B538,
    64'hE9B5DBA58189DBBC, 64'hB5C0FBCFEC4D3B2F, 64'h7137449123EF65CD, 64'h428A2F98D728AE22};

  logic [15:0][63:0] w;      // w[0] is W[t] in round t
  logic [7:0][63:0]  s;      // a..h in s[7]..s[0]
  logic [7:0][63:0]  h;
  logic [6:0]        t;

  function automatic logic [63:0] bsig0(input logic [63:0] x);
    return rotr64(x, 28) ^ rotr64(x, 34) ^ rotr64(x, 39);
  endfunction
  function automatic logic [63:0] bsig1(input logic [63:0] x);
    return rotr64(x, 14) ^ rotr64(x, 18) ^ rotr64(x, 41);
  endfunction
  function automatic logic [63:0] ssig0(input logic [63:0] x);
    return rotr64(x, 1) ^ rotr64(x, 8) ^ (x >> 7);
  endfunction
  function automatic logic [63:0] ssig1(input logic [63:0] x);
    return rotr64(x, 19) ^ rotr64(x, 61) ^ (x >> 6);
  endfunction

  logic [63:0] a, b, c, d, e, f, g, hh, t1, t2, wnext;
  always_comb begin
    {a, b, c, d, e, f, g, hh} = s;
    t1    = hh + bsig1(e) + ((e & f) ^ (~e & g)) + K[t] + w[0];
    t2    = bsig0(a) + ((a & b) ^ (a & c) ^ (b & c));
    wnext = ssig1(w[14]) + w[9] + ssig0(w[1]) + w[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      t     <= '0;
      w     <= '0;
      s     <= '0;
      h     <= '0;
      h_out <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        h <= h_in;
        s <= h_in;
        for (int i = 0; i < 16; i++) w[i] <= block[1023 - 64*i -: 64];
        t    <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        if (t == 7'd80) begin
          for (int i = 0; i < 8; i++) h_out[64*i +: 64] <= h[i] + s[i];
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          s <= {t1 + t2, a, b, c, d + t1, e, f, g};
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= wnext;
          t     <= t + 7'd1;
        end
      end
    end
  end
endmodule
