// blake2s_core: BLAKE2s compression function, one round per clock.
//
// The enclave measurements (the pre- and post-execution attestation reports)
// are BLAKE2 hashes over the enclave's block RAM. This core computes the
// BLAKE2s compression F(h, m, t, f) of RFC 7693: it takes the 8-word chaining
// value h_in, a 64-byte message block (16 little-endian 32-bit words, word i
// in block[32*i +: 32]), the 64-bit byte counter t and the last-block flag,
// and returns the new chaining value h_out.
//
// Timing: pulse start for one cycle with the inputs valid (they are sampled
// then); each of the 10 rounds (four column G functions, then four diagonal G
// functions) takes one cycle, the finalisation one more, so done pulses 11
// cycles after start and h_out holds until the next start. busy is high in
// between. The paper names BLAKE2 but not the variant; the 32-bit BLAKE2s is
// this design's choice because the enclaves are 32-bit machines.
module blake2s_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [255:0] h_in,
  input  logic [511:0] block,
  input  logic [63:0]  t,
  input  logic         last,
  output logic [255:0] h_out,
  output logic         busy,
  output logic         done
);
  import byot_pkg::rotr32;

  localparam logic [7:0][31:0] IV = '{
    32'h5BE0CD19, 32'h1F83D9AB, 32'h9B05688C, 32'h510E527F,
    32'hA54FF53A, 32'h3C6EF372, 32'hBB67AE85, 32'h6A09E667};

  // Message permutation SIGMA of RFC 7693: nibble i of SIGMA[r] is entry i.
  localparam logic [9:0][63:0] SIGMA = '{
    64'h0_D_C_3_E_9_B_F_5_1_6_7_4_8_2_A,  // r=9
    64'h5_A_4_1_7_D_2_C_8_0_3_B_9_E_F_6,  // r=8
    64'hA_2_6_8_4_F_0_5_9_3_1_C_E_7_B_D,  // r=7
    64'hB_8_2_9_3_6_7_0_A_4_D_E_F_1_5_C,  // r=6
    64'h9_1_E_F_5_7_D_4_3_8_B_0_A_6_C_2,  // r=5
    64'hD_3_8_6_C_B_1_E_F_A_4_2_7_5_0_9,  // r=4
    64'h8_F_0_4_A_5_6_2_E_B_C_D_1_3_9_7,  // r=3
    64'h4_9_1_7_6_3_E_A_D_F_2_5_0_C_8_B,  // r=2
    64'h3_5_7_B_2_0_C_1_6_D_F_9_8_4_A_E,  // r=1
    64'hF_E_D_C_B_A_9_8_7_6_5_4_3_2_1_0}; // r=0

  logic [15:0][31:0] v, m;
  logic [7:0][31:0]  h;
  logic [3:0]        round;

  function automatic logic [3:0] sig(input logic [3:0] r, input int unsigned i);
    return SIGMA[r][4*i +: 4];
  endfunction

  // One G function on words a,b,c,d with message words x,y.
  function automatic logic [127:0] g(input logic [31:0] a, b, c, d, x, y);
    a = a + b + x;  d = rotr32(d ^ a, 16);
    c = c + d;      b = rotr32(b ^ c, 12);
    a = a + b + y;  d = rotr32(d ^ a, 8);
    c = c + d;      b = rotr32(b ^ c, 7);
    return {a, b, c, d};
  endfunction

  function automatic logic [15:0][31:0] do_round(input logic [15:0][31:0] vi,
                                                 input logic [15:0][31:0] mi,
                                                 input logic [3:0] r);
    logic [15:0][31:0] w;
    logic [127:0] o;
    w = vi;
    // columns
    o = g(w[0], w[4], w[8],  w[12], mi[sig(r,0)],  mi[sig(r,1)]);  {w[0], w[4], w[8],  w[12]} = o;
    o = g(w[1], w[5], w[9],  w[13], mi[sig(r,2)],  mi[sig(r,3)]);  {w[1], w[5], w[9],  w[13]} = o;
    o = g(w[2], w[6], w[10], w[14], mi[sig(r,4)],  mi[sig(r,5)]);  {w[2], w[6], w[10], w[14]} = o;
    o = g(w[3], w[7], w[11], w[15], mi[sig(r,6)],  mi[sig(r,7)]);  {w[3], w[7], w[11], w[15]} = o;
    // diagonals
    o = g(w[0], w[5], w[10], w[15], mi[sig(r,8)],  mi[sig(r,9)]);  {w[0], w[5], w[10], w[15]} = o;
    o = g(w[1], w[6], w[11], w[12], mi[sig(r,10)], mi[sig(r,11)]); {w[1], w[6], w[11], w[12]} = o;
    o = g(w[2], w[7], w[8],  w[13], mi[sig(r,12)], mi[sig(r,13)]); {w[2], w[7], w[8],  w[13]} = o;
    o = g(w[3], w[4], w[9],  w[14], mi[sig(r,14)], mi[sig(r,15)]); {w[3], w[4], w[9],  w[14]} = o;
    return w;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      round <= '0;
      v     <= '0;
      m     <= '0;
      h     <= '0;
      h_out <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        h     <= h_in;
        m     <= block;
        for (int i = 0; i < 8; i++) v[i] <= h_in[32*i +: 32];
        for (int i = 0; i < 8; i++) v[8+i] <= IV[i];
        v[12] <= IV[4] ^ t[31:0];
        v[13] <= IV[5] ^ t[63:32];
        v[14] <= last ? ~IV[6] : IV[6];
        round <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        if (round == 4'd10) begin
          for (int i = 0; i < 8; i++) h_out[32*i +: 32] <= h[i] ^ v[i] ^ v[8+i];
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          v     <= do_round(v, m, round);
          round <= round + 4'd1;
        end
      end
    end
  end
endmodule
