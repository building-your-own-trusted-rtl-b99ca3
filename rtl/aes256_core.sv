// aes256_core: AES-256 block cipher, both directions, with on-chip key
// expansion.
//
// Protected SSAs are encrypted with AES-256 in CBC mode. Hw-Att decrypts them
// when they are loaded (inverse cipher) and encrypts a suspended SSA's state
// before it leaves the enclave (forward cipher). Both directions share one
// expanded key. The CBC chaining is done by the caller (hw_att).
//
// Operation: pulse key_load with a 256-bit key (key[255:248] is key byte 0).
// The core expands it into the 60 round-key words, one word per cycle, and
// raises key_ready 52 cycles later. Then pulse start with a 128-bit block
// (byte 0 in [127:120]) and encrypt = 1 for the FIPS-197 cipher or 0 for the
// inverse cipher. The 14 rounds take one cycle each; done is seen 14 cycles
// after the start cycle, with the result on dout. The S-box and its inverse
// are computed at elaboration from their definition (multiplicative inverse
// in GF(2^8) followed by the affine map), not typed in as tables. The round
// structure and timing are this design's choices; the paper gives only
// "AES-256, CBC mode" for both encryption and decryption.
module aes256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         key_load,
  input  logic [255:0] key,
  output logic         key_ready,
  input  logic         start,
  input  logic         encrypt,
  input  logic [127:0] din,
  output logic [127:0] dout,
  output logic         busy,
  output logic         done
);
  function automatic logic [7:0] xtime(input logic [7:0] x);
    return {x[6:0], 1'b0} ^ (x[7] ? 8'h1B : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ a;
      a = xtime(a);
    end
    return p;
  endfunction

  function automatic logic [7:0] ginv(input logic [7:0] x);  // x^254, square and multiply
    logic [7:0] r;
    r = 8'h01;
    for (int i = 7; i >= 0; i--) begin
      r = gmul(r, r);
      if (i != 0) r = gmul(r, x);
    end
    return r;
  endfunction

  function automatic logic [7:0] affine(input logic [7:0] b);
    logic [7:0] o;
    for (int i = 0; i < 8; i++)
      o[i] = b[i] ^ b[(i+4)%8] ^ b[(i+5)%8] ^ b[(i+6)%8] ^ b[(i+7)%8];
    return o ^ 8'h63;
  endfunction

  typedef logic [255:0][7:0] table_t;

  function automatic table_t gen_sbox();
    table_t tb;
    for (int i = 0; i < 256; i++) tb[i] = affine(ginv(8'(i)));
    return tb;
  endfunction

  function automatic table_t gen_inv(input table_t fwd);
    table_t tb;
    for (int i = 0; i < 256; i++) tb[fwd[i]] = 8'(i);
    return tb;
  endfunction

  localparam table_t SBOX  = gen_sbox();
  localparam table_t ISBOX = gen_inv(SBOX);

  // ---------------- key expansion ----------------
  logic [59:0][31:0] w;
  logic [5:0]        ki;
  logic              kbusy;
  logic [7:0]        rcon;

  function automatic logic [31:0] subword(input logic [31:0] x);
    return {SBOX[x[31:24]], SBOX[x[23:16]], SBOX[x[15:8]], SBOX[x[7:0]]};
  endfunction

  logic [31:0] ktemp;
  always_comb begin
    ktemp = w[ki-6'd1];
    if (ki[2:0] == 3'd0)      ktemp = subword({ktemp[23:0], ktemp[31:24]}) ^ {rcon, 24'd0};
    else if (ki[2:0] == 3'd4) ktemp = subword(ktemp);
  end

  // ---------------- cipher and inverse cipher ----------------
  function automatic logic [127:0] shift_rows(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8*(4*c + r) -: 8] = s[127 - 8*(4*((c + r) % 4) + r) -: 8];
    return o;
  endfunction

  function automatic logic [127:0] sub_bytes(input logic [127:0] s);
    for (int i = 0; i < 16; i++) s[8*i +: 8] = SBOX[s[8*i +: 8]];
    return s;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = s[127 - 32*c -: 8];
      a1 = s[119 - 32*c -: 8];
      a2 = s[111 - 32*c -: 8];
      a3 = s[103 - 32*c -: 8];
      o[127 - 32*c -: 8] = xtime(a0) ^ xtime(a1) ^ a1 ^ a2 ^ a3;
      o[119 - 32*c -: 8] = a0 ^ xtime(a1) ^ xtime(a2) ^ a2 ^ a3;
      o[111 - 32*c -: 8] = a0 ^ a1 ^ xtime(a2) ^ xtime(a3) ^ a3;
      o[103 - 32*c -: 8] = xtime(a0) ^ a0 ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  function automatic logic [127:0] inv_shift_rows(input logic [127:0] s);
    logic [127:0] o;
    // byte (r,c) is at index 4c+r, byte 0 in [127:120]
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8*(4*((c + r) % 4) + r) -: 8] = s[127 - 8*(4*c + r) -: 8];
    return o;
  endfunction

  function automatic logic [127:0] inv_sub_bytes(input logic [127:0] s);
    for (int i = 0; i < 16; i++) s[8*i +: 8] = ISBOX[s[8*i +: 8]];
    return s;
  endfunction

  function automatic logic [127:0] inv_mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = s[127 - 32*c -: 8];
      a1 = s[119 - 32*c -: 8];
      a2 = s[111 - 32*c -: 8];
      a3 = s[103 - 32*c -: 8];
      o[127 - 32*c -: 8] = gmul(a0, 8'h0E) ^ gmul(a1, 8'h0B) ^ gmul(a2, 8'h0D) ^ gmul(a3, 8'h09);
      o[119 - 32*c -: 8] = gmul(a0, 8'h09) ^ gmul(a1, 8'h0E) ^ gmul(a2, 8'h0B) ^ gmul(a3, 8'h0D);
      o[111 - 32*c -: 8] = gmul(a0, 8'h0D) ^ gmul(a1, 8'h09) ^ gmul(a2, 8'h0E) ^ gmul(a3, 8'h0B);
      o[103 - 32*c -: 8] = gmul(a0, 8'h0B) ^ gmul(a1, 8'h0D) ^ gmul(a2, 8'h09) ^ gmul(a3, 8'h0E);
    end
    return o;
  endfunction

  function automatic logic [127:0] rk(input logic [59:0][31:0] ww, input logic [3:0] r);
    return {ww[4*r], ww[4*r+1], ww[4*r+2], ww[4*r+3]};
  endfunction

  logic [127:0] st;
  logic [3:0]   rnd;   // rounds still to do
  logic         enc;   // direction of the block in flight

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w <= '0; ki <= '0; kbusy <= 1'b0; key_ready <= 1'b0; rcon <= 8'h01;
      st <= '0; rnd <= '0; enc <= 1'b0; busy <= 1'b0; done <= 1'b0; dout <= '0;
    end else begin
      done <= 1'b0;
      if (key_load) begin
        for (int i = 0; i < 8; i++) w[i] <= key[255 - 32*i -: 32];
        ki        <= 6'd8;
        rcon      <= 8'h01;
        kbusy     <= 1'b1;
        key_ready <= 1'b0;
      end else if (kbusy) begin
        w[ki] <= w[ki-6'd8] ^ ktemp;
        if (ki[2:0] == 3'd0) rcon <= xtime(rcon);
        if (ki == 6'd59) begin
          kbusy     <= 1'b0;
          key_ready <= 1'b1;
        end
        ki <= ki + 6'd1;
      end

      if (start && !busy && key_ready) begin
        st   <= din ^ rk(w, encrypt ? 4'd0 : 4'd14);
        rnd  <= 4'd13;
        enc  <= encrypt;
        busy <= 1'b1;
      end else if (busy) begin
        // forward round r = 14 - rnd uses round key r; inverse round uses rnd
        if (rnd == 4'd0) begin
          dout <= enc ? shift_rows(sub_bytes(st)) ^ rk(w, 4'd14)
                      : inv_sub_bytes(inv_shift_rows(st)) ^ rk(w, 4'd0);
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          st  <= enc ? mix_columns(shift_rows(sub_bytes(st))) ^ rk(w, 4'd14 - rnd)
                     : inv_mix_columns(inv_sub_bytes(inv_shift_rows(st)) ^ rk(w, rnd));
          rnd <= rnd - 4'd1;
        end
      end
    end
  end
endmodule
