// hw_att: the hardware decryption and attestation engine (Hw-Att) of an
// enclave that uses hardware-based attestation.
//
// Under the enhanced threat model the enclave firmware and SSA may be
// compromised, so they must never hold the developer keys or compute their
// own attestation reports. Hw-Att holds the keys in its own registers, has a
// private master port into the whole of the enclave's block RAM, and offers
// the firmware a small command interface. The firmware asks it to
//   * verify a protected SSA:   HMAC-SHA512 with the developer MAC key over
//                               one or more BRAM regions, compared with a
//                               64-byte tag that is also in BRAM
//                               (MAC_START, MAC_ADD..., MAC_CHECK);
//   * decrypt it:               AES-256-CBC with the developer key, the IV in
//                               the 16 bytes at SRC, LEN bytes of ciphertext
//                               after it, plaintext written at DST (DECRYPT);
//   * protect a suspended SSA:  AES-256-CBC encryption of the saved context
//                               and writable sections (ENCRYPT: IV and LEN
//                               bytes of plaintext at SRC, IV and ciphertext
//                               written at DST), then an HMAC tag over the
//                               result written to BRAM (MAC_START, MAC_ADD...,
//                               MAC_SIGN). Restoring runs MAC_CHECK and
//                               DECRYPT on the returned blob;
//   * measure the enclave:      keyed BLAKE2s with the attestation key over
//                               any list of BRAM regions (vector table,
//                               firmware, m, Chal, input, SSA sections, output,
//                               PreExecAtt...), the 32-byte report written to
//                               BRAM at DST and kept in REPORT registers
//                               (MEAS_START, MEAS_ADD..., MEAS_END).
// Because all data are read from BRAM by Hw-Att itself, a measurement covers
// what the enclave will really run, not what the DRAM copy says.
//
// Firmware registers (byot bus, byte offsets):
//   0x00 CMD     write [3:0] = hwa_cmd_e; starts the command (ignored if busy)
//   0x04 SRC     region start (byte address in enclave BRAM, word aligned)
//   0x08 LEN     region length in bytes (multiple of 4; of 16 for DECRYPT/ENCRYPT)
//   0x0C DST     output address (plaintext, report) or tag address
//   0x10 STATUS  read: bit0 busy, bit1 MAC matched, bit2 error, bit3 report valid
//   0x20-0x3C    REPORT words 0..7 of the last measurement
// BRAM port: one word request at a time on bram_req, answered on bram_rsp
// (bram_dp's port B). Memory byte order is little endian: byte address a is
// bits [8*(a%4)+7 : 8*(a%4)] of its word.
// done pulses for one cycle when a command finishes.
//
// What follows the paper: a hardware module wired to the entire enclave BRAM,
// keys held inside it, AES-256-CBC decryption, SHA512-HMAC verification and
// BLAKE2 measurements, reports written back for the firmware to copy out, and
// SHA512-HMAC + AES-256-CBC protection of a suspended SSA's state with the
// developer key. The paper has the firmware do the suspend encryption; here
// Hw-Att does it so the key stays out of firmware reach in this profile too.
// This design's own choices: the register map, the command split into
// start/add/end so a measurement can cover regions that are not contiguous,
// BLAKE2s in keyed mode as the "signed" report (a keyed hash with a key only
// Hw-Att holds serves as the signature), encrypt-then-MAC order, keys given
// as parameters (they would be set in the bitstream), word-granular lengths,
// and an IV supplied by the firmware (Hw-Att has no random source).
module hw_att
  import byot_pkg::*;
#(
  parameter logic [255:0] K_ENC = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f,
  parameter logic [255:0] K_MAC = 256'h4a6566654a6566654a6566654a6566654a6566654a6566654a6566654a656665,
  parameter logic [255:0] K_ATT = 256'h202122232425262728292a2b2c2d2e2f303132333435363738393a3b3c3d3e3f
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp,
  output bus_req_t bram_req,
  input  bus_rsp_t bram_rsp,
  output logic     done
);
  // ---------------------------------------------------------------- helpers
  function automatic logic [31:0] bswap(input logic [31:0] x);
    return {x[7:0], x[15:8], x[23:16], x[31:24]};
  endfunction

  // key byte j of a 256-bit key is k[255-8j -: 8]; memory-order word i of the
  // key zero-padded to 128 bytes, XORed with a pad byte.
  function automatic logic [31:0] key_word(input logic [255:0] k, input int unsigned i,
                                           input logic [7:0] pad);
    logic [31:0] w;
    for (int b = 0; b < 4; b++)
      w[8*b +: 8] = ((4*i + b) < 32 ? k[255 - 8*(4*i + b) -: 8] : 8'h00) ^ pad;
    return w;
  endfunction

  localparam logic [511:0] SHA_H0 = {
    64'h6a09e667f3bcc908, 64'hbb67ae8584caa73b, 64'h3c6ef372fe94f82b, 64'ha54ff53a5f1d36f1,
    64'h510e527fade682d1, 64'h9b05688c2b3e6c1f, 64'h1f83d9abfb41bd6b, 64'h5be0cd19137e2179};
  localparam logic [255:0] B2S_IV = {
    32'h5BE0CD19, 32'h1F83D9AB, 32'h9B05688C, 32'h510E527F,
    32'hA54FF53A, 32'h3C6EF372, 32'hBB67AE85, 32'h6A09E667};
  // parameter block: digest 32 bytes, key 32 bytes, fanout 1, depth 1
  localparam logic [255:0] B2S_H0 = B2S_IV ^ 256'h0101_2020;

  // ---------------------------------------------------------------- cores
  logic         aes_key_load, aes_key_ready, aes_start, aes_busy, aes_done;
  logic [127:0] aes_ct, aes_pt;
  logic         enc;                   // ENCRYPT rather than DECRYPT
  aes256_core u_aes (
    .clk, .rst_n, .key_load(aes_key_load), .key(K_ENC), .key_ready(aes_key_ready),
    .start(aes_start), .encrypt(enc), .din(aes_ct), .dout(aes_pt), .busy(aes_busy),
    .done(aes_done));

  logic          sha_start, sha_busy, sha_done;
  logic [511:0]  sha_h, sha_hout;
  logic [1023:0] sha_block;
  sha512_core u_sha (
    .clk, .rst_n, .start(sha_start), .h_in(sha_h), .block(sha_block),
    .h_out(sha_hout), .busy(sha_busy), .done(sha_done));

  logic         b2_start, b2_busy, b2_done, b2_last;
  logic [255:0] b2_h, b2_hout;
  logic [511:0] b2_block;
  logic [63:0]  b2_t;
  blake2s_core u_b2 (
    .clk, .rst_n, .start(b2_start), .h_in(b2_h), .block(b2_block), .t(b2_t),
    .last(b2_last), .h_out(b2_hout), .busy(b2_busy), .done(b2_done));

  // ---------------------------------------------------------------- state
  typedef enum logic [5:0] {
    S_IDLE, S_KEYWAIT,
    S_D_RD, S_D_RDW, S_D_AES, S_D_WR, S_D_WRW,
    S_RD, S_RDW, S_COMP, S_COMPW,
    S_M_PAD, S_M_PADC, S_M_INNER, S_M_OUTERW, S_M_OUTER, S_M_OUTERW2, S_M_FINAL, S_M_FINALW,
    S_M_TAG, S_M_TAGW,
    S_B_FIN, S_B_FINW, S_B_WR, S_B_WRW
  } state_e;

  typedef enum logic [1:0] { RET_ADD, RET_MACPAD, RET_BFIN } ret_e;

  state_e       st;
  ret_e         ret;
  hwa_cmd_e     cmd;
  logic [31:0]  src, len, dst;
  logic [31:0]  ptr, cnt, optr;        // working pointers / remaining bytes
  logic         mode_sha;              // buffer belongs to the HMAC (else BLAKE2s)
  logic [31:0]  buffer [32];           // block buffer, memory byte order
  logic [5:0]   nw;                    // words in buffer
  logic [63:0]  total;                 // bytes absorbed so far (incl. key block)
  logic [511:0] sha_state, inner;
  logic [255:0] b2_state;
  logic [127:0] prev_ct, cur_ct;
  logic [1:0]   wsel;
  logic [3:0]   widx;
  logic         mac_ok, err, rep_valid, key_ok;
  logic         spill;                 // HMAC padding spilled into an extra block
  logic         sign;                  // MAC_SIGN: write the tag instead of comparing
  logic [255:0] report;

  logic [5:0]   full_w;
  assign full_w = mode_sha ? 6'd32 : 6'd16;

  always_comb begin
    for (int i = 0; i < 32; i++) sha_block[1023 - 32*i -: 32] = bswap(buffer[i]);
    for (int i = 0; i < 16; i++) b2_block[32*i +: 32] = buffer[i];
  end
  assign sha_h = sha_state;
  assign b2_h  = b2_state;

  // ---------------------------------------------------------------- regs
  logic [7:0] off;
  assign off = req.addr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret <= RET_ADD; cmd <= HWA_NOP;
      src <= '0; len <= '0; dst <= '0; ptr <= '0; cnt <= '0; optr <= '0;
      mode_sha <= 1'b0; nw <= '0; total <= '0;
      sha_state <= '0; inner <= '0; b2_state <= '0; prev_ct <= '0; cur_ct <= '0; wsel <= '0; widx <= '0;
      mac_ok <= 1'b0; err <= 1'b0; rep_valid <= 1'b0; key_ok <= 1'b0; report <= '0;
      enc <= 1'b0; spill <= 1'b0; sign <= 1'b0;
      for (int i = 0; i < 32; i++) buffer[i] <= '0;
      rsp <= BUS_RSP_IDLE; bram_req <= BUS_REQ_IDLE; done <= 1'b0;
      aes_key_load <= 1'b0; aes_start <= 1'b0; aes_ct <= '0;
      sha_start <= 1'b0; b2_start <= 1'b0; b2_last <= 1'b0; b2_t <= '0;
    end else begin
      rsp          <= BUS_RSP_IDLE;
      bram_req     <= BUS_REQ_IDLE;
      done         <= 1'b0;
      aes_key_load <= 1'b0;
      aes_start    <= 1'b0;
      sha_start    <= 1'b0;
      b2_start     <= 1'b0;

      // ---- firmware register access
      if (req.valid) begin
        rsp.ready <= 1'b1;
        if (req.we) begin
          case (off)
            8'h00: if (st == S_IDLE) begin
              cmd <= hwa_cmd_e'(req.wdata[3:0]);
              st  <= S_KEYWAIT;
            end
            8'h04: if (st == S_IDLE) src <= req.wdata;
            8'h08: if (st == S_IDLE) len <= req.wdata;
            8'h0C: if (st == S_IDLE) dst <= req.wdata;
            default: ;
          endcase
        end else begin
          case (off)
            8'h04: rsp.rdata <= src;
            8'h08: rsp.rdata <= len;
            8'h0C: rsp.rdata <= dst;
            8'h10: rsp.rdata <= {28'd0, rep_valid, err, mac_ok, st != S_IDLE};
            8'h20, 8'h24, 8'h28, 8'h2C, 8'h30, 8'h34, 8'h38, 8'h3C:
                   rsp.rdata <= report[32*off[4:2] +: 32];
            default: rsp.rdata <= '0;
          endcase
        end
      end

      if (bram_rsp.ready && bram_rsp.err) err <= 1'b1;

      // ---- command engine
      case (st)
        S_IDLE: ;

        // decode the command; the AES key schedule is built once, on first use
        S_KEYWAIT: begin
          ptr <= src; cnt <= len; optr <= dst;
          case (cmd)
            HWA_DECRYPT, HWA_ENCRYPT: begin
              enc <= (cmd == HWA_ENCRYPT);
              if (len[3:0] != 4'd0) begin err <= 1'b1; st <= S_IDLE; done <= 1'b1; end
              else if (!key_ok) begin aes_key_load <= 1'b1; key_ok <= 1'b1; end
              else if (aes_key_ready) begin
                err <= 1'b0; wsel <= 2'd0; widx <= 4'd0; ptr <= src; cnt <= len + 32'd16;
                st <= S_D_RD;
              end
            end
            HWA_MAC_START: begin
              mode_sha <= 1'b1; mac_ok <= 1'b0; err <= 1'b0;
              for (int i = 0; i < 32; i++) buffer[i] <= key_word(K_MAC, i, 8'h36);
              nw <= 6'd32; total <= 64'd128; sha_state <= SHA_H0;
              st <= S_IDLE; done <= 1'b1;
            end
            HWA_MEAS_START: begin
              mode_sha <= 1'b0; rep_valid <= 1'b0; err <= 1'b0;
              for (int i = 0; i < 32; i++) buffer[i] <= (i < 8) ? key_word(K_ATT, i, 8'h00) : '0;
              nw <= 6'd16; total <= 64'd64; b2_state <= B2S_H0;
              st <= S_IDLE; done <= 1'b1;
            end
            HWA_MAC_ADD, HWA_MEAS_ADD: begin
              if (len[1:0] != 2'd0 || (mode_sha != (cmd == HWA_MAC_ADD))) begin
                err <= 1'b1; st <= S_IDLE; done <= 1'b1;
              end else begin
                ret <= RET_ADD; st <= S_RD;
              end
            end
            HWA_MAC_CHECK, HWA_MAC_SIGN: begin
              sign <= (cmd == HWA_MAC_SIGN);
              if (!mode_sha) begin err <= 1'b1; st <= S_IDLE; done <= 1'b1; end
              else if (nw == 6'd32) begin ret <= RET_MACPAD; st <= S_COMP; end
              else st <= S_M_PAD;
            end
            HWA_MEAS_END: begin
              if (mode_sha) begin err <= 1'b1; st <= S_IDLE; done <= 1'b1; end
              else st <= S_B_FIN;
            end
            default: begin st <= S_IDLE; done <= 1'b1; end
          endcase
        end

        // ---- AES-256-CBC: read IV (first block) then each data block.
        // Decrypt: P_i = AES^-1(C_i) ^ C_(i-1). Encrypt: C_i = AES(P_i ^ C_(i-1)),
        // and the IV is copied to DST first so the blob carries its own IV.
        S_D_RD: begin
          bram_req.valid <= 1'b1;
          bram_req.addr  <= ptr;
          st <= S_D_RDW;
        end
        S_D_RDW: if (bram_rsp.ready) begin
          cur_ct[127 - 32*wsel -: 32] <= bswap(bram_rsp.rdata);
          ptr  <= ptr + 32'd4;
          cnt  <= cnt - 32'd4;
          wsel <= wsel + 2'd1;
          if (wsel == 2'd3) begin
            if (widx == 4'd0) begin
              // IV block
              prev_ct <= {cur_ct[127:32], bswap(bram_rsp.rdata)};
              cur_ct  <= {cur_ct[127:32], bswap(bram_rsp.rdata)};
              widx    <= 4'd1;
              if (enc) st <= S_D_WR;
              else begin
                st   <= (cnt == 32'd4) ? S_IDLE : S_D_RD;
                done <= (cnt == 32'd4);
              end
            end else begin
              aes_ct    <= {cur_ct[127:32], bswap(bram_rsp.rdata)} ^ (enc ? prev_ct : '0);
              cur_ct    <= {cur_ct[127:32], bswap(bram_rsp.rdata)};
              aes_start <= 1'b1;
              st        <= S_D_AES;
            end
          end else st <= S_D_RD;
        end
        S_D_AES: if (aes_done) begin
          // output block; the ciphertext block chains to the next
          cur_ct  <= enc ? aes_pt : aes_pt ^ prev_ct;
          prev_ct <= enc ? aes_pt : cur_ct;
          wsel    <= 2'd0;
          st      <= S_D_WR;
        end
        S_D_WR: begin
          bram_req.valid <= 1'b1;
          bram_req.we    <= 1'b1;
          bram_req.be    <= 4'hF;
          bram_req.addr  <= optr;
          bram_req.wdata <= bswap(cur_ct[127 - 32*wsel -: 32]);
          st <= S_D_WRW;
        end
        S_D_WRW: if (bram_rsp.ready) begin
          optr <= optr + 32'd4;
          wsel <= wsel + 2'd1;
          if (wsel == 2'd3) begin
            if (cnt == 32'd0) begin st <= S_IDLE; done <= 1'b1; end
            else st <= S_D_RD;
          end else st <= S_D_WR;
        end

        // ---- absorb a region word by word into the block buffer
        S_RD: begin
          if (cnt == 32'd0) begin st <= S_IDLE; done <= 1'b1; end
          else if (nw == full_w) st <= S_COMP;   // buffer full: compress first
          else begin
            bram_req.valid <= 1'b1;
            bram_req.addr  <= ptr;
            st <= S_RDW;
          end
        end
        S_RDW: if (bram_rsp.ready) begin
          buffer[nw[4:0]] <= bram_rsp.rdata;
          nw    <= nw + 6'd1;
          total <= total + 64'd4;
          ptr   <= ptr + 32'd4;
          cnt   <= cnt - 32'd4;
          st    <= S_RD;
        end
        // compress the full buffer (not the last block) and empty it
        S_COMP: begin
          if (mode_sha) sha_start <= 1'b1;
          else begin b2_start <= 1'b1; b2_last <= 1'b0; b2_t <= total; end
          st <= S_COMPW;
        end
        S_COMPW: if (sha_done || b2_done) begin
          if (mode_sha) sha_state <= sha_hout; else b2_state <= b2_hout;
          for (int i = 0; i < 32; i++) buffer[i] <= '0;
          nw <= '0;
          case (ret)
            RET_MACPAD: st <= S_M_PAD;
            RET_BFIN:   st <= S_B_FIN;
            default:    st <= S_RD;
          endcase
        end

        // ---- HMAC finish: pad inner hash, outer hash, compare with tag
        S_M_PAD: begin
          buffer[nw[4:0]] <= 32'h0000_0080;
          if (nw > 6'd27) begin
            // no room for the length: compress this block, then a length-only block
            st  <= S_M_PADC;
            spill <= 1'b1;
          end else begin
            buffer[30] <= bswap(total[60:29]);
            buffer[31] <= bswap({total[28:0], 3'b000});
            st <= S_M_INNER;
          end
        end
        S_M_PADC: begin
          // buffer now holds the 0x80 byte; compress it, then a block with
          // only the length
          sha_start <= 1'b1;
          st  <= S_M_OUTERW;
        end
        S_M_INNER: begin
          sha_start <= 1'b1;
          st <= S_M_OUTERW;
          spill <= 1'b0;
        end
        S_M_OUTERW: if (sha_done) begin
          for (int i = 0; i < 32; i++) buffer[i] <= '0;
          if (spill) begin
            // padding spilled: length-only block
            sha_state  <= sha_hout;
            buffer[30] <= bswap(total[60:29]);
            buffer[31] <= bswap({total[28:0], 3'b000});
            st <= S_M_INNER;
          end else begin
            // inner digest ready: outer = H((K^opad) || inner)
            inner     <= sha_hout;
            sha_state <= SHA_H0;
            for (int i = 0; i < 32; i++) buffer[i] <= key_word(K_MAC, i, 8'h5c);
            st <= S_M_OUTER;
          end
        end
        S_M_OUTER: begin
          sha_start <= 1'b1;
          st <= S_M_OUTERW2;
        end
        S_M_OUTERW2: if (sha_done) begin
          sha_state <= sha_hout;
          for (int i = 0; i < 32; i++) buffer[i] <= '0;
          for (int i = 0; i < 16; i++) buffer[i] <= bswap(inner[511 - 32*i -: 32]);
          buffer[16] <= 32'h0000_0080;
          buffer[31] <= bswap(32'd1536);   // (128 + 64) bytes
          st <= S_M_FINAL;
        end
        S_M_FINAL: begin
          sha_start <= 1'b1;
          st <= S_M_FINALW;
        end
        S_M_FINALW: if (sha_done) begin
          sha_state <= sha_hout;
          widx   <= '0;
          ptr    <= dst;
          mac_ok <= !sign;
          st     <= S_M_TAG;
        end
        S_M_TAG: begin
          bram_req.valid <= 1'b1;
          bram_req.we    <= sign;
          bram_req.be    <= 4'hF;
          bram_req.wdata <= bswap(sha_state[511 - 32*widx -: 32]);
          bram_req.addr  <= ptr;
          st <= S_M_TAGW;
        end
        S_M_TAGW: if (bram_rsp.ready) begin
          if (!sign && bram_rsp.rdata != bswap(sha_state[511 - 32*widx -: 32])) mac_ok <= 1'b0;
          ptr  <= ptr + 32'd4;
          widx <= widx + 4'd1;
          if (widx == 4'd15) begin st <= S_IDLE; done <= 1'b1; end
          else st <= S_M_TAG;
        end

        // ---- BLAKE2s finish: last block, write the report
        S_B_FIN: begin
          b2_start <= 1'b1; b2_last <= 1'b1; b2_t <= total;
          st <= S_B_FINW;
        end
        S_B_FINW: if (b2_done) begin
          report    <= b2_hout;
          rep_valid <= 1'b1;
          widx      <= '0;
          ptr       <= dst;
          st        <= S_B_WR;
        end
        S_B_WR: begin
          bram_req.valid <= 1'b1;
          bram_req.we    <= 1'b1;
          bram_req.be    <= 4'hF;
          bram_req.addr  <= ptr;
          bram_req.wdata <= report[32*widx[2:0] +: 32];
          st <= S_B_WRW;
        end
        S_B_WRW: if (bram_rsp.ready) begin
          ptr  <= ptr + 32'd4;
          widx <= widx + 4'd1;
          if (widx == 4'd7) begin st <= S_IDLE; done <= 1'b1; end
          else st <= S_B_WR;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
