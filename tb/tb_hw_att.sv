// tb_hw_att: drives the Hw-Att command interface against a real enclave
// block RAM and compares every result with values computed independently in
// software (Python hashlib/hmac for HMAC-SHA512 and keyed BLAKE2s, the
// FIPS-197 AES-256 vector for decryption).
//   1. HMAC-SHA512 over a 48-byte protected image (IV + two blocks): tag match.
//   2. The same with one tag byte flipped: mismatch reported.
//   3. HMAC over a 240-byte message in two regions (multi-block, padding that
//      spills into an extra block): tag match.
//   4. AES-256-CBC decryption of two blocks written to another address.
//   5. Keyed BLAKE2s measurement over two separate regions (40 + 100 bytes):
//      report in REPORT registers and written to BRAM.
//   6. Measurement of an empty region list and of exactly one 64-byte block
//      (the key block / a full block must be the last block).
//   7. Error flag for a bad DECRYPT length; busy while working.
//   8. Suspend and restore: ENCRYPT of IV 0 | P1 | P1^C (P1, C the FIPS-197
//      pair) must give 0 | C | C, the image of test 1, and MAC_SIGN over it
//      must write the tag of test 1. The blob then passes MAC_CHECK and
//      DECRYPT gives the plaintext back.
module tb_hw_att;
  import byot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t req, a_req, bram_req;
  bus_rsp_t rsp, a_rsp, bram_rsp;
  logic done;

  hw_att dut (.clk, .rst_n, .req, .rsp, .bram_req, .bram_rsp, .done);
  bram_dp #(.DEPTH_BYTES(4096)) mem (.clk, .a_req, .a_rsp, .b_req(bram_req), .b_rsp(bram_rsp));

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bus(ref bus_req_t rq, ref bus_rsp_t rs, input logic we,
                     input logic [31:0] addr, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    rq = '{valid: 1'b1, we: we, addr: addr, wdata: wd, be: 4'hF};
    @(negedge clk);
    rq = BUS_REQ_IDLE;
    while (!rs.ready) @(negedge clk);
    rd = rs.rdata;
  endtask

  task automatic reg_wr(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] x; bus(req, rsp, 1'b1, a, d, x);
  endtask
  task automatic reg_rd(input logic [31:0] a, output logic [31:0] d);
    bus(req, rsp, 1'b0, a, '0, d);
  endtask
  task automatic mem_wr(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] x; bus(a_req, a_rsp, 1'b1, a, d, x);
  endtask
  task automatic mem_rd(input logic [31:0] a, output logic [31:0] d);
    bus(a_req, a_rsp, 1'b0, a, '0, d);
  endtask

  // store n bytes of a big-endian byte string (first byte in the MSBs of s)
  task automatic put_bytes(input logic [31:0] a, input logic [1023:0] s, input int n);
    for (int w = 0; w < n / 4; w++) begin
      logic [31:0] d;
      for (int b = 0; b < 4; b++) d[8*b +: 8] = s[8*n - 1 - 8*(4*w + b) -: 8];
      mem_wr(a + 4*w, d);
    end
  endtask

  task automatic cmd(input hwa_cmd_e c, input logic [31:0] s, input logic [31:0] l,
                     input logic [31:0] d, output int cycles);
    reg_wr(32'h04, s); reg_wr(32'h08, l); reg_wr(32'h0C, d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b1, addr: 32'h00, wdata: 32'(c), be: 4'hF};
    @(negedge clk);
    req = BUS_REQ_IDLE;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  localparam logic [511:0] MAC1 = 512'h9faec0a49be784958be59261c00b3a0b1d239097e997f0567506885b0836c74fb273941c96841558b560ccde8e8d11bbf81781bab5eddf27c3854386d76c3d7b;
  localparam logic [511:0] MAC2 = 512'hb46581345236160486d41cfce03eebb82adfb2cb584aa359d7935fc1bbae42acfb0263b0514d677185b864f2539566afa08e18f7ba27ce47e92e9b9b04b34004;
  localparam logic [255:0] MEAS  = 256'h00df46758e839171066fe52088c7370f1482a2b58b69ac3a3b90ed5a0c602eda;
  localparam logic [255:0] MEAS0 = 256'hab8f845ba7c1dbfa13d17316bab437a4aa5aa9f6dfe68b6e74a2989362f4b54d;
  localparam logic [255:0] MEAS64 = 256'hf0f1132773bb0c39975082826d3bcdfb535107d055456056012f917ee01b2a18;
  localparam logic [127:0] CT  = 128'h8ea2b7ca516745bfeafc49904b496089;
  localparam logic [127:0] PT1 = 128'h00112233445566778899aabbccddeeff;

  // status bits
  function automatic logic st_busy(input logic [31:0] s); return s[0]; endfunction

  initial begin
    logic [31:0] s, d;
    logic [255:0] rep;
    int cyc;
    logic [1023:0] str;
    req = BUS_REQ_IDLE; a_req = BUS_REQ_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // protected image at 0x100: IV (zero) | CT | CT ; tag at 0x200
    put_bytes(32'h100, {128'h0, CT, CT}, 48);
    put_bytes(32'h200, MAC1, 64);

    // 1. MAC check
    cmd(HWA_MAC_START, 0, 0, 0, cyc);
    cmd(HWA_MAC_ADD, 32'h100, 48, 0, cyc);
    cmd(HWA_MAC_CHECK, 0, 0, 32'h200, cyc);
    reg_rd(32'h10, s);
    check(s[1] == 1'b1 && s[2] == 1'b0, "HMAC of protected image matches");

    // 2. flipped tag byte
    mem_rd(32'h204, d);
    mem_wr(32'h204, d ^ 32'h0000_0100);
    cmd(HWA_MAC_START, 0, 0, 0, cyc);
    cmd(HWA_MAC_ADD, 32'h100, 48, 0, cyc);
    cmd(HWA_MAC_CHECK, 0, 0, 32'h200, cyc);
    reg_rd(32'h10, s);
    check(s[1] == 1'b0, "HMAC with corrupted tag rejected");

    // 3. 240-byte message in two regions (0x400: 100 bytes, 0x600: 140 bytes)
    for (int w = 0; w < 60; w++) begin
      for (int b = 0; b < 4; b++) d[8*b +: 8] = 8'(((4*w + b) * 7 + 3) & 255);
      mem_wr((w < 25) ? 32'h400 + 4*w : 32'h600 + 4*(w - 25), d);
    end
    put_bytes(32'h300, MAC2, 64);
    cmd(HWA_MAC_START, 0, 0, 0, cyc);
    cmd(HWA_MAC_ADD, 32'h400, 100, 0, cyc);
    cmd(HWA_MAC_ADD, 32'h600, 140, 0, cyc);
    cmd(HWA_MAC_CHECK, 0, 0, 32'h300, cyc);
    reg_rd(32'h10, s);
    check(s[1] == 1'b1, "HMAC over two regions with padding spill matches");

    // 4. decrypt the image: plaintext to 0x800
    cmd(HWA_DECRYPT, 32'h100, 32, 32'h800, cyc);
    str = '0;
    for (int w = 0; w < 8; w++) begin
      mem_rd(32'h800 + 4*w, d);
      for (int b = 0; b < 4; b++) str[255 - 8*(4*w + b) -: 8] = d[8*b +: 8];
    end
    check(str[255:128] == PT1, "CBC block 1 = AES-1(C1) xor IV");
    check(str[127:0] == (PT1 ^ CT), "CBC block 2 = AES-1(C2) xor C1");

    // 5. measurement over two regions: 0xA00 (40 bytes) and 0xC00 (100 bytes)
    for (int w = 0; w < 10; w++) begin
      for (int b = 0; b < 4; b++) d[8*b +: 8] = 8'(((4*w + b) * 5 + 1) & 255);
      mem_wr(32'hA00 + 4*w, d);
    end
    for (int w = 0; w < 25; w++) begin
      for (int b = 0; b < 4; b++) d[8*b +: 8] = 8'(((4*w + b) * 11 + 9) & 255);
      mem_wr(32'hC00 + 4*w, d);
    end
    cmd(HWA_MEAS_START, 0, 0, 0, cyc);
    cmd(HWA_MEAS_ADD, 32'hA00, 40, 0, cyc);
    cmd(HWA_MEAS_ADD, 32'hC00, 100, 0, cyc);
    cmd(HWA_MEAS_END, 0, 0, 32'hE00, cyc);
    reg_rd(32'h10, s);
    check(s[3] == 1'b1, "report valid");
    for (int w = 0; w < 8; w++) begin
      reg_rd(32'h20 + 4*w, d);
      for (int b = 0; b < 4; b++) rep[255 - 8*(4*w + b) -: 8] = d[8*b +: 8];
    end
    check(rep == MEAS, "measurement report registers");
    for (int w = 0; w < 8; w++) begin
      mem_rd(32'hE00 + 4*w, d);
      for (int b = 0; b < 4; b++) rep[255 - 8*(4*w + b) -: 8] = d[8*b +: 8];
    end
    check(rep == MEAS, "measurement report written to BRAM");

    // 6. empty measurement and exactly one full block
    cmd(HWA_MEAS_START, 0, 0, 0, cyc);
    cmd(HWA_MEAS_END, 0, 0, 32'hE40, cyc);
    for (int w = 0; w < 8; w++) begin
      reg_rd(32'h20 + 4*w, d);
      for (int b = 0; b < 4; b++) rep[255 - 8*(4*w + b) -: 8] = d[8*b +: 8];
    end
    check(rep == MEAS0, "measurement of nothing (key block only)");
    for (int w = 0; w < 16; w++) begin
      for (int b = 0; b < 4; b++) d[8*b +: 8] = 8'(((4*w + b) * 5 + 1) & 255);
      mem_wr(32'hA00 + 4*w, d);
    end
    cmd(HWA_MEAS_START, 0, 0, 0, cyc);
    cmd(HWA_MEAS_ADD, 32'hA00, 64, 0, cyc);
    cmd(HWA_MEAS_END, 0, 0, 32'hE40, cyc);
    for (int w = 0; w < 8; w++) begin
      reg_rd(32'h20 + 4*w, d);
      for (int b = 0; b < 4; b++) rep[255 - 8*(4*w + b) -: 8] = d[8*b +: 8];
    end
    check(rep == MEAS64, "measurement of one full 64-byte block");

    // 7. bad length and busy flag
    cmd(HWA_DECRYPT, 32'h100, 20, 32'h800, cyc);
    reg_rd(32'h10, s);
    check(s[2] == 1'b1, "error for DECRYPT length not a multiple of 16");
    reg_wr(32'h04, 32'h100); reg_wr(32'h08, 32'd32); reg_wr(32'h0C, 32'h800);
    reg_wr(32'h00, 32'(HWA_DECRYPT));
    reg_rd(32'h10, s);
    check(st_busy(s), "busy while decrypting");
    while (!done) @(negedge clk);
    reg_rd(32'h10, s);
    check(!st_busy(s) && !s[2], "idle and no error after decrypt");

    // 8. suspend (encrypt + sign) and restore (check + decrypt)
    put_bytes(32'hF00, {128'h0, PT1, PT1 ^ CT}, 48);
    cmd(HWA_ENCRYPT, 32'hF00, 32, 32'hF40, cyc);
    str = '0;
    for (int w = 0; w < 12; w++) begin
      mem_rd(32'hF40 + 4*w, d);
      for (int b = 0; b < 4; b++) str[383 - 8*(4*w + b) -: 8] = d[8*b +: 8];
    end
    check(str[383:0] == {128'h0, CT, CT}, "CBC encryption writes IV | C1 | C2");
    cmd(HWA_MAC_START, 0, 0, 0, cyc);
    cmd(HWA_MAC_ADD, 32'hF40, 48, 0, cyc);
    cmd(HWA_MAC_SIGN, 0, 0, 32'hF80, cyc);
    str = '0;
    for (int w = 0; w < 16; w++) begin
      mem_rd(32'hF80 + 4*w, d);
      for (int b = 0; b < 4; b++) str[511 - 8*(4*w + b) -: 8] = d[8*b +: 8];
    end
    check(str[511:0] == MAC1, "MAC_SIGN writes the HMAC-SHA512 tag");
    cmd(HWA_MAC_START, 0, 0, 0, cyc);
    cmd(HWA_MAC_ADD, 32'hF40, 48, 0, cyc);
    cmd(HWA_MAC_CHECK, 0, 0, 32'hF80, cyc);
    reg_rd(32'h10, s);
    check(s[1] == 1'b1 && s[2] == 1'b0, "signed blob passes MAC_CHECK");
    cmd(HWA_DECRYPT, 32'hF40, 32, 32'hFC0, cyc);
    str = '0;
    for (int w = 0; w < 8; w++) begin
      mem_rd(32'hFC0 + 4*w, d);
      for (int b = 0; b < 4; b++) str[255 - 8*(4*w + b) -: 8] = d[8*b +: 8];
    end
    check(str[255:0] == {PT1, PT1 ^ CT}, "restored plaintext equals the suspended one");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
