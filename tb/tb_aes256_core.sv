// tb_aes256_core: checks the AES-256 block cipher in both directions against
// published vectors: FIPS-197 appendix C.3 and the first ECB-AES256 block of
// NIST SP 800-38A (F.1.5 encryption, F.1.6 decryption). For each key it
// checks the key-expansion time (52 cycles), then encrypts the plaintext and
// decrypts the ciphertext with the same expanded key, checking the block
// latency (14 cycles) each time. Loading the second key checks that a new
// key replaces the old one.
module tb_aes256_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic key_load, key_ready, start, encrypt, busy, done;
  logic [255:0] key;
  logic [127:0] din, dout;

  aes256_core dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  task automatic block(input logic e, input logic [127:0] x, input logic [127:0] exp);
    int bl;
    din = x; encrypt = e; start = 1;
    @(negedge clk);
    start = 0;
    bl = 0;
    while (!done) begin @(negedge clk); bl++; end
    check(bl == 14, $sformatf("block latency %0d", bl));
    check(dout === exp, $sformatf("%s: got %h expected %h", e ? "encrypt" : "decrypt", dout, exp));
  endtask

  task automatic run(input logic [255:0] k, input logic [127:0] p, input logic [127:0] c);
    int kl;
    @(negedge clk);
    key = k; key_load = 1;
    @(negedge clk);
    key_load = 0;
    kl = 0;
    while (!key_ready) begin @(negedge clk); kl++; end
    check(kl == 52, $sformatf("key latency %0d", kl));
    block(1'b1, p, c);
    block(1'b0, c, p);
  endtask

  initial begin
    key_load = 0; start = 0; encrypt = 0; key = '0; din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f,
        128'h00112233445566778899aabbccddeeff, 128'h8ea2b7ca516745bfeafc49904b496089);
    run(256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4,
        128'h6bc1bee22e409f96e93d7e117393172a, 128'hf3eed1bdb5d2a03c064b5a7e3db181f8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
