// tb_sha512_core: checks the SHA-512 compression against known digests.
// Case 1 is "abc" (FIPS 180-4 example, one padded block); case 2 is the
// 200-byte message of bytes i mod 256 (two padded blocks), with the digest
// taken from an independent software SHA-512. Case 3 is the empty message and
// case 4 the 112-byte FIPS 180-4 two-block example, whose padding fills a
// block of its own. The start-to-done latency of 81 cycles and the busy flag
// are checked on every compression.
module tb_sha512_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [511:0]  h_in, h_out;
  logic [1023:0] block;

  sha512_core dut (.*);

  localparam logic [511:0] H0 = {
    64'h6a09e667f3bcc908, 64'hbb67ae8584caa73b, 64'h3c6ef372fe94f82b, 64'ha54ff53a5f1d36f1,
    64'h510e527fade682d1, 64'h9b05688c2b3e6c1f, 64'h1f83d9abfb41bd6b, 64'h5be0cd19137e2179};

  task automatic compress(input logic [511:0] hi, input logic [1023:0] b, output int lat);
    @(negedge clk);
    h_in = hi; block = b; start = 1;
    @(negedge clk);
    start = 0;
    lat = 0;
    while (!done) begin
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low while compressing"); end
      @(negedge clk); lat++;
    end
    checks++;
    if (lat != 81) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1023:0] b;
    logic [511:0]  h;
    logic [7:0]    msg [256];
    int lat;
    start = 0; h_in = '0; block = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    b = '0;
    b[1023 -: 32] = 32'h61626380;
    b[63:0] = 64'd24;
    compress(H0, b, lat);
    checks++;
    if (h_out !== 512'hddaf35a193617abacc417349ae20413112e6fa4e89a97ea20a9eeee64b55d39a2192992a274fc1a836ba3c23a3feebbd454d4423643ce80e2a9ac94fa54ca49f) begin
      failures++; $display("FAIL abc %h", h_out);
    end
    // 200 bytes + 0x80 + zeros + 128-bit length = 256 bytes
    for (int i = 0; i < 256; i++) msg[i] = (i < 200) ? 8'(i) : 8'h00;
    msg[200] = 8'h80;
    msg[254] = 8'h06; msg[255] = 8'h40;  // 1600 bits
    for (int i = 0; i < 128; i++) b[1023 - 8*i -: 8] = msg[i];
    compress(H0, b, lat);
    h = h_out;
    for (int i = 0; i < 128; i++) b[1023 - 8*i -: 8] = msg[128 + i];
    compress(h, b, lat);
    checks++;
    if (h_out !== 512'h986058e9895e2c2ab8f9e8cbdf801db12a44842a56a91d5a4e87b1fc98b293722c4664142e42c3c551ff898646268cd92b84ed230b8c94bed7798d4f27cd7465) begin
      failures++; $display("FAIL 200B %h", h_out);
    end
    // case 3: empty message
    b = '0; b[1023] = 1'b1;
    compress(H0, b, lat);
    checks++;
    if (h_out !== 512'hcf83e1357eefb8bdf1542850d66d8007d620e4050b5715dc83f4a921d36ce9ce47d0d13c5d85f2b0ff8318d2877eec2f63b931bd47417a81a538327af927da3e) begin
      failures++; $display("FAIL empty %h", h_out);
    end
    // case 4: "abcdefghbcdefghi...nopqrstu" (112 bytes), length in a block of its own
    b = '0;
    for (int i = 0; i < 112; i++) b[1023 - 8*i -: 8] = 8'h61 + 8'(i / 8) + 8'(i % 8);
    b[1023 - 8*112 -: 8] = 8'h80;
    compress(H0, b, lat);
    h = h_out;
    b = '0; b[63:0] = 64'd896;
    compress(h, b, lat);
    checks++;
    if (h_out !== 512'h8e959b75dae313da8cf4f72814fc143f8f7779c6eb9f7fa17299aeadb6889018501d289e4900f7e4331b99dec4b5433ac7d329eeb6dd26545e96e55b874be909) begin
      failures++; $display("FAIL 112B %h", h_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
