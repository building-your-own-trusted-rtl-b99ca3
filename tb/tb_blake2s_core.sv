// tb_blake2s_core: checks the BLAKE2s compression against known digests.
// Case 1 is the one-block message "abc" (RFC 7693 appendix B); case 2 is a
// two-block, 100-byte message (bytes 0..99), whose digest was computed with an
// independent software BLAKE2s. Case 3 is the empty message (one all-zero
// last block with counter 0) and case 4 exactly one full 64-byte block
// (bytes 0..63) flagged last. The latency from start to done (11 cycles) and
// the busy flag are checked on every compression.
module tb_blake2s_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, last, busy, done;
  logic [255:0] h_in, h_out;
  logic [511:0] block;
  logic [63:0]  t;

  blake2s_core dut (.*);

  localparam logic [7:0][31:0] IV = '{
    32'h5BE0CD19, 32'h1F83D9AB, 32'h9B05688C, 32'h510E527F,
    32'hA54FF53A, 32'h3C6EF372, 32'hBB67AE85, 32'h6A09E667};

  function automatic logic [255:0] le_bytes(input logic [255:0] h);  // h as byte string
    logic [255:0] o;
    for (int i = 0; i < 32; i++) o[255 - 8*i -: 8] = h[8*i +: 8];
    return o;
  endfunction

  task automatic compress(input logic [255:0] hi, input logic [511:0] b,
                          input logic [63:0] tt, input logic l, output int lat);
    @(negedge clk);
    h_in = hi; block = b; t = tt; last = l; start = 1;
    @(negedge clk);
    start = 0;
    lat = 0;
    while (!done) begin
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low while compressing"); end
      @(negedge clk); lat++;
    end
    checks++;
    if (lat != 11) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [255:0] h0, h;
    logic [511:0] b;
    int lat;
    start = 0; h_in = '0; block = '0; t = '0; last = 0;
    h0 = IV;
    h0[31:0] = IV[0] ^ 32'h0101_0020;  // digest 32 bytes, no key
    repeat (3) @(negedge clk);
    rst_n = 1;
    // case 1: "abc"
    b = '0; b[23:0] = 24'h636261;
    compress(h0, b, 64'd3, 1'b1, lat);
    checks++;
    if (le_bytes(h_out) !== 256'h508c5e8c327c14e2e1a72ba34eeb452f37458b209ed63a294d999b4c86675982) begin
      failures++; $display("FAIL abc %h", le_bytes(h_out));
    end
    // case 2: bytes 0..99 in two blocks
    for (int i = 0; i < 64; i++) b[8*i +: 8] = 8'(i);
    compress(h0, b, 64'd64, 1'b0, lat);
    h = h_out;
    b = '0;
    for (int i = 0; i < 36; i++) b[8*i +: 8] = 8'(64 + i);
    compress(h, b, 64'd100, 1'b1, lat);
    checks++;
    if (le_bytes(h_out) !== 256'h81dcc3a505eace3f879d8f702776770f9df50e521d1428a85daf04f9ad2150e0) begin
      failures++; $display("FAIL 100B %h", le_bytes(h_out));
    end
    // case 3: empty message
    compress(h0, 512'd0, 64'd0, 1'b1, lat);
    checks++;
    if (le_bytes(h_out) !== 256'h69217a3079908094e11121d042354a7c1f55b6482ca1a51e1b250dfd1ed0eef9) begin
      failures++; $display("FAIL empty %h", le_bytes(h_out));
    end
    // case 4: one full block, last
    for (int i = 0; i < 64; i++) b[8*i +: 8] = 8'(i);
    compress(h0, b, 64'd64, 1'b1, lat);
    checks++;
    if (le_bytes(h_out) !== 256'h56f34e8b96557e90c1f24b52d0c89d51086acf1b00f634cf1dde9233b8eaaa3e) begin
      failures++; $display("FAIL 64B %h", le_bytes(h_out));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
