// tb_workload_ssa: the protected-SSA sizes of the reference system's example
// applications run through the full-size enclave fabric.
//
// For each binary size reported for the example SSAs (2,596, 12,892 and
// 20,152 bytes, rounded up to whole AES blocks) a protected image (16-byte
// IV + ciphertext, bytes given by a fixed formula) is placed in the SSA
// Execution Block. The Enclave-1 firmware (played by the testbench through
// the CPU port) copies it and its tag into block RAM, then Hw-Att verifies the
// HMAC-SHA512 tag, decrypts the image with AES-256-CBC and measures the
// plaintext with keyed BLAKE2s. Tag and expected measurement were computed
// in software from the same bytes (independent AES, HMAC and BLAKE2s), so a
// correct measurement proves the decryption too.
// Then the suspend side is run at the same size: the plaintext is encrypted
// again with the image's IV (ENCRYPT) and signed (MAC_SIGN). CBC with the
// same key and IV must give back the original image byte for byte, and its
// tag the original tag, so the encryption is checked exactly.
// Cycle counts of each step are printed. The reference system ran these
// steps in firmware on a 100 MHz softcore (e.g. 2784.56 ms to decrypt the
// 12,892-byte SSA); each hardware step is checked to take fewer cycles than
// the firmware's time at 100 MHz.
module tb_workload_ssa;
  import byot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t e1_cpu_req, e4_cpu_req, seb_req;
  bus_rsp_t e1_cpu_rsp, e4_cpu_rsp, seb_rsp;
  logic e1_cpu_irq, hwatt_done;
  logic [NUM_IRQ-1:0] hc_irq;

  byotee_soc dut (.*);

  logic [31:0] dram [32768];   // first 128 KB of the SEB
  bus_req_t    dq;
  always @(posedge clk) begin
    dq <= seb_req;
    seb_rsp <= BUS_RSP_IDLE;
    if (dq.valid) begin
      seb_rsp.ready <= 1'b1;
      if (dq.we) dram[dq.addr[16:2]] <= dq.wdata;
      else       seb_rsp.rdata <= dram[dq.addr[16:2]];
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  task automatic e1(input logic we, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    e1_cpu_req = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: 4'hF};
    @(negedge clk);
    e1_cpu_req = BUS_REQ_IDLE;
    while (!e1_cpu_rsp.ready) @(negedge clk);
    rd = e1_cpu_rsp.rdata;
    if (e1_cpu_rsp.err) begin failures++; $display("FAIL bus error at %h", a); end
  endtask

  localparam logic [31:0] SEB = 32'h2000_0000, HWA = 32'h4001_0000;
  localparam logic [31:0] IMG = 32'h0000_4000, TAGA = 32'h0000_9000, PTA = 32'h0000_A000,
                          REP = 32'h0001_F000, ENC = 32'h0001_0000, SIG = 32'h0001_E000;

  task automatic hwa(input hwa_cmd_e c, input logic [31:0] s, input logic [31:0] l,
                     input logic [31:0] d, output logic [31:0] st, output longint cyc);
    logic [31:0] x;
    e1(1'b1, HWA + 4, s, x); e1(1'b1, HWA + 8, l, x); e1(1'b1, HWA + 12, d, x);
    e1(1'b1, HWA + 0, 32'(c), x);
    cyc = 0;
    while (!hwatt_done) begin @(negedge clk); cyc++; end
    e1(1'b0, HWA + 32'h10, 0, st);
  endtask

  function automatic logic [7:0] img_byte(input int i);
    return 8'(((i*31 + 7) ^ (i >> 8) ^ (i >> 3)) & 255);
  endfunction

  task automatic run(input string name, input int n, input logic [511:0] tag, input logic [255:0] meas,
                     input real ms_dec, input real ms_ver, input real ms_sus);
    logic [31:0] d, st;
    logic [255:0] rep;
    longint c_copy, c_mac, c_dec, c_meas, c_enc, c_sign, t0;
    int total, bad;
    total = 16 + n;
    // the hardcore-side application fills the SEB: image at 0, tag at 0x10000
    for (int w = 0; w < total / 4; w++)
      for (int b = 0; b < 4; b++) dram[w][8*b +: 8] = img_byte(4*w + b);
    for (int w = 0; w < 16; w++)
      for (int b = 0; b < 4; b++) dram[16384 + w][8*b +: 8] = tag[511 - 8*(4*w + b) -: 8];
    // step 1: firmware copies image and tag into block RAM
    t0 = 0;
    for (int a = 0; a < total; a += 4) begin
      e1(1'b0, SEB + a, 0, d); e1(1'b1, IMG + a, d, d); t0 += 6;
    end
    for (int a = 0; a < 64; a += 4) begin
      e1(1'b0, SEB + 32'h10000 + a, 0, d); e1(1'b1, TAGA + a, d, d);
    end
    c_copy = t0;
    // step 2: verify, decrypt
    hwa(HWA_MAC_START, 0, 0, 0, st, c_mac);
    hwa(HWA_MAC_ADD, IMG, total, 0, st, c_mac);
    t0 = c_mac;
    hwa(HWA_MAC_CHECK, 0, 0, TAGA, st, c_mac);
    c_mac += t0;
    check(st[1] && !st[2], {name, ": HMAC-SHA512 tag verified"});
    hwa(HWA_DECRYPT, IMG, n, PTA, st, c_dec);
    check(!st[2], {name, ": decrypt without error"});
    // step 3: measure the plaintext
    hwa(HWA_MEAS_START, 0, 0, 0, st, c_meas);
    hwa(HWA_MEAS_ADD, PTA, n, 0, st, c_meas);
    t0 = c_meas;
    hwa(HWA_MEAS_END, 0, 0, REP, st, c_meas);
    c_meas += t0;
    for (int w = 0; w < 8; w++) begin
      e1(1'b0, REP + 4*w, 0, d);
      for (int b = 0; b < 4; b++) rep[255 - 8*(4*w + b) -: 8] = d[8*b +: 8];
    end
    check(rep == meas, {name, ": measurement of decrypted SSA matches reference"});
    $display("%s: %0d bytes  copy~%0d  hmac %0d  decrypt %0d  measure %0d cycles", name, n,
             c_copy, c_mac, c_dec, c_meas);
    // suspend side: IV in front of the plaintext, encrypt, sign
    for (int a = 0; a < 16; a += 4) begin
      e1(1'b0, IMG + a, 0, d); e1(1'b1, PTA - 16 + a, d, d);
    end
    hwa(HWA_ENCRYPT, PTA - 16, n, ENC, st, c_enc);
    check(!st[2], {name, ": encrypt without error"});
    hwa(HWA_MAC_START, 0, 0, 0, st, c_sign);
    hwa(HWA_MAC_ADD, ENC, total, 0, st, c_sign);
    t0 = c_sign;
    hwa(HWA_MAC_SIGN, 0, 0, SIG, st, c_sign);
    c_sign += t0;
    bad = 0;
    for (int a = 0; a < total; a += 4) begin
      e1(1'b0, ENC + a, 0, d);
      for (int b = 0; b < 4; b++) if (d[8*b +: 8] != img_byte(a + b)) bad++;
    end
    check(bad == 0, {name, ": re-encryption reproduces the protected image"});
    bad = 0;
    for (int w = 0; w < 16; w++) begin
      e1(1'b0, SIG + 4*w, 0, d);
      for (int b = 0; b < 4; b++) if (d[8*b +: 8] != tag[511 - 8*(4*w + b) -: 8]) bad++;
    end
    check(bad == 0, {name, ": MAC_SIGN reproduces the tag"});
    $display("%s: suspend side  encrypt %0d  sign %0d cycles", name, c_enc, c_sign);
    check(real'(c_enc + c_sign) < ms_sus * 1.0e5, {name, ": encrypt and sign faster than firmware suspend at 100 MHz"});
    check(real'(c_dec) < ms_dec * 1.0e5, {name, ": decryption faster than firmware at 100 MHz"});
    check(real'(c_mac) < ms_ver * 1.0e5, {name, ": verification faster than firmware at 100 MHz"});
  endtask

  initial begin
    e1_cpu_req = BUS_REQ_IDLE; e4_cpu_req = BUS_REQ_IDLE; hc_irq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run("SSA-2", 2608,
        512'h2e32daf7c2270c54ee990408459ddec36c93334fc35cc16677a8fd259d096c62094c3346b50d6ce98ad6b3814060b09d7e19447489ac49370cd0070ce3156c4d,
        256'ha669965eed20bdb75f2e88ca163ea286c23ece0b89ad5746807ddd8f99ad6cf0, 579.11, 29.15, 741.71);
    run("SSA-1", 12896,
        512'h0aadb0b0db638cec60d3042020b06ecea1da68da134081325cc55aaef731e1d5a6c93291612a61e1677e73e43fbae98d7328aa72f6eda4efc302b8f8657bdcf1,
        256'hde626955b2f2bae580ff53bc68b6c8305eca56f424595d383fe06aa59975ec9d, 2784.56, 118.54, 3694.55);
    run("SSA-3", 20160,
        512'hc9191c9c8a60a8e4e7346f72e529da4f81f1b0a225b1118ae939faada23edaffbdf7bfd2340a4d6eb3f257eb46eee1204267077d6271288db51a3d69c5f00693,
        256'h43d8decad4cf405ff7d19d535df9a2efa3294f96c590da0f03c7bd253c624f5d, 4414.32, 185.30, 5787.97);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
