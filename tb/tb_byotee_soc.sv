// tb_byotee_soc: end-to-end run of the two-enclave fabric at its full size
// (128 KB, 32 KB and 8 KB block RAMs, 2 MB SSA Execution Block window).
//
// The testbench plays the parts that are not in the RTL: the untrusted
// application on the hardcore system (it fills the SSA Execution Block in a
// DRAM model and raises service interrupts), the firmware and SSA on the
// Enclave-1 CPU, and the SSA on the Enclave-4 CPU; all of them act only
// through the top's ports. One complete LdExec with pre- and post-execution
// attestation is run:
//   1. the application writes SSA* (IV + 2 AES-256-CBC blocks), its
//      HMAC-SHA512 tag, m, Chal and input into the SEB and raises
//      LdExecPreAtt;
//   2. the firmware takes the interrupt, copies everything into Enclave-1
//      block RAM, masks further LdExec* requests;
//   3. Hw-Att verifies the tag, decrypts the SSA into place, and measures
//      vector table, firmware, m, Chal, input and SSA code (PreExecAtt);
//   4. the SSA runs; a NewData request arriving meanwhile is held back; the
//      SSA writes its output to Enclave-1 memory and to the shared block RAM,
//      where the Enclave-4 SSA reads it;
//   5. Hw-Att computes PostExecAtt over the same regions plus output and
//      PreExecAtt; the firmware copies output and both reports to the SEB
//      and cleans the block RAM.
// Then the SSA is suspended and restored:
//   6. SusExp: the firmware saves the SSA context and writable data (64
//      bytes) next to an IV, Hw-Att encrypts them (AES-256-CBC) and signs
//      the IV and ciphertext (HMAC-SHA512); blob and tag go to the SEB
//      output region and the block RAM is cleaned;
//   7. ReExec, first with one blob byte flipped by the application (refused
//      by the MAC check), then intact: the blob is verified, decrypted back
//      into place and must equal the saved state.
// The saved state is chosen so that every ciphertext block equals the
// FIPS-197 AES-256 ciphertext (IV 0, P1 = its plaintext, later blocks
// P1 ^ C), which gives the expected blob without a software cipher; its tag
// was computed in software.
// A first attempt with one flipped byte in SSA* must be refused by the MAC
// check. Isolation is probed from both CPUs: addresses outside their maps
// are refused, Enclave-4 cannot see Enclave-1 memory or DRAM, and the DRAM
// side cannot reach any block RAM.
// The reports are compared with keyed BLAKE2s values computed independently
// in software over the same bytes. Each mechanism is counted and a
// mechanism that never happened counts as a failure.
module tb_byotee_soc;
  import byot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t e1_cpu_req, e4_cpu_req, seb_req;
  bus_rsp_t e1_cpu_rsp, e4_cpu_rsp, seb_rsp;
  logic e1_cpu_irq, hwatt_done;
  logic [NUM_IRQ-1:0] hc_irq;

  byotee_soc dut (.*);

  // ---- DRAM holding the SEB (hardcore system side), 2-cycle latency
  localparam int unsigned SEB_WORDS = 2097152 / 4;
  logic [31:0] dram [SEB_WORDS];
  bus_req_t    dq0, dq1;
  always @(posedge clk) begin
    dq0 <= seb_req;
    dq1 <= dq0;
    seb_rsp <= BUS_RSP_IDLE;
    if (dq1.valid) begin
      seb_rsp.ready <= 1'b1;
      if (dq1.we) dram[dq1.addr[20:2]] <= dq1.wdata;
      else        seb_rsp.rdata <= dram[dq1.addr[20:2]];
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_irq_ldexec, n_newdata_held, n_newdata_late, n_refused, n_mac_ok, n_mac_bad,
      n_decrypt, n_pre, n_post, n_shared, n_clean, n_susexp, n_reexec;

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  task automatic e1(input logic we, input logic [31:0] a, input logic [31:0] wd,
                    output logic [31:0] rd, output logic er);
    @(negedge clk);
    e1_cpu_req = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: 4'hF};
    @(negedge clk);
    e1_cpu_req = BUS_REQ_IDLE;
    while (!e1_cpu_rsp.ready) @(negedge clk);
    rd = e1_cpu_rsp.rdata; er = e1_cpu_rsp.err;
  endtask
  task automatic e4(input logic we, input logic [31:0] a, input logic [31:0] wd,
                    output logic [31:0] rd, output logic er);
    @(negedge clk);
    e4_cpu_req = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: 4'hF};
    @(negedge clk);
    e4_cpu_req = BUS_REQ_IDLE;
    while (!e4_cpu_rsp.ready) @(negedge clk);
    rd = e4_cpu_rsp.rdata; er = e4_cpu_rsp.err;
  endtask
  task automatic w1(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] x; logic er; e1(1'b1, a, d, x, er);
    check(!er, "Enclave-1 write accepted");
  endtask
  task automatic r1(input logic [31:0] a, output logic [31:0] d);
    logic er; e1(1'b0, a, 0, d, er);
    check(!er, "Enclave-1 read accepted");
  endtask

  localparam logic [31:0] SEB = 32'h2000_0000, IRQC = 32'h4000_0000, HWA = 32'h4001_0000,
                          SHR = 32'h0010_0000;

  // firmware: copy n bytes from SEB offset to BRAM address
  task automatic copy_in(input logic [31:0] seb_off, input logic [31:0] dst, input int n);
    logic [31:0] d;
    for (int i = 0; i < n; i += 4) begin r1(SEB + seb_off + i, d); w1(dst + i, d); end
  endtask
  task automatic copy_out(input logic [31:0] src, input logic [31:0] seb_off, input int n);
    logic [31:0] d;
    for (int i = 0; i < n; i += 4) begin r1(src + i, d); w1(SEB + seb_off + i, d); end
  endtask

  task automatic hwa(input hwa_cmd_e c, input logic [31:0] s, input logic [31:0] l,
                     input logic [31:0] d, output logic [31:0] status);
    w1(HWA + 4, s); w1(HWA + 8, l); w1(HWA + 12, d);
    w1(HWA + 0, 32'(c));
    do r1(HWA + 32'h10, status); while (status[0]);
  endtask

  // expected values (software reference over the same bytes)
  localparam logic [255:0] PRE  = 256'h0d75a1ea3afb13c0c1df76747e2491fbce86c2a141e2b803e382edc0cce89ae6;
  localparam logic [255:0] POST = 256'hfd76cb8dfd33134a32a2bdc25f301683bd9861dfd983365cfb446e266bf3edf5;
  localparam logic [511:0] TAG  = 512'h9faec0a49be784958be59261c00b3a0b1d239097e997f0567506885b0836c74fb273941c96841558b560ccde8e8d11bbf81781bab5eddf27c3854386d76c3d7b;
  localparam logic [127:0] CT   = 128'h8ea2b7ca516745bfeafc49904b496089;
  localparam logic [127:0] PT1  = 128'h00112233445566778899aabbccddeeff;
  localparam logic [511:0] BLOB_TAG = 512'h1951edefd12360b2ee6ab6d71b203871ee380cee8fc815f7e1c8925007805117fc212c523a444943c91b4fb560b610cc077334fd83644a14ff9102156a6a75fd;

  // saved SSA state: word w of block k (k = 0: P1, later: P1 ^ C), memory order
  function automatic logic [31:0] state_word(input int w);
    logic [127:0] blk;
    logic [31:0]  o;
    blk = (w < 4) ? PT1 : (PT1 ^ CT);
    for (int b = 0; b < 4; b++) o[8*b +: 8] = blk[127 - 8*(4*(w % 4) + b) -: 8];
    return o;
  endfunction
  function automatic logic [31:0] blob_word(input int w);   // IV 0 | C | C | C | C
    logic [31:0] o;
    for (int b = 0; b < 4; b++) o[8*b +: 8] = (w < 4) ? 8'h00 : CT[127 - 8*(4*(w % 4) + b) -: 8];
    return o;
  endfunction
  function automatic logic [31:0] tag_word(input int w);
    logic [31:0] o;
    for (int b = 0; b < 4; b++) o[8*b +: 8] = BLOB_TAG[511 - 8*(4*w + b) -: 8];
    return o;
  endfunction

  function automatic logic [7:0] sbyte(input logic [1023:0] s, input int nbytes, input int j);
    return s[8*nbytes - 1 - 8*j -: 8];
  endfunction

  // the hardcore-side application fills the SEB
  task automatic ua_fill(input logic tamper);
    logic [383:0] img;
    img = {128'h0, CT, CT};
    if (tamper) img[200] = ~img[200];
    for (int w = 0; w < 12; w++)
      for (int b = 0; b < 4; b++) dram[w][8*b +: 8] = sbyte(1024'(img), 48, 4*w + b);
    for (int w = 0; w < 16; w++)
      for (int b = 0; b < 4; b++) dram[16 + w][8*b +: 8] = sbyte(1024'(TAG), 64, 4*w + b);
    for (int j = 0; j < 32; j++) dram[32 + j/4][8*(j%4) +: 8] = 8'((j*17 + 5) & 255);  // m
    for (int j = 0; j < 16; j++) dram[40 + j/4][8*(j%4) +: 8] = 8'(8'hC0 + j);          // Chal
    for (int j = 0; j < 16; j++) dram[44 + j/4][8*(j%4) +: 8] = 8'((j*9 + 2) & 255);    // input
  endtask

  task automatic raise(input irq_id_e id);
    @(negedge clk); hc_irq[id] = 1'b1;
    @(negedge clk); hc_irq[id] = 1'b0;
  endtask

  // one LdExecPreAtt/PostAtt service as the firmware runs it
  task automatic service(input logic expect_ok);
    logic [31:0] d, st;
    logic er;
    // wait for the interrupt and identify it
    while (!e1_cpu_irq) @(negedge clk);
    r1(IRQC + 32'h0C, d);
    check(d[31] && d[2:0] == 3'(IRQ_LDEXEC_PRE), "LdExecPreAtt delivered");
    n_irq_ldexec++;
    w1(IRQC + 32'h08, 32'h3F);
    // step 1: copy SSA*, tag, m, Chal, input into BRAM; mask LdExec*
    copy_in(32'h000, 32'h1000, 48);
    copy_in(32'h040, 32'h1040, 64);
    copy_in(32'h080, 32'h0100, 32);
    copy_in(32'h0A0, 32'h0120, 16);
    copy_in(32'h0B0, 32'h0130, 16);
    w1(IRQC + 32'h04, 32'h38);
    // step 2: verify and decrypt by Hw-Att
    hwa(HWA_MAC_START, 0, 0, 0, st);
    hwa(HWA_MAC_ADD, 32'h1000, 48, 0, st);
    hwa(HWA_MAC_CHECK, 0, 0, 32'h1040, st);
    check(st[1] == expect_ok, "SSA* integrity verdict");
    if (!st[1]) begin
      n_mac_bad++;
      // refuse: clean the staging area, unmask, wait for the next request
      for (int a = 32'h1000; a < 32'h1080; a += 4) w1(a, 0);
      w1(IRQC + 32'h04, 32'h3F);
      return;
    end
    n_mac_ok++;
    hwa(HWA_DECRYPT, 32'h1000, 32, 32'h0140, st);
    check(!st[2], "decrypt without error");
    n_decrypt++;
    // step 3: pre-execution measurement of vector table .. SSA code
    hwa(HWA_MEAS_START, 0, 0, 0, st);
    hwa(HWA_MEAS_ADD, 32'h0000, 32'h160, 0, st);
    hwa(HWA_MEAS_END, 0, 0, 32'h0400, st);
    check(st[3], "PreExecAtt valid");
    n_pre++;
    copy_out(32'h0400, 32'h140, 32);
    // step 4: run the SSA; NewData arrives and must wait
    w1(IRQC + 32'h10, 32'd1);
    raise(IRQ_NEWDATA);
    repeat (3) @(negedge clk);
    check(!e1_cpu_irq, "NewData does not interrupt the SSA");
    if (!e1_cpu_irq) n_newdata_held++;
    for (int w = 0; w < 4; w++) begin
      r1(32'h0130 + 4*w, d);
      w1(32'h0300 + 4*w, d ^ 32'h5A5A_5A5A);   // SSA output in enclave memory
      w1(SHR + 4*w, d ^ 32'h5A5A_5A5A);        // and to the second enclave
    end
    w1(IRQC + 32'h10, 32'd0);                  // SSA yields
    @(negedge clk);
    check(e1_cpu_irq, "NewData delivered after the SSA yields");
    r1(IRQC + 32'h0C, d);
    check(d[2:0] == 3'(IRQ_NEWDATA), "pending request is NewData");
    if (d[2:0] == 3'(IRQ_NEWDATA)) n_newdata_late++;
    w1(IRQC + 32'h08, 32'h3F);
    // Enclave-4 picks the output up from the shared block RAM
    for (int w = 0; w < 4; w++) begin
      logic [31:0] exp;
      e4(1'b0, SHR + 4*w, 0, d, er);
      exp = 0;
      for (int b = 0; b < 4; b++) exp[8*b +: 8] = 8'(((4*w + b)*9 + 2) & 255) ^ 8'h5A;
      check(!er && d == exp, "Enclave-4 reads SSA output from shared BRAM");
    end
    n_shared++;
    // step 5: post-execution measurement
    hwa(HWA_MEAS_START, 0, 0, 0, st);
    hwa(HWA_MEAS_ADD, 32'h0000, 32'h160, 0, st);
    hwa(HWA_MEAS_ADD, 32'h0300, 16, 0, st);
    hwa(HWA_MEAS_ADD, 32'h0400, 32, 0, st);
    hwa(HWA_MEAS_END, 0, 0, 32'h0420, st);
    n_post++;
    // step 6: copy output and PostExecAtt to the SEB
    copy_out(32'h0300, 32'h100, 16);
    copy_out(32'h0420, 32'h160, 32);
    // step 7: clean up input, output, SSA and report regions, unmask
    for (int a = 32'h0100; a < 32'h0160; a += 4) w1(a, 0);
    for (int a = 32'h0300; a < 32'h0440; a += 4) w1(a, 0);
    for (int a = 32'h1000; a < 32'h1080; a += 4) w1(a, 0);
    r1(32'h0140, d);
    check(d == 0, "SSA region cleaned");
    if (d == 0) n_clean++;
    w1(IRQC + 32'h04, 32'h3F);
  endtask

  // SusExp: save, encrypt and sign the SSA state, export it, clean up
  task automatic suspend();
    logic [31:0] d, st;
    logic ok;
    while (!e1_cpu_irq) @(negedge clk);
    r1(IRQC + 32'h0C, d);
    check(d[31] && d[2:0] == 3'(IRQ_SUSEXP), "SusExp delivered");
    w1(IRQC + 32'h08, 32'h3F);
    // context and writable sections at 0x0510, IV (here 0) at 0x0500
    for (int w = 0; w < 4; w++) w1(32'h0500 + 4*w, 0);
    for (int w = 0; w < 16; w++) w1(32'h0510 + 4*w, state_word(w));
    hwa(HWA_ENCRYPT, 32'h0500, 64, 32'h0600, st);
    check(!st[2], "state encrypted without error");
    hwa(HWA_MAC_START, 0, 0, 0, st);
    hwa(HWA_MAC_ADD, 32'h0600, 80, 0, st);
    hwa(HWA_MAC_SIGN, 0, 0, 32'h0650, st);
    copy_out(32'h0600, 32'h200, 144);
    for (int a = 32'h0500; a < 32'h0690; a += 4) w1(a, 0);
    ok = 1'b1;
    for (int w = 0; w < 20; w++) if (dram[128 + w] != blob_word(w)) ok = 1'b0;
    check(ok, "exported blob is IV | AES-256-CBC ciphertext");
    for (int w = 0; w < 16; w++) check(dram[148 + w] == tag_word(w), "exported blob tag");
    if (ok) n_susexp++;
  endtask

  // ReExec: import the blob, verify, decrypt back into place
  task automatic restore(input logic expect_ok);
    logic [31:0] d, st;
    logic ok;
    while (!e1_cpu_irq) @(negedge clk);
    r1(IRQC + 32'h0C, d);
    check(d[31] && d[2:0] == 3'(IRQ_REEXEC), "ReExec delivered");
    w1(IRQC + 32'h08, 32'h3F);
    copy_in(32'h200, 32'h0600, 144);
    hwa(HWA_MAC_START, 0, 0, 0, st);
    hwa(HWA_MAC_ADD, 32'h0600, 80, 0, st);
    hwa(HWA_MAC_CHECK, 0, 0, 32'h0650, st);
    check(st[1] == expect_ok, "blob integrity verdict");
    if (!st[1]) begin
      n_mac_bad++;
      for (int a = 32'h0600; a < 32'h0690; a += 4) w1(a, 0);
      return;
    end
    hwa(HWA_DECRYPT, 32'h0600, 64, 32'h0510, st);
    ok = 1'b1;
    for (int w = 0; w < 16; w++) begin r1(32'h0510 + 4*w, d); if (d != state_word(w)) ok = 1'b0; end
    check(ok, "restored state equals the suspended state");
    if (ok) n_reexec++;
    for (int a = 32'h0600; a < 32'h0690; a += 4) w1(a, 0);
  endtask

  initial begin
    logic [31:0] d;
    logic er;
    logic [255:0] rep;
    e1_cpu_req = BUS_REQ_IDLE; e4_cpu_req = BUS_REQ_IDLE; hc_irq = '0;
    {n_irq_ldexec, n_newdata_held, n_newdata_late, n_refused, n_mac_ok, n_mac_bad,
     n_decrypt, n_pre, n_post, n_shared, n_clean, n_susexp, n_reexec} = '0;
    for (int i = 0; i < 256; i++) dram[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // boot image of Enclave-1: vector table and firmware code (the bitstream
    // would carry these); written by the CPU here
    for (int a = 0; a < 32'h100; a += 4) begin
      for (int b = 0; b < 4; b++)
        d[8*b +: 8] = (a + b < 32) ? 8'(((a + b)*3 + 8'h11) & 255) : 8'(((a + b)*13 + 7) & 255);
      w1(a, d);
    end

    // isolation probes
    e1(1'b0, 32'h0002_0000, 0, d, er);          check(er, "E1: beyond its 128 KB BRAM refused");
    if (er) n_refused++;
    e1(1'b0, 32'h0010_2000, 0, d, er);          check(er, "E1: beyond shared BRAM refused");
    e1(1'b0, 32'h3000_0000, 0, d, er);          check(er, "E1: unmapped DRAM refused");
    e4(1'b0, 32'h2000_0000, 0, d, er);          check(er, "E4: has no SEB window");
    e4(1'b0, 32'h4001_0010, 0, d, er);          check(er, "E4: cannot reach Hw-Att");
    e4(1'b0, 32'h0000_8000, 0, d, er);          check(er, "E4: beyond its 32 KB BRAM refused");
    e4(1'b0, 32'h0000_0000, 0, d, er);          check(!er && d == 0, "E4: own BRAM is separate and zeroed");

    // attempt 1: tampered SSA*
    ua_fill(1'b1);
    raise(IRQ_LDEXEC_PRE);
    service(1'b0);
    // attempt 2: genuine SSA*
    ua_fill(1'b0);
    raise(IRQ_LDEXEC_PRE);
    service(1'b1);

    // suspend the SSA, then restore it (first from a tampered blob)
    raise(IRQ_SUSEXP);
    suspend();
    dram[133] = dram[133] ^ 32'h0000_0400;
    raise(IRQ_REEXEC);
    restore(1'b0);
    dram[133] = dram[133] ^ 32'h0000_0400;
    raise(IRQ_REEXEC);
    restore(1'b1);

    // the remote verifier's view: reports and output in the SEB
    for (int w = 0; w < 8; w++) for (int b = 0; b < 4; b++) rep[255 - 8*(4*w + b) -: 8] = dram[80 + w][8*b +: 8];
    check(rep == PRE, "PreExecAtt in SEB matches reference");
    for (int w = 0; w < 8; w++) for (int b = 0; b < 4; b++) rep[255 - 8*(4*w + b) -: 8] = dram[88 + w][8*b +: 8];
    check(rep == POST, "PostExecAtt in SEB matches reference");
    for (int j = 0; j < 16; j++)
      check(dram[64 + j/4][8*(j%4) +: 8] == (8'((j*9 + 2) & 255) ^ 8'h5A), "output in SEB");

    $display("mechanisms: ldexec_irq=%0d newdata_held=%0d newdata_late=%0d refused=%0d mac_ok=%0d mac_bad=%0d decrypt=%0d pre=%0d post=%0d shared=%0d clean=%0d susexp=%0d reexec=%0d",
             n_irq_ldexec, n_newdata_held, n_newdata_late, n_refused, n_mac_ok, n_mac_bad,
             n_decrypt, n_pre, n_post, n_shared, n_clean, n_susexp, n_reexec);
    check(n_irq_ldexec > 0, "mechanism: LdExec* interrupt");
    check(n_newdata_held > 0, "mechanism: NewData held while SSA runs");
    check(n_newdata_late > 0, "mechanism: NewData delivered after yield");
    check(n_refused > 0, "mechanism: out-of-map access refused");
    check(n_mac_ok > 0, "mechanism: MAC accepted");
    check(n_mac_bad > 0, "mechanism: MAC rejected");
    check(n_decrypt > 0, "mechanism: decryption");
    check(n_pre > 0, "mechanism: pre-execution attestation");
    check(n_post > 0, "mechanism: post-execution attestation");
    check(n_shared > 0, "mechanism: inter-enclave shared BRAM");
    check(n_clean > 0, "mechanism: clean-up");
    check(n_susexp > 0, "mechanism: suspend and export (encrypt and sign)");
    check(n_reexec > 0, "mechanism: restore and execute (verify and decrypt)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
