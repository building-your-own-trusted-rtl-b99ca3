// tb_bram_dp: random reads and writes on both ports of a small dual-port
// block RAM, compared with a reference array kept in the testbench. Also
// checks: contents are zero after configuration, byte enables, the one-cycle
// read latency, an out-of-range access is answered with err and does not
// alias onto another word, and a write from one port is seen by the other.
module tb_bram_dp;
  import byot_pkg::*;
  localparam int unsigned BYTES = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t a_req, b_req;
  bus_rsp_t a_rsp, b_rsp;
  bram_dp #(.DEPTH_BYTES(BYTES)) dut (.*);

  logic [31:0] model [BYTES/4];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  initial begin
    a_req = BUS_REQ_IDLE; b_req = BUS_REQ_IDLE;
    for (int i = 0; i < BYTES/4; i++) model[i] = '0;
    @(negedge clk);
    // zero after configuration, sampled on port B
    for (int i = 0; i < 8; i++) begin
      b_req = '{valid: 1'b1, we: 1'b0, addr: 32'(4*i*29 % BYTES), wdata: '0, be: '0};
      @(negedge clk);
      b_req = BUS_REQ_IDLE;
      check(b_rsp.ready && b_rsp.rdata == 32'd0, "initial contents zero");
    end
    // random traffic; one request per port per cycle, response next cycle
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] aa, ba, ad, bd;
      logic        aw, bw;
      logic [3:0]  abe, bbe;
      aa = 32'($urandom_range(BYTES/4 - 1)) << 2;
      ba = 32'($urandom_range(BYTES/4 - 1)) << 2;
      if (ba == aa) ba = (ba + 4) % BYTES;
      aw = 1'($urandom); bw = 1'($urandom);
      ad = $urandom; bd = $urandom;
      abe = 4'($urandom); bbe = 4'($urandom);
      a_req = '{valid: 1'b1, we: aw, addr: aa, wdata: ad, be: abe};
      b_req = '{valid: 1'b1, we: bw, addr: ba, wdata: bd, be: bbe};
      @(negedge clk);
      a_req = BUS_REQ_IDLE; b_req = BUS_REQ_IDLE;
      check(a_rsp.ready && b_rsp.ready && !a_rsp.err && !b_rsp.err, "response after one cycle");
      if (!aw) check(a_rsp.rdata == model[aa/4], "port A read");
      if (!bw) check(b_rsp.rdata == model[ba/4], "port B read");
      for (int i = 0; i < 4; i++) begin
        if (aw && abe[i]) model[aa/4][8*i +: 8] = ad[8*i +: 8];
        if (bw && bbe[i]) model[ba/4][8*i +: 8] = bd[8*i +: 8];
      end
    end
    // out of range: error, no write, no alias
    a_req = '{valid: 1'b1, we: 1'b1, addr: 32'(BYTES) + 32'd8, wdata: 32'hDEAD_BEEF, be: 4'hF};
    @(negedge clk);
    a_req = BUS_REQ_IDLE;
    check(a_rsp.ready && a_rsp.err, "out-of-range access flagged");
    b_req = '{valid: 1'b1, we: 1'b0, addr: 32'd8, wdata: '0, be: '0};
    @(negedge clk);
    b_req = BUS_REQ_IDLE;
    check(b_rsp.rdata == model[2], "out-of-range write did not alias");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
