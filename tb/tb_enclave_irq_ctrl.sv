// tb_enclave_irq_ctrl: the service-request interrupt path of one enclave.
// Checks that a rising request line becomes pending and raises cpu_irq one
// cycle later, that a held line does not re-trigger, that the lowest id wins
// when several are pending, that ACK clears, that masking through ENABLE
// (the firmware disabling LdExec* after copying) hides a request, and that
// NewData is held back while the SSA-running bit is set and delivered as
// soon as it is cleared, while LdExec still gets through.
module tb_enclave_irq_ctrl;
  import byot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NUM_IRQ-1:0] hc_irq;
  bus_req_t req;
  bus_rsp_t rsp;
  logic cpu_irq;
  logic [2:0] active_id;

  enclave_irq_ctrl dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  task automatic rw(input logic we, input logic [7:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    req = '{valid: 1'b1, we: we, addr: 32'(a), wdata: wd, be: 4'hF};
    @(negedge clk);
    req = BUS_REQ_IDLE;
    check(rsp.ready, "register response after one cycle");
    rd = rsp.rdata;
  endtask

  task automatic pulse(input int id);
    @(negedge clk);
    hc_irq[id] = 1'b1;
    @(negedge clk);
    hc_irq[id] = 1'b0;
  endtask

  initial begin
    logic [31:0] d;
    hc_irq = '0; req = BUS_REQ_IDLE;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!cpu_irq, "quiet after reset");
    rw(1'b0, 8'h04, 0, d);
    check(d[NUM_IRQ-1:0] == '1, "all enabled after reset");

    // edge capture and latency
    @(negedge clk);
    hc_irq[IRQ_LDEXEC_PRE] = 1'b1;
    @(negedge clk);
    check(cpu_irq && active_id == 3'(IRQ_LDEXEC_PRE), "LdExecPreAtt raises irq one cycle after the edge");
    repeat (3) @(negedge clk);
    rw(1'b1, 8'h08, 32'(1 << IRQ_LDEXEC_PRE), d);
    @(negedge clk);
    check(!cpu_irq, "ACK clears; a held line does not re-trigger");
    hc_irq = '0;

    // priority
    @(negedge clk);
    hc_irq[IRQ_NEWDATA] = 1'b1; hc_irq[IRQ_REEXEC] = 1'b1; hc_irq[IRQ_LDEXEC_POST] = 1'b1;
    @(negedge clk);
    hc_irq = '0;
    rw(1'b0, 8'h0C, 0, d);
    check(d[31] && d[2:0] == 3'(IRQ_LDEXEC_POST), "lowest id delivered first");
    rw(1'b1, 8'h08, 32'(1 << IRQ_LDEXEC_POST), d);
    rw(1'b0, 8'h0C, 0, d);
    check(d[2:0] == 3'(IRQ_REEXEC), "then ReExec");
    rw(1'b1, 8'h08, 32'(1 << IRQ_REEXEC), d);
    rw(1'b0, 8'h0C, 0, d);
    check(d[2:0] == 3'(IRQ_NEWDATA), "then NewData");
    rw(1'b1, 8'h08, 32'h3F, d);

    // masking LdExec* after the data is copied
    rw(1'b1, 8'h04, 32'h38, d);
    pulse(IRQ_LDEXEC);
    check(!cpu_irq, "masked LdExec not delivered");
    rw(1'b0, 8'h00, 0, d);
    check(d[IRQ_LDEXEC], "masked LdExec still pending");
    rw(1'b1, 8'h04, 32'h3F, d);
    @(negedge clk);
    check(cpu_irq && active_id == 3'(IRQ_LDEXEC), "delivered once unmasked");
    rw(1'b1, 8'h08, 32'h3F, d);

    // NewData cannot interrupt a running SSA
    rw(1'b1, 8'h10, 32'd1, d);
    pulse(IRQ_NEWDATA);
    repeat (4) begin
      @(negedge clk);
      check(!cpu_irq, "NewData held while SSA runs");
    end
    pulse(IRQ_SUSEXP);
    check(cpu_irq && active_id == 3'(IRQ_SUSEXP), "SusExp still delivered while SSA runs");
    rw(1'b1, 8'h08, 32'(1 << IRQ_SUSEXP), d);
    @(negedge clk);
    check(!cpu_irq, "NewData still held");
    rw(1'b1, 8'h10, 32'd0, d);
    @(negedge clk);
    check(cpu_irq && active_id == 3'(IRQ_NEWDATA), "NewData delivered when firmware has control");

    // unknown register
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b0, addr: 32'h40, wdata: '0, be: 4'hF};
    @(negedge clk);
    req = BUS_REQ_IDLE;
    check(rsp.ready && rsp.err, "unknown register answered with err");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
