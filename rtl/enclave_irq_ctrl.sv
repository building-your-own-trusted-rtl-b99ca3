// enclave_irq_ctrl: service-request interrupts from the hardcore system into
// one enclave.
//
// The hardcore system starts every enclave service by raising an interrupt on
// the enclave's softcore CPU: LdExec, LdExecPreAtt, LdExecPostAtt (load and
// run an SSA, with no, pre- or post-execution attestation), SusExp and ReExec
// (suspend/export and restore/execute an SSA state) and NewData (more input
// is waiting in the shared DRAM block). In the reference system the request
// lines are a GPIO the hardcore system writes, feeding an interrupt
// controller in the enclave; this block is both, reduced to what the
// enclave needs.
//
// Hardcore side: hc_irq[NUM_IRQ-1:0] are level request lines (the GPIO
// outputs). A rising edge on a line sets its pending bit.
// Enclave side: registers on the byot bus, word offsets
//   0x00 PENDING   read; bit i set while request i is pending
//   0x04 ENABLE    read/write; reset value all ones
//   0x08 ACK       write-one-to-clear pending bits
//   0x0C ACTIVE    read; bit31 = an interrupt is being delivered,
//                  [2:0] = its id (lowest id wins)
//   0x10 CONTROL   read/write; bit0 = SSA running
// cpu_irq is high while any enabled pending request may be delivered.
// NewData has the lowest priority and is held back while CONTROL.bit0 says an
// SSA is running, so it can never interrupt the SSA: it is delivered when the
// firmware has control again, as the paper describes. The firmware can mask
// the LdExec* requests through ENABLE once it has copied their data.
// Register offsets, the edge-triggered capture and the single-cycle register
// latency are this design's choices.
module enclave_irq_ctrl
  import byot_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NUM_IRQ-1:0] hc_irq,
  input  bus_req_t           req,
  output bus_rsp_t           rsp,
  output logic               cpu_irq,
  output logic [2:0]         active_id
);
  logic [NUM_IRQ-1:0] hc_q, pending, enable;
  logic               ssa_running;
  logic [NUM_IRQ-1:0] deliverable;
  logic               active;

  always_comb begin
    deliverable = pending & enable;
    if (ssa_running) deliverable[IRQ_NEWDATA] = 1'b0;
    active    = 1'b0;
    active_id = '0;
    for (int i = NUM_IRQ - 1; i >= 0; i--)
      if (deliverable[i]) begin
        active    = 1'b1;
        active_id = 3'(i);
      end
  end
  assign cpu_irq = active;

  logic [7:0] off;
  assign off = req.addr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hc_q        <= '0;
      pending     <= '0;
      enable      <= '1;
      ssa_running <= 1'b0;
      rsp         <= BUS_RSP_IDLE;
    end else begin
      logic [NUM_IRQ-1:0] clr;
      hc_q <= hc_irq;
      clr  = '0;
      rsp  <= BUS_RSP_IDLE;
      if (req.valid) begin
        rsp.ready <= 1'b1;
        if (req.we) begin
          case (off)
            8'h04:   enable      <= req.wdata[NUM_IRQ-1:0];
            8'h08:   clr          = req.wdata[NUM_IRQ-1:0];
            8'h10:   ssa_running <= req.wdata[0];
            8'h00, 8'h0C: ;
            default: rsp.err <= 1'b1;
          endcase
        end else begin
          case (off)
            8'h00:   rsp.rdata <= 32'(pending);
            8'h04:   rsp.rdata <= 32'(enable);
            8'h0C:   rsp.rdata <= {active, 28'd0, active_id};
            8'h10:   rsp.rdata <= {31'd0, ssa_running};
            8'h08:   rsp.rdata <= '0;
            default: rsp.err   <= 1'b1;
          endcase
        end
      end
      pending <= (pending & ~clr) | (hc_irq & ~hc_q);
    end
  end
endmodule
