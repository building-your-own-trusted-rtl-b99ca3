// enclave_xbar: the address map of one enclave, and the wall around it.
//
// Every enclave has its own physical address space that holds only what was
// assigned to it: its main block RAM, the shared block RAM regions of the
// enclaves it talks to, its window onto the shared DRAM region used with the
// hardcore system (the SSA Execution Block), and its own peripherals and
// control registers. This block decodes the CPU's address against NT windows
// (BASE[i], SIZE[i]) and forwards the request, with the window base
// subtracted, to the one target that owns it. An address in no window is
// answered with err=1 and reaches no target: there is no path from one
// enclave to anything that was not wired into its map.
//
// Timing: a request pulse on cpu_req is forwarded combinationally to the
// selected target in the same cycle; the target's ready strobe is returned to
// the CPU unchanged. A decode miss is answered one cycle after the request.
// The window sizes must be powers of two and the bases aligned to them
// (this design's choice, as in a vendor interconnect's address editor).
module enclave_xbar
  import byot_pkg::*;
#(
  parameter int unsigned NT = 4,
  parameter logic [NT-1:0][31:0] BASE = '{32'h4000_0000, 32'h2000_0000, 32'h0010_0000, 32'h0000_0000},
  parameter logic [NT-1:0][31:0] SIZE = '{32'h0000_1000, 32'h0020_0000, 32'h0000_2000, 32'h0002_0000}
) (
  input  logic              clk,
  input  logic              rst_n,
  input  bus_req_t          cpu_req,
  output bus_rsp_t          cpu_rsp,
  output bus_req_t [NT-1:0] t_req,
  input  bus_rsp_t [NT-1:0] t_rsp
);
  logic [NT-1:0] hit;
  logic          miss_q;

  always_comb begin
    for (int i = 0; i < NT; i++) begin
      hit[i] = cpu_req.valid && ((cpu_req.addr & ~(SIZE[i] - 1)) == BASE[i]);
      t_req[i]       = cpu_req;
      t_req[i].valid = hit[i];
      t_req[i].addr  = cpu_req.addr - BASE[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) miss_q <= 1'b0;
    else        miss_q <= cpu_req.valid && (hit == '0);
  end

  always_comb begin
    cpu_rsp = BUS_RSP_IDLE;
    for (int i = 0; i < NT; i++)
      if (t_rsp[i].ready) cpu_rsp = t_rsp[i];
    if (miss_q) begin
      cpu_rsp.ready = 1'b1;
      cpu_rsp.err   = 1'b1;
      cpu_rsp.rdata = '0;
    end
  end

  // Windows must not overlap: at most one target per request.
  a_one_hit: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hit));
endmodule
