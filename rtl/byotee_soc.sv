// byotee_soc: two FPGA enclaves with a shared block RAM, one of them with
// hardware-based attestation.
//
// This is the programmable-logic part of the two-enclave distributed
// application of the reference system (an AES application in Enclave-1
// passing data through a shared block RAM to an HMAC-checking application
// in Enclave-4), with Enclave-1 in its hardware-based attestation profile
// (Hw-Att wired to the enclave's main memory). The softcore CPUs themselves
// are vendor IP and sit outside this module: each enters through its data
// bus port (e1_cpu_*, e4_cpu_*) and receives its interrupt line.
//
// Enclave-1 address map (this design's choice of addresses):
//   0x0000_0000  128 KB  Enclave-1 block RAM (port A; Hw-Att on port B)
//   0x0010_0000    8 KB  shared block RAM (port A)
//   0x2000_0000    2 MB  SSA Execution Block window into shared DRAM
//                        (leaves the module on seb_req/seb_rsp)
//   0x4000_0000    4 KB  service-interrupt controller
//   0x4001_0000    4 KB  Hw-Att command registers
// Enclave-4 address map:
//   0x0000_0000   32 KB  Enclave-4 block RAM (port A; port B unused)
//   0x0010_0000    8 KB  shared block RAM (port B)
// Nothing else is reachable from either CPU: the hardcore system reaches
// Enclave-1 only through the SEB window (DRAM it owns anyway) and the
// interrupt request lines hc_irq; it has no path into any block RAM or into
// Hw-Att, and Enclave-4 has no DRAM window at all.
// All blocks run on one clock with an active-low asynchronous reset.
module byotee_soc
  import byot_pkg::*;
#(
  parameter int unsigned E1_BRAM_BYTES     = 131072,  // 128 KB
  parameter int unsigned E4_BRAM_BYTES     = 32768,   // 32 KB
  parameter int unsigned SHARED_BRAM_BYTES = 8192,    // 8 KB
  parameter int unsigned SEB_BYTES         = 2097152  // 2 MB
) (
  input  logic               clk,
  input  logic               rst_n,
  // Enclave-1 CPU
  input  bus_req_t           e1_cpu_req,
  output bus_rsp_t           e1_cpu_rsp,
  output logic               e1_cpu_irq,
  // Enclave-4 CPU
  input  bus_req_t           e4_cpu_req,
  output bus_rsp_t           e4_cpu_rsp,
  // hardcore system: SEB window into DRAM, service requests into Enclave-1
  output bus_req_t           seb_req,
  input  bus_rsp_t           seb_rsp,
  input  logic [NUM_IRQ-1:0] hc_irq,
  output logic               hwatt_done
);
  localparam logic [4:0][31:0] E1_BASE = '{32'h4001_0000, 32'h4000_0000, 32'h2000_0000,
                                           32'h0010_0000, 32'h0000_0000};
  localparam logic [4:0][31:0] E1_SIZE = '{32'h0000_1000, 32'h0000_1000, 32'(SEB_BYTES),
                                           32'(SHARED_BRAM_BYTES), 32'(E1_BRAM_BYTES)};
  localparam logic [1:0][31:0] E4_BASE = '{32'h0010_0000, 32'h0000_0000};
  localparam logic [1:0][31:0] E4_SIZE = '{32'(SHARED_BRAM_BYTES), 32'(E4_BRAM_BYTES)};

  bus_req_t [4:0] e1_t_req;
  bus_rsp_t [4:0] e1_t_rsp;
  bus_req_t [1:0] e4_t_req;
  bus_rsp_t [1:0] e4_t_rsp;
  bus_req_t       att_bram_req;
  bus_rsp_t       att_bram_rsp;
  bus_rsp_t       e4_portb_rsp;
  logic [2:0]     e1_irq_id;

  enclave_xbar #(.NT(5), .BASE(E1_BASE), .SIZE(E1_SIZE)) u_e1_xbar (
    .clk, .rst_n, .cpu_req(e1_cpu_req), .cpu_rsp(e1_cpu_rsp),
    .t_req(e1_t_req), .t_rsp(e1_t_rsp));

  enclave_xbar #(.NT(2), .BASE(E4_BASE), .SIZE(E4_SIZE)) u_e4_xbar (
    .clk, .rst_n, .cpu_req(e4_cpu_req), .cpu_rsp(e4_cpu_rsp),
    .t_req(e4_t_req), .t_rsp(e4_t_rsp));

  // Enclave-1 execution memory: CPU on port A, Hw-Att on port B
  bram_dp #(.DEPTH_BYTES(E1_BRAM_BYTES)) u_e1_mem (
    .clk, .a_req(e1_t_req[0]), .a_rsp(e1_t_rsp[0]),
    .b_req(att_bram_req), .b_rsp(att_bram_rsp));

  // shared memory between the two enclaves, one port each
  bram_dp #(.DEPTH_BYTES(SHARED_BRAM_BYTES)) u_shared_mem (
    .clk, .a_req(e1_t_req[1]), .a_rsp(e1_t_rsp[1]),
    .b_req(e4_t_req[1]), .b_rsp(e4_t_rsp[1]));

  // Enclave-4 local memory: CPU on port A only
  bram_dp #(.DEPTH_BYTES(E4_BRAM_BYTES)) u_e4_mem (
    .clk, .a_req(e4_t_req[0]), .a_rsp(e4_t_rsp[0]),
    .b_req(BUS_REQ_IDLE), .b_rsp(e4_portb_rsp));

  // SEB window leaves the module towards the hardcore system's DRAM
  assign seb_req     = e1_t_req[2];
  assign e1_t_rsp[2] = seb_rsp;

  enclave_irq_ctrl u_e1_irq (
    .clk, .rst_n, .hc_irq, .req(e1_t_req[3]), .rsp(e1_t_rsp[3]),
    .cpu_irq(e1_cpu_irq), .active_id(e1_irq_id));

  hw_att u_hw_att (
    .clk, .rst_n, .req(e1_t_req[4]), .rsp(e1_t_rsp[4]),
    .bram_req(att_bram_req), .bram_rsp(att_bram_rsp), .done(hwatt_done));
endmodule
