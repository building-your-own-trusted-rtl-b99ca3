// bram_dp: true dual-port block RAM, the on-chip memory of an enclave.
//
// Models the FPGA block memory that serves as an enclave's main memory
// (128 KB for the enclave of the first example application) and also the
// small memory two enclaves share to talk to each other. Port A is the
// enclave CPU side and port B is a second master: the Hw-Att engine for an
// enclave memory, or the second enclave for a shared memory.
//
// Both ports speak byot_pkg's bus: a request is accepted in the cycle it is
// valid and answered one cycle later with ready=1 (and read data for a read).
// Addresses are byte addresses relative to the memory base; an address at or
// beyond DEPTH_BYTES answers with err=1 and does not touch the array, so a
// master cannot reach past the memory it is wired to.
//
// The contents start at zero: the paper's device clears all block RAM when it
// is configured, and this array is initialised the same way. Simultaneous
// writes to one word from both ports leave port B's data (this design's
// choice; the paper does not address it).
module bram_dp
  import byot_pkg::*;
#(
  parameter int unsigned DEPTH_BYTES = 131072  // 128 KB
) (
  input  logic     clk,
  input  bus_req_t a_req,
  output bus_rsp_t a_rsp,
  input  bus_req_t b_req,
  output bus_rsp_t b_rsp
);
  localparam int unsigned WORDS = DEPTH_BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
  end

  function automatic logic in_range(input logic [31:0] addr);
    return addr < DEPTH_BYTES;
  endfunction

  logic [AW-1:0] a_idx, b_idx;
  assign a_idx = a_req.addr[AW+1:2];
  assign b_idx = b_req.addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (a_req.valid && a_req.we && in_range(a_req.addr))
      for (int i = 0; i < 4; i++)
        if (a_req.be[i]) mem[a_idx][8*i +: 8] <= a_req.wdata[8*i +: 8];
    if (b_req.valid && b_req.we && in_range(b_req.addr))
      for (int i = 0; i < 4; i++)
        if (b_req.be[i]) mem[b_idx][8*i +: 8] <= b_req.wdata[8*i +: 8];
  end

  always_ff @(posedge clk) begin
    a_rsp.ready <= a_req.valid;
    a_rsp.err   <= a_req.valid && !in_range(a_req.addr);
    a_rsp.rdata <= mem[a_idx];
    b_rsp.ready <= b_req.valid;
    b_rsp.err   <= b_req.valid && !in_range(b_req.addr);
    b_rsp.rdata <= mem[b_idx];
  end
endmodule
