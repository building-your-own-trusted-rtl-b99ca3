// byot_pkg: types and constants shared by the enclave fabric.
//
// The enclave fabric connects each softcore CPU of an FPGA enclave to the
// memories and peripherals that belong to that enclave only. All blocks talk
// over one simple word-addressed request/response bus (bus_req_t/bus_rsp_t):
// a request is a one-cycle valid pulse, answered some cycles later by a
// one-cycle ready strobe carrying read data and an error flag; a master has at
// most one request outstanding. Byte addresses are 32 bits wide and data words
// are 32 bits, matching the 32-bit softcore CPUs the enclaves use. The bus is
// this design's own simplification of the AXI interconnect a vendor flow
// would insert; it carries the same information for single-word transfers.
//
// The interrupt numbering names the service primitives the hardcore system
// can raise on an enclave: load-and-execute with or without pre/post
// execution attestation, new input data, suspend/export and restore/execute.
// The numbering itself is this design's choice.
package byot_pkg;

  localparam int unsigned ADDR_W = 32;
  localparam int unsigned DATA_W = 32;

  typedef struct packed {
    logic              valid;
    logic              we;
    logic [ADDR_W-1:0] addr;   // byte address, word aligned
    logic [DATA_W-1:0] wdata;
    logic [3:0]        be;     // byte enables for writes
  } bus_req_t;

  typedef struct packed {
    logic              ready;  // one-cycle response strobe
    logic              err;    // decode error / access denied
    logic [DATA_W-1:0] rdata;
  } bus_rsp_t;

  localparam bus_req_t BUS_REQ_IDLE = '{valid: 1'b0, we: 1'b0, addr: '0, wdata: '0, be: '0};
  localparam bus_rsp_t BUS_RSP_IDLE = '{ready: 1'b0, err: 1'b0, rdata: '0};

  // Service primitives raised by the hardcore system (bit positions in the
  // interrupt request vector). LdExec* have high priority, NewData low.
  typedef enum logic [2:0] {
    IRQ_LDEXEC      = 3'd0,
    IRQ_LDEXEC_PRE  = 3'd1,
    IRQ_LDEXEC_POST = 3'd2,
    IRQ_SUSEXP      = 3'd3,
    IRQ_REEXEC      = 3'd4,
    IRQ_NEWDATA     = 3'd5
  } irq_id_e;
  localparam int unsigned NUM_IRQ = 6;

  // Commands understood by the Hw-Att module.
  typedef enum logic [3:0] {
    HWA_NOP       = 4'd0,
    HWA_DECRYPT   = 4'd1,  // AES-256-CBC decrypt: IV + ciphertext at SRC, plaintext to DST
    HWA_MAC_START = 4'd2,  // start an HMAC-SHA512 over following regions
    HWA_MAC_ADD   = 4'd3,  // absorb a BRAM region into the HMAC
    HWA_MAC_CHECK = 4'd4,  // finish the HMAC and compare with a tag in BRAM
    HWA_MEAS_START= 4'd5,  // start a keyed BLAKE2s measurement
    HWA_MEAS_ADD  = 4'd6,  // absorb a BRAM region into the measurement
    HWA_MEAS_END  = 4'd7,  // finish; write the 32-byte report to BRAM
    HWA_ENCRYPT   = 4'd8,  // AES-256-CBC encrypt: IV + plaintext at SRC, IV + ciphertext to DST
    HWA_MAC_SIGN  = 4'd9   // finish the HMAC and write the tag to BRAM
  } hwa_cmd_e;

  function automatic logic [31:0] rotr32(input logic [31:0] x, input int unsigned n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic logic [63:0] rotr64(input logic [63:0] x, input int unsigned n);
    return (x >> n) | (x << (64 - n));
  endfunction

endpackage
