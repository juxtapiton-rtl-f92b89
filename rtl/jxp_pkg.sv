// jxp_pkg: types and constants shared by the PicoRV32-to-L1.5 transducer.
//
// The PicoRV32 core speaks a simple valid/ready memory interface with 32-bit
// little-endian data. The L1.5 cache of a tile was built for a 64-bit,
// big-endian SPARC core, so its core-side interface carries 64-bit data,
// a request type, a cacheability bit, an access size and a physical address.
// This package defines both sides as packed structs, the encodings of the
// request type, return type, access size and interrupt type, and the byte
// flip that converts between the two byte orders.
//
// What follows the paper: the L1.5 data path is 64 bits wide because the
// SPARC core it serves has a 64-bit word, the memory system is big-endian,
// and the core's data buses are byte-flipped so that its data sits in memory
// little-endian. The numeric encodings, the 40-bit physical address and the
// address map (PicoRV32 address bit 31 selects uncached I/O space) are this
// design's own choices.
package jxp_pkg;

  // Widths
  localparam int unsigned PICO_AW  = 32;  // PicoRV32 address width (RV32I)
  localparam int unsigned PICO_DW  = 32;  // PicoRV32 data width
  localparam int unsigned L15_DW   = 64;  // L1.5 core-side data width (SPARC word)
  localparam int unsigned PA_W     = 40;  // physical address width

  // Request type presented to the L1.5
  typedef enum logic [4:0] {
    RQ_LOAD  = 5'b00000,  // cacheable data read: allocates in the L1.5
    RQ_STORE = 5'b00001,  // store, acknowledged when performed
    RQ_IFILL = 5'b10000   // instruction fill: bypasses the L1.5 (SPARC style)
  } l15_rqtype_e;

  // Response type returned by the L1.5
  typedef enum logic [3:0] {
    RET_LOAD   = 4'b0000,
    RET_IFILL  = 4'b0001,
    RET_ST_ACK = 4'b0100,
    RET_INT    = 4'b0111
  } l15_rettype_e;

  // Access size
  typedef enum logic [2:0] {
    SZ_1B = 3'b001,
    SZ_2B = 3'b010,
    SZ_4B = 3'b011,
    SZ_8B = 3'b100
  } l15_size_e;

  // Interrupt type, carried in bits [1:0] of an interrupt response's data
  typedef enum logic [1:0] {
    INT_HW     = 2'b00,   // ordinary interprocessor interrupt
    INT_START  = 2'b01,   // start: release the PicoRV32 core from reset
    INT_IDLE   = 2'b10,
    INT_RESUME = 2'b11
  } int_type_e;

  // One PicoRV32 memory request (mem_valid is carried separately)
  typedef struct packed {
    logic               instr;   // instruction fetch
    logic [PICO_AW-1:0] addr;    // word-aligned byte address
    logic [PICO_DW-1:0] wdata;   // little-endian write data
    logic [3:0]         wstrb;   // byte lanes written; 0 = read
  } pico_req_t;

  // One L1.5 request (l15_req_val carried separately)
  typedef struct packed {
    l15_rqtype_e       rqtype;
    logic              nc;       // non-cacheable (I/O)
    l15_size_e         size;
    logic [PA_W-1:0]   addr;     // byte address of the first byte accessed
    logic [L15_DW-1:0] data;     // big-endian store data, replicated
  } l15_req_t;

  // One L1.5 response (l15_resp_val carried separately)
  typedef struct packed {
    l15_rettype_e      rettype;
    logic [L15_DW-1:0] data;     // big-endian aligned doubleword
  } l15_resp_t;

  // Reverse the byte order of a 32-bit word.
  function automatic logic [31:0] bswap32(input logic [31:0] w);
    return {w[7:0], w[15:8], w[23:16], w[31:24]};
  endfunction

endpackage
