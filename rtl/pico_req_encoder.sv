// pico_req_encoder: turns one PicoRV32 memory request into one L1.5 request.
//
// Purely combinational. From the core's word-aligned address and its byte
// write strobes it derives the operation (load, store, or instruction fill),
// the access size and the address of the first byte touched. Reads are always
// whole 32-bit words. Store data is byte-flipped from the core's little-endian
// lanes into the big-endian lanes of the 64-bit L1.5 bus and copied into both
// halves, so the bytes sit in the right lanes whichever half address bit 2
// selects. `illegal` flags a strobe pattern PicoRV32 never produces
// (non-contiguous or misaligned lanes).
//
// Following the paper, instruction fetches are issued as ordinary cacheable
// loads when CACHE_INSTR is 1, so the L1.5 caches both instructions and data
// for this core (the SPARC core's fetches bypass the L1.5). CACHE_INSTR = 0
// issues them as instruction fills instead. The address map is this design's
// choice: core address bit 31 clear maps to MEM_BASE plus the address,
// cacheable; bit 31 set maps to IO_PREFIX followed by address bits 30:0,
// non-cacheable, for the chipset's I/O devices.
module pico_req_encoder
  import jxp_pkg::*;
#(
  parameter bit                     CACHE_INSTR = 1'b1,
  parameter logic [PA_W-1:0]        MEM_BASE    = '0,
  parameter logic [PA_W-PICO_AW:0]  IO_PREFIX   = '1
) (
  input  pico_req_t pico_req,
  output l15_req_t  l15_req,
  output logic      is_store,
  output logic      illegal
);

  logic [1:0] offset;
  l15_size_e  size;
  logic [PA_W-1:2] word_pa;   // physical word address

  always_comb begin
    illegal = 1'b0;
    unique case (pico_req.wstrb)
      4'b0000: begin offset = 2'd0; size = SZ_4B; end   // read
      4'b1111: begin offset = 2'd0; size = SZ_4B; end
      4'b0011: begin offset = 2'd0; size = SZ_2B; end
      4'b1100: begin offset = 2'd2; size = SZ_2B; end
      4'b0001: begin offset = 2'd0; size = SZ_1B; end
      4'b0010: begin offset = 2'd1; size = SZ_1B; end
      4'b0100: begin offset = 2'd2; size = SZ_1B; end
      4'b1000: begin offset = 2'd3; size = SZ_1B; end
      default: begin offset = 2'd0; size = SZ_4B; illegal = 1'b1; end
    endcase
  end

  always_comb begin
    is_store = |pico_req.wstrb;

    if (pico_req.addr[PICO_AW-1]) begin
      word_pa    = {IO_PREFIX, pico_req.addr[PICO_AW-2:2]};
      l15_req.nc = 1'b1;
    end else begin
      word_pa    = MEM_BASE[PA_W-1:2] + (PA_W-2)'(pico_req.addr[PICO_AW-1:2]);
      l15_req.nc = 1'b0;
    end

    if (is_store)
      l15_req.rqtype = RQ_STORE;
    else if (pico_req.instr && !CACHE_INSTR)
      l15_req.rqtype = RQ_IFILL;
    else
      l15_req.rqtype = RQ_LOAD;

    l15_req.size = size;
    l15_req.addr = {word_pa, offset};
    l15_req.data = {bswap32(pico_req.wdata), bswap32(pico_req.wdata)};
  end

endmodule
