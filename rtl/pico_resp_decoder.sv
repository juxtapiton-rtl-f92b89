// pico_resp_decoder: interprets one L1.5 response for the PicoRV32 core.
//
// Purely combinational. It sorts a valid response into load data (a load
// return, or an instruction-fill return), a store acknowledge, or an
// interrupt. For data it takes the 32-bit half of the big-endian 64-bit
// doubleword that address bit 2 of the outstanding request selects and flips
// its byte order, so the core sees the word little-endian, as the paper's
// flipped incoming data bus does. For an interrupt it reports the interrupt
// type held in data bits 1:0 and whether it is the start interrupt.
//
// Interface: resp_val/resp is the L1.5 response; addr_hi_word is bit 2 of
// the byte address of the request the response answers. The doubleword
// layout and the position of the interrupt type are this design's choices.
module pico_resp_decoder
  import jxp_pkg::*;
(
  input  logic        resp_val,
  input  l15_resp_t   resp,
  input  logic        addr_hi_word,
  output logic        is_data,
  output logic        is_st_ack,
  output logic        is_int,
  output logic        is_start,
  output int_type_e   int_type,
  output logic [31:0] rdata
);

  always_comb begin
    is_data   = resp_val && (resp.rettype == RET_LOAD || resp.rettype == RET_IFILL);
    is_st_ack = resp_val && (resp.rettype == RET_ST_ACK);
    is_int    = resp_val && (resp.rettype == RET_INT);
    int_type  = int_type_e'(resp.data[1:0]);
    is_start  = is_int && (int_type == INT_START);
    rdata     = bswap32(addr_hi_word ? resp.data[31:0] : resp.data[63:32]);
  end

endmodule
