// pico_l15_transducer: connects a PicoRV32 core to a tile's L1.5 cache.
//
// This is the glue that turns an OpenPiton-style tile into a PicoRV32 tile.
// The core has no caches, so every instruction fetch, load and store becomes
// one L1.5 operation. The transducer
//   * encodes the core request (pico_req_encoder): type, size, address and
//     byte-flipped store data,
//   * holds l15_req_val until the L1.5 accepts it with l15_req_ack,
//   * waits for the matching response: load data for a read, a store
//     acknowledge for a write,
//   * decodes the response (pico_resp_decoder), flips the data to
//     little-endian and returns it with a one-cycle mem_ready pulse,
//   * accepts interrupts that arrive through the L1.5 at any time and
//     releases the core from reset on the start interrupt (pico_reset_ctrl);
//     every interrupt is also passed out on irq_val/irq_type for the core.
// One request is outstanding at a time, as the core issues one at a time.
//
// Core side (PicoRV32 native memory interface): the core raises mem_valid
// with mem_instr/mem_addr/mem_wdata/mem_wstrb and holds them until the
// cycle mem_ready is high. mem_wstrb == 0 is a read.
// L1.5 side: l15_req_val/l15_req/l15_req_ack is a valid/ack handshake;
// l15_resp_val/l15_resp is accepted in the cycle it is valid (l15_resp_ack
// follows l15_resp_val).
//
// Timing: the request is presented combinationally in the first cycle of
// mem_valid. If the L1.5 acknowledges in that cycle and its response is valid
// L cycles later, mem_ready is high in the (L+2)th cycle of mem_valid: an
// access holds mem_valid for L+2 cycles, one more than the L1.5 takes, as
// mem_ready and mem_rdata come from registers. The transducer then spends
// one cycle before it takes the next request.
//
// What follows the paper: the core sits behind the L1.5, data buses are
// flipped so the core's data is stored little-endian, instruction fetches
// are cached in the L1.5 (CACHE_INSTR = 1), both reads and writes go to the
// L1.5, stores wait for the L1.5, and the core leaves reset on an interrupt
// from the SPARC core. The handshakes, encodings and address map are this
// design's own.
//
// Lint note: rst_n is used both as the asynchronous reset of the registers and
// as the disable condition of the handshake assertions below, which Verilator
// reports as SYNCASYNCNET. That is intended; the assertions are not logic.
module pico_l15_transducer
  import jxp_pkg::*;
#(
  parameter bit                     CACHE_INSTR = 1'b1,
  parameter logic [PA_W-1:0]        MEM_BASE    = '0,
  parameter logic [PA_W-PICO_AW:0]  IO_PREFIX   = '1
) (
  input  logic               clk,
  input  logic               rst_n,

  // PicoRV32 core
  output logic               pico_resetn,
  input  logic               mem_valid,
  input  logic               mem_instr,
  input  logic [PICO_AW-1:0] mem_addr,
  input  logic [PICO_DW-1:0] mem_wdata,
  input  logic [3:0]         mem_wstrb,
  output logic               mem_ready,
  output logic [PICO_DW-1:0] mem_rdata,

  // L1.5 cache, core side
  output logic               l15_req_val,
  output l15_req_t           l15_req,
  input  logic               l15_req_ack,
  input  logic               l15_resp_val,
  input  l15_resp_t          l15_resp,
  output logic               l15_resp_ack,

  // interrupts delivered through the L1.5, for the core's IRQ lines
  output logic               irq_val,
  output int_type_e          irq_type,

  // status
  output logic               req_illegal,
  output logic [7:0]         start_count
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_DONE} state_e;
  state_e state_q;

  pico_req_t  preq;
  logic       enc_is_store;
  logic       pend_store_q;
  logic       pend_hi_q;

  logic        dec_is_data, dec_is_st_ack, dec_is_int, dec_is_start;
  int_type_e   dec_int_type;
  logic [31:0] dec_rdata;

  assign preq = '{instr: mem_instr, addr: mem_addr, wdata: mem_wdata, wstrb: mem_wstrb};

  pico_req_encoder #(
    .CACHE_INSTR (CACHE_INSTR),
    .MEM_BASE    (MEM_BASE),
    .IO_PREFIX   (IO_PREFIX)
  ) u_enc (
    .pico_req (preq),
    .l15_req  (l15_req),
    .is_store (enc_is_store),
    .illegal  (req_illegal)
  );

  pico_resp_decoder u_dec (
    .resp_val     (l15_resp_val),
    .resp         (l15_resp),
    .addr_hi_word (pend_hi_q),
    .is_data      (dec_is_data),
    .is_st_ack    (dec_is_st_ack),
    .is_int       (dec_is_int),
    .is_start     (dec_is_start),
    .int_type     (dec_int_type),
    .rdata        (dec_rdata)
  );

  pico_reset_ctrl #(.CNT_W(8)) u_rst (
    .clk         (clk),
    .rst_n       (rst_n),
    .start_int   (dec_is_start),
    .core_resetn (pico_resetn),
    .start_count (start_count)
  );

  assign l15_req_val  = (state_q == S_IDLE) && mem_valid && pico_resetn;
  assign l15_resp_ack = l15_resp_val;
  assign irq_val      = dec_is_int;
  assign irq_type     = dec_int_type;

  logic resp_match;
  assign resp_match = (state_q == S_WAIT) &&
                      (pend_store_q ? dec_is_st_ack : dec_is_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      pend_store_q <= 1'b0;
      pend_hi_q    <= 1'b0;
      mem_ready    <= 1'b0;
      mem_rdata    <= '0;
    end else begin
      mem_ready <= 1'b0;
      unique case (state_q)
        S_IDLE: if (l15_req_val && l15_req_ack) begin
          pend_store_q <= enc_is_store;
          pend_hi_q    <= mem_addr[2];
          state_q      <= S_WAIT;
        end
        S_WAIT: if (resp_match) begin
          mem_ready <= 1'b1;
          mem_rdata <= pend_store_q ? '0 : dec_rdata;
          state_q   <= S_DONE;
        end
        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Handshake rules
  // A running core holds its request until mem_ready.
  a_core_hold: assert property (@(posedge clk) disable iff (!rst_n)
    pico_resetn && mem_valid && !mem_ready |=> mem_valid && $stable(mem_addr) && $stable(mem_wstrb));
  // A request stays on the L1.5 bus, unchanged, until acknowledged.
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    l15_req_val && !l15_req_ack |=> l15_req_val && $stable(l15_req));
  // Only the strobe patterns PicoRV32 produces.
  a_legal_strb: assert property (@(posedge clk) disable iff (!rst_n)
    l15_req_val |-> !req_illegal);
  // Data and store acknowledges only answer an outstanding request.
  a_no_stray_resp: assert property (@(posedge clk) disable iff (!rst_n)
    (dec_is_data || dec_is_st_ack) |-> state_q == S_WAIT);

endmodule
