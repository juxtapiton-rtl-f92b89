// l15_model: behavioural model of a tile's L1.5 cache and the memory behind
// it, seen from the core side. Not synthesizable; for testbenches only.
//
// It accepts one request at a time on the valid/ack handshake (the ack can
// be withheld at random to create request stalls), keeps a tag array of an
// 8 KB direct-mapped cache of 16-byte lines only to decide hit or miss, and
// answers HIT_LAT cycles after acceptance on a hit and MISS_LAT cycles after
// on a miss or a non-cacheable access. Data lives in one sparse byte-addressed
// memory holding the big-endian byte order of the memory system: a load
// returns the aligned doubleword with the byte at offset 0 in bits 63:56.
// Non-cacheable stores to the UART address are collected as console output.
// Interrupts queued with send_interrupt() are delivered as RET_INT responses
// in cycles with no data response. The host_* functions are the host core's
// view of the same memory; a host write invalidates the line in the model's
// tags, as coherence would.
//
// Defaults: HIT_LAT 2 and MISS_LAT 98 make a core-visible access through the
// transducer (mem_valid held for latency + 2 cycles) take 4 and 100 cycles,
// the L1.5 hit and memory latencies reported for this system.
module l15_model
  import jxp_pkg::*;
#(
  parameter int unsigned HIT_LAT  = 2,
  parameter int unsigned MISS_LAT = 98,
  parameter logic [PA_W-1:0] UART_PA = 40'hFF_8000_1000
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_val,
  input  l15_req_t  req,
  output logic      req_ack,
  output logic      resp_val,
  output l15_resp_t resp,
  input  logic      resp_ack
);

  localparam int LINES = 8192 / 16;

  logic [7:0] mem [logic [PA_W-1:0]];
  logic              tag_v [LINES];
  logic [PA_W-1:13]  tag   [LINES];

  int unsigned stall_pct = 0;    // chance in percent that ack is withheld
  logic        stall_q;

  // statistics
  int unsigned n_hit, n_miss, n_nc, n_stall, n_int, n_load, n_store, n_ifill;
  string       uart_out = "";

  typedef struct { longint unsigned due; l15_resp_t r; } pend_t;
  pend_t     q[$];
  int_type_e int_q[$];
  longint unsigned cyc = 0;

  function automatic logic [7:0] rd8(input logic [PA_W-1:0] a);
    return mem.exists(a) ? mem[a] : 8'h00;
  endfunction

  function automatic void invalidate(input logic [PA_W-1:0] a);
    int idx = int'(a[12:4]);
    if (tag_v[idx] && tag[idx] == a[PA_W-1:13]) tag_v[idx] = 1'b0;
  endfunction

  // host core view: 32-bit little-endian word (what the loader's
  // endian-flipping macros produce) and plain bytes
  function automatic void host_write32_le(input logic [PA_W-1:0] a, input logic [31:0] v);
    for (int k = 0; k < 4; k++) begin mem[a + PA_W'(k)] = v[8*k +: 8]; invalidate(a + PA_W'(k)); end
  endfunction
  function automatic logic [31:0] host_read32_le(input logic [PA_W-1:0] a);
    logic [31:0] v;
    for (int k = 0; k < 4; k++) v[8*k +: 8] = rd8(a + PA_W'(k));
    return v;
  endfunction
  function automatic logic [7:0] host_read8(input logic [PA_W-1:0] a);
    return rd8(a);
  endfunction

  task automatic send_interrupt(input int_type_e t);
    int_q.push_back(t);
  endtask

  function automatic bit would_hit(input logic [PA_W-1:0] a);
    int idx = int'(a[12:4]);
    return tag_v[idx] && tag[idx] == a[PA_W-1:13];
  endfunction

  assign req_ack = req_val && !stall_q;

  initial for (int i = 0; i < LINES; i++) tag_v[i] = 1'b0;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_val <= 1'b0;
      resp     <= '0;
      stall_q  <= 1'b0;
      q.delete();
    end else begin
      cyc++;
      if (req_val && !req_ack) n_stall++;
      if (req_val && req_ack) begin
        pend_t p;
        int    idx;
        bit    hit;
        logic [PA_W-1:0] base;
        idx  = int'(req.addr[12:4]);
        hit  = !req.nc && req.rqtype != RQ_IFILL && would_hit(req.addr);
        if (req.nc) n_nc++; else if (hit) n_hit++; else n_miss++;
        if (!req.nc && req.rqtype != RQ_IFILL) begin
          tag_v[idx] = 1'b1;
          tag[idx]   = req.addr[PA_W-1:13];
        end
        p.due = cyc - 1 + (hit ? longint'(HIT_LAT) : longint'(MISS_LAT));
        base  = {req.addr[PA_W-1:3], 3'b000};
        if (req.rqtype == RQ_STORE) begin
          int n;
          n_store++;
          n = (req.size == SZ_1B) ? 1 : (req.size == SZ_2B) ? 2 : (req.size == SZ_4B) ? 4 : 8;
          for (int i = 0; i < n; i++) begin
            automatic int lane = int'(req.addr[2:0]) + i;
            mem[base + PA_W'(lane)] = req.data[63 - 8*lane -: 8];
          end
          if (req.nc && req.addr == UART_PA) uart_out = {uart_out, string'(req.data[63 - 8*int'(req.addr[2:0]) -: 8])};
          p.r.rettype = RET_ST_ACK;
          p.r.data    = '0;
        end else begin
          if (req.rqtype == RQ_IFILL) n_ifill++; else n_load++;
          p.r.rettype = (req.rqtype == RQ_IFILL) ? RET_IFILL : RET_LOAD;
          for (int o = 0; o < 8; o++) p.r.data[63 - 8*o -: 8] = rd8(base + PA_W'(o));
        end
        q.push_back(p);
      end
      if (q.size() > 0 && q[0].due <= cyc) begin
        resp_val <= 1'b1;
        resp     <= q[0].r;
        void'(q.pop_front());
      end else if (int_q.size() > 0) begin
        resp_val     <= 1'b1;
        resp.rettype <= RET_INT;
        resp.data    <= {62'd0, int_q.pop_front()};
        n_int++;
      end else begin
        resp_val <= 1'b0;
      end
      stall_q <= ($urandom_range(0, 99) < stall_pct);
    end
  end

  // The transducer accepts every response in the cycle it is offered.
  a_resp_taken: assert property (@(posedge clk) disable iff (!rst_n) resp_val |-> resp_ack);

endmodule
