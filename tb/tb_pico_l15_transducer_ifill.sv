// tb_pico_l15_transducer_ifill: the transducer with CACHE_INSTR = 0, and
// instruction fetches from I/O space.
//
// With CACHE_INSTR = 0 the transducer sends fetches as instruction fills, the
// way a SPARC core's fetches reach the memory system: they must appear as
// RQ_IFILL, never allocate in the L1.5 (every fetch takes the 100-cycle
// memory latency, even to the same line), and return the right word, while
// data loads are still cached. A fetch from an I/O address (core address bit
// 31 set, as when running code straight from the SD card) must go out
// non-cacheable with the I/O physical address.
module tb_pico_l15_transducer_ifill;
  import jxp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        pico_resetn, mem_valid = 0, mem_instr = 0, mem_ready;
  logic [31:0] mem_addr = 0, mem_wdata = 0, mem_rdata;
  logic [3:0]  mem_wstrb = 0;
  logic        l15_req_val, l15_req_ack, l15_resp_val, l15_resp_ack;
  l15_req_t    l15_req;
  l15_resp_t   l15_resp;
  logic        irq_val, req_illegal;
  int_type_e   irq_type;
  logic [7:0]  start_count;

  pico_l15_transducer #(.CACHE_INSTR(1'b0)) dut (
    .clk, .rst_n, .pico_resetn, .mem_valid, .mem_instr, .mem_addr, .mem_wdata, .mem_wstrb,
    .mem_ready, .mem_rdata, .l15_req_val, .l15_req, .l15_req_ack, .l15_resp_val, .l15_resp,
    .l15_resp_ack, .irq_val, .irq_type, .req_illegal, .start_count);

  l15_model l15 (.clk, .rst_n, .req_val(l15_req_val), .req(l15_req), .req_ack(l15_req_ack),
    .resp_val(l15_resp_val), .resp(l15_resp), .resp_ack(l15_resp_ack));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  l15_req_t last_req;
  always @(posedge clk) if (l15_req_val && l15_req_ack) last_req <= l15_req;

  task automatic access(input logic instr, input logic [31:0] addr,
                        output logic [31:0] rdata, output int cycles);
    @(negedge clk);
    mem_valid = 1; mem_instr = instr; mem_addr = addr; mem_wstrb = 0;
    cycles = 0;
    do begin @(posedge clk); cycles++; end while (!mem_ready);
    rdata = mem_rdata;
    #1 mem_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    l15.send_interrupt(INT_START);
    repeat (5) @(posedge clk);
    check(pico_resetn, "started");

    for (int i = 0; i < 16; i++) l15.host_write32_le(40'(32'h400 + 4 * i), 32'hA000_0000 + 32'(i));
    for (int rep = 0; rep < 2; rep++)
      for (int i = 0; i < 4; i++) begin
        access(1, 32'h400 + 4 * i, rd, cyc);
        check(rd == 32'hA000_0000 + 32'(i), "fetched word");
        check(last_req.rqtype == RQ_IFILL && !last_req.nc, "fetch sent as instruction fill");
        check(cyc == 100, $sformatf("fill not cached in the L1.5 (%0d cycles)", cyc));
      end
    check(l15.n_ifill == 8 && l15.n_hit == 0, "no fill allocated");

    access(0, 32'h400, rd, cyc);
    check(last_req.rqtype == RQ_LOAD && cyc == 100, "data load misses first");
    access(0, 32'h404, rd, cyc);
    check(rd == 32'hA000_0001 && cyc == 4, "data load then hits");

    // fetch from I/O space
    l15.host_write32_le(40'hFF_8000_2000, 32'h0000_0013);
    access(1, 32'h8000_2000, rd, cyc);
    check(rd == 32'h0000_0013, "I/O fetch data");
    check(last_req.nc && last_req.addr == 40'hFF_8000_2000, "I/O fetch is non-cacheable at the I/O address");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
