// tb_pico_l15_transducer: self-checking test of the PicoRV32-to-L1.5
// transducer against the behavioural L1.5 model.
//
// A bus-functional driver plays the PicoRV32 memory interface. The test
//   1. holds mem_valid high while the core is still in reset and checks that
//      nothing reaches the L1.5,
//   2. sends the start interrupt through the L1.5 and checks the release,
//   3. measures valid-to-ready latency: 4 cycles on an L1.5 hit and 100 on a
//      miss with the model's default latencies,
//   4. checks that instruction fetches go out as cacheable loads and then
//      hit in the L1.5,
//   5. runs random byte, halfword and word stores and word loads with
//      request stalls, against a little-endian reference memory, and checks
//      the byte order in the model's memory directly,
//   6. checks an uncached store to the UART address and an ordinary
//      interrupt, which must not disturb the running core.
module tb_pico_l15_transducer;
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

  pico_l15_transducer dut (
    .clk, .rst_n, .pico_resetn, .mem_valid, .mem_instr, .mem_addr, .mem_wdata, .mem_wstrb,
    .mem_ready, .mem_rdata, .l15_req_val, .l15_req, .l15_req_ack, .l15_resp_val, .l15_resp,
    .l15_resp_ack, .irq_val, .irq_type, .req_illegal, .start_count);

  l15_model l15 (.clk, .rst_n, .req_val(l15_req_val), .req(l15_req), .req_ack(l15_req_ack),
    .resp_val(l15_resp_val), .resp(l15_resp), .resp_ack(l15_resp_ack));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // one core access; returns read data and the valid-to-ready cycle count
  task automatic access(input logic instr, input logic [31:0] addr, input logic [3:0] strb,
                        input logic [31:0] wdata, output logic [31:0] rdata, output int cycles);
    @(negedge clk);
    mem_valid = 1; mem_instr = instr; mem_addr = {addr[31:2], 2'b00}; mem_wstrb = strb; mem_wdata = wdata;
    cycles = 0;
    do begin @(posedge clk); cycles++; end while (!mem_ready);
    rdata = mem_rdata;
    #1 mem_valid = 0; mem_wstrb = 0;
  endtask

  // reference memory, little-endian bytes
  logic [7:0] ref_mem [logic [31:0]];
  function automatic logic [31:0] ref_word(input logic [31:0] a);
    logic [31:0] v;
    for (int k = 0; k < 4; k++) v[8*k +: 8] = ref_mem.exists(a + k) ? ref_mem[a + k] : 8'h00;
    return v;
  endfunction

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seen_req_in_reset = 0, n_irq = 0;
  always @(posedge clk) begin
    if (rst_n && !pico_resetn && l15_req_val) seen_req_in_reset++;
    if (irq_val) n_irq++;
  end

  initial begin
    logic [31:0] rd;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. a request while in reset must not reach the L1.5
    @(negedge clk); mem_valid = 1; mem_addr = 32'h40;
    repeat (20) @(posedge clk);
    check(seen_req_in_reset == 0 && !mem_ready, "no request while core in reset");
    @(negedge clk); mem_valid = 0;

    // 2. start interrupt
    check(!pico_resetn, "core held in reset before start");
    l15.send_interrupt(INT_START);
    cyc = 0;
    while (!pico_resetn && cyc < 20) begin @(posedge clk); cyc++; end
    check(pico_resetn, "core released by start interrupt");
    check(start_count == 1, "start interrupt counted");

    // 3. latency: miss, then hit on the same line
    l15.host_write32_le(40'h100, 32'hDEAD_BEEF);
    access(0, 32'h100, 4'b0000, 0, rd, cyc);
    check(rd == 32'hDEAD_BEEF, "load sees host little-endian word");
    check(cyc == 100, $sformatf("miss latency 100 cycles (got %0d)", cyc));
    access(0, 32'h104, 4'b0000, 0, rd, cyc);
    check(cyc == 4, $sformatf("hit latency 4 cycles (got %0d)", cyc));
    access(0, 32'h108, 4'b1111, 32'h0102_0304, rd, cyc);
    check(cyc == 4, $sformatf("store hit latency 4 cycles (got %0d)", cyc));
    check(l15.host_read8(40'h108) == 8'h04 && l15.host_read8(40'h10B) == 8'h01,
          "store kept little-endian in memory");

    // 4. instruction fetches are cached in the L1.5
    begin
      automatic int loads0 = l15.n_load, ifill0 = l15.n_ifill;
      l15.host_write32_le(40'h2000, 32'h0000_0013);
      access(1, 32'h2000, 4'b0000, 0, rd, cyc);
      check(rd == 32'h0000_0013 && cyc == 100, "first fetch misses");
      access(1, 32'h2004, 4'b0000, 0, rd, cyc);
      check(cyc == 4, "second fetch to the line hits in L1.5");
      check(l15.n_load == loads0 + 2 && l15.n_ifill == ifill0, "fetches issued as cacheable loads");
    end

    // 5. random stores and loads with request stalls
    for (int a = 0; a < 32'h1000; a++) ref_mem[32'(a)] = l15.host_read8(40'(a));
    l15.stall_pct = 30;
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] a, d;
      logic [3:0]  s;
      automatic int kind = $urandom_range(0, 3);
      a = 32'($urandom_range(0, 1023)) << 2;
      d = $urandom();
      if (kind == 0) begin
        access(0, a, 4'b0000, 0, rd, cyc);
        check(rd == ref_word(a), $sformatf("load %h = %h expected %h", a, rd, ref_word(a)));
      end else begin
        if (kind == 1) s = 4'b1111;
        else if (kind == 2) begin s = ($urandom_range(0, 1) == 1) ? 4'b1100 : 4'b0011; d = {d[15:0], d[15:0]}; end
        else begin s = 4'b0001 << $urandom_range(0, 3); d = {4{d[7:0]}}; end
        access(0, a, s, d, rd, cyc);
        for (int k = 0; k < 4; k++) if (s[k]) ref_mem[a + k] = d[8*k +: 8];
      end
    end
    l15.stall_pct = 0;
    repeat (2) @(posedge clk);
    for (logic [31:0] a = 0; a < 32'h1000; a += 4) begin
      check(l15.host_read32_le(40'(a)) == ref_word(a), "memory image little-endian");
    end
    check(l15.n_stall > 100, "request stalls exercised");

    // 6. uncached I/O store and an ordinary interrupt
    access(0, 32'h8000_1000, 4'b0001, 32'h4141_4141, rd, cyc);
    check(l15.uart_out == "A", "uncached UART store");
    check(cyc == 100, "uncached access takes memory latency");
    l15.send_interrupt(INT_HW);
    repeat (5) @(posedge clk);
    check(n_irq == 2 && pico_resetn, "ordinary interrupt passed out, core keeps running");
    access(0, 32'h100, 4'b0000, 0, rd, cyc);
    check(rd == ref_word(32'h100), "still works after interrupt");

    $display("L1.5 model: hits=%0d misses=%0d nc=%0d stalls=%0d", l15.n_hit, l15.n_miss, l15.n_nc, l15.n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
