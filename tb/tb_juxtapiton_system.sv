// tb_juxtapiton_system: end-to-end test of a PicoRV32 tile's core side.
//
// An RV32I core model sits on the transducer (default parameters), which
// talks to a behavioural L1.5 cache and memory. The testbench also plays the
// host SPARC core: for each program it holds the RISC-V core in reset, loads
// the binary and its input data into memory little-endian, sends the start
// interrupt through the L1.5, and then serves the program's system calls
// through a mailbox in shared memory (write to the console, exit), as the
// host-side proxy does. Programs (built from small C/assembly sources for
// RV32I, one little-endian word per line in tb/prog_*.hex):
//   memlat     rdcycle; load/store; rdcycle on a warm L1.5 line and on fresh
//              lines: expects 17 and 113 cycles, plus byte-order checks
//   hanoi      Towers of Hanoi of height 7: 127 moves
//   quicksort  sorts 100 shuffled 32-bit integers
//   binsearch  looks up 10 keys in a sorted array of 10,000 32-bit integers
// Every mechanism is counted and must occur: core held in reset, release by
// the start interrupt, instruction fetches cached in the L1.5, L1.5 hits and
// misses, byte/halfword/word stores, uncached UART stores, request stalls,
// an ordinary interrupt, and proxied system calls.
module tb_juxtapiton_system;
  import jxp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        pico_resetn, mem_valid, mem_instr, mem_ready, trap;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic [3:0]  mem_wstrb;
  logic        l15_req_val, l15_req_ack, l15_resp_val, l15_resp_ack;
  l15_req_t    l15_req;
  l15_resp_t   l15_resp;
  logic        irq_val, req_illegal;
  int_type_e   irq_type;
  logic [7:0]  start_count;

  rv32i_core_model core (.clk, .resetn(pico_resetn), .mem_valid, .mem_instr, .mem_addr,
    .mem_wdata, .mem_wstrb, .mem_ready, .mem_rdata, .trap);

  pico_l15_transducer dut (
    .clk, .rst_n, .pico_resetn, .mem_valid, .mem_instr, .mem_addr, .mem_wdata, .mem_wstrb,
    .mem_ready, .mem_rdata, .l15_req_val, .l15_req, .l15_req_ack, .l15_resp_val, .l15_resp,
    .l15_resp_ack, .irq_val, .irq_type, .req_illegal, .start_count);

  l15_model l15 (.clk, .rst_n, .req_val(l15_req_val), .req(l15_req), .req_ack(l15_req_ack),
    .resp_val(l15_resp_val), .resp(l15_resp), .resp_ack(l15_resp_ack));

  localparam logic [39:0] MBOX = 40'hF000, INPUT = 40'h10000, RESULT = 40'hE000;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // mechanism counters
  int n_start = 0, n_irq = 0, n_req_in_reset = 0, n_fetch_load = 0, n_fetch_ifill = 0;
  int n_syscall = 0, n_sb = 0, n_sh = 0, n_sw = 0, n_nc = 0, n_reset_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (!pico_resetn) n_reset_cycles++;
    if (!pico_resetn && l15_req_val) n_req_in_reset++;
    if (irq_val && irq_type == INT_START) n_start++;
    if (irq_val) n_irq++;
    if (l15_req_val && l15_req_ack) begin
      if (mem_instr && l15_req.rqtype == RQ_LOAD)  n_fetch_load++;
      if (mem_instr && l15_req.rqtype == RQ_IFILL) n_fetch_ifill++;
      if (l15_req.rqtype == RQ_STORE && l15_req.size == SZ_1B) n_sb++;
      if (l15_req.rqtype == RQ_STORE && l15_req.size == SZ_2B) n_sh++;
      if (l15_req.rqtype == RQ_STORE && l15_req.size == SZ_4B) n_sw++;
      if (l15_req.nc) n_nc++;
    end
  end

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] prog [1024];
  string console;
  int    exit_code;

  // host: load a program image at address 0
  task automatic load_program(input string name);
    foreach (prog[i]) prog[i] = 32'h0;
    case (name)
      "memlat":    $readmemh("tb/prog_memlat.hex", prog);
      "hanoi":     $readmemh("tb/prog_hanoi.hex", prog);
      "quicksort": $readmemh("tb/prog_quicksort.hex", prog);
      "binsearch": $readmemh("tb/prog_binsearch.hex", prog);
      default: ;
    endcase
    foreach (prog[i]) l15.host_write32_le(40'(4 * i), prog[i]);
  endtask

  // host: run the loaded program to its exit system call
  task automatic run_program(input int max_cycles, input bit send_hw_irq);
    automatic int cyc = 0;
    automatic bit done = 0;
    console = "";
    l15.uart_out = "";
    l15.host_write32_le(MBOX, 0);
    l15.host_write32_le(MBOX + 20, 0);
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (50) @(posedge clk);
    check(!pico_resetn, "core waits in reset while the host loads it");
    l15.send_interrupt(INT_START);
    while (!done && cyc < max_cycles) begin
      logic [31:0] n;
      @(posedge clk); cyc++;
      if (send_hw_irq && cyc == 1000) l15.send_interrupt(INT_HW);
      if (cyc % 16 == 0) begin
        n = l15.host_read32_le(MBOX);
        if (n != 0) begin
          logic [31:0] a0, a1, a2, res;
          a0 = l15.host_read32_le(MBOX + 4);
          a1 = l15.host_read32_le(MBOX + 8);
          a2 = l15.host_read32_le(MBOX + 12);
          n_syscall++;
          res = 0;
          if (n == 64) begin
            for (int i = 0; i < int'(a2); i++) console = {console, string'(l15.host_read8(40'(a1) + 40'(32'(i))))};
            res = a2;
          end else if (n == 93) begin
            exit_code = int'(a0);
            done = 1;
          end
          l15.host_write32_le(MBOX, 0);
          l15.host_write32_le(MBOX + 16, res);
          l15.host_write32_le(MBOX + 20, 1);
        end
      end
      if (trap) begin
        $display("core trapped at pc %h", core.pc);
        break;
      end
    end
    check(done, $sformatf("program exited (cycles %0d)", cyc));
    check(!trap, "no trap");
    $display("  program took %0d cycles, exit code %0d, uart \"%s\"", cyc, exit_code, l15.uart_out);
  endtask

  initial begin
    logic [31:0] keys [10];
    logic [31:0] vals [100];
    longint unsigned sum_in;
    repeat (3) @(posedge clk);

    // ---- memlat: Table 3 measurements and byte order ----
    $display("memlat");
    load_program("memlat");
    run_program(20000, 0);
    begin
      logic [31:0] r0, r1, r2, r3;
      r0 = l15.host_read32_le(40'hE800); r1 = l15.host_read32_le(40'hE804);
      r2 = l15.host_read32_le(40'hE808); r3 = l15.host_read32_le(40'hE80C);
      $display("  cached load %0d, cached store %0d, uncached load %0d, uncached store %0d", r0, r1, r2, r3);
      check(r0 == 17, "cached load measures 17 cycles");
      check(r1 == 17, "cached store measures 17 cycles");
      check(r2 == 113, "uncached load measures 113 cycles");
      check(r3 == 113, "uncached store measures 113 cycles");
      check(l15.host_read32_le(40'h3100) == 32'h1122_3344, "sw stored little-endian");
      check(l15.host_read8(40'h3100) == 8'h44 && l15.host_read8(40'h3103) == 8'h11, "byte 0 is least significant");
      check(l15.host_read8(40'h3104) == 8'hBB && l15.host_read8(40'h3105) == 8'hAA, "sh stored little-endian");
      check(l15.host_read8(40'h3107) == 8'hCC, "sb stored");
      check(l15.host_read32_le(40'hE810) == 32'h33, "lbu reads byte 1");
      check(l15.host_read32_le(40'hE814) == 32'hFFFF_AABB, "lh sign-extends");
      check(l15.host_read32_le(40'hE818) == 32'hFFFF_FFCC, "lb sign-extends");
    end

    // ---- hanoi, height 7 ----
    $display("hanoi");
    load_program("hanoi");
    l15.host_write32_le(INPUT, 7);
    run_program(1_000_000, 1);
    check(exit_code == 127, $sformatf("hanoi makes 2^7-1 moves (got %0d)", exit_code));
    check(l15.host_read32_le(RESULT) == 0 && l15.host_read32_le(RESULT + 4) == 0 &&
          l15.host_read32_le(RESULT + 8) == 7, "all disks on the last peg");
    check(console == "done\n", "console output through the proxy");
    check(l15.uart_out == "hanoi\n", "UART output through uncached stores");

    // ---- quicksort of 100 integers, with request stalls ----
    $display("quicksort");
    l15.stall_pct = 20;
    load_program("quicksort");
    sum_in = 0;
    l15.host_write32_le(INPUT, 100);
    for (int i = 0; i < 100; i++) begin
      vals[i] = $urandom() & 32'h7FFF_FFFF;
      sum_in += 64'(vals[i]);
      l15.host_write32_le(INPUT + 40'(4 * (i + 1)), vals[i]);
    end
    run_program(2_000_000, 0);
    check(exit_code == 0, "program's own sortedness check");
    begin
      automatic longint unsigned sum_out = 0;
      automatic bit sorted = 1;
      automatic logic [31:0] prev = 0;
      for (int i = 0; i < 100; i++) begin
        automatic logic [31:0] v = l15.host_read32_le(INPUT + 40'(4 * (i + 1)));
        if (i > 0 && $signed(v) < $signed(prev)) sorted = 0;
        sum_out += 64'(v);
        prev = v;
      end
      check(sorted, "array sorted in memory");
      check(sum_out == sum_in, "same elements");
    end

    // ---- binsearch: 10 keys in 10,000 integers ----
    $display("binsearch");
    load_program("binsearch");
    l15.host_write32_le(INPUT, 10000);
    l15.host_write32_le(INPUT + 4, 10);
    for (int i = 0; i < 10000; i++) l15.host_write32_le(INPUT + 40'(4 * (64 + i)), 32'(3 * i + 1));
    for (int q = 0; q < 10; q++) begin
      keys[q] = $urandom_range(0, 30000);
      l15.host_write32_le(INPUT + 40'(4 * (2 + q)), keys[q]);
    end
    run_program(2_000_000, 0);
    begin
      automatic int found = 0;
      for (int q = 0; q < 10; q++) begin
        automatic int exp_idx = (keys[q] % 3 == 1) ? int'((keys[q] - 1) / 3) : -1;
        if (exp_idx >= 0) found++;
        check(int'(l15.host_read32_le(RESULT + 40'(4 * q))) == exp_idx, $sformatf("key %0d index", keys[q]));
      end
      check(exit_code == found, "number of keys found");
    end
    l15.stall_pct = 0;

    // ---- every mechanism happened ----
    $display("mechanisms: reset-wait cycles %0d, start interrupts %0d, other interrupts %0d, fetches as loads %0d,",
             n_reset_cycles, n_start, n_irq - n_start, n_fetch_load);
    $display("  L1.5 hits %0d, misses %0d, uncached %0d, stalls %0d, sb %0d, sh %0d, sw %0d, syscalls %0d",
             l15.n_hit, l15.n_miss, n_nc, l15.n_stall, n_sb, n_sh, n_sw, n_syscall);
    check(n_reset_cycles > 0 && n_req_in_reset == 0, "core held in reset, nothing issued");
    check(n_start == 4 && start_count == 1, "start interrupt released the core for each program");
    check(n_irq - n_start == 1, "ordinary interrupt delivered");
    check(n_fetch_load > 0 && n_fetch_ifill == 0, "instruction fetches cached in the L1.5");
    check(l15.n_hit > 0 && l15.n_miss > 0, "L1.5 hits and misses");
    check(n_nc > 0, "uncached I/O accesses");
    check(l15.n_stall > 0, "request stalls");
    check(n_sb > 0 && n_sh > 0 && n_sw > 0, "byte, halfword and word stores");
    check(n_syscall >= 5, "proxied system calls");
    check(!req_illegal, "no illegal request");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
