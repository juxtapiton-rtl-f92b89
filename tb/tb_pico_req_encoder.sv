// tb_pico_req_encoder: self-checking test of the request encoder.
//
// Drives random PicoRV32 requests (reads, instruction fetches, and stores of
// every strobe pattern the core produces, to memory and I/O addresses) and
// checks the L1.5 request field by field against values worked out here
// byte by byte: each written byte k of the core's little-endian word must sit
// in big-endian lane (addr[2]*4 + k) of the 64-bit bus, counting lanes from
// bit 63 down. A second instance checks instruction fetches with CACHE_INSTR
// off, and non-contiguous strobes must be flagged.
module tb_pico_req_encoder;
  import jxp_pkg::*;

  int checks = 0, failures = 0;

  pico_req_t req;
  l15_req_t  out, out_nc;
  logic      is_store, illegal, is_store2, illegal2;

  pico_req_encoder dut (.pico_req(req), .l15_req(out), .is_store(is_store), .illegal(illegal));
  pico_req_encoder #(.CACHE_INSTR(1'b0), .MEM_BASE(40'h00_8000_0000))
    dut2 (.pico_req(req), .l15_req(out_nc), .is_store(is_store2), .illegal(illegal2));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (addr=%h wstrb=%b instr=%0b)", what, req.addr, req.wstrb, req.instr);
    end
  endtask

  logic [3:0] strbs [8] = '{4'b0000, 4'b1111, 4'b0011, 4'b1100, 4'b0001, 4'b0010, 4'b0100, 4'b1000};

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int first, nbytes;
      logic [39:0] exp_pa;
      req.instr = 1'b0;
      req.addr  = $urandom();
      req.addr[1:0] = 2'b00;
      req.wdata = $urandom();
      req.wstrb = strbs[$urandom_range(0, 7)];
      if (req.wstrb == 4'b0000) req.instr = 1'($urandom_range(0, 1));
      #1;
      first = 0; nbytes = 0;
      for (int k = 3; k >= 0; k--) if (req.wstrb[k]) first = k;
      for (int k = 0; k < 4; k++) if (req.wstrb[k]) nbytes++;
      if (req.wstrb == 0) nbytes = 4;
      // address and cacheability
      if (req.addr[31]) exp_pa = {9'h1FF, req.addr[30:0]};
      else              exp_pa = {8'h00, req.addr};
      exp_pa[1:0] = first[1:0];
      check(out.addr == exp_pa, "physical address");
      check(out.nc == req.addr[31], "non-cacheable bit");
      check(out_nc.addr == (req.addr[31] ? exp_pa : exp_pa + 40'h00_8000_0000), "address with MEM_BASE");
      check(out.size == (nbytes == 1 ? SZ_1B : nbytes == 2 ? SZ_2B : SZ_4B), "size");
      check(!illegal, "legal strobe");
      if (req.wstrb != 0) begin
        check(out.rqtype == RQ_STORE && is_store, "store type");
        for (int k = 0; k < 4; k++) if (req.wstrb[k]) begin
          int lane;
          lane = req.addr[2] * 4 + k;
          check(out.data[63 - 8*lane -: 8] == req.wdata[8*k +: 8], "store byte lane");
        end
      end else begin
        check(out.rqtype == RQ_LOAD && !is_store, "read is a cacheable load");
        check(out_nc.rqtype == (req.instr ? RQ_IFILL : RQ_LOAD), "fetch type with CACHE_INSTR off");
      end
    end
    // illegal strobe patterns
    req.addr = 32'h100; req.instr = 0;
    for (int s = 0; s < 16; s++) begin
      bit legal;
      req.wstrb = 4'(s);
      legal = 0;
      foreach (strbs[j]) if (strbs[j] == 4'(s)) legal = 1;
      #1;
      check(illegal == !legal, "illegal strobe flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
