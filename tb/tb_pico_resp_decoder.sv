// tb_pico_resp_decoder: self-checking test of the response decoder.
//
// Applies random L1.5 responses of every return type and checks the
// classification, the start-interrupt detection and the returned word. The
// expected word is assembled byte by byte: byte k of the core's little-endian
// word is the memory byte at offset (addr_hi_word*4 + k) of the big-endian
// doubleword, i.e. bits 63-8*offset down.
module tb_pico_resp_decoder;
  import jxp_pkg::*;

  int checks = 0, failures = 0;

  logic        val, hi;
  l15_resp_t   resp;
  logic        is_data, is_st_ack, is_int, is_start;
  int_type_e   int_type;
  logic [31:0] rdata;

  pico_resp_decoder dut (.resp_val(val), .resp(resp), .addr_hi_word(hi),
    .is_data(is_data), .is_st_ack(is_st_ack), .is_int(is_int), .is_start(is_start),
    .int_type(int_type), .rdata(rdata));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (type=%b data=%h hi=%b)", what, resp.rettype, resp.data, hi); end
  endtask

  l15_rettype_e types [4] = '{RET_LOAD, RET_IFILL, RET_ST_ACK, RET_INT};

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] exp;
      val  = ($urandom_range(0, 7) != 0);
      hi   = 1'($urandom_range(0, 1));
      resp.rettype = types[$urandom_range(0, 3)];
      resp.data    = {$urandom(), $urandom()};
      #1;
      for (int k = 0; k < 4; k++) exp[8*k +: 8] = resp.data[63 - 8*(hi*4 + k) -: 8];
      check(is_data == (val && (resp.rettype == RET_LOAD || resp.rettype == RET_IFILL)), "is_data");
      check(is_st_ack == (val && resp.rettype == RET_ST_ACK), "is_st_ack");
      check(is_int == (val && resp.rettype == RET_INT), "is_int");
      check(is_start == (val && resp.rettype == RET_INT && resp.data[1:0] == 2'b01), "is_start");
      check(int_type == int_type_e'(resp.data[1:0]), "int_type");
      check(rdata == exp, "little-endian word");
    end
    // a known word: memory bytes 00 11 22 33 44 55 66 77 at offsets 0..7
    resp.data = 64'h0011_2233_4455_6677; resp.rettype = RET_LOAD; val = 1;
    hi = 0; #1; check(rdata == 32'h3322_1100, "known low word");
    hi = 1; #1; check(rdata == 32'h7766_5544, "known high word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
