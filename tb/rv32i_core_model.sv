// rv32i_core_model: behavioural model of a small multicycle RV32I core with
// the PicoRV32 native memory interface. Not synthesizable; testbench only.
//
// It executes the whole RV32I base set plus the rdcycle/rdcycleh/rdinstret
// counter reads, one instruction at a time: fetch (mem_instr high), a number
// of internal cycles, and for loads and stores one data access. Sub-word
// stores replicate the data across the word and set the matching byte
// strobes; addresses on the bus are word-aligned. ecall, ebreak, an illegal
// instruction or a misaligned access stop the core and raise `trap`.
//
// Cycle counts per instruction with a one-cycle memory: 3 for ALU, upper
// immediate, jal and untaken branches, 4 for shifts, 5 for loads, stores and
// taken branches, 6 for jalr. Loads and stores taking 5 cycles matches the
// core being modelled; the other counts are this model's choice after the
// same core's documentation. With a slower memory every access adds its
// extra cycles. The cycle counter starts at 0 when reset is released and is
// read at the end of an instruction.
module rv32i_core_model #(
  parameter logic [31:0] RESET_PC = 32'h0
) (
  input  logic        clk,
  input  logic        resetn,
  output logic        mem_valid,
  output logic        mem_instr,
  output logic [31:0] mem_addr,
  output logic [31:0] mem_wdata,
  output logic [3:0]  mem_wstrb,
  input  logic        mem_ready,
  input  logic [31:0] mem_rdata,
  output logic        trap
);

  logic [31:0] x [32];
  logic [31:0] pc;
  longint unsigned cycle_cnt = 0, instret = 0;
  int unsigned n_fetch = 0, n_load = 0, n_store = 0, n_sb = 0, n_sh = 0, n_sw = 0;

  always @(posedge clk) begin
    if (!resetn) cycle_cnt <= 0;
    else         cycle_cnt <= cycle_cnt + 1;
  end

  initial begin
    mem_valid = 0; mem_instr = 0; mem_addr = 0; mem_wdata = 0; mem_wstrb = 0; trap = 0;
  end

  // One bus access. Signals change 1 ns after a clock edge; mem_ready is
  // sampled at the falling edge; the task returns 1 ns after the rising edge
  // that completes the access.
  task automatic bus(input logic instr, input logic [31:0] addr, input logic [31:0] wdata,
                     input logic [3:0] strb, output logic [31:0] rdata);
    mem_valid = 1'b1;
    mem_instr = instr;
    mem_addr  = {addr[31:2], 2'b00};
    mem_wdata = wdata;
    mem_wstrb = strb;
    do @(negedge clk); while (!mem_ready && resetn);
    rdata = mem_rdata;
    @(posedge clk);
    #1;
    mem_valid = 1'b0;
    mem_wstrb = 4'b0;
  endtask

  task automatic idle(input int n);
    if (n > 0) begin
      repeat (n) @(posedge clk);
      #1;
    end
  endtask

  function automatic logic [31:0] imm_i(input logic [31:0] i); return {{20{i[31]}}, i[31:20]}; endfunction
  function automatic logic [31:0] imm_s(input logic [31:0] i); return {{20{i[31]}}, i[31:25], i[11:7]}; endfunction
  function automatic logic [31:0] imm_b(input logic [31:0] i); return {{19{i[31]}}, i[31], i[7], i[30:25], i[11:8], 1'b0}; endfunction
  function automatic logic [31:0] imm_u(input logic [31:0] i); return {i[31:12], 12'b0}; endfunction
  function automatic logic [31:0] imm_j(input logic [31:0] i); return {{11{i[31]}}, i[31], i[19:12], i[20], i[30:21], 1'b0}; endfunction

  task automatic wr(input logic [4:0] rd, input logic [31:0] v);
    if (rd != 0) x[rd] = v;
  endtask

  task automatic step();
    logic [31:0] insn, a, b, r, next_pc, addr, d;
    logic [4:0]  rd, rs1, rs2;
    logic [2:0]  f3;
    logic [6:0]  f7;
    bus(1'b1, pc, 32'h0, 4'h0, insn);
    n_fetch++;
    rd = insn[11:7]; rs1 = insn[19:15]; rs2 = insn[24:20]; f3 = insn[14:12]; f7 = insn[31:25];
    a = x[rs1]; b = x[rs2];
    next_pc = pc + 4;
    unique case (insn[6:0])
      7'b0110111: begin idle(2); wr(rd, imm_u(insn)); end                       // lui
      7'b0010111: begin idle(2); wr(rd, pc + imm_u(insn)); end                  // auipc
      7'b1101111: begin idle(2); wr(rd, pc + 4); next_pc = pc + imm_j(insn); end // jal
      7'b1100111: begin idle(5); next_pc = (a + imm_i(insn)) & ~32'h1; wr(rd, pc + 4); end // jalr
      7'b1100011: begin                                                         // branches
        logic take;
        unique case (f3)
          3'b000: take = (a == b);
          3'b001: take = (a != b);
          3'b100: take = ($signed(a) <  $signed(b));
          3'b101: take = ($signed(a) >= $signed(b));
          3'b110: take = (a <  b);
          3'b111: take = (a >= b);
          default: begin take = 0; trap = 1; end
        endcase
        idle(take ? 4 : 2);
        if (take) next_pc = pc + imm_b(insn);
      end
      7'b0000011: begin                                                         // loads
        addr = a + imm_i(insn);
        if ((f3[1:0] == 2'b10 && addr[1:0] != 0) || (f3[1:0] == 2'b01 && addr[0])) trap = 1;
        else begin
          idle(3);
          bus(1'b0, addr, 32'h0, 4'h0, d);
          n_load++;
          d = d >> (8 * addr[1:0]);
          unique case (f3)
            3'b000: r = {{24{d[7]}}, d[7:0]};
            3'b001: r = {{16{d[15]}}, d[15:0]};
            3'b010: r = d;
            3'b100: r = {24'h0, d[7:0]};
            3'b101: r = {16'h0, d[15:0]};
            default: begin r = 0; trap = 1; end
          endcase
          wr(rd, r);
        end
      end
      7'b0100011: begin                                                         // stores
        logic [3:0] strb;
        addr = a + imm_s(insn);
        unique case (f3)
          3'b000: begin d = {4{b[7:0]}};  strb = 4'b0001 << addr[1:0]; n_sb++; end
          3'b001: begin d = {2{b[15:0]}}; strb = addr[1] ? 4'b1100 : 4'b0011; n_sh++; if (addr[0]) trap = 1; end
          3'b010: begin d = b;            strb = 4'b1111; n_sw++; if (addr[1:0] != 0) trap = 1; end
          default: begin d = 0; strb = 0; trap = 1; end
        endcase
        if (!trap) begin
          idle(3);
          bus(1'b0, addr, d, strb, r);
          n_store++;
        end
      end
      7'b0010011, 7'b0110011: begin                                             // ALU
        logic imm;
        imm = (insn[6:0] == 7'b0010011);
        if (imm) b = imm_i(insn);
        unique case (f3)
          3'b000: r = (!imm && f7[5]) ? a - b : a + b;
          3'b001: r = a << b[4:0];
          3'b010: r = {31'b0, $signed(a) < $signed(b)};
          3'b011: r = {31'b0, a < b};
          3'b100: r = a ^ b;
          3'b101: r = f7[5] ? 32'($signed(a) >>> b[4:0]) : a >> b[4:0];
          3'b110: r = a | b;
          3'b111: r = a & b;
        endcase
        idle((f3 == 3'b001 || f3 == 3'b101) ? 3 : 2);
        wr(rd, r);
      end
      7'b0001111: idle(2);                                                      // fence
      7'b1110011: begin                                                         // system
        if (f3 == 3'b010 && rs1 == 0) begin
          idle(2);
          unique case (insn[31:20])
            12'hC00, 12'hC01: wr(rd, cycle_cnt[31:0]);
            12'hC80, 12'hC81: wr(rd, cycle_cnt[63:32]);
            12'hC02:          wr(rd, instret[31:0]);
            12'hC82:          wr(rd, instret[63:32]);
            default:          trap = 1;
          endcase
        end else trap = 1;                                                      // ecall, ebreak, others
      end
      default: trap = 1;
    endcase
    if (!trap) begin
      pc = next_pc;
      instret++;
    end
  endtask

  initial begin
    forever begin
      if (resetn && !trap) step();
      else begin
        @(posedge clk);
        if (!resetn) begin
          pc = RESET_PC;
          foreach (x[i]) x[i] = 32'h0;
          trap = 0;
          instret = 0;
          mem_valid <= 1'b0;
        end
      end
    end
  end

endmodule
