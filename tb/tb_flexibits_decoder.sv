// tb_flexibits_decoder: checks the decoder on one instruction of each kind:
// the one-stage/two-stage class, load/store/shift/branch/jump/trap flags,
// operand and write-back selects, memory size, CSR operation and address,
// trap causes, register fields, and that x0 is never written.
module tb_flexibits_decoder;
  import flexibits_pkg::*;
  import rv_tb_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, load = 0;
  logic [31:0] instr = '0, ir;
  dec_t dec;
  int checks = 0, failures = 0;

  flexibits_decoder dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic put(logic [31:0] i);
    @(negedge clk); instr = i; load = 1;
    @(negedge clk); load = 0;
    chk(ir == i, "ir");
  endtask

  initial begin
    fork
      begin
        repeat (2) @(negedge clk); rst_n = 1;
        put(ADD(3, 4, 5));
        chk(!dec.two_stage && dec.rd_we && dec.rd == 3 && dec.rs1 == 4 && dec.rs2 == 5, "add class/fields");
        chk(dec.rd_sel == RD_ALU && !dec.alu_sub && !dec.opb_imm && dec.opa_sel == OPA_RS1, "add selects");
        put(SUB(1, 2, 3));   chk(dec.alu_sub && !dec.two_stage, "sub");
        put(ADDI(0, 2, 5));  chk(!dec.rd_we && dec.opb_imm, "addi x0 not written");
        put(i_type(7, 1, 7, 2, 7'h13)); chk(dec.alu_op == ALU_AND && dec.opb_imm, "andi");
        put(i_type(7, 1, 4, 2, 7'h13)); chk(dec.alu_op == ALU_XOR, "xori");
        put(i_type(7, 1, 6, 2, 7'h13)); chk(dec.alu_op == ALU_OR, "ori");
        put(SLT(6, 7, 8));   chk(dec.two_stage && dec.rd_sel == RD_CMP && dec.alu_sub && !dec.cmp_unsigned, "slt");
        put(i_type(3, 1, 3, 2, 7'h13)); chk(dec.two_stage && dec.cmp_unsigned && dec.rd_sel == RD_CMP, "sltiu");
        put(SLLI(1, 2, 3));  chk(dec.two_stage && dec.is_shift && !dec.shift_right && dec.rd_sel == RD_BUF2, "slli");
        put(i_type(32'h403, 2, 5, 1, 7'h13)); chk(dec.is_shift && dec.shift_right && dec.shift_arith, "srai");
        put(r_type(0, 3, 2, 5, 1, 7'h33)); chk(dec.is_shift && dec.shift_right && !dec.shift_arith && !dec.opb_imm, "srl");
        put(LW(9, 10, 4));   chk(dec.two_stage && dec.is_load && dec.mem_size == 2 && dec.rd_sel == RD_BUF2 && !dec.addr_pc, "lw");
        put(i_type(0, 1, 0, 2, 7'h03)); chk(dec.is_load && dec.mem_size == 0 && dec.mem_signed, "lb");
        put(LBU(2, 1, 0));   chk(dec.is_load && dec.mem_size == 0 && !dec.mem_signed, "lbu");
        put(SB(2, 1, 3));    chk(dec.two_stage && dec.is_store && !dec.rd_we && dec.mem_size == 0, "sb");
        put(BEQ(1, 2, 8));   chk(dec.two_stage && dec.is_branch && dec.addr_pc && !dec.rd_we && dec.alu_sub, "beq");
        put(BLTU(1, 2, 8));  chk(dec.cmp_unsigned && dec.br_funct3 == 6, "bltu");
        put(JAL(1, 16));     chk(dec.two_stage && dec.is_jump && dec.addr_pc && dec.rd_sel == RD_PC4 && dec.rd_we, "jal");
        put(JALR(1, 2, 0));  chk(dec.is_jump && dec.is_jalr && !dec.addr_pc, "jalr");
        put(LUI(4, 5));      chk(!dec.two_stage && dec.opa_sel == OPA_ZERO && dec.opb_imm, "lui");
        put(AUIPC(4, 5));    chk(dec.opa_sel == OPA_PC && dec.opb_imm, "auipc");
        put(ECALL());        chk(dec.is_trap && dec.trap_cause == 11 && !dec.rd_we && !dec.two_stage, "ecall");
        put(EBREAK());       chk(dec.is_trap && dec.trap_cause == 3, "ebreak");
        put(MRET());         chk(dec.is_mret && !dec.is_trap, "mret");
        put(CSRRW(5, 12'h340, 6)); chk(dec.csr_op == CSR_RW && dec.csr_addr == CSRA_MSCRATCH && dec.rd_sel == RD_CSR && !dec.csr_imm, "csrrw");
        put(CSRRS(5, 12'h305, 6)); chk(dec.csr_op == CSR_RS && dec.csr_addr == CSRA_MTVEC, "csrrs mtvec");
        put(CSRRC(5, 12'h342, 6)); chk(dec.csr_op == CSR_RC && dec.csr_addr == CSRA_MCAUSE, "csrrc mcause");
        put(CSRRWI(5, 12'h341, 6)); chk(dec.csr_imm && dec.csr_addr == CSRA_MEPC, "csrrwi mepc");
        put(CSRRW(5, 12'hC00, 6)); chk(dec.csr_addr == CSRA_NONE, "unknown csr");
        put(32'h0000_000F);  chk(!dec.rd_we && !dec.two_stage && !dec.is_store, "fence nop");
        put(r_type(0, 31, 30, 0, 29, 7'h33)); chk(dec.rs1 == 14 && dec.rs2 == 15 && dec.rd == 13, "rv32e fields");
      end
      begin repeat (10000) @(posedge clk); failures++; end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
