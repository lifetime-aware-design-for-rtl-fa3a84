// flexibits_decoder: control-plane instruction decoder of the FlexiBits core.
//
// Latches the fetched 32-bit instruction word when the instruction bus
// acknowledges a fetch and decodes it combinationally into a dec_t record
// (register indices, operand and result selects, one-stage/two-stage class,
// memory access size, CSR operation). The decoder is the same for every
// datapath width W, as the source requires of the whole control plane.
// The classification follows the source: loads, stores, jumps, branches,
// shifts and set-less-than are two-stage; other instructions are one-stage.
// RV32E: register fields are cut to their low four bits. Instructions outside
// RV32E + Zicsr (machine mode) and opcodes this core does not know decode as
// no-operations that only advance the PC; that choice is this design's own.
// Timing: 'load' is sampled on the clock edge; 'dec' is valid from the next
// cycle until the following load.
module flexibits_decoder
  import flexibits_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,    // fetch acknowledge: capture instr
  input  logic [31:0] instr,
  output logic [31:0] ir,      // latched instruction word
  output dec_t        dec
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ir <= 32'h0000_0013;  // addi x0,x0,0
    else if (load) ir <= instr;
  end

  logic [4:0] opc;
  logic [2:0] f3;
  logic       f7b5;
  assign opc  = ir[6:2];
  assign f3   = ir[14:12];
  assign f7b5 = ir[30];

  always_comb begin
    dec = '0;
    dec.rs1        = ir[18:15];
    dec.rs2        = ir[23:20];
    dec.rd         = ir[10:7];
    dec.opa_sel    = OPA_RS1;
    dec.alu_op     = ALU_ADD;
    dec.rd_sel     = RD_ALU;
    dec.csr_op     = CSR_NONE;
    dec.csr_addr   = CSRA_NONE;
    dec.mem_size   = f3[1:0];
    dec.mem_signed = ~f3[2];
    dec.br_funct3  = f3;
    unique case (opc)
      OPC_LOAD: begin
        dec.rd_we = 1'b1; dec.two_stage = 1'b1; dec.is_load = 1'b1;
        dec.rd_sel = RD_BUF2;
      end
      OPC_STORE: begin
        dec.two_stage = 1'b1; dec.is_store = 1'b1;
      end
      OPC_OPIMM, OPC_OP: begin
        dec.rd_we   = 1'b1;
        dec.opb_imm = (opc == OPC_OPIMM);
        unique case (f3)
          3'b000: dec.alu_sub = (opc == OPC_OP) && f7b5;
          3'b001, 3'b101: begin
            dec.two_stage   = 1'b1; dec.is_shift = 1'b1; dec.rd_sel = RD_BUF2;
            dec.shift_right = f3[2]; dec.shift_arith = f7b5;
          end
          3'b010, 3'b011: begin
            dec.two_stage = 1'b1; dec.alu_sub = 1'b1; dec.rd_sel = RD_CMP;
            dec.cmp_unsigned = f3[0];
          end
          3'b100: dec.alu_op = ALU_XOR;
          3'b110: dec.alu_op = ALU_OR;
          3'b111: dec.alu_op = ALU_AND;
          default: ;
        endcase
      end
      OPC_LUI: begin
        dec.rd_we = 1'b1; dec.opb_imm = 1'b1; dec.opa_sel = OPA_ZERO;
      end
      OPC_AUIPC: begin
        dec.rd_we = 1'b1; dec.opb_imm = 1'b1; dec.opa_sel = OPA_PC;
      end
      OPC_JAL: begin
        dec.rd_we = 1'b1; dec.two_stage = 1'b1; dec.is_jump = 1'b1;
        dec.addr_pc = 1'b1; dec.rd_sel = RD_PC4;
      end
      OPC_JALR: begin
        dec.rd_we = 1'b1; dec.two_stage = 1'b1; dec.is_jump = 1'b1;
        dec.is_jalr = 1'b1; dec.rd_sel = RD_PC4;
      end
      OPC_BRANCH: begin
        dec.two_stage = 1'b1; dec.is_branch = 1'b1; dec.addr_pc = 1'b1;
        dec.alu_sub = 1'b1; dec.cmp_unsigned = f3[1];
      end
      OPC_SYSTEM: begin
        if (f3 == 3'b000) begin
          unique case (ir[31:20])
            12'h000: begin dec.is_trap = 1'b1; dec.trap_cause = 4'd11; end  // ecall (M-mode)
            12'h001: begin dec.is_trap = 1'b1; dec.trap_cause = 4'd3;  end  // ebreak
            12'h302: dec.is_mret = 1'b1;
            default: ;
          endcase
        end else begin
          dec.rd_we   = 1'b1;
          dec.rd_sel  = RD_CSR;
          dec.csr_imm = f3[2];
          unique case (f3[1:0])
            2'd1:    dec.csr_op = CSR_RW;
            2'd2:    dec.csr_op = CSR_RS;
            2'd3:    dec.csr_op = CSR_RC;
            default: dec.csr_op = CSR_NONE;
          endcase
          unique case (ir[31:20])
            12'h340: dec.csr_addr = CSRA_MSCRATCH;
            12'h305: dec.csr_addr = CSRA_MTVEC;
            12'h341: dec.csr_addr = CSRA_MEPC;
            12'h342: dec.csr_addr = CSRA_MCAUSE;
            default: dec.csr_addr = CSRA_NONE;
          endcase
        end
      end
      default: ;  // FENCE and unknown opcodes: no operation
    endcase
    if (dec.rd == 4'd0) dec.rd_we = 1'b0;
  end

endmodule
