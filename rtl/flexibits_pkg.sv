// flexibits_pkg: types and constants shared by the FlexiBits core and SoC.
//
// The core executes RV32E 32 bits at a time through a W-bit datapath: every
// 32-bit operand is moved in 32/W "beats", least significant beat first.
// W = 1 gives the bit-serial SERV-class core, W = 4 the QERV-class core and
// W = 8 the HERV-class core. This package holds the decoded-instruction
// record passed from the decoder to the data plane, the state encoding of the
// control-plane state machine, and the memory-bus request/response records.
// The bus records are this design's own choice (a Wishbone-like
// cyc/ack handshake); the source only states that the buses are 32 bits wide.
package flexibits_pkg;

  // RV32I/E major opcodes (instr[6:2])
  typedef enum logic [4:0] {
    OPC_LOAD   = 5'b00000,
    OPC_MISC   = 5'b00011,
    OPC_OPIMM  = 5'b00100,
    OPC_AUIPC  = 5'b00101,
    OPC_STORE  = 5'b01000,
    OPC_OP     = 5'b01100,
    OPC_LUI    = 5'b01101,
    OPC_BRANCH = 5'b11000,
    OPC_JALR   = 5'b11001,
    OPC_JAL    = 5'b11011,
    OPC_SYSTEM = 5'b11100
  } opcode_e;

  // ALU result selection
  typedef enum logic [1:0] {
    ALU_ADD = 2'd0,  // add or subtract (sub flag)
    ALU_XOR = 2'd1,
    ALU_OR  = 2'd2,
    ALU_AND = 2'd3
  } alu_op_e;

  // First ALU operand source
  typedef enum logic [1:0] {
    OPA_RS1  = 2'd0,
    OPA_PC   = 2'd1,
    OPA_ZERO = 2'd2
  } opa_sel_e;

  // Register-file write data source
  typedef enum logic [2:0] {
    RD_ALU  = 3'd0,
    RD_PC4  = 3'd1,  // return address of JAL/JALR
    RD_BUF2 = 3'd2,  // load data or shift result
    RD_CMP  = 3'd3,  // set-less-than flag
    RD_CSR  = 3'd4
  } rd_sel_e;

  // PC update source
  typedef enum logic [1:0] {
    PC_PLUS4  = 2'd0,
    PC_TARGET = 2'd1,  // jump/branch target held in buffer register #1
    PC_CSR    = 2'd2   // mtvec on a trap, mepc on mret
  } pc_sel_e;

  // Control-plane states
  typedef enum logic [2:0] {
    ST_FETCH  = 3'd0,
    ST_STAGE1 = 3'd1,
    ST_SHIFT  = 3'd2,
    ST_MEM    = 3'd3,
    ST_STAGE2 = 3'd4
  } state_e;

  // CSR operations
  typedef enum logic [1:0] {
    CSR_NONE = 2'd0,
    CSR_RW   = 2'd1,
    CSR_RS   = 2'd2,
    CSR_RC   = 2'd3
  } csr_op_e;

  // Implemented machine-mode CSRs
  typedef enum logic [2:0] {
    CSRA_NONE     = 3'd0,
    CSRA_MSCRATCH = 3'd1,
    CSRA_MTVEC    = 3'd2,
    CSRA_MEPC     = 3'd3,
    CSRA_MCAUSE   = 3'd4
  } csr_addr_e;

  // Decoded instruction, produced by the decoder, consumed by the data plane.
  typedef struct packed {
    logic [3:0] rs1;        // RV32E: 16 registers
    logic [3:0] rs2;
    logic [3:0] rd;
    logic       rd_we;      // instruction writes rd
    logic       two_stage;  // load, store, jump, branch, shift, slt
    logic       is_load;
    logic       is_store;
    logic       is_shift;
    logic       is_branch;
    logic       is_jump;
    logic       is_jalr;
    logic       is_trap;    // ecall / ebreak
    logic       is_mret;
    logic [1:0] mem_size;   // 0 byte, 1 half, 2 word
    logic       mem_signed;
    logic       shift_right;
    logic       shift_arith;
    logic       opb_imm;    // second operand is the immediate
    opa_sel_e   opa_sel;
    alu_op_e    alu_op;
    logic       alu_sub;
    logic       cmp_unsigned;
    logic [2:0] br_funct3;  // branch condition
    logic       addr_pc;    // buffer register #1 adds imm to PC (JAL, branch)
    rd_sel_e    rd_sel;
    csr_op_e    csr_op;
    logic       csr_imm;    // CSR source is the zero-extended rs1 field
    csr_addr_e  csr_addr;
    logic [3:0] trap_cause;
  } dec_t;

  // Memory bus request (core -> memory) and response (memory -> core)
  typedef struct packed {
    logic [31:0] adr;
    logic [31:0] dat;
    logic [3:0]  sel;
    logic        we;
    logic        cyc;
  } bus_req_t;

  typedef struct packed {
    logic [31:0] rdt;
    logic        ack;
  } bus_rsp_t;

endpackage
