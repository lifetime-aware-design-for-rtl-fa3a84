// flexibits_csr: control and status registers of the FlexiBits core.
//
// Machine-mode CSRs mscratch (0x340), mtvec (0x305), mepc (0x341) and mcause
// (0x342), each a 32-bit register that is read and written W bits per beat
// during STAGE1. CSRRW/CSRRS/CSRRC and their immediate forms return the old
// value as rd_beat and rotate in the new one; other CSR addresses read as
// zero and ignore writes. ECALL and EBREAK save the PC in mepc, set mcause
// (11 or 3) and send mtvec to the control unit as the next PC; MRET sends
// mepc. The source names this block only; the register set is the smallest
// that lets software take and return from a trap and is this design's
// choice. There are no interrupts.
module flexibits_csr
  import flexibits_pkg::*;
#(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,          // STAGE1 beat
  input  logic         first,
  input  csr_op_e      op,
  input  csr_addr_e    addr,
  input  logic [W-1:0] src_beat,    // rs1 or uimm beat
  input  logic         is_trap,
  input  logic [3:0]   trap_cause,
  input  logic         is_mret,
  input  logic [W-1:0] pc_beat,
  output logic [W-1:0] rd_beat,
  output logic [W-1:0] pc_out_beat
);

  logic [31:0]  mscratch, mtvec, mepc, mcause;
  logic [W-1:0] old_beat, new_beat;

  always_comb begin
    unique case (addr)
      CSRA_MSCRATCH: old_beat = mscratch[W-1:0];
      CSRA_MTVEC:    old_beat = mtvec[W-1:0];
      CSRA_MEPC:     old_beat = mepc[W-1:0];
      CSRA_MCAUSE:   old_beat = mcause[W-1:0];
      default:       old_beat = '0;
    endcase
    unique case (op)
      CSR_RW:  new_beat = src_beat;
      CSR_RS:  new_beat = old_beat | src_beat;
      CSR_RC:  new_beat = old_beat & ~src_beat;
      default: new_beat = old_beat;
    endcase
  end

  assign rd_beat     = old_beat;
  assign pc_out_beat = is_mret ? mepc[W-1:0] : mtvec[W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mscratch <= '0;
      mtvec    <= '0;
      mepc     <= '0;
      mcause   <= '0;
    end else if (en) begin
      if (op != CSR_NONE) begin
        unique case (addr)
          CSRA_MSCRATCH: mscratch <= {new_beat, mscratch[31:W]};
          CSRA_MTVEC:    mtvec    <= {new_beat, mtvec[31:W]};
          CSRA_MEPC:     mepc     <= {new_beat, mepc[31:W]};
          CSRA_MCAUSE:   mcause   <= {new_beat, mcause[31:W]};
          default: ;
        endcase
      end
      if (is_trap) begin
        mtvec <= {mtvec[W-1:0], mtvec[31:W]};
        mepc  <= {pc_beat, mepc[31:W]};
        if (first) mcause <= {28'd0, trap_cause};
      end
      if (is_mret) mepc <= {mepc[W-1:0], mepc[31:W]};
    end
  end

endmodule
