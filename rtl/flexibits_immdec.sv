// flexibits_immdec: immediate decoder of the FlexiBits data plane.
//
// On a fetch acknowledge it builds the sign-extended 32-bit immediate of the
// fetched instruction (I, S, B, U or J format, or the zero-extended 5-bit
// rs1 field of CSRRWI/CSRRSI/CSRRCI) and then shifts it out W bits per beat,
// least significant beat first, while 'shift' is high. imm_beat is the
// current beat. The source names this block and shows it feeding W-bit
// operands to both buffer registers, the control unit, the CSRs and the ALU;
// holding the whole immediate in a 32-bit register is this design's choice.
//
// Lint note: instruction bits 1:0 are unused; they are always 2'b11 for
// the 32-bit instructions of this core.
module flexibits_immdec #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         load,
  input  logic [31:0]  instr,
  input  logic         shift,
  output logic [W-1:0] imm_beat
);

  logic [31:0] imm_q, imm_d;
  logic [4:0]  opc;
  assign opc = instr[6:2];

  always_comb begin
    unique case (opc)
      5'b01000:          imm_d = {{20{instr[31]}}, instr[31:25], instr[11:7]};           // S
      5'b11000:          imm_d = {{19{instr[31]}}, instr[31], instr[7], instr[30:25],
                                  instr[11:8], 1'b0};                                    // B
      5'b01101, 5'b00101: imm_d = {instr[31:12], 12'b0};                                 // U
      5'b11011:          imm_d = {{11{instr[31]}}, instr[31], instr[19:12], instr[20],
                                  instr[30:21], 1'b0};                                   // J
      5'b11100:          imm_d = {27'b0, instr[19:15]};                                  // CSR uimm
      default:           imm_d = {{20{instr[31]}}, instr[31:20]};                        // I
    endcase
  end

  always_ff @(posedge clk) begin
    if (load)       imm_q <= imm_d;
    else if (shift) imm_q <= {{W{1'b0}}, imm_q[31:W]};
  end

  assign imm_beat = imm_q[W-1:0];

endmodule
