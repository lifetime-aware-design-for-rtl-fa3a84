// flexibits_ctrl: control unit (program counter) of the FlexiBits data plane.
//
// Holds the 32-bit PC, which is the instruction-bus address. During every
// stage beat the PC register rotates by W bits so that pc_beat is the
// current beat of the PC; a W-bit serial incrementer with a carry flip-flop
// produces PC+4 beat by beat (pc4_beat, also the JAL/JALR return address).
// On the beats that update the PC (STAGE1 of one-stage instructions, STAGE2
// of two-stage ones) the new beat replaces the old one: PC+4, the jump or
// taken-branch target from buffer register #1, or a CSR value (mtvec on a
// trap, mepc on mret). Branch conditions are resolved here from the ALU's
// registered eq/lt flags. The source gives this block's role and its 32-bit
// instruction-bus port; the serial PC is this design's choice.
//
// Lint note: only the low bits of the shifted constant four_sh are used;
// it is the constant 4 moved to the current beat, from which one W-bit
// slice is taken.
module flexibits_ctrl
  import flexibits_pkg::*;
#(
  parameter int unsigned W = 1,
  parameter logic [31:0] RESET_PC = 32'h0000_0000,
  localparam int unsigned BEATS = 32 / W,
  localparam int unsigned CW = (BEATS > 1) ? $clog2(BEATS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rot_en,       // any stage beat
  input  logic          upd_en,       // beat that updates the PC
  input  logic [CW-1:0] cnt,
  input  pc_sel_e       pc_sel,
  input  logic          is_branch,
  input  logic [2:0]    br_funct3,
  input  logic          eq,
  input  logic          lt,
  input  logic [W-1:0]  target_beat,
  input  logic [W-1:0]  csr_beat,
  output logic [31:0]   pc,
  output logic [W-1:0]  pc_beat,
  output logic [W-1:0]  pc4_beat,
  output logic          taken
);

  logic         carry;
  logic         cout;
  logic [W-1:0] four_beat;
  logic [W-1:0] new_beat;
  logic [31:0]  four_sh;

  assign pc_beat   = pc[W-1:0];
  assign four_sh   = 32'd4 >> (cnt * W);
  assign four_beat = four_sh[W-1:0];
  assign {cout, pc4_beat} = {1'b0, pc_beat} + {1'b0, four_beat} +
                            {{W{1'b0}}, ((cnt == '0) ? 1'b0 : carry)};

  always_comb begin
    unique case (br_funct3[2:1])
      2'b00:   taken = eq ^ br_funct3[0];   // beq / bne
      default: taken = lt ^ br_funct3[0];   // blt / bge / bltu / bgeu
    endcase
  end

  always_comb begin
    unique case (pc_sel)
      PC_TARGET: new_beat = (is_branch && !taken) ? pc4_beat : target_beat;
      PC_CSR:    new_beat = csr_beat;
      default:   new_beat = pc4_beat;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc    <= RESET_PC;
      carry <= 1'b0;
    end else if (rot_en) begin
      pc    <= {(upd_en ? new_beat : pc_beat), pc[31:W]};
      carry <= cout;
    end
  end

endmodule
