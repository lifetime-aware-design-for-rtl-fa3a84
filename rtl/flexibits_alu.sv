// flexibits_alu: W-bit serial arithmetic logic unit of the FlexiBits core.
//
// Each STAGE1 beat it combines one W-bit beat of each operand: add or
// subtract through a W-bit adder whose carry is kept in a flip-flop between
// beats (the source: "QERV requires a 4-bit adder in place of the 1-bit adder
// in SERV"), or a bitwise XOR/OR/AND. Alongside it accumulates the
// comparison flags for branches and set-less-than: 'eq' is the AND of the
// per-beat equalities, 'lt' is taken from the last beat (carry out for
// unsigned, sign bits and difference sign for signed). The flags are
// registered and valid from the cycle after the last beat, for STAGE2.
module flexibits_alu
  import flexibits_pkg::*;
#(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         en,
  input  logic         first,
  input  logic         last,
  input  logic [W-1:0] opa,
  input  logic [W-1:0] opb,
  input  alu_op_e      op,
  input  logic         sub,
  input  logic         cmp_unsigned,
  output logic [W-1:0] res,
  output logic         eq,
  output logic         lt
);

  logic         carry;
  logic [W-1:0] sum;
  logic         cout;
  logic [W-1:0] b;

  assign b = sub ? ~opb : opb;
  assign {cout, sum} = {1'b0, opa} + {1'b0, b} + {{W{1'b0}}, (first ? sub : carry)};

  always_comb begin
    unique case (op)
      ALU_ADD: res = sum;
      ALU_XOR: res = opa ^ opb;
      ALU_OR:  res = opa | opb;
      ALU_AND: res = opa & opb;
      default: res = sum;
    endcase
  end

  always_ff @(posedge clk) begin
    if (en) begin
      carry <= cout;
      eq    <= (first ? 1'b1 : eq) & (opa == opb);
      if (last)
        lt <= cmp_unsigned ? ~cout
                           : ((opa[W-1] ^ opb[W-1]) ? opa[W-1] : sum[W-1]);
    end
  end

endmodule
