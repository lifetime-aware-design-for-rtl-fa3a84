// flexibits_bufreg1: buffer register #1 of the FlexiBits data plane.
//
// A 32-bit register with a W-bit serial adder in front of it. During STAGE1
// it adds the immediate to either rs1 (loads, stores, JALR) or the PC (JAL,
// branches) W bits per beat and shifts the sum in from the top, so that after
// 32/W beats 'q' holds the full data-bus address or jump/branch target. The
// source shows this block driving the 32-bit data-bus address; the serial
// adder inside it is this design's choice (the source gives the function).
// During STAGE2 the register rotates by W bits per beat, so target_beat
// delivers the target to the control unit in step with the PC. For JALR the
// least significant bit of the sum is cleared, as RISC-V requires.
module flexibits_bufreg1 #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         add_en,    // STAGE1 beat
  input  logic         rot_en,    // STAGE2 beat
  input  logic         first,     // first beat of the stage
  input  logic         clr_lsb,   // JALR
  input  logic [W-1:0] a_beat,
  input  logic [W-1:0] imm_beat,
  output logic [31:0]  q,
  output logic [W-1:0] target_beat
);

  logic         carry;
  logic [W-1:0] sum;
  logic         cout;

  always_comb begin
    {cout, sum} = {1'b0, a_beat} + {1'b0, imm_beat} + {{W{1'b0}}, (first ? 1'b0 : carry)};
    if (first && clr_lsb) sum[0] = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (add_en) begin
      q     <= {sum, q[31:W]};
      carry <= cout;
    end else if (rot_en) begin
      q <= {q[W-1:0], q[31:W]};
    end
  end

  assign target_beat = q[W-1:0];

endmodule
