// flexibits_bufreg2: buffer register #2 of the FlexiBits data plane.
//
// A 32-bit register that collects a whole operand and gives it back serially.
// During STAGE1 it shifts in rs2 (stores, for the data-bus write data) or
// rs1 (shifts) W bits per beat, and captures the 5-bit shift amount from the
// second operand's low bits into 'shamt'. In the SHIFT phase it shifts the
// value by W bits per cycle while at least W positions remain, then by one
// bit per cycle; the wider step is the shift optimization the source mentions
// for wider datapaths, its exact form is this design's choice. On a load
// acknowledge it is loaded in parallel with the aligned load data from the
// memory interface. During STAGE2 it shifts out W bits per beat to the
// register-file interface (load data or shift result).
module flexibits_bufreg2 #(
  parameter int unsigned W = 1,
  localparam int unsigned BEATS = 32 / W,
  localparam int unsigned CW = (BEATS > 1) ? $clog2(BEATS) : 1
) (
  input  logic          clk,
  input  logic          in_en,      // STAGE1 beat
  input  logic [CW-1:0] cnt,
  input  logic [W-1:0]  in_beat,    // rs1 or rs2 beat
  input  logic [W-1:0]  amt_beat,   // second operand beat (shift amount)
  input  logic          shift_en,   // SHIFT phase
  input  logic          shift_right,
  input  logic          shift_arith,
  input  logic          load_en,    // load acknowledge
  input  logic [31:0]   load_data,
  input  logic          out_en,     // STAGE2 beat
  output logic [31:0]   q,
  output logic [W-1:0]  out_beat,
  output logic          shift_done
);

  logic [4:0] shamt;
  logic [4:0] step;
  logic [31:0] shifted;

  assign step       = (shamt >= 5'(W)) ? 5'(W) : 5'd1;
  assign shift_done = (shamt == 5'd0);

  always_comb begin
    if (!shift_right)     shifted = q << step;
    else if (shift_arith) shifted = 32'($signed(q) >>> step);
    else                  shifted = q >> step;
  end

  always_ff @(posedge clk) begin
    if (in_en) begin
      q <= {in_beat, q[31:W]};
      for (int i = 0; i < 5; i++)
        if (CW'(i / W) == cnt) shamt[i] <= amt_beat[i % W];
    end else if (shift_en) begin
      if (!shift_done) begin
        q     <= shifted;
        shamt <= shamt - step;
      end
    end else if (load_en) begin
      q <= load_data;
    end else if (out_en) begin
      q <= {{W{1'b0}}, q[31:W]};
    end
  end

  assign out_beat = q[W-1:0];

endmodule
