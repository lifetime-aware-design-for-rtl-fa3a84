// flexibits_state: control-plane state machine of the FlexiBits core.
//
// Sequences each instruction through FETCH, STAGE1, and for two-stage
// instructions an optional SHIFT or MEM phase followed by STAGE2. A stage is
// 32/W beats long; 'cnt' is the beat index inside the stage. One-stage
// instructions (R-type and most I-type) read and write the register file and
// advance the PC during STAGE1 and return to FETCH. Two-stage instructions
// gather operands in STAGE1 and update rd and the PC in STAGE2; loads and
// stores access the data bus in MEM between the stages, shifts run the
// shifter in SHIFT. This split follows the source; the exact phases and
// their encoding are this design's own. The state machine is identical for
// every datapath width except for the beat-counter length.
// Timing with a memory that acknowledges one cycle after a request: a
// one-stage instruction takes 2 + 32/W cycles, a load or store 4 + 2*32/W.
module flexibits_state
  import flexibits_pkg::*;
#(
  parameter int unsigned W = 1,
  localparam int unsigned BEATS = 32 / W,
  localparam int unsigned CW = (BEATS > 1) ? $clog2(BEATS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ibus_ack,
  input  logic          dbus_ack,
  input  logic          two_stage,
  input  logic          mem_op,      // load or store
  input  logic          is_shift,
  input  logic          shift_done,
  output state_e        state,
  output logic [CW-1:0] cnt,
  output logic          first,       // first beat of a stage
  output logic          last,        // last beat of a stage
  output logic          s1_beat,     // a STAGE1 beat is executed this cycle
  output logic          s2_beat,     // a STAGE2 beat is executed this cycle
  output logic          upd_beat,    // beat that writes rd and the PC
  output logic          fetch_done,  // instruction accepted this cycle
  output logic          ibus_cyc,
  output logic          dbus_cyc,
  output logic          retire       // instruction completes this cycle
);

  initial assert (W == 1 || W == 2 || W == 4 || W == 8 || W == 16)
    else $error("W must divide 32 and be at most 16");

  assign first      = (cnt == '0);
  assign last       = (cnt == CW'(BEATS - 1));
  assign s1_beat    = (state == ST_STAGE1);
  assign s2_beat    = (state == ST_STAGE2);
  assign upd_beat   = two_stage ? s2_beat : s1_beat;
  assign ibus_cyc   = (state == ST_FETCH);
  assign dbus_cyc   = (state == ST_MEM);
  assign fetch_done = ibus_cyc && ibus_ack;
  assign retire     = last && upd_beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_FETCH;
      cnt   <= '0;
    end else begin
      unique case (state)
        ST_FETCH: if (ibus_ack) begin
          state <= ST_STAGE1;
          cnt   <= '0;
        end
        ST_STAGE1: begin
          cnt <= cnt + 1'b1;
          if (last) begin
            cnt <= '0;
            if (!two_stage)    state <= ST_FETCH;
            else if (mem_op)   state <= ST_MEM;
            else if (is_shift) state <= ST_SHIFT;
            else               state <= ST_STAGE2;
          end
        end
        ST_SHIFT: if (shift_done) state <= ST_STAGE2;
        ST_MEM:   if (dbus_ack)   state <= ST_STAGE2;
        ST_STAGE2: begin
          cnt <= cnt + 1'b1;
          if (last) begin
            cnt   <= '0;
            state <= ST_FETCH;
          end
        end
        default: state <= ST_FETCH;
      endcase
    end
  end

endmodule
