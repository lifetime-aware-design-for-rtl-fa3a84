// flexibits_core: FlexiBits RISC-V (RV32E + Zicsr) core with a W-bit datapath.
//
// The template microarchitecture of the FlexiBits family. A width-independent
// control plane (decoder, state machine) drives a data plane whose every
// operand path is W bits wide: buffer registers #1 and #2, the immediate
// decoder, the control unit (PC), the CSRs, the ALU, the memory interface and
// the register-file interface, with the register file held in a separate
// memory (flexibits_rf_ram). W = 1 is the bit-serial SERV-class core, W = 4
// the QERV-class and W = 8 the HERV-class core of the source; the default is
// W = 1, the width of the fabricated SoC. Each 32-bit operation takes 32/W
// beats. One-stage instructions take 2 + 32/W cycles with a one-cycle
// memory; two-stage instructions (loads, stores, jumps, branches, shifts,
// set-less-than) add a second 32/W-beat stage, plus the data-bus access for
// loads and stores or the shifter cycles for shifts. There is no prefetch and
// no memory bypass, as in the source.
// Interface: an instruction bus (32-bit address, read only) and a data bus
// (32-bit address, 32-bit read and write data, byte selects), both with a
// request held until acknowledged. Active-low asynchronous reset; execution
// starts at RESET_PC. The bus handshake is this design's choice.
//
// Lint notes: the decoder's latched instruction word 'ir' and the control
// unit's 'taken' flag are not needed inside the core; they stay as named
// signals so that a debugger or testbench can observe the current
// instruction and branch outcomes. rst_n is both the asynchronous reset of
// the flip-flops and the 'disable iff' term of the bus assertions, which
// the linter reports as a net used synchronously and asynchronously; the
// assertions are not part of the circuit.
module flexibits_core
  import flexibits_pkg::*;
#(
  parameter int unsigned W = 1,
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic     clk,
  input  logic     rst_n,
  output bus_req_t ibus_req,
  input  bus_rsp_t ibus_rsp,
  output bus_req_t dbus_req,
  input  bus_rsp_t dbus_rsp,
  output logic     retire      // one instruction completed this cycle
);

  localparam int unsigned BEATS = 32 / W;
  localparam int unsigned CW = (BEATS > 1) ? $clog2(BEATS) : 1;
  localparam int unsigned AW = $clog2(16 * BEATS);

  dec_t          dec;
  logic [31:0]   ir;
  state_e        state;
  logic [CW-1:0] cnt;
  logic          first, last, s1_beat, s2_beat, upd_beat, fetch_done;
  logic          ibus_cyc, dbus_cyc, shift_done;
  logic [W-1:0]  imm_beat, rs1_beat, rs2_beat, opa, opb, alu_beat;
  logic [W-1:0]  pc_beat, pc4_beat, target_beat, buf2_beat, csr_rd_beat, csr_pc_beat;
  logic          eq, lt, taken;
  logic [31:0]   pc, buf1_q, buf2_q, ld_data, wdat;
  logic [3:0]    sel;
  logic [AW-1:0] raddr1, raddr2, waddr;
  logic [W-1:0]  rdata1, rdata2, wdata;
  logic          rf_we;
  pc_sel_e       pc_sel;

  // ---------------- control plane ----------------
  flexibits_decoder u_decoder (
    .clk, .rst_n, .load(fetch_done), .instr(ibus_rsp.rdt), .ir, .dec
  );

  flexibits_state #(.W(W)) u_state (
    .clk, .rst_n,
    .ibus_ack(ibus_rsp.ack), .dbus_ack(dbus_rsp.ack),
    .two_stage(dec.two_stage), .mem_op(dec.is_load | dec.is_store),
    .is_shift(dec.is_shift), .shift_done,
    .state, .cnt, .first, .last, .s1_beat, .s2_beat, .upd_beat,
    .fetch_done, .ibus_cyc, .dbus_cyc, .retire
  );

  // ---------------- data plane ----------------
  flexibits_immdec #(.W(W)) u_immdec (
    .clk, .load(fetch_done), .instr(ibus_rsp.rdt), .shift(s1_beat), .imm_beat
  );

  always_comb begin
    unique case (dec.opa_sel)
      OPA_PC:   opa = pc_beat;
      OPA_ZERO: opa = '0;
      default:  opa = rs1_beat;
    endcase
  end
  assign opb = dec.opb_imm ? imm_beat : rs2_beat;

  flexibits_alu #(.W(W)) u_alu (
    .clk, .en(s1_beat), .first, .last, .opa, .opb,
    .op(dec.alu_op), .sub(dec.alu_sub), .cmp_unsigned(dec.cmp_unsigned),
    .res(alu_beat), .eq, .lt
  );

  flexibits_bufreg1 #(.W(W)) u_bufreg1 (
    .clk, .add_en(s1_beat), .rot_en(s2_beat), .first, .clr_lsb(dec.is_jalr),
    .a_beat(dec.addr_pc ? pc_beat : rs1_beat), .imm_beat,
    .q(buf1_q), .target_beat
  );

  flexibits_memif u_memif (
    .adr_lo(buf1_q[1:0]), .size(dec.mem_size), .is_signed(dec.mem_signed),
    .st_data(buf2_q), .rdt(dbus_rsp.rdt), .wdat, .sel, .ld_data
  );

  flexibits_bufreg2 #(.W(W)) u_bufreg2 (
    .clk, .in_en(s1_beat), .cnt,
    .in_beat(dec.is_shift ? rs1_beat : rs2_beat), .amt_beat(opb),
    .shift_en(state == ST_SHIFT), .shift_right(dec.shift_right),
    .shift_arith(dec.shift_arith),
    .load_en(dbus_cyc && dbus_rsp.ack && dec.is_load), .load_data(ld_data),
    .out_en(s2_beat), .q(buf2_q), .out_beat(buf2_beat), .shift_done
  );

  always_comb begin
    if (dec.is_jump || dec.is_branch)  pc_sel = PC_TARGET;
    else if (dec.is_trap || dec.is_mret) pc_sel = PC_CSR;
    else                               pc_sel = PC_PLUS4;
  end

  flexibits_ctrl #(.W(W), .RESET_PC(RESET_PC)) u_ctrl (
    .clk, .rst_n, .rot_en(s1_beat | s2_beat), .upd_en(upd_beat), .cnt,
    .pc_sel, .is_branch(dec.is_branch), .br_funct3(dec.br_funct3),
    .eq, .lt, .target_beat, .csr_beat(csr_pc_beat),
    .pc, .pc_beat, .pc4_beat, .taken
  );

  flexibits_csr #(.W(W)) u_csr (
    .clk, .rst_n, .en(s1_beat), .first, .op(dec.csr_op), .addr(dec.csr_addr),
    .src_beat(dec.csr_imm ? imm_beat : rs1_beat),
    .is_trap(dec.is_trap), .trap_cause(dec.trap_cause), .is_mret(dec.is_mret),
    .pc_beat, .rd_beat(csr_rd_beat), .pc_out_beat(csr_pc_beat)
  );

  flexibits_rfif #(.W(W)) u_rfif (
    .dec, .upd_beat, .cnt, .alu_beat, .pc4_beat, .buf2_beat, .lt,
    .csr_beat(csr_rd_beat), .rdata1, .rdata2,
    .raddr1, .raddr2, .waddr, .we(rf_we), .wdata, .rs1_beat, .rs2_beat
  );

  flexibits_rf_ram #(.W(W)) u_rf (
    .clk, .raddr1, .raddr2, .rdata1, .rdata2, .we(rf_we), .waddr, .wdata
  );

  // ---------------- buses ----------------
  always_comb begin
    ibus_req     = '0;
    ibus_req.adr = pc;
    ibus_req.cyc = ibus_cyc;
    dbus_req     = '0;
    dbus_req.adr = {buf1_q[31:2], 2'b00};
    dbus_req.dat = wdat;
    dbus_req.sel = sel;
    dbus_req.we  = dec.is_store;
    dbus_req.cyc = dbus_cyc;
  end

  // A bus request is held, unchanged, until it is acknowledged.
  property p_hold(logic cyc, logic ack, logic [31:0] adr);
    @(posedge clk) disable iff (!rst_n) cyc && !ack |=> cyc && $stable(adr);
  endproperty
  a_ibus_hold: assert property (p_hold(ibus_req.cyc, ibus_rsp.ack, ibus_req.adr));
  a_dbus_hold: assert property (p_hold(dbus_req.cyc, dbus_rsp.ack, dbus_req.adr));
  a_ibus_ack:  assert property (@(posedge clk) disable iff (!rst_n) ibus_rsp.ack |-> ibus_req.cyc);
  a_dbus_ack:  assert property (@(posedge clk) disable iff (!rst_n) dbus_rsp.ack |-> dbus_req.cyc);

endmodule
