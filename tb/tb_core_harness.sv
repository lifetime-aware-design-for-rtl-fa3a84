// tb_core_harness: runs one random RV32E program on a FlexiBits core of
// width W and checks it, instruction by instruction, against the rv_iss
// reference model: all 15 registers and the PC after every retirement, the
// cycle count of every instruction against the state machine's timing
// (2 + 32/W cycles one-stage, 4 + 2*32/W for loads/stores, etc.), and the
// RAM window at the end. The memory model acknowledges one cycle after a
// request, as the SoC memories do.
module tb_core_harness
  import flexibits_pkg::*;
  import rv_tb_pkg::*;
#(
  parameter int unsigned W = 1,
  parameter int unsigned N = 200,
  parameter logic [31:0] RAM_BASE = 32'h4000_0000
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   done,
  output int   n_two_stage,
  output int   n_mem,
  output int   n_shift,
  output int   n_trap
);

  localparam int unsigned BEATS = 32 / W;

  logic     rst_n;
  bus_req_t ibus_req, dbus_req;
  bus_rsp_t ibus_rsp, dbus_rsp;
  logic     retire;
  logic [31:0] mem [int unsigned];

  flexibits_core #(.W(W)) dut (
    .clk, .rst_n, .ibus_req, .ibus_rsp, .dbus_req, .dbus_rsp, .retire
  );

  // memory: acknowledge and data one cycle after the request
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ibus_rsp <= '0;
      dbus_rsp <= '0;
    end else begin
      ibus_rsp.ack <= ibus_req.cyc && !ibus_rsp.ack;
      ibus_rsp.rdt <= mem.exists(ibus_req.adr >> 2) ? mem[ibus_req.adr >> 2] : 32'd0;
      dbus_rsp.ack <= dbus_req.cyc && !dbus_rsp.ack;
      dbus_rsp.rdt <= mem.exists(dbus_req.adr >> 2) ? mem[dbus_req.adr >> 2] : 32'd0;
      if (dbus_req.cyc && !dbus_rsp.ack && dbus_req.we) begin
        logic [31:0] w;
        w = mem.exists(dbus_req.adr >> 2) ? mem[dbus_req.adr >> 2] : 32'd0;
        for (int b = 0; b < 4; b++)
          if (dbus_req.sel[b]) w[8*b +: 8] = dbus_req.dat[8*b +: 8];
        mem[dbus_req.adr >> 2] = w;
      end
    end
  end

  function automatic logic [31:0] dut_reg(int r);
    logic [31:0] v;
    for (int b = 0; b < int'(BEATS); b++)
      v[b*W +: W] = dut.u_rf.mem[r * BEATS + b];
    return v;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("W=%0d FAIL %s", W, what);
    end
  endtask

  initial begin
    rv_iss iss = new();
    logic [31:0] prog[] = new[4096];
    int unsigned end_idx, cyc = 0, last = 0, nret = 0;
    bit pend = 0;
    checks = 0; failures = 0; done = 0;
    n_two_stage = 0; n_mem = 0; n_shift = 0; n_trap = 0;
    rst_n = 0;
    foreach (prog[i]) prog[i] = 32'h0000_0013;
    end_idx = gen_program(prog, N, RAM_BASE);
    for (int i = 0; i < int'(end_idx) + 8; i++) begin
      mem[i] = prog[i];
      iss.mem[i] = prog[i];
    end
    repeat (3) @(negedge clk);
    // registers start at whatever the register-file memory holds
    for (int r = 1; r < 16; r++) iss.x[r] = dut_reg(r);
    rst_n = 1;
    forever begin
      @(negedge clk);
      cyc++;
      if (pend) begin
        logic [31:0] ins;
        ins = iss.rd_word(iss.pc);
        iss.step();
        nret++;
        if (ins[6:0] == 7'h73 && ins[14:12] == 0 && ins[21:20] != 2'b10) n_trap++;
        if (iss.two_stage) n_two_stage++;
        if (iss.mem_op) n_mem++;
        if (iss.is_shift) n_shift++;
        for (int r = 1; r < 16; r++)
          check(dut_reg(r) == iss.x[r],
                $sformatf("insn %0d (%08h) x%0d dut=%08h ref=%08h", nret, ins, r, dut_reg(r), iss.x[r]));
        check(dut.pc == iss.pc, $sformatf("insn %0d (%08h) pc dut=%08h ref=%08h", nret, ins, dut.pc, iss.pc));
        if (nret > 1)
          check(cyc - last == ref_cycles(W, iss.two_stage, iss.mem_op, iss.is_shift, iss.shamt),
                $sformatf("insn %0d (%08h) cycles dut=%0d ref=%0d", nret, ins, cyc - last,
                          ref_cycles(W, iss.two_stage, iss.mem_op, iss.is_shift, iss.shamt)));
        last = cyc;
        pend = 0;
        if (iss.pc == end_idx * 4 || failures > 20) break;
      end
      if (retire) pend = 1;
    end
    for (int j = 0; j < 64; j++)
      check(mem[(RAM_BASE >> 2) + j] == iss.rd_word(RAM_BASE + 4 * j),
            $sformatf("ram word %0d dut=%08h ref=%08h", j, mem[(RAM_BASE >> 2) + j],
                      iss.rd_word(RAM_BASE + 4 * j)));
    $display("W=%0d: %0d instructions, %0d cycles, two-stage=%0d mem=%0d shift=%0d trap=%0d",
             W, nret, cyc, n_two_stage, n_mem, n_shift, n_trap);
    done = 1;
  end

endmodule
