// tb_flexibits_soc: end-to-end test of the FlexiBits SoC at its default
// parameters (W = 1, 4 KiB LPROM, 1 KiB SRAM, 8 GPIO).
//
// Phase 1 runs a water-quality-monitoring program, a threshold workload:
// the number of samples comes from the GPIO inputs, each sample (pH x10,
// dissolved oxygen x10 in mg/L, dissolved solids in ppm) is read from a
// constant table in the LPROM over the data bus, compared with limits
// (6.5 <= pH <= 8.5, DO >= 5.0, TDS <= 500), and a result byte
// {index, ph_ok, do_ok, tds_ok, safe} is written to the GPIO outputs and
// logged to SRAM. The log is then summed from SRAM, an unmapped address is
// read, and an ECALL enters a trap handler that writes 0xA5 to the GPIO.
// The expected GPIO sequence is worked out here from the same table.
// Phase 2 runs a random RV32E program from the LPROM with its data in SRAM.
// In both phases every instruction is checked against the rv_iss reference
// model (registers, PC, cycle count). The testbench counts each mechanism of
// the design and fails if one never happened: one-stage and two-stage
// instructions, shifts, instruction fetch, LPROM data reads, SRAM reads and
// writes, GPIO reads and writes, unmapped accesses, taken and not-taken
// branches, traps.
module tb_flexibits_soc;
  import flexibits_pkg::*;
  import rv_tb_pkg::*;

  localparam int unsigned NS = 6;        // samples
  localparam int unsigned TAB = 512;     // table word index in the LPROM

  logic        clk = 0;
  logic        rst_n = 0;
  logic [7:0]  gpio_in = '0;
  logic [7:0]  gpio_out;
  logic        prog_we = 0;
  logic [9:0]  prog_addr = '0;
  logic [31:0] prog_data = '0;
  logic        retire;

  always #5 clk = ~clk;

  flexibits_soc dut (.*);

  int checks = 0, failures = 0;
  int n_one = 0, n_two = 0, n_shift = 0, n_trap = 0, n_fetch = 0, n_romrd = 0;
  int n_ramrd = 0, n_ramwr = 0, n_gpiord = 0, n_gpiowr = 0, n_unmapped = 0;
  int n_taken = 0, n_nottaken = 0;
  logic [7:0] gpio_seq[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // bus activity counters
  always @(posedge clk) if (rst_n) begin
    if (dut.ibus_rsp.ack) n_fetch++;
    if (dut.dbus_rsp.ack) begin
      unique case (dut.dbus_req.adr[31:30])
        2'd0: n_romrd++;
        2'd1: if (dut.dbus_req.we) n_ramwr++; else n_ramrd++;
        2'd2: if (dut.dbus_req.we) n_gpiowr++; else n_gpiord++;
        default: n_unmapped++;
      endcase
    end
  end
  always @(gpio_out) if (rst_n) gpio_seq.push_back(gpio_out);

  function automatic logic [31:0] dut_reg(int r);
    logic [31:0] v;
    for (int b = 0; b < 32; b++) v[b] = dut.u_core.u_rf.mem[r * 32 + b];
    return v;
  endfunction

  // Loads prog[0:len-1] into the LPROM and the model, runs until the model
  // reaches end_pc, checking every instruction.
  task automatic run(ref logic [31:0] prog[], input int len, input int unsigned end_pc,
                     input rv_iss iss, input int max_cycles);
    int unsigned cyc = 0, last = 0, nret = 0;
    bit pend = 0;
    rst_n = 0;
    @(negedge clk);
    for (int i = 0; i < len; i++) begin
      prog_we = 1; prog_addr = 10'(i); prog_data = prog[i];
      iss.mem[i] = prog[i];
      @(negedge clk);
    end
    prog_we = 0;
    for (int r = 1; r < 16; r++) iss.x[r] = dut_reg(r);
    rst_n = 1;
    while (cyc < max_cycles) begin
      @(negedge clk);
      cyc++;
      if (pend) begin
        logic [31:0] ins;
        ins = iss.rd_word(iss.pc);
        iss.step();
        nret++;
        if (iss.two_stage) n_two++; else n_one++;
        if (iss.is_shift) n_shift++;
        if (ins[6:0] == 7'h73 && ins[14:12] == 0 && ins[21:20] != 2'b10) n_trap++;
        if (ins[6:0] == 7'h63) begin
          if (iss.pc != dut.u_core.pc) ;  // reported by the PC check below
          else if (iss.pc == 0) ;
          if (dut.u_core.u_ctrl.taken) n_taken++; else n_nottaken++;
        end
        for (int r = 1; r < 16; r++)
          check(dut_reg(r) == iss.x[r], $sformatf("insn %0d (%08h) x%0d dut=%08h ref=%08h",
                                                  nret, ins, r, dut_reg(r), iss.x[r]));
        check(dut.u_core.pc == iss.pc, $sformatf("insn %0d pc dut=%08h ref=%08h",
                                                nret, dut.u_core.pc, iss.pc));
        if (nret > 1)
          check(cyc - last == ref_cycles(1, iss.two_stage, iss.mem_op, iss.is_shift, iss.shamt),
                $sformatf("insn %0d (%08h) cycles %0d", nret, ins, cyc - last));
        last = cyc;
        pend = 0;
        if (iss.pc == end_pc) break;
      end
      if (retire) pend = 1;
    end
    check(iss.pc == end_pc, "program did not reach its end");
    $display("ran %0d instructions in %0d cycles", nret, cyc);
  endtask

  initial begin
    logic [31:0] p[] = new[1024];
    int ph[NS] = '{70, 60, 80, 90, 75, 66};
    int dox[NS] = '{60, 70, 40, 55, 50, 80};
    int tds[NS] = '{300, 200, 450, 100, 501, 500};
    logic [7:0] exp_seq[$];
    int k = 0, loop_i, beq_i, done_i, handler_i, end_i, sum;
    rv_iss iss;

    fork
      begin
        repeat (2000000) @(posedge clk);
        failures++;
        $display("FAIL watchdog");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    join_none

    // ---------------- phase 1: water quality monitoring ----------------
    foreach (p[i]) p[i] = ADDI(0, 0, 0);
    p[k++] = LUI(1, 1);                 // x1 = 0x800: sample table
    p[k++] = ADDI(1, 1, -2048);
    p[k++] = LUI(2, 32'h80000);         // x2 = GPIO base
    p[k++] = LW(3, 2, 4);               // x3 = number of samples (GPIO in)
    p[k++] = ANDI(3, 3, 15);
    p[k++] = ADDI(4, 0, 0);             // x4 = index
    p[k++] = LUI(11, 32'h40000);        // x11 = SRAM log pointer
    p[k++] = LUI(12, 0);                // x12 = mtvec (patched)
    p[k++] = ADDI(12, 12, 0);
    p[k++] = CSRRW(0, 12'h305, 12);
    loop_i = k;
    beq_i = k; p[k++] = 0;              // beq x4, x3, done (patched)
    p[k++] = LW(5, 1, 0);               // pH
    p[k++] = LW(6, 1, 4);               // DO
    p[k++] = LW(7, 1, 8);               // TDS
    p[k++] = ADDI(8, 0, 0);
    p[k++] = i_type(65, 5, 2, 9, 7'h13);    // slti x9, x5, 65
    p[k++] = i_type(86, 5, 2, 10, 7'h13);   // slti x10, x5, 86
    p[k++] = SUB(10, 10, 9);                // ph_ok
    p[k++] = SLLI(10, 10, 3);
    p[k++] = r_type(0, 10, 8, 6, 8, 7'h33); // or x8, x8, x10
    p[k++] = i_type(50, 6, 2, 9, 7'h13);    // slti x9, x6, 50
    p[k++] = i_type(1, 9, 4, 9, 7'h13);     // xori x9, x9, 1: do_ok
    p[k++] = SLLI(9, 9, 2);
    p[k++] = r_type(0, 9, 8, 6, 8, 7'h33);
    p[k++] = i_type(501, 7, 2, 9, 7'h13);   // slti x9, x7, 501: tds_ok
    p[k++] = SLLI(9, 9, 1);
    p[k++] = r_type(0, 9, 8, 6, 8, 7'h33);
    p[k++] = ANDI(9, 8, 14);
    p[k++] = ADDI(9, 9, -14);
    p[k++] = i_type(1, 9, 3, 9, 7'h13);     // sltiu x9, x9, 1: safe
    p[k++] = r_type(0, 9, 8, 6, 8, 7'h33);
    p[k++] = SLLI(9, 4, 4);
    p[k++] = r_type(0, 9, 8, 6, 8, 7'h33);  // result byte
    p[k++] = SW(8, 2, 0);                   // GPIO out
    p[k++] = SW(8, 11, 0);                  // SRAM log
    p[k++] = ADDI(11, 11, 4);
    p[k++] = ADDI(1, 1, 12);
    p[k++] = ADDI(4, 4, 1);
    p[k] = JAL(0, 4 * (loop_i - k)); k++;
    done_i = k;
    p[beq_i] = BEQ(4, 3, 4 * (done_i - beq_i));
    p[k++] = ADDI(13, 0, 0);                // sum the SRAM log
    p[k++] = LUI(11, 32'h40000);
    p[k++] = LW(9, 11, 0);                  // sum loop
    p[k++] = ADD(13, 13, 9);
    p[k++] = ADDI(11, 11, 4);
    p[k++] = ADDI(4, 4, -1);
    p[k++] = BNE(4, 0, -16);
    p[k++] = LUI(9, 32'hC0000);             // unmapped region reads zero
    p[k++] = LW(10, 9, 0);
    p[k++] = r_type(0, 10, 13, 6, 13, 7'h33);
    p[k++] = ECALL();
    end_i = k; p[k++] = JAL(0, 0);
    handler_i = k;
    p[k++] = ADDI(9, 0, 32'hA5);
    p[k++] = SB(9, 2, 0);
    p[k++] = CSRRS(9, 12'h341, 0);
    p[k++] = ADDI(9, 9, 4);
    p[k++] = CSRRW(0, 12'h341, 9);
    p[k++] = MRET();
    p[7] = LUI(12, (handler_i * 4) >> 12);
    p[8] = ADDI(12, 12, (handler_i * 4) & 12'hfff);
    for (int s = 0; s < int'(NS); s++) begin
      bit po, dok, tok;
      p[TAB + 3 * s]     = ph[s];
      p[TAB + 3 * s + 1] = dox[s];
      p[TAB + 3 * s + 2] = tds[s];
      po = ph[s] >= 65 && ph[s] <= 85; dok = dox[s] >= 50; tok = tds[s] <= 500;
      exp_seq.push_back({4'(s), po, dok, tok, po & dok & tok});
    end
    exp_seq.push_back(8'hA5);

    gpio_in = 8'(NS);
    iss = new();
    iss.mem[32'h8000_0004 >> 2] = NS;
    gpio_seq.delete();
    run(p, TAB + 3 * NS, end_i * 4, iss, 200000);
    check(gpio_seq.size() == exp_seq.size(),
          $sformatf("gpio writes %0d expected %0d", gpio_seq.size(), exp_seq.size()));
    sum = 0;
    for (int s = 0; s < exp_seq.size(); s++) begin
      if (s < gpio_seq.size())
        check(gpio_seq[s] == exp_seq[s], $sformatf("gpio[%0d]=%02h expected %02h", s, gpio_seq[s], exp_seq[s]));
      if (s < int'(NS)) sum += exp_seq[s];
    end
    check(dut_reg(13) == sum, $sformatf("log sum %0d expected %0d", dut_reg(13), sum));
    check(gpio_out == 8'hA5, "trap handler output");

    // ---------------- phase 2: random program ----------------
    foreach (p[i]) p[i] = ADDI(0, 0, 0);
    k = gen_program(p, 150, 32'h4000_0000);
    iss = new();
    run(p, k + 8, k * 4, iss, 400000);

    $display("mechanisms: one-stage=%0d two-stage=%0d shift=%0d trap=%0d fetch=%0d rom-data=%0d",
             n_one, n_two, n_shift, n_trap, n_fetch, n_romrd);
    $display("  sram-rd=%0d sram-wr=%0d gpio-rd=%0d gpio-wr=%0d unmapped=%0d taken=%0d not-taken=%0d",
             n_ramrd, n_ramwr, n_gpiord, n_gpiowr, n_unmapped, n_taken, n_nottaken);
    check(n_one > 0, "one-stage never ran");
    check(n_two > 0, "two-stage never ran");
    check(n_shift > 0, "shift never ran");
    check(n_trap > 0, "trap never taken");
    check(n_fetch > 0, "no fetch");
    check(n_romrd > 0, "no LPROM data read");
    check(n_ramrd > 0, "no SRAM read");
    check(n_ramwr > 0, "no SRAM write");
    check(n_gpiord > 0, "no GPIO read");
    check(n_gpiowr > 0, "no GPIO write");
    check(n_unmapped > 0, "no unmapped access");
    check(n_taken > 0, "no taken branch");
    check(n_nottaken > 0, "no not-taken branch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
