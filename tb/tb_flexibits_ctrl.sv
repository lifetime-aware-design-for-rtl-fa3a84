// tb_flexibits_ctrl: checks the control unit at W = 4. Over stages of 8
// beats it checks: PC+4 update, hold (rotation without update), the jump
// target, taken and not-taken branches for all six conditions, the CSR
// (trap) source, the PC+4 beats handed to the register file, and reset.
module tb_flexibits_ctrl;
  import flexibits_pkg::*;
  localparam int W = 4, B = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, rot_en = 0, upd_en = 0, is_branch = 0, eq = 0, lt = 0, taken;
  logic [2:0] cnt = '0, br_funct3 = '0;
  pc_sel_e pc_sel = PC_PLUS4;
  logic [W-1:0] target_beat = '0, csr_beat = '0, pc_beat, pc4_beat;
  logic [31:0] pc;
  int checks = 0, failures = 0;

  flexibits_ctrl #(.W(W), .RESET_PC(32'h100)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s pc=%h", what, pc); end
  endtask

  // one stage of beats; returns the PC+4 word seen on pc4_beat
  task automatic stage(bit upd, pc_sel_e sel, logic [31:0] tgt, logic [31:0] csrv, output logic [31:0] p4);
    for (int k = 0; k < B; k++) begin
      @(negedge clk);
      rot_en = 1; upd_en = upd; pc_sel = sel; cnt = 3'(k);
      target_beat = tgt[k*W +: W]; csr_beat = csrv[k*W +: W];
      #1 p4[k*W +: W] = pc4_beat;
    end
    @(negedge clk); rot_en = 0; upd_en = 0;
  endtask

  initial begin
    fork
      begin
        logic [31:0] p4, old, tgt;
        repeat (2) @(negedge clk);
        chk(pc == 32'h100, "reset pc");
        rst_n = 1;
        for (int t = 0; t < 40; t++) begin
          old = pc; tgt = $urandom() & ~32'd3;
          case (t % 5)
            0: begin stage(1, PC_PLUS4, tgt, 0, p4); chk(pc == old + 4 && p4 == old + 4, "plus4"); end
            1: begin stage(0, PC_TARGET, tgt, 0, p4); chk(pc == old, "hold"); end
            2: begin is_branch = 0; stage(1, PC_TARGET, tgt, 0, p4); chk(pc == tgt, "jump"); end
            3: begin stage(1, PC_CSR, 0, tgt, p4); chk(pc == tgt, "csr"); end
            4: begin
              bit exp;
              is_branch = 1; br_funct3 = 3'($urandom_range(0, 7)); if (br_funct3[2:1] == 2'b01) br_funct3 = 0;
              eq = 1'($urandom()); lt = 1'($urandom());
              exp = br_funct3[2] ? (lt ^ br_funct3[0]) : (eq ^ br_funct3[0]);
              stage(1, PC_TARGET, tgt, 0, p4);
              chk(taken == exp, "branch condition");
              chk(pc == (exp ? tgt : old + 4), "branch pc");
              is_branch = 0;
            end
          endcase
        end
      end
      begin repeat (100000) @(posedge clk); failures++; end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
