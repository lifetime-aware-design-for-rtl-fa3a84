// tb_flexibits_csr: checks the CSR block at W = 8: CSRRW/CSRRS/CSRRC on each
// implemented CSR against a shadow model (old value returned on rd_beat),
// an unimplemented address reads zero, ECALL saves the PC in mepc, sets
// mcause and returns mtvec as the next PC, MRET returns mepc.
module tb_flexibits_csr;
  import flexibits_pkg::*;
  localparam int W = 8, B = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, en = 0, first = 0, is_trap = 0, is_mret = 0;
  csr_op_e op = CSR_NONE;
  csr_addr_e addr = CSRA_NONE;
  logic [3:0] trap_cause = '0;
  logic [W-1:0] src_beat = '0, pc_beat = '0, rd_beat, pc_out_beat;
  logic [31:0] shadow[5];
  int checks = 0, failures = 0;

  flexibits_csr #(.W(W)) dut (.*);

  task automatic stage(logic [31:0] src, logic [31:0] pcv, output logic [31:0] rd, output logic [31:0] po);
    for (int k = 0; k < B; k++) begin
      @(negedge clk); en = 1; first = (k == 0);
      src_beat = src[k*W +: W]; pc_beat = pcv[k*W +: W];
      #1 rd[k*W +: W] = rd_beat; po[k*W +: W] = pc_out_beat;
    end
    @(negedge clk); en = 0;
  endtask

  initial begin
    fork
      begin
        logic [31:0] rd, po, src, pcv;
        foreach (shadow[i]) shadow[i] = 0;
        repeat (2) @(negedge clk); rst_n = 1;
        for (int t = 0; t < 120; t++) begin
          src = $urandom(); pcv = $urandom();
          if (t % 10 == 9) begin
            is_trap = 1; trap_cause = t[4] ? 4'd11 : 4'd3; op = CSR_NONE;
            stage(src, pcv, rd, po);
            is_trap = 0;
            checks += 1; if (po !== shadow[CSRA_MTVEC]) failures++;
            shadow[CSRA_MEPC] = pcv; shadow[CSRA_MCAUSE] = 32'(trap_cause);
          end else if (t % 10 == 4) begin
            is_mret = 1; op = CSR_NONE;
            stage(src, pcv, rd, po);
            is_mret = 0;
            checks += 1; if (po !== shadow[CSRA_MEPC]) failures++;
          end else begin
            op = csr_op_e'($urandom_range(1, 3)); addr = csr_addr_e'($urandom_range(0, 4));
            stage(src, pcv, rd, po);
            checks += 1;
            if (rd !== shadow[addr]) begin failures++; $display("FAIL read addr %0d %h exp %h", addr, rd, shadow[addr]); end
            if (addr != CSRA_NONE)
              case (op)
                CSR_RW: shadow[addr] = src;
                CSR_RS: shadow[addr] |= src;
                CSR_RC: shadow[addr] &= ~src;
                default: ;
              endcase
            op = CSR_NONE;
          end
        end
      end
      begin repeat (100000) @(posedge clk); failures++; end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
