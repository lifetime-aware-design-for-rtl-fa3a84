// tb_flexibits_rfif: checks the register-file interface at W = 4: port
// addresses {register, beat}, zero for x0 reads, the write-data source for
// each rd_sel (the set-less-than flag only in beat 0) and the write enable
// (only on update beats, never for x0 or instructions without rd).
module tb_flexibits_rfif;
  import flexibits_pkg::*;
  localparam int W = 4, AW = 7;
  dec_t dec;
  logic upd_beat, lt, we;
  logic [2:0] cnt;
  logic [W-1:0] alu_beat, pc4_beat, buf2_beat, csr_beat, rdata1, rdata2, wdata, rs1_beat, rs2_beat;
  logic [AW-1:0] raddr1, raddr2, waddr;
  int checks = 0, failures = 0;

  flexibits_rfif #(.W(W)) dut (.*);

  initial begin
    fork
      for (int t = 0; t < 3000; t++) begin
        logic [W-1:0] exp;
        dec = '0;
        dec.rs1 = 4'($urandom()); dec.rs2 = 4'($urandom()); dec.rd = 4'($urandom());
        dec.rd_we = 1'($urandom()); dec.rd_sel = rd_sel_e'($urandom_range(0, 4));
        upd_beat = 1'($urandom()); cnt = 3'($urandom()); lt = 1'($urandom());
        alu_beat = W'($urandom()); pc4_beat = W'($urandom()); buf2_beat = W'($urandom());
        csr_beat = W'($urandom()); rdata1 = W'($urandom()); rdata2 = W'($urandom());
        #1;
        case (dec.rd_sel)
          RD_ALU: exp = alu_beat;
          RD_PC4: exp = pc4_beat;
          RD_BUF2: exp = buf2_beat;
          RD_CMP: exp = (cnt == 0) ? W'(lt) : '0;
          default: exp = csr_beat;
        endcase
        checks += 6;
        if (raddr1 !== {dec.rs1, cnt} || raddr2 !== {dec.rs2, cnt} || waddr !== {dec.rd, cnt}) failures++;
        if (rs1_beat !== (dec.rs1 == 0 ? '0 : rdata1)) failures++;
        if (rs2_beat !== (dec.rs2 == 0 ? '0 : rdata2)) failures++;
        if (wdata !== exp) failures++;
        if (we !== (upd_beat && dec.rd_we && dec.rd != 0)) failures++;
        if (dec.rd == 0 && we) failures++;
      end
      begin #100000; failures++; end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
