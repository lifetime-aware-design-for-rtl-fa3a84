// tb_flexibits_bufreg1: checks buffer register #1 at W = 1, 4 and 8: after
// a stage of beats it must hold a + imm (bit 0 cleared for JALR), and a
// following stage of rotation must hand the same word out beat by beat.
module tb_flexibits_bufreg1;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bit done[3];

  for (genvar g = 0; g < 3; g++) begin : gw
    localparam int W = (g == 0) ? 1 : (g == 1) ? 4 : 8;
    localparam int B = 32 / W;
    logic add_en = 0, rot_en = 0, first = 0, clr_lsb = 0;
    logic [W-1:0] a_beat = '0, imm_beat = '0, target_beat;
    logic [31:0] q;
    flexibits_bufreg1 #(.W(W)) dut (.*);
    initial begin
      for (int t = 0; t < 200; t++) begin
        logic [31:0] a, imm, exp, got;
        a = $urandom(); imm = $urandom(); clr_lsb = t[0];
        exp = a + imm; if (clr_lsb) exp[0] = 0;
        for (int k = 0; k < B; k++) begin
          @(negedge clk); add_en = 1; first = (k == 0);
          a_beat = a[k*W +: W]; imm_beat = imm[k*W +: W];
        end
        @(negedge clk); add_en = 0;
        checks++; if (q !== exp) begin failures++; $display("W=%0d q=%h exp=%h", W, q, exp); end
        for (int k = 0; k < B; k++) begin
          rot_en = 1; first = (k == 0); #1 got[k*W +: W] = target_beat;
          @(negedge clk);
        end
        rot_en = 0;
        checks++; if (got !== exp || q !== exp) failures++;
      end
      done[g] = 1;
    end
  end

  initial begin
    fork
      wait (done[0] && done[1] && done[2]);
      begin repeat (100000) @(posedge clk); failures++; end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
