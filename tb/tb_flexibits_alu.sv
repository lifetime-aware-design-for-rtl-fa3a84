// tb_flexibits_alu: checks the W-bit serial ALU at W = 1, 4 and 8. Random
// 32-bit operands are fed beat by beat for every operation; the assembled
// result word and the eq/lt flags (signed and unsigned) are compared with
// 32-bit arithmetic done in the testbench.
module tb_flexibits_alu;
  import flexibits_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bit done[3];

  for (genvar g = 0; g < 3; g++) begin : gw
    localparam int W = (g == 0) ? 1 : (g == 1) ? 4 : 8;
    localparam int B = 32 / W;
    logic en = 0, first = 0, last = 0, sub = 0, cu = 0;
    logic [W-1:0] opa = '0, opb = '0, res;
    alu_op_e op = ALU_ADD;
    logic eq, lt;
    flexibits_alu #(.W(W)) dut (.clk, .en, .first, .last, .opa, .opb, .op, .sub,
                                .cmp_unsigned(cu), .res, .eq, .lt);
    initial begin
      for (int t = 0; t < 300; t++) begin
        logic [31:0] a, b, r, exp;
        a = $urandom(); b = (t % 5 == 0) ? a : $urandom();
        if (t % 7 == 0) b[31] = ~a[31];
        op = alu_op_e'(t % 4); sub = (t % 8) >= 4; cu = t[3];
        for (int k = 0; k < B; k++) begin
          @(negedge clk);
          en = 1; first = (k == 0); last = (k == B - 1);
          opa = a[k*W +: W]; opb = b[k*W +: W];
          #1 r[k*W +: W] = res;
        end
        @(negedge clk); en = 0;
        case (op)
          ALU_ADD: exp = sub ? a - b : a + b;
          ALU_XOR: exp = a ^ b;
          ALU_OR:  exp = a | b;
          default: exp = a & b;
        endcase
        checks += 1; if (r !== exp) begin failures++; $display("W=%0d res %h exp %h", W, r, exp); end
        if (sub) begin
          checks += 2;
          if (eq !== (a == b)) begin failures++; $display("W=%0d eq", W); end
          if (lt !== (cu ? (a < b) : ($signed(a) < $signed(b)))) begin
            failures++; $display("W=%0d lt a=%h b=%h u=%0d", W, a, b, cu);
          end
        end
      end
      done[g] = 1;
    end
  end

  initial begin
    fork
      wait (done[0] && done[1] && done[2]);
      begin repeat (100000) @(posedge clk); failures++; $display("watchdog"); end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
