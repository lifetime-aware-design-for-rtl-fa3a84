// tb_flexibits_immdec: checks the immediate decoder at W = 1 and 8 for
// random instructions of every format (I, S, B, U, J, CSR uimm): the beats
// shifted out are reassembled and compared with the immediate taken apart by
// hand from the instruction word.
module tb_flexibits_immdec;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bit done[2];

  function automatic logic [31:0] ref_imm(logic [31:0] i);
    case (i[6:2])
      5'b01000: return 32'($signed({i[31:25], i[11:7]}));
      5'b11000: return 32'($signed({i[31], i[7], i[30:25], i[11:8], 1'b0}));
      5'b01101, 5'b00101: return {i[31:12], 12'h000};
      5'b11011: return 32'($signed({i[31], i[19:12], i[20], i[30:21], 1'b0}));
      5'b11100: return 32'(i[19:15]);
      default:  return 32'($signed(i[31:20]));
    endcase
  endfunction

  for (genvar g = 0; g < 2; g++) begin : gw
    localparam int W = (g == 0) ? 1 : 8;
    logic load = 0, shift = 0;
    logic [31:0] instr = '0;
    logic [W-1:0] imm_beat;
    flexibits_immdec #(.W(W)) dut (.clk, .load, .instr, .shift, .imm_beat);
    initial begin
      logic [4:0] opcs[8] = '{5'b00000, 5'b00100, 5'b01000, 5'b11000, 5'b01101, 5'b00101, 5'b11011, 5'b11100};
      for (int t = 0; t < 400; t++) begin
        logic [31:0] got;
        @(negedge clk);
        instr = {$urandom()} & ~32'h7f | {opcs[t % 8], 2'b11};
        load = 1;
        @(negedge clk); load = 0; shift = 1;
        for (int k = 0; k < 32 / W; k++) begin
          got[k*W +: W] = imm_beat;
          @(negedge clk);
        end
        shift = 0;
        checks++;
        if (got !== ref_imm(instr)) begin
          failures++; $display("W=%0d instr %h got %h exp %h", W, instr, got, ref_imm(instr));
        end
      end
      done[g] = 1;
    end
  end

  initial begin
    fork
      wait (done[0] && done[1]);
      begin repeat (100000) @(posedge clk); failures++; end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
