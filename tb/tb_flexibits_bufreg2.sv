// tb_flexibits_bufreg2: checks buffer register #2 at W = 1 and 4: shifting
// in an operand and a shift amount, running the SHIFT phase until done
// (result and number of shift cycles: shamt at W = 1, shamt/W + shamt%W at
// W = 4), shifting the result out beat by beat, and the parallel load.
module tb_flexibits_bufreg2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bit done[2];

  for (genvar g = 0; g < 2; g++) begin : gw
    localparam int W = (g == 0) ? 1 : 4;
    localparam int B = 32 / W;
    localparam int CW = $clog2(B);
    logic in_en = 0, shift_en = 0, sr = 0, sa = 0, load_en = 0, out_en = 0;
    logic [CW-1:0] cnt = '0;
    logic [W-1:0] in_beat = '0, amt_beat = '0, out_beat;
    logic [31:0] load_data = '0, q;
    logic shift_done;
    flexibits_bufreg2 #(.W(W)) dut (.clk, .in_en, .cnt, .in_beat, .amt_beat, .shift_en,
      .shift_right(sr), .shift_arith(sa), .load_en, .load_data, .out_en, .q, .out_beat, .shift_done);
    initial begin
      for (int t = 0; t < 150; t++) begin
        logic [31:0] v, amt, exp, got;
        int steps, exps;
        v = $urandom(); amt = $urandom(); sr = t[0]; sa = t[1];
        for (int k = 0; k < B; k++) begin
          @(negedge clk); in_en = 1; cnt = CW'(k); in_beat = v[k*W +: W]; amt_beat = amt[k*W +: W];
        end
        @(negedge clk); in_en = 0;
        checks++; if (q !== v) failures++;
        shift_en = 1; steps = 0;
        while (!shift_done && steps < 40) begin @(negedge clk); steps++; end
        shift_en = 0;
        exp = !sr ? v << amt[4:0] : sa ? 32'($signed(v) >>> amt[4:0]) : v >> amt[4:0];
        exps = (W == 1) ? amt[4:0] : amt[4:0] / W + amt[4:0] % W;
        checks += 2;
        if (q !== exp) begin failures++; $display("W=%0d shift q=%h exp=%h", W, q, exp); end
        if (steps != exps) begin failures++; $display("W=%0d steps %0d exp %0d", W, steps, exps); end
        if (t % 3 == 0) begin
          load_data = $urandom(); load_en = 1; exp = load_data;
          @(negedge clk); load_en = 0;
        end
        out_en = 1;
        for (int k = 0; k < B; k++) begin #1 got[k*W +: W] = out_beat; @(negedge clk); end
        out_en = 0;
        checks++; if (got !== exp) begin failures++; $display("W=%0d out %h exp %h", W, got, exp); end
      end
      done[g] = 1;
    end
  end

  initial begin
    fork
      wait (done[0] && done[1]);
      begin repeat (200000) @(posedge clk); failures++; end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
