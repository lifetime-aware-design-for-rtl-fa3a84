// tb_flexibits_rf_ram: checks the register-file memory at W = 4: random
// writes followed by reads on both ports against a shadow array, and that a
// read in the same cycle as a write to that word returns the old value.
module tb_flexibits_rf_ram;
  localparam int W = 4, D = 16 * 32 / W, AW = $clog2(D);
  logic clk = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] raddr1 = '0, raddr2 = '0, waddr = '0;
  logic [W-1:0] rdata1, rdata2, wdata = '0;
  logic we = 0;
  logic [W-1:0] shadow [D];
  int checks = 0, failures = 0;

  flexibits_rf_ram #(.W(W)) dut (.*);

  initial begin
    fork
      begin
        for (int i = 0; i < D; i++) begin
          @(negedge clk); we = 1; waddr = AW'(i); wdata = W'($urandom()); shadow[i] = wdata;
        end
        for (int t = 0; t < 3000; t++) begin
          @(negedge clk);
          we = 1'($urandom()); waddr = AW'($urandom()); wdata = W'($urandom());
          raddr1 = AW'($urandom()); raddr2 = (t % 3 == 0) ? waddr : AW'($urandom());
          #1;
          checks += 2;
          if (rdata1 !== shadow[raddr1]) failures++;
          if (rdata2 !== shadow[raddr2]) failures++;
          @(posedge clk); #1 if (we) shadow[waddr] = wdata;
        end
      end
      begin repeat (100000) @(posedge clk); failures++; end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
