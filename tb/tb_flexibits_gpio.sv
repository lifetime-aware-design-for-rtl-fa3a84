// tb_flexibits_gpio: checks the GPIO block at its default width: writes to
// the output register (word 0) drive the pins and read back, byte enables
// are honoured, writes to the input word do nothing, and pin changes
// appear in the input word after the two-flop synchroniser (not earlier
// than two cycles). Every access must be acknowledged after one cycle.
module tb_flexibits_gpio;
  import flexibits_pkg::*;
  localparam int NG = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  logic [NG-1:0] gpio_in = '0, gpio_out;
  int checks = 0, failures = 0;

  flexibits_gpio dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic access(logic [31:0] adr, bit we, logic [3:0] sel, logic [31:0] dat, output logic [31:0] rdt);
    int lat = 0;
    @(negedge clk);
    req = '{adr: adr, dat: dat, sel: sel, we: we, cyc: 1'b1};
    do begin @(posedge clk); lat++; #1; end while (!rsp.ack && lat < 10);
    rdt = rsp.rdt;
    chk(lat == 1, "latency");
    @(negedge clk); req.cyc = 0;
  endtask

  initial begin
    fork
      begin
        logic [31:0] r;
        logic [NG-1:0] o = '0, v;
        repeat (2) @(negedge clk);
        chk(gpio_out == 0, "reset value");
        rst_n = 1;
        for (int t = 0; t < 200; t++) begin
          case (t % 4)
            0: begin
              v = NG'($urandom());
              access(32'h8000_0000, 1, 4'($urandom_range(0, 15)), 32'(v), r);
              if (req.sel[0]) o = v;
              chk(gpio_out == o, "output pins");
              access(32'h8000_0000, 0, 4'hf, 0, r);
              chk(r == 32'(o), "output readback");
            end
            1: begin
              access(32'h8000_0004, 1, 4'hf, 32'($urandom()), r);
              chk(gpio_out == o, "input word is read-only");
            end
            default: begin
              v = NG'($urandom());
              @(negedge clk); gpio_in = v;
              // one cycle later the value must not yet be visible
              @(posedge clk); #1;
              chk(dut.sync2 != v || v == dut.sync1, "synchroniser depth");
              repeat (2) @(negedge clk);
              access(32'h8000_0004, 0, 4'hf, 0, r);
              chk(r == 32'(v), "input word");
            end
          endcase
        end
      end
      begin repeat (100000) @(posedge clk); failures++; $display("FAIL watchdog"); end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
