// tb_flexibits_lprom: checks the program ROM at its default size. The
// whole array is filled through the programming port, then random word
// reads are checked for data and for the one-cycle acknowledge latency, and
// a bus write is checked to leave the contents unchanged.
module tb_flexibits_lprom;
  import flexibits_pkg::*;
  localparam int N = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, prog_we = 0;
  logic [$clog2(N)-1:0] prog_addr = '0;
  logic [31:0] prog_data = '0;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  logic [31:0] model[N];
  int checks = 0, failures = 0;

  flexibits_lprom dut (.*);

  task automatic access(logic [31:0] adr, bit we, logic [31:0] dat, output logic [31:0] rdt);
    int lat = 0;
    @(negedge clk);
    req = '{adr: adr, dat: dat, sel: 4'hf, we: we, cyc: 1'b1};
    do begin @(posedge clk); lat++; #1; end while (!rsp.ack && lat < 10);
    rdt = rsp.rdt;
    checks++;
    if (lat != 1) begin failures++; $display("FAIL latency %0d", lat); end
    @(negedge clk); req.cyc = 0;
  endtask

  initial begin
    fork
      begin
        logic [31:0] r;
        int a;
        repeat (2) @(negedge clk); rst_n = 1;
        for (int i = 0; i < N; i++) begin
          @(negedge clk); prog_we = 1; prog_addr = 10'(i); model[i] = $urandom(); prog_data = model[i];
        end
        @(negedge clk); prog_we = 0;
        for (int t = 0; t < 500; t++) begin
          a = $urandom_range(0, N - 1);
          if (t % 7 == 3) access(32'(a) << 2, 1, ~model[a], r);
          access(32'(a) << 2, 0, 0, r);
          checks++;
          if (r !== model[a]) begin failures++; $display("FAIL read %0d %h exp %h", a, r, model[a]); end
        end
      end
      begin repeat (100000) @(posedge clk); failures++; $display("FAIL watchdog"); end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
