// tb_flexibits_sram: checks the data SRAM at its default size with random
// word, half-word and byte writes (byte enables) and reads against a model,
// including the one-cycle acknowledge latency of every access.
module tb_flexibits_sram;
  import flexibits_pkg::*;
  localparam int N = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  logic [31:0] model[N];
  int checks = 0, failures = 0;

  flexibits_sram dut (.*);

  task automatic access(logic [31:0] adr, bit we, logic [3:0] sel, logic [31:0] dat, output logic [31:0] rdt);
    int lat = 0;
    @(negedge clk);
    req = '{adr: adr, dat: dat, sel: sel, we: we, cyc: 1'b1};
    do begin @(posedge clk); lat++; #1; end while (!rsp.ack && lat < 10);
    rdt = rsp.rdt;
    checks++;
    if (lat != 1) begin failures++; $display("FAIL latency %0d", lat); end
    @(negedge clk); req.cyc = 0;
  endtask

  initial begin
    fork
      begin
        logic [31:0] r, d;
        logic [3:0] sel;
        int a;
        repeat (2) @(negedge clk); rst_n = 1;
        for (int i = 0; i < N; i++) begin
          model[i] = $urandom();
          access(32'h4000_0000 | (32'(i) << 2), 1, 4'hf, model[i], r);
        end
        for (int t = 0; t < 2000; t++) begin
          a = $urandom_range(0, N - 1);
          if ($urandom_range(0, 1)) begin
            case ($urandom_range(0, 2))
              0: sel = 4'hf;
              1: sel = $urandom_range(0, 1) ? 4'b0011 : 4'b1100;
              default: sel = 4'b0001 << $urandom_range(0, 3);
            endcase
            d = $urandom();
            access(32'h4000_0000 | (32'(a) << 2), 1, sel, d, r);
            for (int b = 0; b < 4; b++) if (sel[b]) model[a][8*b +: 8] = d[8*b +: 8];
          end else begin
            access(32'h4000_0000 | (32'(a) << 2), 0, 4'hf, 0, r);
            checks++;
            if (r !== model[a]) begin failures++; $display("FAIL read %0d %h exp %h", a, r, model[a]); end
          end
        end
      end
      begin repeat (200000) @(posedge clk); failures++; $display("FAIL watchdog"); end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
