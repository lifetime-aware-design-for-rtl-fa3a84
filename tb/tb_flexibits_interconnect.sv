// tb_flexibits_interconnect: checks address decoding and routing with three
// slave models that acknowledge one cycle after a request and return a
// slave-specific read word. Instruction fetches go to the ROM, data
// accesses to ROM, SRAM, GPIO or the unmapped region by address bits
// [31:30]; the unmapped region acknowledges with zero; only the selected
// slave sees cyc, and each response reaches only the requesting master.
module tb_flexibits_interconnect;
  import flexibits_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  bus_req_t ibus_req = '0, dbus_req = '0, rom_req, ram_req, gpio_req;
  bus_rsp_t ibus_rsp, dbus_rsp, rom_rsp, ram_rsp, gpio_rsp;
  int checks = 0, failures = 0;
  int rom_hits = 0, ram_hits = 0, gpio_hits = 0;

  flexibits_interconnect dut (.*);

  // slave models: data = tag xor address
  always_ff @(posedge clk) begin
    rom_rsp.ack  <= rst_n && rom_req.cyc && !rom_rsp.ack;
    rom_rsp.rdt  <= 32'h1000_0000 ^ rom_req.adr;
    ram_rsp.ack  <= rst_n && ram_req.cyc && !ram_rsp.ack;
    ram_rsp.rdt  <= 32'h2000_0000 ^ ram_req.adr;
    gpio_rsp.ack <= rst_n && gpio_req.cyc && !gpio_rsp.ack;
    gpio_rsp.rdt <= 32'h3000_0000 ^ gpio_req.adr;
    if (rom_req.cyc && !rom_rsp.ack) rom_hits <= rom_hits + 1;
    if (ram_req.cyc && !ram_rsp.ack) ram_hits <= ram_hits + 1;
    if (gpio_req.cyc && !gpio_rsp.ack) gpio_hits <= gpio_hits + 1;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    rom_rsp = '0; ram_rsp = '0; gpio_rsp = '0;
    fork
      begin
        logic [31:0] adr, exp;
        int lat, r0, r1, r2;
        repeat (2) @(negedge clk); rst_n = 1;
        for (int t = 0; t < 400; t++) begin
          adr = $urandom() & ~32'd3;
          r0 = rom_hits; r1 = ram_hits; r2 = gpio_hits;
          @(negedge clk);
          lat = 0;
          if (t % 3 == 0) begin
            adr[31:30] = 0;
            ibus_req = '{adr: adr, dat: 0, sel: 4'hf, we: 0, cyc: 1}; #1;
            chk(rom_req.cyc && !ram_req.cyc && !gpio_req.cyc && rom_req.adr == adr, "fetch routing");
            do begin @(posedge clk); lat++; #1; chk(!dbus_rsp.ack, "no data ack on fetch"); end
              while (!ibus_rsp.ack && lat < 5);
            chk(lat == 1 && ibus_rsp.rdt == (32'h1000_0000 ^ adr), "fetch response");
            @(negedge clk); ibus_req.cyc = 0;
          end else begin
            dbus_req = '{adr: adr, dat: $urandom(), sel: 4'hf, we: 1'($urandom()), cyc: 1}; #1;
            case (adr[31:30])
              0: exp = 32'h1000_0000 ^ adr;
              1: exp = 32'h2000_0000 ^ adr;
              2: exp = 32'h3000_0000 ^ adr;
              default: exp = 0;
            endcase
            chk(rom_req.cyc == (adr[31:30] == 0) && ram_req.cyc == (adr[31:30] == 1)
                && gpio_req.cyc == (adr[31:30] == 2), "data routing");
            chk(adr[31:30] != 0 || rom_req.we == dbus_req.we, "rom write strobe");
            do begin @(posedge clk); lat++; #1; chk(!ibus_rsp.ack, "no fetch ack on data"); end
              while (!dbus_rsp.ack && lat < 5);
            chk(lat == 1 && dbus_rsp.rdt == exp, $sformatf("data response region %0d", adr[31:30]));
            @(negedge clk); dbus_req.cyc = 0;
          end
          @(negedge clk);
          chk(rom_hits + ram_hits + gpio_hits - r0 - r1 - r2 == (adr[31:30] == 3 ? 0 : 1), "one slave access");
        end
      end
      begin repeat (100000) @(posedge clk); failures++; $display("FAIL watchdog"); end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
