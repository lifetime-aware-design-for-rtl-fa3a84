// flexibits_interconnect: on-chip bus of the FlexiBits SoC.
//
// Connects the core's instruction and data buses to the LPROM, the SRAM and
// the GPIO peripheral. Address map (bits 31:30 of the address): 0 LPROM at
// 0x0000_0000, 1 SRAM at 0x4000_0000, 2 GPIO at 0x8000_0000, 3 unmapped
// (acknowledged, reads zero, writes dropped). The LPROM is reachable from
// both buses, so that code and read-only data share it; the core never
// requests on both buses at once (it fetches, then accesses data), so the
// LPROM port is simply multiplexed and no arbitration is needed. An
// assertion checks that. The map and this sharing are this design's choices.
//
// Lint note: rst_n also disables the one-master assertion, which the linter
// reports as a reset used both synchronously and asynchronously; the
// assertion is not part of the circuit.
module flexibits_interconnect
  import flexibits_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t ibus_req,
  output bus_rsp_t ibus_rsp,
  input  bus_req_t dbus_req,
  output bus_rsp_t dbus_rsp,
  output bus_req_t rom_req,
  input  bus_rsp_t rom_rsp,
  output bus_req_t ram_req,
  input  bus_rsp_t ram_rsp,
  output bus_req_t gpio_req,
  input  bus_rsp_t gpio_rsp
);

  logic [1:0] dsel;
  logic       nul_ack;
  assign dsel = dbus_req.adr[31:30];

  always_comb begin
    rom_req      = ibus_req.cyc ? ibus_req : dbus_req;
    rom_req.cyc  = ibus_req.cyc || (dbus_req.cyc && dsel == 2'd0);
    rom_req.we   = !ibus_req.cyc && dbus_req.we;
    ram_req      = dbus_req;
    ram_req.cyc  = dbus_req.cyc && dsel == 2'd1;
    gpio_req     = dbus_req;
    gpio_req.cyc = dbus_req.cyc && dsel == 2'd2;

    ibus_rsp     = rom_rsp;
    ibus_rsp.ack = ibus_req.cyc && rom_rsp.ack;
    unique case (dsel)
      2'd0:    dbus_rsp = rom_rsp;
      2'd1:    dbus_rsp = ram_rsp;
      2'd2:    dbus_rsp = gpio_rsp;
      default: dbus_rsp = '{rdt: 32'd0, ack: nul_ack};
    endcase
    dbus_rsp.ack = dbus_req.cyc && dbus_rsp.ack && !ibus_req.cyc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) nul_ack <= 1'b0;
    else        nul_ack <= dbus_req.cyc && dsel == 2'd3 && !nul_ack;
  end

  a_one_master: assert property (@(posedge clk) disable iff (!rst_n)
    !(ibus_req.cyc && dbus_req.cyc));

endmodule
