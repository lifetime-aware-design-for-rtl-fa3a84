// flexibits_soc: FlexiBits system-on-chip, the top of the design.
//
// One FlexiBits core with a W-bit datapath (default W = 1, the SERV-class
// core of the fabricated chip), its register-file memory, an LPROM for code
// and constants, an SRAM for volatile data and a GPIO peripheral, joined by
// the on-chip bus. Software starts at address 0 (the LPROM) after the
// active-low reset is released. The LPROM programming port stands in for the
// manufacture-time programming of the ROM and must be used while the core is
// held in reset. 'retire' pulses once per completed instruction, for
// instruction counting. The memory sizes and the peripheral set are this
// design's choices: the source gives neither for the fabricated SoC.
//
// Lint note: the reset-usage and unused-bit warnings reported for this top
// come from its sub-blocks and are explained in their files.
module flexibits_soc
  import flexibits_pkg::*;
#(
  parameter int unsigned W         = 1,
  parameter int unsigned ROM_WORDS = 1024,  // 4 KiB LPROM
  parameter int unsigned RAM_WORDS = 256,   // 1 KiB SRAM
  parameter int unsigned NGPIO     = 8,
  localparam int unsigned RAW = $clog2(ROM_WORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NGPIO-1:0] gpio_in,
  output logic [NGPIO-1:0] gpio_out,
  input  logic             prog_we,
  input  logic [RAW-1:0]   prog_addr,
  input  logic [31:0]      prog_data,
  output logic             retire
);

  bus_req_t ibus_req, dbus_req, rom_req, ram_req, gpio_req;
  bus_rsp_t ibus_rsp, dbus_rsp, rom_rsp, ram_rsp, gpio_rsp;

  flexibits_core #(.W(W)) u_core (
    .clk, .rst_n, .ibus_req, .ibus_rsp, .dbus_req, .dbus_rsp, .retire
  );

  flexibits_interconnect u_bus (
    .clk, .rst_n, .ibus_req, .ibus_rsp, .dbus_req, .dbus_rsp,
    .rom_req, .rom_rsp, .ram_req, .ram_rsp, .gpio_req, .gpio_rsp
  );

  flexibits_lprom #(.ROM_WORDS(ROM_WORDS)) u_lprom (
    .clk, .rst_n, .req(rom_req), .rsp(rom_rsp), .prog_we, .prog_addr, .prog_data
  );

  flexibits_sram #(.RAM_WORDS(RAM_WORDS)) u_sram (
    .clk, .rst_n, .req(ram_req), .rsp(ram_rsp)
  );

  flexibits_gpio #(.NGPIO(NGPIO)) u_gpio (
    .clk, .rst_n, .req(gpio_req), .rsp(gpio_rsp), .gpio_in, .gpio_out
  );

endmodule
