// flexibits_rf_ram: register-file storage of the FlexiBits core.
//
// The source keeps the register file out of the core's logic and implements
// it as SRAM. This is that memory written as an array: 16 RV32E registers of
// 32 bits stored as 16*32/W words of W bits, word {reg, beat}. Two read
// ports (rs1, rs2) and one write port (rd) are used in the same beat. Reads
// are asynchronous and writes take effect at the clock edge, so a register
// read and written in the same beat returns the old beat. Port structure and
// read timing are this design's choice.
module flexibits_rf_ram #(
  parameter int unsigned W = 1,
  localparam int unsigned DEPTH = 16 * 32 / W,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr1,
  input  logic [AW-1:0] raddr2,
  output logic [W-1:0]  rdata1,
  output logic [W-1:0]  rdata2,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata1 = mem[raddr1];
  assign rdata2 = mem[raddr2];

endmodule
