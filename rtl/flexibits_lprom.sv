// flexibits_lprom: program memory (LPROM) of the FlexiBits SoC.
//
// Non-volatile, read-only memory for code and constants, ROM_WORDS words of
// 32 bits, read by word address. Requests follow the SoC bus handshake: the
// read data and the acknowledge come one cycle after the request and the
// acknowledge lasts one cycle. Bus writes are acknowledged and ignored. The
// source uses LPROM for instructions and NVM data; since its contents are
// fixed at manufacture, this model has a separate programming port
// (prog_we/prog_addr/prog_data) that stands in for that step. The port, the
// read timing and the size are this design's choices.
//
// Lint note: the write data, byte selects and write enable of the request
// are unused, since the ROM ignores bus writes; the shared request struct
// is kept so that every slave has the same port type.
module flexibits_lprom
  import flexibits_pkg::*;
#(
  parameter int unsigned ROM_WORDS = 1024,
  localparam int unsigned AW = $clog2(ROM_WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  bus_req_t      req,
  output bus_rsp_t      rsp,
  input  logic          prog_we,
  input  logic [AW-1:0] prog_addr,
  input  logic [31:0]   prog_data
);

  logic [31:0] mem [ROM_WORDS];

  always_ff @(posedge clk)
    if (prog_we) mem[prog_addr] <= prog_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp <= '0;
    end else begin
      rsp.ack <= req.cyc && !rsp.ack;
      rsp.rdt <= mem[req.adr[AW+1:2]];
    end
  end

endmodule
