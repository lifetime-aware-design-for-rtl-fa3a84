// flexibits_sram: volatile data memory (SRAM) of the FlexiBits SoC.
//
// RAM_WORDS words of 32 bits with byte-select writes, for stack, globals and
// sensor samples. A request is acknowledged one cycle later; a write takes
// effect at the request edge, read data is registered. The source places
// SRAM beside the core for volatile data; size and timing are this design's
// choices.
module flexibits_sram
  import flexibits_pkg::*;
#(
  parameter int unsigned RAM_WORDS = 256,
  localparam int unsigned AW = $clog2(RAM_WORDS)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp
);

  logic [31:0]   mem [RAM_WORDS];
  logic [AW-1:0] a;
  assign a = req.adr[AW+1:2];

  always_ff @(posedge clk) begin
    if (req.cyc && !rsp.ack && req.we)
      for (int b = 0; b < 4; b++)
        if (req.sel[b]) mem[a][8*b +: 8] <= req.dat[8*b +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp <= '0;
    end else begin
      rsp.ack <= req.cyc && !rsp.ack;
      rsp.rdt <= mem[a];
    end
  end

endmodule
