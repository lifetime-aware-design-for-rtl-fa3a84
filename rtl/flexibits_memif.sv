// flexibits_memif: memory interface of the FlexiBits data plane.
//
// Combinational lane steering between the core and the 32-bit data bus.
// For stores it replicates the byte or halfword of the store data (held in
// buffer register #2) over the bus and sets the byte selects from the low
// address bits (held in buffer register #1). For loads it shifts the
// addressed byte or halfword of the bus read data down and sign- or
// zero-extends it, for buffer register #2 to pass to the register file in
// STAGE2. Misaligned accesses are not trapped: the word address is used and
// the lanes wrap, a choice of this design (the source does not cover it).
//
// Lint note: the upper half of the shifted read word is unused, since
// only byte and half-word loads need the shifted value.
module flexibits_memif (
  input  logic [1:0]  adr_lo,
  input  logic [1:0]  size,       // 0 byte, 1 half, 2 word
  input  logic        is_signed,
  input  logic [31:0] st_data,
  input  logic [31:0] rdt,
  output logic [31:0] wdat,
  output logic [3:0]  sel,
  output logic [31:0] ld_data
);

  logic [31:0] rsh;

  always_comb begin
    unique case (size)
      2'd0:    begin wdat = {4{st_data[7:0]}};  sel = 4'b0001 << adr_lo; end
      2'd1:    begin wdat = {2{st_data[15:0]}}; sel = adr_lo[1] ? 4'b1100 : 4'b0011; end
      default: begin wdat = st_data;            sel = 4'b1111; end
    endcase
    rsh = rdt >> {adr_lo, 3'b000};
    unique case (size)
      2'd0:    ld_data = {{24{is_signed & rsh[7]}}, rsh[7:0]};
      2'd1:    ld_data = {{16{is_signed & rsh[15]}}, rsh[15:0]};
      default: ld_data = rdt;
    endcase
  end

endmodule
