// flexibits_rfif: register-file interface of the FlexiBits data plane.
//
// Forms the register-file addresses {register, beat} for the rs1, rs2 and rd
// ports, returns zero for reads of x0, and selects the W-bit write beat: the
// ALU result, the return address PC+4, buffer register #2 (load data or
// shift result), the set-less-than flag (bit 0 of the first beat), or the
// old CSR value. The write enable is raised on STAGE1 beats of one-stage
// instructions and on STAGE2 beats of two-stage ones, never for x0. The
// source shows the interface on both sides of the data plane; the write
// selection is this design's reading of the blocks it connects.
//
// Lint note: only the register numbers, rd_we and rd_sel fields of the
// decoded instruction are used here; the whole struct is passed so that
// the port follows the decoder's output type.
module flexibits_rfif
  import flexibits_pkg::*;
#(
  parameter int unsigned W = 1,
  localparam int unsigned BEATS = 32 / W,
  localparam int unsigned CW = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned AW = $clog2(16 * BEATS)
) (
  input  dec_t          dec,
  input  logic          upd_beat,
  input  logic [CW-1:0] cnt,
  input  logic [W-1:0]  alu_beat,
  input  logic [W-1:0]  pc4_beat,
  input  logic [W-1:0]  buf2_beat,
  input  logic          lt,
  input  logic [W-1:0]  csr_beat,
  input  logic [W-1:0]  rdata1,
  input  logic [W-1:0]  rdata2,
  output logic [AW-1:0] raddr1,
  output logic [AW-1:0] raddr2,
  output logic [AW-1:0] waddr,
  output logic          we,
  output logic [W-1:0]  wdata,
  output logic [W-1:0]  rs1_beat,
  output logic [W-1:0]  rs2_beat
);

  assign raddr1 = AW'({dec.rs1, cnt});
  assign raddr2 = AW'({dec.rs2, cnt});
  assign waddr  = AW'({dec.rd, cnt});
  assign we     = upd_beat && dec.rd_we && (dec.rd != 4'd0);

  assign rs1_beat = (dec.rs1 == 4'd0) ? '0 : rdata1;
  assign rs2_beat = (dec.rs2 == 4'd0) ? '0 : rdata2;

  always_comb begin
    unique case (dec.rd_sel)
      RD_PC4:  wdata = pc4_beat;
      RD_BUF2: wdata = buf2_beat;
      RD_CMP:  wdata = (cnt == '0) ? W'(lt) : '0;
      RD_CSR:  wdata = csr_beat;
      default: wdata = alu_beat;
    endcase
  end

endmodule
