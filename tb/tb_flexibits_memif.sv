// tb_flexibits_memif: checks the memory interface's lane steering for every
// size, offset and signedness with random data: store data replication and
// byte selects, load alignment with sign or zero extension.
module tb_flexibits_memif;
  logic [1:0] adr_lo, size;
  logic is_signed;
  logic [31:0] st_data, rdt, wdat, ld_data;
  logic [3:0] sel;
  int checks = 0, failures = 0;

  flexibits_memif dut (.*);

  initial begin
    fork
      for (int t = 0; t < 2000; t++) begin
        logic [31:0] el, w;
        logic [3:0] es;
        adr_lo = 2'($urandom()); size = 2'($urandom_range(0, 2));
        if (size == 1) adr_lo[0] = 0;
        if (size == 2) adr_lo = 0;
        is_signed = 1'($urandom()); st_data = $urandom(); rdt = $urandom();
        #1;
        w = rdt >> (8 * adr_lo);
        case (size)
          0: begin es = 4'b1 << adr_lo; el = is_signed ? {{24{w[7]}}, w[7:0]} : {24'd0, w[7:0]}; end
          1: begin es = 4'b11 << adr_lo; el = is_signed ? {{16{w[15]}}, w[15:0]} : {16'd0, w[15:0]}; end
          default: begin es = 4'hf; el = rdt; end
        endcase
        checks += 3;
        if (sel !== es) failures++;
        if (ld_data !== el) failures++;
        for (int b = 0; b < 4; b++)
          if (es[b] && wdat[8*b +: 8] !== st_data[8*(b - adr_lo) +: 8]) begin failures++; break; end
      end
      begin #100000; failures++; end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
