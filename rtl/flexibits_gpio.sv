// flexibits_gpio: general-purpose I/O peripheral of the FlexiBits SoC.
//
// The source says the SoC has peripheral interfaces but not which. This is
// the simplest one a sensing tag needs: NGPIO input pins (sensor or
// control inputs, two-flop synchronised) and NGPIO output pins (results,
// actuator control). Word 0 is the output register (read/write, byte
// selects honoured), word 1 reads the synchronised inputs. Acknowledge one
// cycle after the request, like the memories.
module flexibits_gpio
  import flexibits_pkg::*;
#(
  parameter int unsigned NGPIO = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  bus_req_t         req,
  output bus_rsp_t         rsp,
  input  logic [NGPIO-1:0] gpio_in,
  output logic [NGPIO-1:0] gpio_out
);

  logic [NGPIO-1:0] sync1, sync2;
  logic [31:0]      out_word;

  always_comb begin
    out_word = '0;
    out_word[NGPIO-1:0] = gpio_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp      <= '0;
      gpio_out <= '0;
      sync1    <= '0;
      sync2    <= '0;
    end else begin
      sync1   <= gpio_in;
      sync2   <= sync1;
      rsp.ack <= req.cyc && !rsp.ack;
      rsp.rdt <= req.adr[2] ? 32'(sync2) : out_word;
      if (req.cyc && !rsp.ack && req.we && !req.adr[2])
        for (int i = 0; i < NGPIO; i++)
          if (req.sel[i / 8]) gpio_out[i] <= req.dat[i];
    end
  end

endmodule
