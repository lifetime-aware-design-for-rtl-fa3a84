// tb_flexibits_state: checks the control-plane state machine at W = 4
// (8 beats per stage). A bus model acknowledges one cycle after each
// request. For each instruction class it checks the phase sequence and the
// cycle count from fetch request to retirement: one-stage 2+8, two-stage
// 2+16, load/store 4+16, shift 2+16+(shift cycles)+1, and that the beat
// counter and the stage strobes behave.
module tb_flexibits_state;
  import flexibits_pkg::*;
  localparam int W = 4, B = 32 / W;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, ibus_ack = 0, dbus_ack = 0, two_stage = 0, mem_op = 0, is_shift = 0;
  logic shift_done;
  state_e state;
  logic [2:0] cnt;
  logic first, last, s1_beat, s2_beat, upd_beat, fetch_done, ibus_cyc, dbus_cyc, retire;
  int checks = 0, failures = 0;
  int shift_wait = 0;

  flexibits_state #(.W(W)) dut (.*);

  always_ff @(posedge clk) begin
    ibus_ack <= rst_n && ibus_cyc && !ibus_ack;
    dbus_ack <= rst_n && dbus_cyc && !dbus_ack;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // runs one instruction; the count is taken from the cycle after the
  // previous retirement (the fetch request) to this instruction's retirement
  task automatic one(bit ts, bit mo, bit sh, int sw, int expc, string name);
    int c = 0, n1 = 0, n2 = 0, nu = 0;
    bit seen_mem = 0, seen_shift = 0;
    forever begin
      @(negedge clk);
      c++;
      if (c == 1) begin
        // the decoder presents new controls while the instruction is fetched
        chk(state == ST_FETCH && ibus_cyc, {name, " starts in fetch"});
        two_stage = ts; mem_op = mo; is_shift = sh; shift_wait = sw;
      end
      if (s1_beat) begin chk(cnt == 3'(n1) && first == (n1 == 0), {name, " stage1 cnt"}); n1++; end
      if (s2_beat) begin chk(cnt == 3'(n2) && last == (n2 == B - 1), {name, " stage2 cnt"}); n2++; end
      if (upd_beat) nu++;
      if (dbus_cyc) seen_mem = 1;
      if (state == ST_SHIFT) seen_shift = 1;
      if (retire) break;
      if (c > 200) break;
    end
    chk(c == expc, $sformatf("%s cycles %0d expected %0d", name, c, expc));
    chk(n1 == B && n2 == (ts ? B : 0) && nu == B, {name, " beat counts"});
    chk(seen_mem == mo && seen_shift == sh, {name, " phases"});
  endtask

  always_ff @(posedge clk)
    if (state == ST_SHIFT && shift_wait > 0) shift_wait <= shift_wait - 1;
  assign shift_done = (shift_wait == 0);

  initial begin
    fork
      begin
        repeat (2) @(negedge clk);
        rst_n = 1;
        // reset is released at a falling edge, so the first fetch request
        // cycle lies before the first counted edge
        one(0, 0, 0, 0, 1 + B, "first after reset");
        one(0, 0, 0, 0, 2 + B, "one-stage");
        one(1, 0, 0, 0, 2 + 2 * B, "two-stage");
        one(1, 1, 0, 0, 4 + 2 * B, "load/store");
        one(1, 0, 1, 0, 3 + 2 * B, "shift by 0");
        one(1, 0, 1, 5, 8 + 2 * B, "shift 5 steps");
        one(0, 0, 0, 0, 2 + B, "one-stage again");
      end
      begin repeat (10000) @(posedge clk); failures++; end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
