// tb_flexibits_workloads: runs four classification kernels (see
// tb_workload_harness), a decision tree, a linear classifier, a
// nearest-neighbour classifier and a small perceptron, the last three with
// shift-and-add multiplication, on the SoC with 1-, 4- and 8-bit
// datapaths: the SERV-, QERV- and HERV-class configurations. Each run
// checks its own results. This top then checks, per kernel, that all widths
// retire the same instruction stream and that wider cores take fewer
// cycles, and prints the cycle counts and the speed-up of each width over
// the bit-serial core. Per instruction the W=1 / W=8 ratio lies between
// about 5.6 (one-stage 34/6, load/store 68/12) and 6.6 (two-stage 66/10),
// and shifts by one bit lower it (68/12), so a kernel's ratio must lie in
// 4..7. Published measurements put the spread across the target workloads
// at about 5.
module tb_flexibits_workloads;
  localparam int NK = 4, NW = 3;
  localparam int WIDTH[NW] = '{1, 4, 8};
  logic done[NK][NW];
  int cyc[NK][NW], ins[NK][NW], hk[NK][NW], hf[NK][NW];
  int checks = 0, failures = 0;

  for (genvar k = 0; k < NK; k++) begin : g_kernel
    for (genvar w = 0; w < NW; w++) begin : g_width
      tb_workload_harness #(.W(WIDTH[w]), .KERNEL(k)) u_run (
        .done(done[k][w]), .cycles(cyc[k][w]), .instrs(ins[k][w]),
        .checks(hk[k][w]), .failures(hf[k][w]));
    end
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit all_done();
    foreach (done[k, w]) if (!done[k][w]) return 0;
    return 1;
  endfunction

  initial begin
    fork
      begin
        #1;
        while (!all_done()) #1000;
      end
      begin #200000000; $display("FAIL watchdog"); end
    join_any
    chk(all_done(), "a run did not finish");
    foreach (hk[k, w]) begin checks += hk[k][w]; failures += hf[k][w]; end
    for (int k = 0; k < NK; k++) begin
      $display("kernel %0d, %0s:", k, k == 0 ? "decision tree" : k == 1 ? "linear classifier" : k == 2 ? "nearest neighbour" : "perceptron");
      for (int w = 0; w < NW; w++) begin
        int c;
        c = cyc[k][w] > 0 ? cyc[k][w] : 1;
        $display("  W=%0d: %0d instructions, %0d cycles, %0d.%02d cycles per instruction, speed-up %0d.%02d",
                 WIDTH[w], ins[k][w], cyc[k][w], cyc[k][w] / (ins[k][w] > 0 ? ins[k][w] : 1),
                 (100 * cyc[k][w] / (ins[k][w] > 0 ? ins[k][w] : 1)) % 100,
                 cyc[k][0] / c, (100 * cyc[k][0] / c) % 100);
      end
      chk(ins[k][0] == ins[k][1] && ins[k][1] == ins[k][2] && ins[k][0] > 0,
          $sformatf("kernel %0d: widths retired different instruction counts", k));
      chk(cyc[k][0] > cyc[k][1] && cyc[k][1] > cyc[k][2],
          $sformatf("kernel %0d: wider datapath not faster", k));
      chk(cyc[k][2] * 4 < cyc[k][0] && cyc[k][0] < cyc[k][2] * 7,
          $sformatf("kernel %0d: W=1 / W=8 cycle ratio outside 4..7", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
