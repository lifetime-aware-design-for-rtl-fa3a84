// tb_workload_harness: runs one small sensor-classification kernel on a
// FlexiBits SoC with datapath width W and checks its results.
//
// Four kernels stand for the kinds of target workload:
//  KERNEL 0, decision tree (threshold-like; odour classification uses
//   one). The ROM holds a complete binary tree of depth TREE_DEPTH at word
//   256. Node encoding (one word): bits 31:30 kind (0 split, 1 leaf), for a
//   split 29:28 feature index, 27:16 threshold, 15:8 left child, 7:0 right
//   child (left when feature < threshold); for a leaf 7:0 the class.
//  KERNEL 1, linear classifier (arithmetic-heavy, the form of a logistic
//   regression's decision): score = sum of weight_i * feature_i with 8-bit
//   weights, class = score >= threshold. RV32E has no multiplier, so the
//   program multiplies by shift and add. Words 256..259 of the ROM hold the
//   weights, word 260 the threshold (the score of all-mid-scale features).
//  KERNEL 2, nearest neighbour (k = 1; smart irrigation uses a k-nearest-
//   neighbours model on soil temperature and moisture): NREF reference
//   points of two features and a 0/1 label, three words each from word
//   256; the label of the point with the smallest squared distance to the
//   sample's first two features wins, the first one on a tie. Squares are
//   formed by shift and add; the log holds the smallest distance.
//  KERNEL 3, multi-layer perceptron (cardiotocography uses one to grade a
//   record as normal, suspect or pathologic): four inputs centred on
//   mid-scale (feature - 2048), NH = 3 hidden
//   units with ReLU and a right shift by 8, NC = 3 outputs and an argmax
//   (the first on a tie). Weights are signed 8-bit, hidden values are kept
//   in SRAM at 0x4000_0100, and every product goes through a shift-and-add
//   multiply-accumulate subroutine called with JAL and left with JALR.
//   Words 256.. hold the hidden weights (4 per unit), then the output
//   weights (NH per class); the log holds the winning output.
// In all, the ROM holds the program at word 0 and NS samples of four
// 12-bit features at word 512. The program reads NS from the GPIO inputs,
// classifies every sample, writes {sample index, class} to the GPIO outputs
// and logs to SRAM (the GPIO byte for the tree, the score for the linear
// kernel, the smallest distance for the nearest neighbour, the winning
// output for the perceptron), and finally
// writes 0xA5 to the GPIO outputs. All data come from a fixed linear
// congruential generator, so every width runs the same instruction stream. The harness checks the GPIO sequence and the SRAM log
// against the kernel computed here, and reports the cycles and
// instructions from reset release to 0xA5.
module tb_workload_harness #(
  parameter int unsigned W = 1,
  parameter int unsigned KERNEL = 0,
  parameter int unsigned NS = 10,
  parameter int unsigned TREE_DEPTH = 3
) (
  output logic done,
  output int   cycles,
  output int   instrs,
  output int   checks,
  output int   failures
);
  import flexibits_pkg::*;
  import rv_tb_pkg::*;

  localparam int unsigned TREE = 256, SAMP = 512;
  localparam int unsigned NODES = (1 << (TREE_DEPTH + 1)) - 1;
  localparam int NREF = 8;
  localparam int NH = 3, NC = 3;

  logic        clk = 0;
  logic        rst_n = 0;
  logic [7:0]  gpio_in = '0;
  logic [7:0]  gpio_out;
  logic        prog_we = 0;
  logic [9:0]  prog_addr = '0;
  logic [31:0] prog_data = '0;
  logic        retire;

  always #5 clk = ~clk;

  flexibits_soc #(.W(W)) dut (.*);

  logic [7:0] gpio_seq[$];
  // every write to the GPIO output word, including repeated values
  always @(posedge clk)
    if (rst_n && dut.gpio_req.cyc && dut.gpio_req.we && dut.gpio_rsp.ack && !dut.gpio_req.adr[2])
      gpio_seq.push_back(dut.gpio_req.dat[7:0]);

  int unsigned lcg_state = 32'd12345;
  function automatic int unsigned lcg();
    lcg_state = lcg_state * 32'd1103515245 + 32'd12345;
    return lcg_state >> 8;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL W=%0d kernel %0d %s", W, KERNEL, what);
    end
  endtask

  initial begin
    logic [31:0] p[] = new[1024];
    logic [11:0] feat[NS][4];
    logic [7:0]  exp_seq[$];
    logic [31:0] exp_log[$];
    int k = 0, loop_i, beq_i, node_i, bne_i, blt_i, left_i, leaf_i, done_i;
    done = 0; cycles = 0; instrs = 0; checks = 0; failures = 0;

    foreach (p[i]) p[i] = ADDI(0, 0, 0);
    for (int s = 0; s < int'(NS); s++)
      for (int f = 0; f < 4; f++) begin
        feat[s][f] = 12'(lcg() % 4096);
        p[SAMP + 4 * s + f] = 32'(feat[s][f]);
      end
    if (KERNEL == 0) begin
      // tree: node n splits on feature n % 4, children 2n+1 and 2n+2
      for (int n = 0; n < int'(NODES); n++)
        if (n < int'(NODES) / 2)
          p[TREE + n] = {2'b00, 2'(n % 4), 12'(lcg() % 4096), 8'(2 * n + 1), 8'(2 * n + 2)};
        else
          p[TREE + n] = {2'b01, 22'd0, 8'(lcg() % 4)};
      // expected classes
      for (int s = 0; s < int'(NS); s++) begin
        int n = 0;
        while (p[TREE + n][31:30] == 2'b00)
          n = (feat[s][p[TREE + n][29:28]] < p[TREE + n][27:16]) ? int'(p[TREE + n][15:8])
                                                                  : int'(p[TREE + n][7:0]);
        exp_seq.push_back({4'(s), p[TREE + n][7:4] == 0 ? p[TREE + n][3:0] : 4'hF});
        exp_log.push_back({24'd0, exp_seq[s]});
      end

      // program
      p[k++] = LUI(1, 1);                     // x1 = 0x800: samples
      p[k++] = ADDI(1, 1, -2048);
      p[k++] = ADDI(5, 0, TREE * 4);          // x5 = tree base
      p[k++] = LUI(2, 32'h80000);             // x2 = GPIO
      p[k++] = LW(3, 2, 4);                   // x3 = sample count
      p[k++] = ANDI(3, 3, 15);
      p[k++] = ADDI(4, 0, 0);                 // x4 = sample index
      p[k++] = LUI(11, 32'h40000);            // x11 = SRAM log
      loop_i = k;
      beq_i = k; p[k++] = 0;                  // beq x4, x3, done
      p[k++] = ADDI(6, 0, 0);                 // x6 = node
      node_i = k;
      p[k++] = SLLI(7, 6, 2);
      p[k++] = ADD(7, 7, 5);
      p[k++] = LW(8, 7, 0);                   // x8 = node word
      p[k++] = SRLI(9, 8, 30);
      bne_i = k; p[k++] = 0;                  // bne x9, x0, leaf
      p[k++] = SRLI(9, 8, 28);
      p[k++] = ANDI(9, 9, 3);
      p[k++] = SLLI(9, 9, 2);
      p[k++] = ADD(9, 9, 1);
      p[k++] = LW(10, 9, 0);                  // x10 = feature
      p[k++] = SLLI(9, 8, 4);
      p[k++] = SRLI(9, 9, 20);                // x9 = threshold
      blt_i = k; p[k++] = 0;                  // blt x10, x9, left
      p[k++] = ANDI(6, 8, 255);               // right child
      p[k] = JAL(0, 4 * (node_i - k)); k++;
      left_i = k;
      p[k++] = SRLI(6, 8, 8);
      p[k++] = ANDI(6, 6, 255);               // left child
      p[k] = JAL(0, 4 * (node_i - k)); k++;
      leaf_i = k;
      p[k++] = ANDI(10, 8, 255);
      p[k++] = SLLI(12, 4, 4);
      p[k++] = r_type(0, 12, 10, 6, 10, 7'h33);  // or x10, x10, x12
      p[k++] = SW(10, 2, 0);
      p[k++] = SW(10, 11, 0);
      p[k++] = ADDI(11, 11, 4);
      p[k++] = ADDI(1, 1, 16);
      p[k++] = ADDI(4, 4, 1);
      p[k] = JAL(0, 4 * (loop_i - k)); k++;
      done_i = k;
      p[k++] = ADDI(9, 0, 32'hA5);
      p[k++] = SW(9, 2, 0);
      p[k++] = JAL(0, 0);
      p[beq_i] = BEQ(4, 3, 4 * (done_i - beq_i));
      p[bne_i] = BNE(9, 0, 4 * (leaf_i - bne_i));
      p[blt_i] = BLT(10, 9, 4 * (left_i - blt_i));

    end else if (KERNEL == 3) begin
      int w1[NH][4], w2[NC][NH], h[NH], o, best, cls, mac_i;
      for (int j = 0; j < NH; j++)
        for (int i = 0; i < 4; i++) begin
          w1[j][i] = int'(lcg() % 256) - 128;
          p[TREE + 4 * j + i] = 32'(w1[j][i]);
        end
      for (int c = 0; c < NC; c++)
        for (int j = 0; j < NH; j++) begin
          // class c favours hidden unit c, so the winner varies with the input
          w2[c][j] = (j == c) ? int'(lcg() % 64) + 64 : -int'(lcg() % 64);
          p[TREE + 4 * NH + NH * c + j] = 32'(w2[c][j]);
        end
      for (int s = 0; s < int'(NS); s++) begin
        for (int j = 0; j < NH; j++) begin
          h[j] = 0;
          for (int i = 0; i < 4; i++) h[j] += w1[j][i] * (int'(feat[s][i]) - 2048);
          h[j] = (h[j] < 0) ? 0 : (h[j] >> 8);
        end
        best = 0; cls = 0;
        for (int c = 0; c < NC; c++) begin
          o = 0;
          for (int j = 0; j < NH; j++) o += w2[c][j] * h[j];
          if (c == 0 || o > best) begin best = o; cls = c; end
        end
        exp_seq.push_back({4'(s), 4'(cls)});
        exp_log.push_back(32'(best));
      end
      // x12 += x14 * x15 (both signed), returns through x7
      p[k++] = 0;                           // jump over the subroutine
      mac_i = k;
      p[k++] = BGE(15, 0, 12);
      p[k++] = SUB(15, 0, 15);
      p[k++] = SUB(14, 0, 14);
      bne_i = k;
      p[k++] = BEQ(15, 0, 4 * 7);
      p[k++] = ANDI(9, 15, 1);
      p[k++] = BEQ(9, 0, 8);
      p[k++] = ADD(12, 12, 14);
      p[k++] = SLLI(14, 14, 1);
      p[k++] = SRLI(15, 15, 1);
      p[k] = JAL(0, 4 * (bne_i - k)); k++;
      p[k++] = JALR(0, 7, 0);
      p[0] = JAL(0, 4 * k);
      p[k++] = LUI(1, 1);                   // x1 = 0x800: samples
      p[k++] = ADDI(1, 1, -2048);
      p[k++] = ADDI(5, 0, TREE * 4);        // x5 = weights
      p[k++] = LUI(2, 32'h80000);           // x2 = GPIO
      p[k++] = LW(3, 2, 4);                 // x3 = sample count
      p[k++] = ANDI(3, 3, 15);
      p[k++] = ADDI(4, 0, 0);               // x4 = sample index
      p[k++] = LUI(11, 32'h40000);          // x11 = SRAM log
      p[k++] = ADDI(13, 11, 256);           // x13 = hidden layer in SRAM
      loop_i = k;
      beq_i = k; p[k++] = 0;                // beq x4, x3, done
      for (int j = 0; j < NH; j++) begin    // hidden layer, unrolled
        p[k++] = ADDI(12, 0, 0);
        for (int i = 0; i < 4; i++) begin
          p[k++] = LW(14, 1, 4 * i);
          p[k++] = ADDI(14, 14, -2048);     // centred input
          p[k++] = LW(15, 5, 4 * (4 * j + i));
          p[k] = JAL(7, 4 * (mac_i - k)); k++;
        end
        p[k++] = BGE(12, 0, 8);             // ReLU
        p[k++] = ADDI(12, 0, 0);
        p[k++] = SRLI(12, 12, 8);
        p[k++] = SW(12, 13, 4 * j);
      end
      for (int c = 0; c < NC; c++) begin    // output layer and argmax
        p[k++] = ADDI(12, 0, 0);
        for (int j = 0; j < NH; j++) begin
          p[k++] = LW(14, 13, 4 * j);
          p[k++] = LW(15, 5, 4 * (4 * NH + NH * c + j));
          p[k] = JAL(7, 4 * (mac_i - k)); k++;
        end
        if (c == 0) begin
          p[k++] = ADDI(6, 12, 0);          // x6 = best score
          p[k++] = ADDI(8, 0, 0);           // x8 = best class
        end else begin
          p[k++] = BGE(6, 12, 12);
          p[k++] = ADDI(6, 12, 0);
          p[k++] = ADDI(8, 0, c);
        end
      end
      p[k++] = SLLI(9, 4, 4);
      p[k++] = r_type(0, 9, 8, 6, 9, 7'h33);    // or x9, x8, x9
      p[k++] = SW(9, 2, 0);
      p[k++] = SW(6, 11, 0);
      p[k++] = ADDI(11, 11, 4);
      p[k++] = ADDI(1, 1, 16);
      p[k++] = ADDI(4, 4, 1);
      p[k] = JAL(0, 4 * (loop_i - k)); k++;
      done_i = k;
      p[k++] = ADDI(9, 0, 32'hA5);
      p[k++] = SW(9, 2, 0);
      p[k++] = JAL(0, 0);
      p[beq_i] = BEQ(4, 3, 4 * (done_i - beq_i));
    end else if (KERNEL == 2) begin
      int unsigned rt[NREF], rm[NREF], rl[NREF];
      for (int r = 0; r < NREF; r++) begin
        rt[r] = lcg() % 4096; rm[r] = lcg() % 4096; rl[r] = lcg() % 2;
        p[TREE + 3 * r] = rt[r]; p[TREE + 3 * r + 1] = rm[r]; p[TREE + 3 * r + 2] = rl[r];
      end
      for (int s = 0; s < int'(NS); s++) begin
        int unsigned best, lab, d;
        int dt, dm;
        best = 32'h8000_0000; lab = 0;
        for (int r = 0; r < NREF; r++) begin
          dt = int'(feat[s][0]) - int'(rt[r]); dm = int'(feat[s][1]) - int'(rm[r]);
          d = dt * dt + dm * dm;
          if (d < best) begin best = d; lab = rl[r]; end
        end
        exp_seq.push_back({4'(s), 4'(lab)});
        exp_log.push_back(best);
      end
      p[k++] = LUI(1, 1);                   // x1 = 0x800: samples
      p[k++] = ADDI(1, 1, -2048);
      p[k++] = ADDI(5, 0, TREE * 4);        // x5 = reference points
      p[k++] = LUI(2, 32'h80000);           // x2 = GPIO
      p[k++] = LW(3, 2, 4);                 // x3 = sample count
      p[k++] = ANDI(3, 3, 15);
      p[k++] = ADDI(4, 0, 0);               // x4 = sample index
      p[k++] = LUI(11, 32'h40000);          // x11 = SRAM log
      loop_i = k;
      beq_i = k; p[k++] = 0;                // beq x4, x3, done
      p[k++] = LUI(7, 32'h80000);           // x7 = best distance
      p[k++] = ADDI(8, 0, 0);               // x8 = best label
      p[k++] = ADDI(6, 5, 0);               // x6 = reference pointer
      node_i = k;                           // per reference point
      p[k++] = ADDI(12, 0, 0);              // x12 = distance
      p[k++] = ADDI(13, 0, 0);              // x13 = feature offset
      left_i = k;                           // per feature
      p[k++] = ADD(9, 1, 13);
      p[k++] = LW(9, 9, 0);
      p[k++] = ADD(10, 6, 13);
      p[k++] = LW(10, 10, 0);
      p[k++] = SUB(9, 9, 10);
      p[k++] = BGE(9, 0, 8);
      p[k++] = SUB(9, 0, 9);                // |difference|
      p[k++] = ADDI(14, 9, 0);
      p[k++] = ADDI(15, 9, 0);
      bne_i = k;                            // square by shift and add
      p[k++] = BEQ(15, 0, 4 * 7);
      p[k++] = ANDI(10, 15, 1);
      p[k++] = BEQ(10, 0, 8);
      p[k++] = ADD(12, 12, 14);
      p[k++] = SLLI(14, 14, 1);
      p[k++] = SRLI(15, 15, 1);
      p[k] = JAL(0, 4 * (bne_i - k)); k++;
      p[k++] = ADDI(13, 13, 4);
      p[k++] = ADDI(9, 0, 8);
      p[k] = BNE(13, 9, 4 * (left_i - k)); k++;
      p[k++] = r_type(0, 7, 12, 3, 9, 7'h33);   // sltu x9, x12, x7
      p[k++] = BEQ(9, 0, 12);
      p[k++] = ADDI(7, 12, 0);
      p[k++] = LW(8, 6, 8);
      p[k++] = ADDI(6, 6, 12);
      p[k++] = ADDI(9, 5, 12 * NREF);
      p[k] = BNE(6, 9, 4 * (node_i - k)); k++;
      p[k++] = SLLI(9, 4, 4);
      p[k++] = r_type(0, 9, 8, 6, 9, 7'h33);    // or x9, x8, x9
      p[k++] = SW(9, 2, 0);
      p[k++] = SW(7, 11, 0);
      p[k++] = ADDI(11, 11, 4);
      p[k++] = ADDI(1, 1, 16);
      p[k++] = ADDI(4, 4, 1);
      p[k] = JAL(0, 4 * (loop_i - k)); k++;
      done_i = k;
      p[k++] = ADDI(9, 0, 32'hA5);
      p[k++] = SW(9, 2, 0);
      p[k++] = JAL(0, 0);
      p[beq_i] = BEQ(4, 3, 4 * (done_i - beq_i));
    end else begin
      int unsigned wt[4], thr = 0;
      for (int f = 0; f < 4; f++) begin
        wt[f] = lcg() % 256;
        p[TREE + f] = wt[f];
        thr += wt[f] * 2048;
      end
      p[TREE + 4] = thr;
      for (int s = 0; s < int'(NS); s++) begin
        int unsigned score;
        score = 0;
        for (int f = 0; f < 4; f++) score += wt[f] * feat[s][f];
        exp_seq.push_back({4'(s), 4'(score >= thr)});
        exp_log.push_back(score);
      end
      p[k++] = LUI(1, 1);                   // x1 = 0x800: samples
      p[k++] = ADDI(1, 1, -2048);
      p[k++] = ADDI(5, 0, TREE * 4);        // x5 = weights
      p[k++] = LUI(2, 32'h80000);           // x2 = GPIO
      p[k++] = LW(3, 2, 4);                 // x3 = sample count
      p[k++] = ANDI(3, 3, 15);
      p[k++] = ADDI(4, 0, 0);               // x4 = sample index
      p[k++] = LUI(11, 32'h40000);          // x11 = SRAM log
      loop_i = k;
      beq_i = k; p[k++] = 0;                // beq x4, x3, done
      p[k++] = ADDI(7, 0, 0);               // x7 = score
      p[k++] = ADDI(6, 0, 0);               // x6 = feature index
      node_i = k;
      p[k++] = SLLI(8, 6, 2);
      p[k++] = ADD(9, 8, 1);
      p[k++] = LW(14, 9, 0);                // x14 = feature
      p[k++] = ADD(9, 8, 5);
      p[k++] = LW(15, 9, 0);                // x15 = weight
      bne_i = k;                            // multiply loop
      p[k++] = BEQ(15, 0, 4 * 7);
      p[k++] = ANDI(9, 15, 1);
      p[k++] = BEQ(9, 0, 8);
      p[k++] = ADD(7, 7, 14);
      p[k++] = SLLI(14, 14, 1);
      p[k++] = SRLI(15, 15, 1);
      p[k] = JAL(0, 4 * (bne_i - k)); k++;
      p[k++] = ADDI(6, 6, 1);
      p[k++] = ADDI(9, 0, 4);
      p[k] = BNE(6, 9, 4 * (node_i - k)); k++;
      p[k++] = LW(10, 5, 16);               // threshold
      p[k++] = r_type(0, 10, 7, 3, 12, 7'h33);  // sltu x12, x7, x10
      p[k++] = i_type(1, 12, 4, 12, 7'h13);     // xori x12, x12, 1
      p[k++] = SLLI(13, 4, 4);
      p[k++] = r_type(0, 13, 12, 6, 12, 7'h33); // or x12, x12, x13
      p[k++] = SW(12, 2, 0);
      p[k++] = SW(7, 11, 0);
      p[k++] = ADDI(11, 11, 4);
      p[k++] = ADDI(1, 1, 16);
      p[k++] = ADDI(4, 4, 1);
      p[k] = JAL(0, 4 * (loop_i - k)); k++;
      done_i = k;
      p[k++] = ADDI(9, 0, 32'hA5);
      p[k++] = SW(9, 2, 0);
      p[k++] = JAL(0, 0);
      p[beq_i] = BEQ(4, 3, 4 * (done_i - beq_i));
    end
    exp_seq.push_back(8'hA5);

    // load the ROM with the core in reset, then run
    gpio_in = 8'(NS);
    @(negedge clk);
    for (int i = 0; i < SAMP + 4 * int'(NS); i++) begin
      prog_we = 1; prog_addr = 10'(i); prog_data = p[i];
      @(negedge clk);
    end
    prog_we = 0;
    rst_n = 1;
    while (gpio_out != 8'hA5 && cycles < 2000000) begin
      @(negedge clk);
      cycles++;
      if (retire) instrs++;
    end
    repeat (2) @(negedge clk);  // let the final write's acknowledge pass
    chk(gpio_out == 8'hA5, "kernel did not finish");
    chk(gpio_seq.size() == exp_seq.size(),
        $sformatf("%0d GPIO writes, expected %0d", gpio_seq.size(), exp_seq.size()));
    for (int s = 0; s < exp_seq.size() && s < gpio_seq.size(); s++)
      chk(gpio_seq[s] == exp_seq[s], $sformatf("GPIO write %0d = %02h, expected %02h", s, gpio_seq[s], exp_seq[s]));
    for (int s = 0; s < int'(NS); s++)
      chk(dut.u_sram.mem[s] == exp_log[s], $sformatf("SRAM log %0d = %0d, expected %0d", s, dut.u_sram.mem[s], exp_log[s]));
    done = 1;
  end
endmodule
