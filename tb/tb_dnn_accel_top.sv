// tb_dnn_accel_top: end-to-end run of the accelerator at its default sizes.
//
// Input maps and weights are placed in the SRAM, the activation register is
// programmed, and several convolution layers are run; every output is
// compared with a direct convolution computed here.  The layers are chosen so
// that each mechanism of the design happens: plain initialising writes,
// in-memory accumulation (read-update-write), accumulation with activation,
// activation of a single-tile layer, ReLU actually clamping, a change of the
// activation register between layers, and stalls of the interconnect while
// the controller is busy.  Each is counted and a mechanism that never occurs
// is a failure.  Bus words are counted at the controller and compared with
// the tiling formulas; the words a controller without in-memory update would
// additionally move (the partial-sum read-back) are reported for comparison.
module tb_dnn_accel_top;
  import dnn_pkg::*;
  localparam int unsigned KS = 3;
  logic clk = 0, rst_n = 0, start = 0, busy, done, act_cfg_we = 0;
  act_sel_e act_cfg_sel = ACT_NONE, act_sel;
  layer_cfg_t cfg = '0;
  int checks = 0, failures = 0;

  dnn_accel_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- monitors at the memory controller ----------------
  int rd_words, wr_words, op_words [4], rmw_cycles, ic_stalls, relu_clamps, act_switches;
  int tot_op_words [4];
  int strided = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.mc_r_valid && dut.mc_r_ready) rd_words++;
    if (dut.mc_w_valid && dut.mc_w_ready) begin
      wr_words++;
      op_words[dut.u_mc.op_q]++;
      tot_op_words[dut.u_mc.op_q]++;
    end
    if (dut.u_mc.state_q == dut.u_mc.S_WRMW) begin
      rmw_cycles++;
      if (dut.u_mc.op_q[1] && dut.act_sel == ACT_RELU &&
          $signed(dut.u_mc.mem_rdata + dut.u_mc.wbeat_q.data) < 0) relu_clamps++;
    end
    if ((dut.ce_w_valid && !dut.ce_w_ready) || (dut.ce_aw_valid && !dut.ce_aw_ready) ||
        (dut.mc_w_valid && !dut.mc_w_ready)) ic_stalls++;
  end

  task automatic program_act(act_sel_e a);
    @(negedge clk); act_cfg_we = 1; act_cfg_sel = a;
    @(negedge clk); act_cfg_we = 0;
    check(act_sel == a, "activation register");
    act_switches++;
  endtask

  task automatic run_layer(int W, int H, int M, int N, int m, int n, bit relu, int S = 1);
    int Wo = (W + S - 1) / S, Ho = (H + S - 1) / S;
    int ib = 0, wb = 16384, ob = 32768;
    longint acc;
    int in_w, w_w, o_w, t0;
    for (int i = 0; i < W * H * M; i++)
      dut.u_sram.mem[ib + i] = 32'($signed(16'($urandom_range(0, 400)) - 16'sd200));
    for (int i = 0; i < N * M * KS * KS; i++)
      dut.u_sram.mem[wb + i] = 32'($signed(16'($urandom_range(0, 60)) - 16'sd30));
    for (int i = 0; i < W * H * N; i++) dut.u_sram.mem[ob + i] = $urandom;
    cfg = '0;
    cfg.width = 16'(W); cfg.height = 16'(H); cfg.in_ch = 16'(M); cfg.out_ch = 16'(N);
    cfg.m_tile = 8'(m); cfg.n_tile = 8'(n); cfg.relu = relu; cfg.stride2 = (S == 2);
    cfg.in_base = 32'(ib * 4); cfg.wt_base = 32'(wb * 4); cfg.out_base = 32'(ob * 4);
    rd_words = 0; wr_words = 0; op_words = '{default: 0};
    @(negedge clk); start = 1; t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int y = 0; y < Ho; y++)
      for (int x = 0; x < Wo; x++)
        for (int co = 0; co < N; co++) begin
          acc = 0;
          for (int ci = 0; ci < M; ci++)
            for (int ky = 0; ky < KS; ky++)
              for (int kx = 0; kx < KS; kx++) begin
                int yy = y * S + ky - 1, xx = x * S + kx - 1;
                if (yy >= 0 && yy < H && xx >= 0 && xx < W)
                  acc += longint'($signed(dut.u_sram.mem[ib + (yy * W + xx) * M + ci])) *
                         longint'($signed(dut.u_sram.mem[wb + ((co * M + ci) * KS + ky) * KS + kx]));
              end
          if (relu && act_sel == ACT_RELU && acc < 0) acc = 0;
          check(dut.u_sram.mem[ob + (y * Wo + x) * N + co] == 32'(acc),
                $sformatf("out y%0d x%0d co%0d: %0d vs %0d", y, x, co,
                          $signed(dut.u_sram.mem[ob + (y * Wo + x) * N + co]), acc));
        end
    in_w = W * H * M * (N / n);
    w_w  = N * M * KS * KS;
    o_w  = Wo * Ho * N * (M / m);
    check(rd_words == in_w + w_w, $sformatf("read words %0d, expected %0d", rd_words, in_w + w_w));
    check(wr_words == o_w, $sformatf("write words %0d, expected %0d", wr_words, o_w));
    $display("layer W%0d H%0d M%0d N%0d m%0d n%0d: bus words %0d (in %0d, wt %0d, out %0d); without in-memory update %0d; %0d cycles",
             W, H, M, N, m, n, rd_words + wr_words, in_w, w_w, o_w,
             rd_words + wr_words + Wo * Ho * N * (M / m - 1), ($time - t0) / 10);
  endtask

  initial begin
    rd_words = 0; wr_words = 0; rmw_cycles = 0; ic_stalls = 0; relu_clamps = 0;
    act_switches = 0; op_words = '{default: 0}; tot_op_words = '{default: 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    program_act(ACT_RELU);
    run_layer(6, 5, 24, 14, 8, 7, 1);   // NORMAL, ADD, ADD_ACT
    run_layer(4, 4, 6, 5, 6, 5, 1);     // one input tile: ACT
    program_act(ACT_NONE);
    run_layer(5, 3, 16, 7, 8, 7, 1);    // ADD_ACT with the identity function
    run_layer(9, 8, 16, 14, 8, 7, 0, 2); // stride 2
    strided++;
    $display("mechanisms: normal %0d, add %0d, add+act %0d, act %0d words; rmw cycles %0d; relu clamps %0d; act switches %0d; interconnect stalls %0d; stride-2 layers %0d",
             tot_op_words[OP_NORMAL], tot_op_words[OP_ADD], tot_op_words[OP_ADD_ACT],
             tot_op_words[OP_ACT], rmw_cycles, relu_clamps, act_switches, ic_stalls, strided);
    check(tot_op_words[OP_NORMAL] > 0, "plain write never happened");
    check(tot_op_words[OP_ADD] > 0, "accumulate never happened");
    check(tot_op_words[OP_ADD_ACT] > 0, "accumulate+activate never happened");
    check(tot_op_words[OP_ACT] > 0, "activate never happened");
    check(rmw_cycles == tot_op_words[OP_ADD] + tot_op_words[OP_ADD_ACT], "one rmw per accumulated word");
    check(relu_clamps > 0, "ReLU never clamped");
    check(act_switches > 1, "activation never switched");
    check(ic_stalls > 0, "interconnect never stalled");
    check(strided > 0, "no stride-2 layer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
