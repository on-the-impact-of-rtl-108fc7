// tb_cnn_layer_slices: full-width slices of layers of the evaluated CNNs on
// the default design.
//
//  - VGG-16 conv1_2: 3x3, stride 1, 224-wide maps, 64 -> 64 maps.  The slice
//    keeps the full width and all 64 input maps, 2 rows and 14 output maps.
//  - ResNet-18 conv3_1 (first layer of the 128-map stage): 3x3, stride 2,
//    56-wide input, 64 -> 128 maps.  The slice keeps the full width and all
//    64 input maps, 4 input rows and 14 output maps.
//  - VGG-16 conv5_1: 3x3, stride 1, 14x14 maps, 512 -> 512 maps, run whole.
// In the slices, rows and output maps are cut to keep the run short.  The tile
// sizes come from the first-order partition rule for P = 512,
// m = sqrt(2*P*Wo*Ho/(K^2*Wi*Hi)) rounded down to a divisor of M that the array
// holds, n = P/(K^2*m) rounded down to a divisor of N that the array holds.
// Outputs are compared with a direct convolution and the bus words with the
// tiling formulas; the traffic a controller without in-memory update would
// need is reported next to it.
module tb_cnn_layer_slices;
  import dnn_pkg::*;
  localparam int KS = 3, P = 512, M_T = 8, N_T = 7;
  logic clk = 0, rst_n = 0, start = 0, busy, done, act_cfg_we = 0;
  act_sel_e act_cfg_sel = ACT_NONE, act_sel;
  layer_cfg_t cfg = '0;
  int checks = 0, failures = 0;
  int rd_words = 0, wr_words = 0;

  dnn_accel_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (dut.mc_r_valid && dut.mc_r_ready) rd_words++;
    if (dut.mc_w_valid && dut.mc_w_ready) wr_words++;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // largest divisor of total that is <= limit and <= want
  function automatic int fit_divisor(int total, real want, int limit);
    int best = 1;
    for (int d = 1; d <= total; d++)
      if (total % d == 0 && d <= limit && real'(d) <= want) best = d;
    return best;
  endfunction

  task automatic run_slice(string name, int W, int H, int M, int N, int S);
    int ib = 0, wb = 1 << 20, ob = 1 << 22;
    int Wo = (W + S - 1) / S, Ho = (H + S - 1) / S;
    int m, n, t0;
    real m_opt;
    longint acc;
    m_opt = $sqrt(2.0 * P * Wo * Ho / (KS * KS * W * H));
    m = fit_divisor(M, m_opt, M_T);
    n = fit_divisor(N, real'(P) / (KS * KS * m), N_T);
    check(KS * KS * m * n < P, "K^2*m*n < P");
    for (int i = 0; i < W * H * M; i++)
      dut.u_sram.mem[ib + i] = 32'($signed(16'($urandom_range(0, 255))));
    for (int i = 0; i < N * M * KS * KS; i++)
      dut.u_sram.mem[wb + i] = 32'($signed(16'($urandom_range(0, 60)) - 16'sd30));
    cfg = '0;
    cfg.width = 16'(W); cfg.height = 16'(H); cfg.in_ch = 16'(M); cfg.out_ch = 16'(N);
    cfg.m_tile = 8'(m); cfg.n_tile = 8'(n); cfg.relu = 1; cfg.stride2 = (S == 2);
    cfg.in_base = 32'(ib * 4); cfg.wt_base = 32'(wb * 4); cfg.out_base = 32'(ob * 4);
    rd_words = 0; wr_words = 0;
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
          if (acc < 0) acc = 0;
          check(dut.u_sram.mem[ob + (y * Wo + x) * N + co] == 32'(acc),
                $sformatf("%s out y%0d x%0d co%0d: %0d vs %0d", name, y, x, co,
                          $signed(dut.u_sram.mem[ob + (y * Wo + x) * N + co]), acc));
        end
    check(rd_words == W * H * M * (N / n) + N * M * KS * KS, "read words");
    check(wr_words == Wo * Ho * N * (M / m), "write words");
    $display("%s slice %0dx%0dx%0d -> %0dx%0dx%0d, m=%0d n=%0d: %0d bus words (maps in %0d, weights %0d, partial sums %0d); without in-memory update %0d; %0d cycles",
             name, W, H, M, Wo, Ho, N, m, n, rd_words + wr_words, W * H * M * (N / n),
             N * M * KS * KS, wr_words, rd_words + wr_words + Wo * Ho * N * (M / m - 1),
             ($time - t0) / 10);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); act_cfg_we = 1; act_cfg_sel = ACT_RELU;
    @(negedge clk); act_cfg_we = 0;
    run_slice("VGG-16 conv1_2", 224, 2, 64, 14, 1);
    run_slice("ResNet-18 conv3_1", 56, 4, 64, 14, 2);
    run_slice("VGG-16 conv5_1 (whole layer)", 14, 14, 512, 512, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
