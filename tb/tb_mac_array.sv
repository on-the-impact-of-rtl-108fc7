// tb_mac_array: random windows and weights (including unused lanes set to
// zero) against a reference dot product; checks the one-cycle latency.
module tb_mac_array;
  import dnn_pkg::*;
  localparam int unsigned KS = 3, M_T = 8, N_T = 7, TAPS = KS * KS;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [ACT_W-1:0]  win [M_T][TAPS];
  logic signed [ACT_W-1:0]  wts [N_T][M_T][TAPS];
  logic signed [PSUM_W-1:0] psum [N_T];
  int checks = 0, failures = 0;

  mac_array #(.KS(KS), .M_T(M_T), .N_T(N_T)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, n;
    longint exp [N_T];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      m = $urandom_range(1, M_T);
      n = $urandom_range(1, N_T);
      for (int ci = 0; ci < M_T; ci++)
        for (int t = 0; t < TAPS; t++)
          win[ci][t] = (it == 0) ? 16'sh7fff : ACT_W'($urandom);
      for (int co = 0; co < N_T; co++)
        for (int ci = 0; ci < M_T; ci++)
          for (int t = 0; t < TAPS; t++)
            wts[co][ci][t] = (co < n && ci < m) ?
                             ((it == 0) ? 16'sh8000 : ACT_W'($urandom)) : '0;
      for (int co = 0; co < N_T; co++) begin
        exp[co] = 0;
        for (int ci = 0; ci < m; ci++)
          for (int t = 0; t < TAPS; t++)
            exp[co] += longint'(win[ci][t]) * longint'(wts[co][ci][t]);
      end
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int co = 0; co < N_T; co++) begin
        checks++;
        if (psum[co] !== exp[co][PSUM_W-1:0]) begin
          failures++;
          $display("it %0d co %0d: %0d expected %0d", it, co, psum[co], exp[co][PSUM_W-1:0]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
