// tb_compute_engine: the engine against a behavioural AXI4 memory that
// executes the AWUSER commands itself.  Two layers (several tiles each, ReLU
// on and off, random bus stalls) are run and the output maps compared with a
// direct convolution computed here.  The bus traffic is counted and compared
// with the tiling formulas: input words W*H*M*N/n, weight words N*M*K*K,
// output words W*H*N*M/m, with OP_NORMAL on the first input tile, OP_ADD on
// the middle ones and OP_ADD_ACT (or OP_ADD) on the last, and no read of the
// output region ever.
module tb_compute_engine;
  import dnn_pkg::*;
  localparam int unsigned KS = 3, M_T = 8, N_T = 7, W_MAX = 16;
  localparam int unsigned MEMW = 16384;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  layer_cfg_t cfg;
  logic aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  logic ar_valid, ar_ready, r_valid, r_ready;
  axi_aw_t aw; axi_w_t w; axi_b_t b; axi_ar_t ar; axi_r_t r;
  int checks = 0, failures = 0;

  compute_engine #(.KS(KS), .M_T(M_T), .N_T(N_T), .W_MAX(W_MAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    $display("stuck: ce state %0d sst %0d", dut.state_q, sst);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- behavioural AXI memory ----------------
  logic [31:0] mem [MEMW];
  int rd_words, wr_words, op_words [4], out_reads;
  logic [31:0] out_lo, out_hi;   // byte range of the output maps
  typedef enum {IDLE, WDATA, WRESP, RDATA} sst_e;
  sst_e sst = IDLE;
  int   saddr, sleft;
  logic [1:0] sop;
  logic [3:0] sid;

  assign aw_ready = (sst == IDLE) && stall_ok;
  assign ar_ready = (sst == IDLE) && !aw_valid && stall_ok;
  assign w_ready  = (sst == WDATA) && stall_ok;
  assign b_valid  = (sst == WRESP);
  assign b        = '{id: sid, resp: RESP_OKAY};
  assign r_valid  = (sst == RDATA);
  assign r        = '{id: sid, data: mem[saddr], resp: RESP_OKAY, last: sleft == 0};
  logic stall_ok;
  always @(negedge clk) stall_ok = $urandom_range(0, 3) != 0;

  always @(posedge clk) if (rst_n) begin
    case (sst)
      IDLE: if (aw_valid && aw_ready) begin
        saddr <= int'(aw.addr >> 2); sleft <= aw.len; sop <= aw.user; sid <= aw.id; sst <= WDATA;
      end else if (ar_valid && ar_ready) begin
        saddr <= int'(ar.addr >> 2); sleft <= ar.len; sid <= ar.id; sst <= RDATA;
        if (ar.addr >= out_lo && ar.addr < out_hi) out_reads++;
      end
      WDATA: if (w_valid && w_ready) begin
        logic [31:0] v;
        v = sop[0] ? mem[saddr] + w.data : w.data;
        if (sop[1] && v[31]) v = 0;
        mem[saddr] <= v;
        wr_words++; op_words[sop]++;
        if (w.last != (sleft == 0)) begin failures++; $display("FAIL: WLAST"); end
        saddr <= saddr + 1; sleft <= sleft - 1;
        if (w.last) sst <= WRESP;
      end
      WRESP: if (b_ready) sst <= IDLE;
      RDATA: if (r_ready) begin
        rd_words++;
        saddr <= saddr + 1; sleft <= sleft - 1;
        if (sleft == 0) sst <= IDLE;
      end
    endcase
  end

  // ---------------- one layer ----------------
  task automatic run_layer(int W, int H, int M, int N, int m, int n, bit relu, int S = 1);
    int Wo = (W + S - 1) / S, Ho = (H + S - 1) / S;
    int ib = 0, wb = 4096, ob = 8192;   // word bases
    longint acc;
    int in_w, w_w, o_w;
    for (int i = 0; i < MEMW; i++) mem[i] = $urandom;  // garbage, incl. outputs
    for (int i = 0; i < W * H * M; i++) mem[ib + i] = 32'($signed(16'($urandom_range(0, 400)) - 16'sd200));
    for (int i = 0; i < N * M * KS * KS; i++) mem[wb + i] = 32'($signed(16'($urandom_range(0, 60)) - 16'sd30));
    cfg = '0;
    cfg.width = 16'(W); cfg.height = 16'(H); cfg.in_ch = 16'(M); cfg.out_ch = 16'(N);
    cfg.m_tile = 8'(m); cfg.n_tile = 8'(n); cfg.relu = relu; cfg.stride2 = (S == 2);
    cfg.in_base = 32'(ib * 4); cfg.wt_base = 32'(wb * 4); cfg.out_base = 32'(ob * 4);
    out_lo = 32'(ob * 4); out_hi = 32'((ob + Wo * Ho * N) * 4);
    rd_words = 0; wr_words = 0; op_words = '{default: 0}; out_reads = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check(busy, "busy after start");
    while (!done) @(negedge clk);
    @(negedge clk);
    check(!busy, "idle after done");
    // results
    for (int y = 0; y < Ho; y++)
      for (int x = 0; x < Wo; x++)
        for (int co = 0; co < N; co++) begin
          acc = 0;
          for (int ci = 0; ci < M; ci++)
            for (int ky = 0; ky < KS; ky++)
              for (int kx = 0; kx < KS; kx++) begin
                int yy = y * S + ky - 1, xx = x * S + kx - 1;
                if (yy >= 0 && yy < H && xx >= 0 && xx < W)
                  acc += longint'($signed(mem[ib + (yy * W + xx) * M + ci])) *
                         longint'($signed(mem[wb + ((co * M + ci) * KS + ky) * KS + kx]));
              end
          if (relu && acc < 0) acc = 0;
          check(mem[ob + (y * Wo + x) * N + co] == 32'(acc),
                $sformatf("out y%0d x%0d co%0d: %0d vs %0d", y, x, co,
                          $signed(mem[ob + (y * Wo + x) * N + co]), acc));
        end
    // traffic
    in_w = W * H * M * (N / n);
    w_w  = N * M * KS * KS;
    o_w  = Wo * Ho * N * (M / m);
    check(rd_words == in_w + w_w, $sformatf("read words %0d, expected %0d", rd_words, in_w + w_w));
    check(wr_words == o_w, $sformatf("write words %0d, expected %0d", wr_words, o_w));
    check(out_reads == 0, "partial sums read back");
    check(op_words[OP_NORMAL] == ((M / m > 1 || !relu) ? Wo * Ho * N : 0), "OP_NORMAL words");
    check(op_words[OP_ACT] == ((M / m == 1 && relu) ? Wo * Ho * N : 0), "OP_ACT words");
    check(op_words[OP_ADD] == Wo * Ho * N * (M / m - 1 - ((relu && M / m > 1) ? 1 : 0)), "OP_ADD words");
    check(op_words[OP_ADD_ACT] == ((relu && M / m > 1) ? Wo * Ho * N : 0), "OP_ADD_ACT words");
    $display("layer W%0d H%0d M%0d N%0d m%0d n%0d relu%0d stride%0d: read %0d words, wrote %0d",
             W, H, M, N, m, n, relu, S, rd_words, wr_words);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer(5, 4, 24, 14, 8, 7, 1);   // 3 input tiles x 2 output tiles
    run_layer(6, 5, 8, 6, 4, 3, 0);     // partial array use, no activation
    run_layer(3, 3, 5, 2, 5, 2, 1);     // one input tile: OP_ACT
    run_layer(16, 2, 2, 1, 1, 1, 0);    // full line-buffer width, tiny tiles
    run_layer(7, 6, 16, 7, 8, 7, 1, 2); // stride 2, odd width, even height
    run_layer(6, 5, 8, 6, 4, 3, 0, 2);  // stride 2, even width, odd height
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
