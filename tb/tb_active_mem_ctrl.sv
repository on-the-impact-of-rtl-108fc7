// tb_active_mem_ctrl: the controller with a small SRAM behind it, driven by a
// directed-random AXI4 master.  Write bursts use every AWUSER command, random
// strobes and random gaps; read bursts compare with a reference memory that
// applies the same commands independently.  Also checked: IDs and OKAY on
// B and R, RLAST, the activation config register, both orders of a read and
// a write arriving together, and the beat rates (plain write one beat per
// cycle, accumulating write one beat per two cycles).
module tb_active_mem_ctrl;
  import dnn_pkg::*;
  localparam int unsigned WORDS = 1024;
  localparam int unsigned MA_W  = $clog2(WORDS);
  logic clk = 0, rst_n = 0;
  logic cfg_we; act_sel_e cfg_act_sel, act_sel;
  logic aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  logic ar_valid, ar_ready, r_valid, r_ready;
  axi_aw_t aw; axi_w_t w; axi_b_t b; axi_ar_t ar; axi_r_t r;
  logic mem_en, mem_we;
  logic [MA_W-1:0] mem_addr;
  logic [3:0] mem_be;
  logic [31:0] mem_wdata, mem_rdata;
  int checks = 0, failures = 0;
  logic [31:0] model [WORDS];
  act_sel_e model_act;
  bit gaps;

  active_mem_ctrl #(.MEM_WORDS(WORDS)) dut (.*);
  sram_sp #(.WORDS(WORDS), .DATA_W(32)) u_sram (.clk, .en(mem_en), .we(mem_we),
    .addr(mem_addr), .be(mem_be), .wdata(mem_wdata), .rdata(mem_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] upd(logic [31:0] o, logic [31:0] n, logic [1:0] op);
    logic [31:0] s;
    s = op[0] ? o + n : n;
    if (op[1] && model_act == ACT_RELU && s[31]) s = 0;
    return s;
  endfunction

  // write burst; returns the cycles between first and last W handshake
  task automatic write_burst(int word, int len, logic [1:0] op, logic [3:0] id,
                             bit full_strb, output int span);
    logic [31:0] data [256];
    logic [3:0]  strb [256];
    int t0, t1, cyc;
    for (int i = 0; i <= len; i++) begin
      data[i] = (i % 3 == 0) ? 32'(-$urandom_range(0, 5000)) : $urandom;
      strb[i] = full_strb ? 4'hf : 4'($urandom);
    end
    @(negedge clk);
    aw = '0; aw.id = id; aw.addr = 32'(word * 4); aw.len = 8'(len); aw.size = 3'd2;
    aw.burst = BURST_INCR; aw.user = op; aw_valid = 1;
    do @(posedge clk); while (!aw_ready);
    @(negedge clk); aw_valid = 0;
    cyc = 0; t0 = -1; t1 = 0;
    for (int i = 0; i <= len; i++) begin
      while (gaps && $urandom_range(0, 3) == 0) begin @(negedge clk); cyc++; end
      w.data = data[i]; w.strb = strb[i]; w.last = (i == len); w_valid = 1;
      do begin @(posedge clk); cyc++; end while (!w_ready);
      if (t0 < 0) t0 = cyc;
      t1 = cyc;
      begin
        int a = (word + i) % WORDS;
        logic [31:0] nv = upd(model[a], data[i], op);
        for (int k = 0; k < 4; k++) if (strb[i][k]) model[a][8*k +: 8] = nv[8*k +: 8];
      end
      @(negedge clk); w_valid = 0;
    end
    b_ready = $urandom_range(0, 1);
    while (!(b_valid && b_ready)) begin
      @(posedge clk);
      if (!(b_valid && b_ready)) begin @(negedge clk); b_ready = 1; end
    end
    check(b.id == id && b.resp == RESP_OKAY, "B response id/resp");
    @(negedge clk); b_ready = 0;
    span = t1 - t0;
  endtask

  task automatic read_burst(int word, int len, logic [3:0] id);
    int i = 0;
    @(negedge clk);
    ar = '0; ar.id = id; ar.addr = 32'(word * 4); ar.len = 8'(len); ar.size = 3'd2;
    ar.burst = BURST_INCR; ar_valid = 1;
    do @(posedge clk); while (!ar_ready);
    @(negedge clk); ar_valid = 0;
    while (i <= len) begin
      r_ready = !gaps || $urandom_range(0, 2) != 0;
      @(posedge clk);
      if (r_valid && r_ready) begin
        check(r.data == model[(word + i) % WORDS], $sformatf("read word %0d: %h vs %h",
              word + i, r.data, model[(word + i) % WORDS]));
        check(r.id == id && r.resp == RESP_OKAY && r.last == (i == len), "R id/resp/last");
        i++;
      end
      @(negedge clk);
    end
    r_ready = 0;
  endtask

  initial begin
    int span, word, len;
    logic [1:0] op;
    aw_valid = 0; w_valid = 0; b_ready = 0; ar_valid = 0; r_ready = 0;
    aw = '0; w = '0; ar = '0; cfg_we = 0; cfg_act_sel = ACT_NONE; model_act = ACT_NONE;
    gaps = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(act_sel == ACT_NONE, "config register reset value");
    // initialise the whole memory with plain writes, measuring the rate
    for (int blk = 0; blk < WORDS / 256; blk++) begin
      write_burst(blk * 256, 255, OP_NORMAL, 4'(blk), 1, span);
      check(span == 255, $sformatf("plain write: 256 beats in %0d cycles", span + 1));
    end
    read_burst(0, 255, 4'h3);
    // accumulation rate: two cycles per beat
    write_burst(16, 15, OP_ADD, 4'h5, 1, span);
    check(span == 30, $sformatf("accumulate: 16 beats in %0d cycles", span + 1));
    read_burst(16, 15, 4'h6);
    // random traffic, activation switched between ReLU and identity
    gaps = 1;
    for (int n = 0; n < 300; n++) begin
      if (n % 50 == 0) begin
        @(negedge clk); cfg_we = 1;
        cfg_act_sel = (n % 100 == 0) ? ACT_RELU : ACT_NONE;
        @(negedge clk); cfg_we = 0; model_act = cfg_act_sel;
        check(act_sel == model_act, "config register write");
      end
      word = $urandom_range(0, WORDS - 1);
      len  = $urandom_range(0, 20);
      op   = 2'($urandom);
      if ($urandom_range(0, 2) == 0) read_burst(word, len, 4'($urandom));
      else write_burst(word, len, op, 4'($urandom), $urandom_range(0, 3) != 0, span);
    end
    // a read and a write offered in the same cycle, twice (both tie orders)
    for (int k = 0; k < 2; k++) begin
      fork
        write_burst(100, 3, OP_ADD, 4'h1, 1, span);
        read_burst(200, 3, 4'h2);
      join
    end
    for (int blk = 0; blk < WORDS / 256; blk++) read_burst(blk * 256, 255, 4'(blk));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
