// tb_axi_interconnect: random valid/ready traffic on all five channels.
// Every transfer must come out of the other side once, unchanged and in order
// (AWUSER included); with both sides always ready a channel must move one
// transfer per cycle after one cycle of latency.
module tb_axi_interconnect;
  import dnn_pkg::*;
  localparam int NTR = 400;
  logic clk = 0, rst_n = 0;
  logic s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_b_valid, s_b_ready;
  logic s_ar_valid, s_ar_ready, s_r_valid, s_r_ready;
  logic m_aw_valid, m_aw_ready, m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  logic m_ar_valid, m_ar_ready, m_r_valid, m_r_ready;
  axi_aw_t s_aw, m_aw; axi_w_t s_w, m_w; axi_b_t s_b, m_b;
  axi_ar_t s_ar, m_ar; axi_r_t s_r, m_r;
  int checks = 0, failures = 0;
  bit full_rate;   // phase 2: no random stalls

  axi_interconnect dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Payloads are numbered; transfer k of a channel carries a value derived
  // from k so the receiver can check order and content.
  function automatic axi_aw_t aw_of(int k);
    axi_aw_t v; v = '0; v.id = 4'(k); v.addr = 32'(k * 977); v.len = 8'(k);
    v.user = 2'(k * 3 + 1); return v;
  endfunction
  function automatic axi_w_t  w_of(int k);
    axi_w_t v; v.data = 32'(k * 65537 + 11); v.strb = 4'(k); v.last = k[0]; return v;
  endfunction
  function automatic axi_b_t  b_of(int k);
    axi_b_t v; v.id = 4'(k * 7); v.resp = 2'(k); return v;
  endfunction
  function automatic axi_ar_t ar_of(int k);
    axi_ar_t v; v = '0; v.id = 4'(k); v.addr = 32'(k * 131 + 5); v.len = 8'(k * 3); return v;
  endfunction
  function automatic axi_r_t  r_of(int k);
    axi_r_t v; v.id = 4'(k); v.data = 32'(k * 40503); v.resp = 2'(k); v.last = k[1]; return v;
  endfunction

  int sent [5], rcvd [5];
  bit acc [5];
  int first_out_cyc, last_out_cyc, cyc;

  always_ff @(posedge clk) cyc <= cyc + 1;

  task automatic drive_sources();
    // valid stays up once raised until accepted
    if (!s_aw_valid && sent[0] < NTR && (full_rate || $urandom_range(0, 2) != 0)) s_aw_valid = 1;
    if (!s_w_valid  && sent[1] < NTR && (full_rate || $urandom_range(0, 2) != 0)) s_w_valid  = 1;
    if (!m_b_valid  && sent[2] < NTR && (full_rate || $urandom_range(0, 2) != 0)) m_b_valid  = 1;
    if (!s_ar_valid && sent[3] < NTR && (full_rate || $urandom_range(0, 2) != 0)) s_ar_valid = 1;
    if (!m_r_valid  && sent[4] < NTR && (full_rate || $urandom_range(0, 2) != 0)) m_r_valid  = 1;
    s_aw = aw_of(sent[0]); s_w = w_of(sent[1]); m_b = b_of(sent[2]);
    s_ar = ar_of(sent[3]); m_r = r_of(sent[4]);
    m_aw_ready = full_rate || $urandom_range(0, 2) != 0;
    m_w_ready  = full_rate || $urandom_range(0, 2) != 0;
    s_b_ready  = full_rate || $urandom_range(0, 2) != 0;
    m_ar_ready = full_rate || $urandom_range(0, 2) != 0;
    s_r_ready  = full_rate || $urandom_range(0, 2) != 0;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("%s mismatch", what); end
  endtask

  initial begin
    s_aw_valid = 0; s_w_valid = 0; m_b_valid = 0; s_ar_valid = 0; m_r_valid = 0;
    m_aw_ready = 0; m_w_ready = 0; s_b_ready = 0; m_ar_ready = 0; s_r_ready = 0;
    s_aw = '0; s_w = '0; m_b = '0; s_ar = '0; m_r = '0;
    sent = '{default: 0}; rcvd = '{default: 0}; cyc = 0;
    for (int phase = 0; phase < 2; phase++) begin
      full_rate = (phase == 1);
      if (phase == 1) begin
        @(negedge clk); rst_n = 0;
        sent = '{default: 0}; rcvd = '{default: 0};
        s_aw_valid = 0; s_w_valid = 0; m_b_valid = 0; s_ar_valid = 0; m_r_valid = 0;
      end
      repeat (2) @(negedge clk);
      rst_n = 1;
      first_out_cyc = -1;
      while (rcvd[0] < NTR || rcvd[1] < NTR || rcvd[2] < NTR || rcvd[3] < NTR || rcvd[4] < NTR) begin
        drive_sources();
        @(posedge clk);
        // sources
        acc = '{s_aw_valid && s_aw_ready, s_w_valid && s_w_ready, m_b_valid && m_b_ready,
                s_ar_valid && s_ar_ready, m_r_valid && m_r_ready};
        if (s_aw_valid && s_aw_ready) sent[0]++;
        if (s_w_valid  && s_w_ready)  sent[1]++;
        if (m_b_valid  && m_b_ready)  sent[2]++;
        if (s_ar_valid && s_ar_ready) sent[3]++;
        if (m_r_valid  && m_r_ready)  sent[4]++;
        // sinks
        if (m_aw_valid && m_aw_ready) begin check(m_aw == aw_of(rcvd[0]), "AW"); rcvd[0]++; end
        if (m_w_valid  && m_w_ready)  begin check(m_w  == w_of(rcvd[1]),  "W");  rcvd[1]++; end
        if (s_b_valid  && s_b_ready)  begin check(s_b  == b_of(rcvd[2]),  "B");  rcvd[2]++; end
        if (m_ar_valid && m_ar_ready) begin check(m_ar == ar_of(rcvd[3]), "AR"); rcvd[3]++; end
        if (s_r_valid  && s_r_ready)  begin check(s_r  == r_of(rcvd[4]),  "R");  rcvd[4]++; end
        if (full_rate && m_aw_valid && first_out_cyc < 0) first_out_cyc = cyc;
        if (full_rate) last_out_cyc = cyc;
        @(negedge clk);
        if (s_aw_valid && sent[0] >= NTR) s_aw_valid = 0;
        if (s_w_valid  && sent[1] >= NTR) s_w_valid  = 0;
        if (m_b_valid  && sent[2] >= NTR) m_b_valid  = 0;
        if (s_ar_valid && sent[3] >= NTR) s_ar_valid = 0;
        if (m_r_valid  && sent[4] >= NTR) m_r_valid  = 0;
        if (!full_rate) begin
          // after an accepted transfer a source may pause
          if (acc[0] && $urandom_range(0, 1) == 0) s_aw_valid = 0;
          if (acc[1] && $urandom_range(0, 1) == 0) s_w_valid  = 0;
          if (acc[2] && $urandom_range(0, 1) == 0) m_b_valid  = 0;
          if (acc[3] && $urandom_range(0, 1) == 0) s_ar_valid = 0;
          if (acc[4] && $urandom_range(0, 1) == 0) m_r_valid  = 0;
        end
      end
      if (full_rate) begin
        // NTR transfers, one per cycle, after one cycle of latency
        check(last_out_cyc - first_out_cyc == NTR - 1, "throughput");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
