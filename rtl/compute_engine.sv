// compute_engine: convolution accelerator that works in tiles of m input maps
// and n output maps and leaves partial-sum accumulation to the memory.
//
// It runs the tiled loop nest of the layer (KS x KS kernel, zero padding,
// stride 1 or 2; with stride 1 the output has the input's size, with stride 2
// it is ceil(W/2) x ceil(H/2)):
//   for co_base in 0..N-1 step n          -- output-map tile
//     for ci_base in 0..M-1 step m        -- input-map tile
//       load the n*m*KS*KS weights of the tile
//       for y, for x                      -- every output pixel
//         p_sum[co] = sum over m maps and KS*KS taps   (mac_array)
//         write p_sum[0..n-1] to the output map
// Each input row of the tile is read once, into a line buffer of KS rows, so
// per tile the input maps cross the bus once (Wi*Hi*m words) and the outputs
// once (Wo*Ho*n words): with the tiles iterated as above this gives the
// paper's input traffic Wi*Hi*M*N/n and output traffic Wo*Ho*N*M/m (no
// read-back).
// Partial sums are never read back: the write burst of each pixel carries a
// command on AWUSER:
//   first input tile (ci_base = 0)       : OP_NORMAL (initialise)
//   later input tiles                    : OP_ADD    (accumulate in memory)
//   last input tile, cfg.relu set        : OP_ADD_ACT (OP_ACT if it is also
//                                          the first)
// Interface: an AXI4 master (one burst in flight, INCR, 32-bit beats), a
// start pulse that samples cfg, and a done pulse.  M must be a multiple of
// m_tile <= M_T, N a multiple of n_tile <= N_T, width <= W_MAX.
// Timing per pixel: KS*KS+1 cycles to gather the window from the line buffer,
// two for the multiply, then the write burst.  The loop nest, m, n and the
// AWUSER idea follow the paper; data layout, line buffer, burst shapes and
// the serial data movement are this design's own; so is stride 2, which the
// paper's loop does not show but its equations allow (Wo*Ho differs from
// Wi*Hi).
module compute_engine
  import dnn_pkg::*;
#(
  parameter int unsigned KS    = 3,
  parameter int unsigned M_T   = 8,
  parameter int unsigned N_T   = 7,
  parameter int unsigned W_MAX = 224,
  localparam int unsigned TAPS = KS * KS,
  localparam int unsigned LB_D = KS * W_MAX
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_cfg_t cfg,
  output logic       busy,
  output logic       done,
  // AXI4 master
  output logic       aw_valid, input  logic aw_ready, output axi_aw_t aw,
  output logic       w_valid,  input  logic w_ready,  output axi_w_t  w,
  input  logic       b_valid,  output logic b_ready,  input  axi_b_t  b,
  output logic       ar_valid, input  logic ar_ready, output axi_ar_t ar,
  input  logic       r_valid,  output logic r_ready,  input  axi_r_t  r
);

  localparam int unsigned R    = (KS - 1) / 2;
  localparam int unsigned MI_W = (M_T > 1) ? $clog2(M_T) : 1;
  localparam int unsigned NI_W = (N_T > 1) ? $clog2(N_T) : 1;
  localparam int unsigned TI_W = (TAPS > 1) ? $clog2(TAPS) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_TILE, S_WT_AR, S_WT_R, S_ROW_CHK, S_IN_AR, S_IN_R,
    S_GATHER, S_GLAST, S_MAC, S_MACW, S_AW, S_W, S_B, S_NEXT
  } state_e;

  state_e     state_q;
  layer_cfg_t cfg_q;

  // loop counters
  logic [15:0] co_base, ci_base, ld_row, ld_x;
  logic [15:0] yo, xo;            // output pixel
  logic [15:0] y, x;              // its window centre in the input map
  logic [15:0] out_w, out_h;      // output map size
  logic [7:0]  stp;               // stride
  logic [7:0]  ys, slot_ld;       // y mod KS, slot of the next row to load
  logic [7:0]  ys_next;
  logic [7:0]  wco, wci, wtap;    // weight-load position
  logic [7:0]  bci;               // input beat = input map within the tile
  logic [7:0]  ky, kx;            // window tap being gathered
  logic [7:0]  wb;                // output beat

  // storage
  logic signed [ACT_W-1:0]  wbuf [N_T][M_T][TAPS];
  logic signed [ACT_W-1:0]  win  [M_T][TAPS];
  logic signed [ACT_W-1:0]  lb   [M_T][LB_D];
  logic signed [ACT_W-1:0]  lb_q [M_T];
  logic signed [PSUM_W-1:0] psum_q [N_T];
  logic signed [PSUM_W-1:0] mac_psum [N_T];
  logic                     mac_out_valid;

  // gather pipeline (one-cycle line-buffer read)
  logic [$clog2(LB_D)-1:0] lb_raddr;
  logic                    g_valid_d, g_inside_d;
  logic [7:0]              g_tap_d;

  // --------------------------------------------------------------------
  // window tap -> line-buffer address
  logic signed [17:0] tap_y, tap_x;
  logic               tap_inside;
  logic [7:0]         tap_slot;
  always_comb begin
    tap_y      = $signed({2'b0, y}) + $signed({10'b0, ky}) - 18'(R);
    tap_x      = $signed({2'b0, x}) + $signed({10'b0, kx}) - 18'(R);
    tap_inside = tap_y >= 0 && tap_y < $signed({2'b0, cfg_q.height}) &&
                 tap_x >= 0 && tap_x < $signed({2'b0, cfg_q.width});
    tap_slot   = ys + ky + 8'(KS - R);
    if (tap_slot >= 8'(KS)) tap_slot = tap_slot - 8'(KS);
    if (tap_slot >= 8'(KS)) tap_slot = tap_slot - 8'(KS);
    lb_raddr   = ($clog2(LB_D))'(32'(tap_slot) * W_MAX + 32'(tap_x[15:0]));
  end

  // --------------------------------------------------------------------
  // AXI master outputs
  logic first_tile, last_tile;
  assign first_tile = (ci_base == 16'd0);
  assign last_tile  = (ci_base + 16'(cfg_q.m_tile) == cfg_q.in_ch);

  always_comb begin
    ar_valid = (state_q == S_WT_AR) || (state_q == S_IN_AR);
    ar       = '0;
    ar.size  = 3'd2;
    ar.burst = BURST_INCR;
    if (state_q == S_WT_AR) begin
      ar.addr = cfg_q.wt_base + 4 * (((32'(co_base) + 32'(wco)) * 32'(cfg_q.in_ch)
                                      + 32'(ci_base)) * TAPS);
      ar.len  = 8'(32'(cfg_q.m_tile) * TAPS - 1);
    end else begin
      ar.addr = cfg_q.in_base + 4 * ((32'(ld_row) * 32'(cfg_q.width) + 32'(ld_x))
                                     * 32'(cfg_q.in_ch) + 32'(ci_base));
      ar.len  = cfg_q.m_tile - 8'd1;
    end
    r_ready  = (state_q == S_WT_R) || (state_q == S_IN_R);

    aw_valid = (state_q == S_AW);
    aw       = '0;
    aw.addr  = cfg_q.out_base + 4 * ((32'(yo) * 32'(out_w) + 32'(xo))
                                     * 32'(cfg_q.out_ch) + 32'(co_base));
    aw.len   = cfg_q.n_tile - 8'd1;
    aw.size  = 3'd2;
    aw.burst = BURST_INCR;
    aw.user  = {last_tile && cfg_q.relu, !first_tile};

    w_valid  = (state_q == S_W);
    w.data   = psum_q[wb[NI_W-1:0]];
    w.strb   = '1;
    w.last   = (wb == cfg_q.n_tile - 8'd1);
    b_ready  = (state_q == S_B);
  end

  assign busy = (state_q != S_IDLE);
  assign stp  = cfg_q.stride2 ? 8'd2 : 8'd1;

  // (y + stride) mod KS, for the row slot of the next output row's centre
  always_comb begin
    ys_next = ys + stp;
    if (ys_next >= 8'(KS)) ys_next = ys_next - 8'(KS);
    if (ys_next >= 8'(KS)) ys_next = ys_next - 8'(KS);
  end

  mac_array #(.KS(KS), .M_T(M_T), .N_T(N_T)) u_mac (
    .clk, .rst_n,
    .in_valid (state_q == S_MAC),
    .win, .wts(wbuf),
    .out_valid(mac_out_valid),
    .psum     (mac_psum)
  );

  // --------------------------------------------------------------------
  // line buffer and window registers (no reset: written before read)
  always_ff @(posedge clk) begin
    for (int ci = 0; ci < M_T; ci++) lb_q[ci] <= lb[ci][lb_raddr];
    if (state_q == S_IN_R && r_valid)
      lb[bci[MI_W-1:0]][32'(slot_ld) * W_MAX + 32'(ld_x)] <= r.data[ACT_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int ci = 0; ci < M_T; ci++)
        for (int t = 0; t < TAPS; t++) win[ci][t] <= '0;
      for (int co = 0; co < N_T; co++) psum_q[co] <= '0;
      g_valid_d  <= 1'b0;
      g_inside_d <= 1'b0;
      g_tap_d    <= '0;
    end else begin
      g_valid_d  <= (state_q == S_GATHER);
      g_inside_d <= tap_inside;
      g_tap_d    <= ky * 8'(KS) + kx;
      if (g_valid_d)
        for (int ci = 0; ci < M_T; ci++)
          win[ci][g_tap_d[TI_W-1:0]] <=
            (g_inside_d && 8'(ci) < cfg_q.m_tile) ? lb_q[ci] : '0;
      if (mac_out_valid) psum_q <= mac_psum;
    end
  end

  // --------------------------------------------------------------------
  // sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cfg_q   <= '0;
      done    <= 1'b0;
      co_base <= '0; ci_base <= '0; y <= '0; x <= '0; ld_row <= '0; ld_x <= '0;
      yo <= '0; xo <= '0; out_w <= '0; out_h <= '0;
      ys <= '0; slot_ld <= '0; wco <= '0; wci <= '0; wtap <= '0; bci <= '0;
      ky <= '0; kx <= '0; wb <= '0;
      for (int co = 0; co < N_T; co++)
        for (int ci = 0; ci < M_T; ci++)
          for (int t = 0; t < TAPS; t++) wbuf[co][ci][t] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          cfg_q   <= cfg;
          out_w   <= cfg.stride2 ? 16'((17'(cfg.width) + 17'd1) >> 1) : cfg.width;
          out_h   <= cfg.stride2 ? 16'((17'(cfg.height) + 17'd1) >> 1) : cfg.height;
          co_base <= '0;
          ci_base <= '0;
          state_q <= S_TILE;
        end
        S_TILE: begin                       // start of an (co_base, ci_base) tile
          for (int co = 0; co < N_T; co++)
            for (int ci = 0; ci < M_T; ci++)
              for (int t = 0; t < TAPS; t++) wbuf[co][ci][t] <= '0;
          wco <= '0; wci <= '0; wtap <= '0;
          y <= '0; ys <= '0; x <= '0; yo <= '0; xo <= '0; ld_row <= '0; slot_ld <= '0;
          state_q <= S_WT_AR;
        end
        S_WT_AR: if (ar_ready) state_q <= S_WT_R;
        S_WT_R: if (r_valid) begin
          wbuf[wco[NI_W-1:0]][wci[MI_W-1:0]][wtap[TI_W-1:0]]
            <= r.data[ACT_W-1:0];
          if (wtap == 8'(TAPS - 1)) begin
            wtap <= '0;
            wci  <= wci + 8'd1;
          end else begin
            wtap <= wtap + 8'd1;
          end
          if (r.last) begin
            wci <= '0;
            wtap <= '0;
            if (wco == cfg_q.n_tile - 8'd1) state_q <= S_ROW_CHK;
            else begin
              wco     <= wco + 8'd1;
              state_q <= S_WT_AR;
            end
          end
        end
        S_ROW_CHK: begin                    // rows y-R .. y+R must be present
          if (ld_row < cfg_q.height && 32'(ld_row) <= 32'(y) + R) begin
            ld_x    <= '0;
            state_q <= S_IN_AR;
          end else begin
            ky <= '0; kx <= '0;
            state_q <= S_GATHER;
          end
        end
        S_IN_AR: if (ar_ready) begin
          bci     <= '0;
          state_q <= S_IN_R;
        end
        S_IN_R: if (r_valid) begin
          bci <= bci + 8'd1;
          if (r.last) begin
            if (ld_x == cfg_q.width - 16'd1) begin
              ld_row  <= ld_row + 16'd1;
              slot_ld <= (slot_ld == 8'(KS - 1)) ? 8'd0 : slot_ld + 8'd1;
              state_q <= S_ROW_CHK;
            end else begin
              ld_x    <= ld_x + 16'd1;
              state_q <= S_IN_AR;
            end
          end
        end
        S_GATHER: begin                     // one tap per cycle, all maps at once
          if (kx == 8'(KS - 1)) begin
            kx <= '0;
            ky <= ky + 8'd1;
            if (ky == 8'(KS - 1)) state_q <= S_GLAST;
          end else begin
            kx <= kx + 8'd1;
          end
        end
        S_GLAST: state_q <= S_MAC;          // last tap lands in win
        S_MAC:   state_q <= S_MACW;
        S_MACW:  if (mac_out_valid) begin
          wb      <= '0;
          state_q <= S_AW;
        end
        S_AW: if (aw_ready) state_q <= S_W;
        S_W: if (w_ready) begin
          wb <= wb + 8'd1;
          if (w.last) state_q <= S_B;
        end
        S_B: if (b_valid) state_q <= S_NEXT;
        S_NEXT: begin
          if (xo != out_w - 16'd1) begin
            xo <= xo + 16'd1;
            x  <= x + 16'(stp);
            ky <= '0; kx <= '0;
            state_q <= S_GATHER;
          end else begin
            x  <= '0;
            xo <= '0;
            if (yo != out_h - 16'd1) begin
              yo <= yo + 16'd1;
              y  <= y + 16'(stp);
              ys <= ys_next;
              state_q <= S_ROW_CHK;
            end else if (!last_tile) begin
              ci_base <= ci_base + 16'(cfg_q.m_tile);
              state_q <= S_TILE;
            end else if (co_base + 16'(cfg_q.n_tile) != cfg_q.out_ch) begin
              ci_base <= '0;
              co_base <= co_base + 16'(cfg_q.n_tile);
              state_q <= S_TILE;
            end else begin
              done    <= 1'b1;
              state_q <= S_IDLE;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // AXI master rules: requests are held until accepted.
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    aw_valid && !aw_ready |=> aw_valid && $stable(aw));
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    ar_valid && !ar_ready |=> ar_valid && $stable(ar));
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    w_valid && !w_ready |=> w_valid && $stable(w));

endmodule
