// dnn_accel_top: convolution accelerator with an active memory controller.
//
// The compute engine (AXI4 master) reaches the on-chip SRAM through the
// interconnect and the active memory controller.  Every write of partial sums
// carries a command on AWUSER, so the controller adds each new partial sum to
// the stored one (and applies the activation on the last update) inside the
// memory subsystem; partial sums never travel back to the compute engine.
// This is the arrangement of the paper's block diagram: compute engine,
// interconnect, memory controller, with AWUSER as an extra sideband path.
//
// Interface: the host programs the activation function once (act_cfg_we,
// act_cfg_sel; act_sel reads it back), places input maps and weights in the SRAM, applies a layer
// configuration with a start pulse and waits for done; results are then in
// the SRAM.  The SRAM has no host port here; it is filled and read by the
// surrounding system (a testbench reaches it hierarchically).
module dnn_accel_top
  import dnn_pkg::*;
#(
  parameter int unsigned KS        = 3,
  parameter int unsigned M_T       = 8,
  parameter int unsigned N_T       = 7,
  parameter int unsigned W_MAX     = 224,
  parameter int unsigned MEM_WORDS = 8388608
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       act_cfg_we,
  input  act_sel_e   act_cfg_sel,
  output act_sel_e   act_sel,
  input  logic       start,
  input  layer_cfg_t cfg,
  output logic       busy,
  output logic       done
);

  localparam int unsigned MA_W = $clog2(MEM_WORDS);

  // compute engine <-> interconnect
  logic ce_aw_valid, ce_aw_ready, ce_w_valid, ce_w_ready, ce_b_valid, ce_b_ready;
  logic ce_ar_valid, ce_ar_ready, ce_r_valid, ce_r_ready;
  axi_aw_t ce_aw; axi_w_t ce_w; axi_b_t ce_b; axi_ar_t ce_ar; axi_r_t ce_r;
  // interconnect <-> memory controller
  logic mc_aw_valid, mc_aw_ready, mc_w_valid, mc_w_ready, mc_b_valid, mc_b_ready;
  logic mc_ar_valid, mc_ar_ready, mc_r_valid, mc_r_ready;
  axi_aw_t mc_aw; axi_w_t mc_w; axi_b_t mc_b; axi_ar_t mc_ar; axi_r_t mc_r;
  // memory controller <-> SRAM
  logic                  mem_en, mem_we;
  logic [MA_W-1:0]       mem_addr;
  logic [AXI_STRB_W-1:0] mem_be;
  logic [AXI_DATA_W-1:0] mem_wdata, mem_rdata;

  compute_engine #(.KS(KS), .M_T(M_T), .N_T(N_T), .W_MAX(W_MAX)) u_ce (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .aw_valid(ce_aw_valid), .aw_ready(ce_aw_ready), .aw(ce_aw),
    .w_valid (ce_w_valid),  .w_ready (ce_w_ready),  .w (ce_w),
    .b_valid (ce_b_valid),  .b_ready (ce_b_ready),  .b (ce_b),
    .ar_valid(ce_ar_valid), .ar_ready(ce_ar_ready), .ar(ce_ar),
    .r_valid (ce_r_valid),  .r_ready (ce_r_ready),  .r (ce_r)
  );

  axi_interconnect u_ic (
    .clk, .rst_n,
    .s_aw_valid(ce_aw_valid), .s_aw_ready(ce_aw_ready), .s_aw(ce_aw),
    .s_w_valid (ce_w_valid),  .s_w_ready (ce_w_ready),  .s_w (ce_w),
    .s_b_valid (ce_b_valid),  .s_b_ready (ce_b_ready),  .s_b (ce_b),
    .s_ar_valid(ce_ar_valid), .s_ar_ready(ce_ar_ready), .s_ar(ce_ar),
    .s_r_valid (ce_r_valid),  .s_r_ready (ce_r_ready),  .s_r (ce_r),
    .m_aw_valid(mc_aw_valid), .m_aw_ready(mc_aw_ready), .m_aw(mc_aw),
    .m_w_valid (mc_w_valid),  .m_w_ready (mc_w_ready),  .m_w (mc_w),
    .m_b_valid (mc_b_valid),  .m_b_ready (mc_b_ready),  .m_b (mc_b),
    .m_ar_valid(mc_ar_valid), .m_ar_ready(mc_ar_ready), .m_ar(mc_ar),
    .m_r_valid (mc_r_valid),  .m_r_ready (mc_r_ready),  .m_r (mc_r)
  );

  active_mem_ctrl #(.MEM_WORDS(MEM_WORDS)) u_mc (
    .clk, .rst_n,
    .cfg_we(act_cfg_we), .cfg_act_sel(act_cfg_sel), .act_sel,
    .aw_valid(mc_aw_valid), .aw_ready(mc_aw_ready), .aw(mc_aw),
    .w_valid (mc_w_valid),  .w_ready (mc_w_ready),  .w (mc_w),
    .b_valid (mc_b_valid),  .b_ready (mc_b_ready),  .b (mc_b),
    .ar_valid(mc_ar_valid), .ar_ready(mc_ar_ready), .ar(mc_ar),
    .r_valid (mc_r_valid),  .r_ready (mc_r_ready),  .r (mc_r),
    .mem_en, .mem_we, .mem_addr, .mem_be, .mem_wdata, .mem_rdata
  );

  sram_sp #(.WORDS(MEM_WORDS), .DATA_W(AXI_DATA_W)) u_sram (
    .clk, .en(mem_en), .we(mem_we), .addr(mem_addr), .be(mem_be),
    .wdata(mem_wdata), .rdata(mem_rdata)
  );

endmodule
