// axi_interconnect: the bus between the compute engine and the memory
// controller.
//
// It carries the five AXI4 channels (write address, write data, write
// response, read address, read data) from one master port to one slave port
// through a full-throughput register slice on each channel.  The AWUSER
// command travels with the write address as part of the AW payload, as the
// paper requires of the interconnect; nothing in the slice interprets it.
// Each channel adds one cycle of latency.  The paper shows the interconnect
// only as a box; a single master, a single slave and one register stage per
// channel are this design's choice.
module axi_interconnect
  import dnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // master side (from the compute engine)
  input  logic    s_aw_valid, output logic s_aw_ready, input  axi_aw_t s_aw,
  input  logic    s_w_valid,  output logic s_w_ready,  input  axi_w_t  s_w,
  output logic    s_b_valid,  input  logic s_b_ready,  output axi_b_t  s_b,
  input  logic    s_ar_valid, output logic s_ar_ready, input  axi_ar_t s_ar,
  output logic    s_r_valid,  input  logic s_r_ready,  output axi_r_t  s_r,
  // slave side (to the memory controller)
  output logic    m_aw_valid, input  logic m_aw_ready, output axi_aw_t m_aw,
  output logic    m_w_valid,  input  logic m_w_ready,  output axi_w_t  m_w,
  input  logic    m_b_valid,  output logic m_b_ready,  input  axi_b_t  m_b,
  output logic    m_ar_valid, input  logic m_ar_ready, output axi_ar_t m_ar,
  input  logic    m_r_valid,  output logic m_r_ready,  input  axi_r_t  m_r
);

  axi_skid #(.T(axi_aw_t)) u_aw (.clk, .rst_n,
    .in_valid(s_aw_valid), .in_ready(s_aw_ready), .in_data(s_aw),
    .out_valid(m_aw_valid), .out_ready(m_aw_ready), .out_data(m_aw));
  axi_skid #(.T(axi_w_t)) u_w (.clk, .rst_n,
    .in_valid(s_w_valid), .in_ready(s_w_ready), .in_data(s_w),
    .out_valid(m_w_valid), .out_ready(m_w_ready), .out_data(m_w));
  axi_skid #(.T(axi_b_t)) u_b (.clk, .rst_n,
    .in_valid(m_b_valid), .in_ready(m_b_ready), .in_data(m_b),
    .out_valid(s_b_valid), .out_ready(s_b_ready), .out_data(s_b));
  axi_skid #(.T(axi_ar_t)) u_ar (.clk, .rst_n,
    .in_valid(s_ar_valid), .in_ready(s_ar_ready), .in_data(s_ar),
    .out_valid(m_ar_valid), .out_ready(m_ar_ready), .out_data(m_ar));
  axi_skid #(.T(axi_r_t)) u_r (.clk, .rst_n,
    .in_valid(m_r_valid), .in_ready(m_r_ready), .in_data(m_r),
    .out_valid(s_r_valid), .out_ready(s_r_ready), .out_data(s_r));

endmodule
