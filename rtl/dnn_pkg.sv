// dnn_pkg: types and constants shared by the accelerator, the interconnect
// and the active memory controller.
//
// The AXI4 channels are carried as packed structs with separate valid/ready
// wires.  One bus word is one activation or one partial sum (32 bits), so a
// count of data beats on the bus is directly a count of activations moved,
// the unit in which bandwidth is measured.  The write-address channel has a
// 2-bit AWUSER field that tells the memory controller what to do with the
// write data (the command encoding below is this design's own; the idea of
// sending the command on AWUSER is the paper's).
package dnn_pkg;

  localparam int unsigned AXI_ADDR_W = 32;
  localparam int unsigned AXI_DATA_W = 32;
  localparam int unsigned AXI_STRB_W = AXI_DATA_W / 8;
  localparam int unsigned AXI_ID_W   = 4;
  localparam int unsigned AXI_USER_W = 2;

  // Width of input activations and weights as used by the multipliers.  They
  // sit sign-extended in the low bits of a 32-bit bus word.
  localparam int unsigned ACT_W  = 16;
  // Width of a partial sum (and of a stored output activation).
  localparam int unsigned PSUM_W = AXI_DATA_W;

  // Memory-controller command carried on AWUSER.  Bit 0 asks for a
  // read-update-write that adds the write data to the stored word; bit 1 asks
  // for the configured activation function to be applied to the result.
  typedef enum logic [AXI_USER_W-1:0] {
    OP_NORMAL    = 2'b00,  // plain write
    OP_ADD       = 2'b01,  // mem = mem + wdata
    OP_ACT       = 2'b10,  // mem = act(wdata)
    OP_ADD_ACT   = 2'b11   // mem = act(mem + wdata)  (last partial-sum update)
  } mc_op_e;

  // Activation functions selectable through the controller's config register.
  typedef enum logic [1:0] {
    ACT_NONE = 2'd0,
    ACT_RELU = 2'd1
  } act_sel_e;

  localparam logic [1:0] BURST_INCR = 2'b01;
  localparam logic [1:0] RESP_OKAY  = 2'b00;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_ADDR_W-1:0] addr;
    logic [7:0]            len;
    logic [2:0]            size;
    logic [1:0]            burst;
    logic [AXI_USER_W-1:0] user;
  } axi_aw_t;

  typedef struct packed {
    logic [AXI_DATA_W-1:0] data;
    logic [AXI_STRB_W-1:0] strb;
    logic                  last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [1:0]          resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_ADDR_W-1:0] addr;
    logic [7:0]            len;
    logic [2:0]            size;
    logic [1:0]            burst;
  } axi_ar_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_DATA_W-1:0] data;
    logic [1:0]            resp;
    logic                  last;
  } axi_r_t;

  // Per-layer configuration of the compute engine.  Feature maps are stored
  // pixel-major (HWC): word ((y*W + x)*C + c).  Weights are stored as
  // word (((co*M + ci)*K + ky)*K + kx).  All bases are byte addresses.
  typedef struct packed {
    logic [15:0]           width;     // Wi; Wo = Wi (stride 1) or ceil(Wi/2)
    logic [15:0]           height;    // Hi; Ho likewise
    logic [15:0]           in_ch;     // M, a multiple of m_tile
    logic [15:0]           out_ch;    // N, a multiple of n_tile
    logic [7:0]            m_tile;    // m input maps per iteration
    logic [7:0]            n_tile;    // n output maps per iteration
    logic                  relu;      // apply activation with the last update
    logic                  stride2;   // stride 2 (else 1); output ceil(W/2) x ceil(H/2)
    logic [AXI_ADDR_W-1:0] in_base;
    logic [AXI_ADDR_W-1:0] wt_base;
    logic [AXI_ADDR_W-1:0] out_base;
  } layer_cfg_t;

endpackage
