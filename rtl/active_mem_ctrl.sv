// active_mem_ctrl: AXI4 slave SRAM controller that can update memory in place.
//
// Besides plain reads and writes, a write burst can ask the controller, via
// the 2-bit AWUSER field, to add each data beat to the word already stored
// (read-update-write) and/or to pass the result through an activation
// function.  The compute engine then sends each partial sum once instead of
// reading the previous partial sum back over the interconnect, adding it and
// writing it again.  The activation function (identity or ReLU) is chosen
// statically through a configuration register (cfg_we / cfg_act_sel).
//
// How it works: one state machine serves one burst at a time; when a read and
// a write address arrive together the two directions take turns.  The SRAM
// has a single port, so
//   - a plain write (OP_NORMAL, OP_ACT) stores one beat per cycle,
//   - an accumulating write (OP_ADD, OP_ADD_ACT) takes two cycles per beat:
//     the beat is accepted and the old word is read, then the sum is written,
//   - a read takes two cycles per beat: SRAM read, then the R beat is offered
//     and held until RREADY.
// Only INCR bursts of full 32-bit beats are handled (AxBURST and AxSIZE are
// not decoded); word addresses wrap at the SRAM size and every response is
// OKAY.  Bytes whose WSTRB bit is low keep their stored value.
// The read-update-write on an AWUSER command follows the paper; the command
// encoding, timing and burst handling are this design's own.
module active_mem_ctrl
  import dnn_pkg::*;
#(
  parameter int unsigned MEM_WORDS = 8388608,
  localparam int unsigned MA_W = $clog2(MEM_WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration register
  input  logic          cfg_we,
  input  act_sel_e      cfg_act_sel,
  output act_sel_e      act_sel,
  // AXI4 slave
  input  logic          aw_valid,
  output logic          aw_ready,
  input  axi_aw_t       aw,
  input  logic          w_valid,
  output logic          w_ready,
  input  axi_w_t        w,
  output logic          b_valid,
  input  logic          b_ready,
  output axi_b_t        b,
  input  logic          ar_valid,
  output logic          ar_ready,
  input  axi_ar_t       ar,
  output logic          r_valid,
  input  logic          r_ready,
  output axi_r_t        r,
  // SRAM port
  output logic              mem_en,
  output logic              mem_we,
  output logic [MA_W-1:0]   mem_addr,
  output logic [AXI_STRB_W-1:0] mem_be,
  output logic [AXI_DATA_W-1:0] mem_wdata,
  input  logic [AXI_DATA_W-1:0] mem_rdata
);

  typedef enum logic [2:0] {
    S_IDLE, S_WDATA, S_WRMW, S_BRESP, S_RADDR, S_RDATA
  } state_e;

  state_e                state_q;
  logic [MA_W-1:0]       waddr_q;
  logic [AXI_ID_W-1:0]   id_q;
  logic [7:0]            beats_q;   // beats left after the current one
  mc_op_e                op_q;
  logic                  rd_turn_q; // read wins the next tie
  axi_w_t                wbeat_q;   // beat held during read-update-write
  logic [AXI_DATA_W-1:0] alu_old, alu_new, alu_res;
  mc_op_e                alu_op;

  // configuration register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      act_sel <= ACT_NONE;
    else if (cfg_we) act_sel <= cfg_act_sel;
  end

  psum_update_alu #(.W(AXI_DATA_W)) u_alu (
    .old    (alu_old),
    .wdata  (alu_new),
    .op     (alu_op),
    .act_sel(act_sel),
    .result (alu_res)
  );

  logic take_w, take_r;
  always_comb begin
    take_w = (state_q == S_IDLE) && aw_valid && !(ar_valid && rd_turn_q);
    take_r = (state_q == S_IDLE) && ar_valid && !take_w;
  end

  assign aw_ready = take_w;
  assign ar_ready = take_r;
  assign w_ready  = (state_q == S_WDATA);
  assign b_valid  = (state_q == S_BRESP);
  assign b        = '{id: id_q, resp: RESP_OKAY};
  assign r_valid  = (state_q == S_RDATA);
  assign r        = '{id: id_q, data: mem_rdata, resp: RESP_OKAY,
                      last: (beats_q == 8'd0)};

  // SRAM access and ALU operands
  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = waddr_q;
    mem_be    = '1;
    alu_old   = mem_rdata;
    alu_new   = w.data;
    alu_op    = op_q;
    mem_wdata = alu_res;
    unique case (state_q)
      S_WDATA: if (w_valid) begin
        mem_en = 1'b1;
        if (op_q[0]) begin          // accumulate: fetch the old word first
          mem_we = 1'b0;
        end else begin              // plain write, possibly activated
          mem_we = 1'b1;
          mem_be = w.strb;
        end
      end
      S_WRMW: begin
        mem_en  = 1'b1;
        mem_we  = 1'b1;
        mem_be  = wbeat_q.strb;
        alu_new = wbeat_q.data;
      end
      S_RADDR: begin
        mem_en = 1'b1;
        mem_we = 1'b0;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      waddr_q   <= '0;
      id_q      <= '0;
      beats_q   <= '0;
      op_q      <= OP_NORMAL;
      rd_turn_q <= 1'b0;
      wbeat_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (take_w) begin
            waddr_q   <= aw.addr[MA_W+1:2];
            id_q      <= aw.id;
            beats_q   <= aw.len;
            op_q      <= mc_op_e'(aw.user);
            rd_turn_q <= 1'b1;
            state_q   <= S_WDATA;
          end else if (take_r) begin
            waddr_q   <= ar.addr[MA_W+1:2];
            id_q      <= ar.id;
            beats_q   <= ar.len;
            rd_turn_q <= 1'b0;
            state_q   <= S_RADDR;
          end
        end
        S_WDATA: if (w_valid) begin
          if (op_q[0]) begin
            wbeat_q <= w;
            state_q <= S_WRMW;
          end else begin
            waddr_q <= waddr_q + 1'b1;
            beats_q <= beats_q - 1'b1;
            if (w.last) state_q <= S_BRESP;
          end
        end
        S_WRMW: begin
          waddr_q <= waddr_q + 1'b1;
          beats_q <= beats_q - 1'b1;
          state_q <= wbeat_q.last ? S_BRESP : S_WDATA;
        end
        S_BRESP: if (b_ready) state_q <= S_IDLE;
        S_RADDR: state_q <= S_RDATA;
        S_RDATA: if (r_ready) begin
          waddr_q <= waddr_q + 1'b1;
          beats_q <= beats_q - 1'b1;
          state_q <= (beats_q == 8'd0) ? S_IDLE : S_RADDR;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // AXI rules the controller relies on: a request stays up, unchanged, until
  // it is accepted, and WLAST arrives on the beat AWLEN announced.
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    aw_valid && !aw_ready |=> aw_valid && $stable(aw));
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    ar_valid && !ar_ready |=> ar_valid && $stable(ar));
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    w_valid && !w_ready |=> w_valid && $stable(w));
  a_wlast: assert property (@(posedge clk) disable iff (!rst_n)
    w_valid && w_ready |-> w.last == (beats_q == 8'd0));

endmodule
