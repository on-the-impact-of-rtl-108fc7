// psum_update_alu: the arithmetic of the active memory controller.
//
// Given the word read from memory (old), the word arriving on the bus (wdata)
// and the AWUSER command, it produces the word to store:
//   OP_NORMAL  : wdata
//   OP_ADD     : old + wdata                 (partial-sum accumulation)
//   OP_ACT     : act(wdata)
//   OP_ADD_ACT : act(old + wdata)            (last update of an output)
// act() is chosen by act_sel: identity or ReLU.  The paper names addition,
// activation (ReLU given as the example) and normal writes; the addition wraps
// modulo 2^32 and no scaling is applied before the activation, both choices of
// this design.  Purely combinational.
module psum_update_alu
  import dnn_pkg::*;
#(
  parameter int unsigned W = PSUM_W
) (
  input  logic [W-1:0] old,
  input  logic [W-1:0] wdata,
  input  mc_op_e       op,
  input  act_sel_e     act_sel,
  output logic [W-1:0] result
);

  logic [W-1:0] sum;

  always_comb begin
    sum = op[0] ? old + wdata : wdata;
    result = sum;
    if (op[1] && act_sel == ACT_RELU && sum[W-1])
      result = '0;
  end

endmodule
