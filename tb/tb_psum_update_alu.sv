// tb_psum_update_alu: all four commands and both activation settings on
// random and corner-case operands, against an independent reference.
module tb_psum_update_alu;
  import dnn_pkg::*;
  logic [31:0] old, wdata, result;
  mc_op_e   op;
  act_sel_e act_sel;
  int checks = 0, failures = 0;

  psum_update_alu dut (.*);

  function automatic logic [31:0] model(logic [31:0] o, logic [31:0] n,
                                        logic [1:0] c, logic [1:0] a);
    longint s;
    s = c[0] ? (longint'(signed'(o)) + longint'(signed'(n))) : longint'(signed'(n));
    s = s & 64'hffff_ffff;
    if (c[1] && a == 2'd1 && s[31]) s = 0;
    return s[31:0];
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] corner [6] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h7fff_ffff,
                                32'h8000_0000, 32'h0000_1234};
    for (int i = 0; i < 4000; i++) begin
      old     = (i < 36) ? corner[i % 6] : $urandom;
      wdata   = (i < 36) ? corner[i / 6] : $urandom;
      op      = mc_op_e'(i % 4);
      act_sel = act_sel_e'((i / 4) % 2);
      #1;
      checks++;
      if (result !== model(old, wdata, op, act_sel)) begin
        failures++;
        $display("op %0d act %0d old %h new %h -> %h, expected %h",
                 op, act_sel, old, wdata, result, model(old, wdata, op, act_sel));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
