// axi_skid: two-entry register slice for one valid/ready channel.
//
// The payload is registered in both directions (valid and data forward,
// ready backward) and the slice still moves one transfer per cycle: when the
// output stalls, the transfer already in flight is caught in a second
// ("skid") register.  Transfers leave in the order they arrived, unchanged.
// Latency is one cycle.  The payload type is a parameter.  A standard
// register-slice structure, used by this design's interconnect; the paper does
// not describe the interconnect's insides.
module axi_skid #(
  parameter type T = logic [31:0]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);

  T     skid_q;
  logic skid_full_q;

  assign in_ready = !skid_full_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_data    <= '0;
      skid_q      <= '0;
      skid_full_q <= 1'b0;
    end else begin
      if (out_valid && !out_ready) begin
        // output stalled: park an arriving transfer in the skid register
        if (in_valid && in_ready) begin
          skid_q      <= in_data;
          skid_full_q <= 1'b1;
        end
      end else begin
        // output free (or accepted this cycle): refill it
        if (skid_full_q) begin
          out_valid   <= 1'b1;
          out_data    <= skid_q;
          skid_full_q <= 1'b0;
        end else begin
          out_valid <= in_valid;
          if (in_valid) out_data <= in_data;
        end
      end
    end
  end

endmodule
