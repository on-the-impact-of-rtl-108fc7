// mac_array: the multipliers of the accelerator, split among output maps,
// input maps and kernel taps.
//
// It holds KS*KS*M_T*N_T multiplier-accumulator lanes (504 with the defaults
// KS=3, M_T=8, N_T=7, inside the paper's budget of P=512 MACs, eq. (1):
// K^2*m*n < P).  For one output pixel it multiplies the KS x KS window of each
// of up to M_T input maps with the matching weights of each of up to N_T
// output maps and sums, per output map, the KS*KS*M_T products: the n partial
// sums p_sum[co] of the paper's tiled loop nest.  Lanes of unused input or
// output maps are switched off by giving them zero weights.
// Timing: in_valid with win/wts starts an operation; psum and out_valid appear
// on the next clock edge (one register stage).  Inputs are signed ACT_W-bit
// values, sums are signed PSUM_W bits and wrap on overflow.
module mac_array
  import dnn_pkg::*;
#(
  parameter int unsigned KS  = 3,
  parameter int unsigned M_T = 8,
  parameter int unsigned N_T = 7,
  localparam int unsigned TAPS = KS * KS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [ACT_W-1:0]  win [M_T][TAPS],
  input  logic signed [ACT_W-1:0]  wts [N_T][M_T][TAPS],
  output logic                     out_valid,
  output logic signed [PSUM_W-1:0] psum [N_T]
);

  logic signed [PSUM_W-1:0] sum [N_T];

  always_comb begin
    for (int co = 0; co < N_T; co++) begin
      sum[co] = '0;
      for (int ci = 0; ci < M_T; ci++)
        for (int t = 0; t < TAPS; t++)
          sum[co] += PSUM_W'(win[ci][t]) * PSUM_W'(wts[co][ci][t]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int co = 0; co < N_T; co++) psum[co] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) psum <= sum;
    end
  end

endmodule
