// kan_backprop: target residuals for the preceding layer.
//
// With the outer residual vector r = z* - z and the Jacobian
// J_ij = (G[i][j][k_j+1] - G[i][j][k_j]) / 2^D of the outer layer, the
// hidden targets are y* = y + J^T r. This unit forms all M entries of J^T r
// in one clock when en is high:
//   ry_j = round( sum_i dg_ij * r_i / 2^(D+SBP) )
// where dg_ij = G[k+1] - G[k] comes straight from the outer layer's
// parameter registers. The division by the node spacing is the shift by D,
// as elsewhere in the design. SBP is an extra power-of-two scale of this
// implementation that sets the inner-layer step size (the damping of the
// inner layer is split between SBP and that layer's MU). clr zeroes ry.
// Latency: one clock from en to ry.
module kan_backprop
  import kan_pkg::*;
#(
  parameter int M   = 6,
  parameter int N   = 1,
  parameter int D   = 10,
  parameter int SBP = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  val_t dg [N][M],
  input  val_t r  [N],
  output val_t ry [M]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < M; j++) ry[j] <= '0;
    end else if (clr) begin
      for (int j = 0; j < M; j++) ry[j] <= '0;
    end else if (en) begin
      for (int j = 0; j < M; j++) begin
        wide_t acc;
        acc = '0;
        for (int i = 0; i < N; i++) acc = acc + wide_t'(dg[i][j]) * wide_t'(r[i]);
        ry[j] <= val_t'(shr_round(acc, D + SBP));
      end
    end
  end
endmodule
