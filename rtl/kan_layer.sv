// kan_layer: one trainable layer of a Kolmogorov-Arnold network.
//
// The layer maps M inputs to N outputs, z_i = sum_j g_ij(x_j), where every
// g_ij is a piecewise-linear function stored as its values G[i][j][0..P-1]
// at P nodes spaced 2^D apart from YMIN. Training is one Kaczmarz step per
// record: given the residual r_i = z*_i - z_i, only the two nodes that
// bracket x_j move, by mu*r_i*(1-f) and mu*r_i*f, with mu = 2^-MU.
//
// All functions and all parameters are handled in parallel; the sequencer
// drives one strobe per cycle:
//   fn_en   g_ij = ((2^D-f_j) G[k_j] + f_j G[k_j+1]) >>> D, and k_j, f_j kept
//   sum_en  z_i = sum_j g_ij
//   uhi_en  dhi_ij = round(r_i * f_j       / 2^(D+MU))
//   ulo_en  dlo_ij = round(r_i * (2^D-f_j) / 2^(D+MU))
//   ahi_en  G[i][j][k_j+1] += dhi_ij
//   alo_en  G[i][j][k_j]   += dlo_ij
//   clr     clears the per-record registers (not the parameters)
// Each of these takes exactly one clock, independent of M, N and P, which
// is the point of the design. dg[i][j] = G[k_j+1] - G[k_j] (Jacobian times
// 2^D) is combinational from the parameters and the kept indices; it is
// read in the cycle after sum and before the first apply.
//
// The one-cycle-per-step structure and the update rule follow the published
// scheme. Choices of this implementation: 32-bit signed values, floor shift
// in interpolation but rounding in the updates (a floor shift of small
// negative update terms biases every parameter downwards), and reset loading
// a fixed pseudo-random initial model INIT_BASE +- 2^INIT_SPREAD_LOG.
// Each function has two multipliers: the interpolation is computed as
// (G[k] << D) + f (G[k+1] - G[k]), and both update terms share the product
// r_i f_j, since r (2^D - f) = (r << D) - r f. Both forms are exact
// rewrites of the formulas above.
// rd_i/rd_j/rd_k read any parameter combinationally for export.
module kan_layer
  import kan_pkg::*;
#(
  parameter int   M               = 9,
  parameter int   N               = 6,
  parameter int   P               = 3,
  parameter int   D               = 7,
  parameter int   MU              = 0,
  parameter val_t YMIN            = 0,
  parameter int   INIT_BASE       = 1137,
  parameter int   INIT_SPREAD_LOG = 8,
  parameter int   SEED            = 1,
  localparam int  KW = $clog2(P),
  localparam int  IW = (N > 1) ? $clog2(N) : 1,
  localparam int  JW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          fn_en,
  input  logic          sum_en,
  input  logic          uhi_en,
  input  logic          ulo_en,
  input  logic          ahi_en,
  input  logic          alo_en,
  input  val_t          x  [M],
  input  val_t          r  [N],
  output val_t          z  [N],
  output val_t          dg [N][M],
  input  logic [IW-1:0] rd_i,
  input  logic [JW-1:0] rd_j,
  input  logic [KW-1:0] rd_k,
  output val_t          rd_val
);
  val_t          G    [N][M][P];   // model parameters
  val_t          g    [N][M];      // function values of the current record
  val_t          dhi  [N][M];      // pending update of node k+1
  val_t          dlo  [N][M];      // pending update of node k
  logic [KW-1:0] kq   [M];         // kept segment index per input
  logic [D:0]    fq   [M];         // kept offset
  wide_t         rf   [N][M];      // r_i * f_j

  // segment location, shared by all blocks reading the same input
  logic [KW-1:0] kc   [M];
  logic [D:0]    fc   [M];

  for (genvar j = 0; j < M; j++) begin : g_loc
    plf_locate #(.D(D), .P(P), .YMIN(YMIN)) u_loc (
      .y(x[j]), .k(kc[j]), .f(fc[j])
    );
  end

  // Jacobian numerators at the kept segments
  always_comb begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        dg[i][j] = G[i][j][kq[j] + 1'b1] - G[i][j][kq[j]];
  end

  // r_i * f_j, the one product per function of both update terms:
  // r (2^D - f) = (r << D) - r f
  always_comb begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        rf[i][j] = wide_t'(r[i]) * wide_t'({1'b0, fq[j]});
  end

  assign rd_val = G[rd_i][rd_j][rd_k];

  // per-record datapath registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < M; j++) begin
        kq[j] <= '0; fq[j] <= '0;
      end
      for (int i = 0; i < N; i++) begin
        z[i] <= '0;
        for (int j = 0; j < M; j++) begin
          g[i][j] <= '0; dhi[i][j] <= '0; dlo[i][j] <= '0;
        end
      end
    end else if (clr) begin
      for (int j = 0; j < M; j++) begin
        kq[j] <= '0; fq[j] <= '0;
      end
      for (int i = 0; i < N; i++) begin
        z[i] <= '0;
        for (int j = 0; j < M; j++) begin
          g[i][j] <= '0; dhi[i][j] <= '0; dlo[i][j] <= '0;
        end
      end
    end else begin
      if (fn_en) begin
        for (int j = 0; j < M; j++) begin
          kq[j] <= kc[j]; fq[j] <= fc[j];
        end
        for (int i = 0; i < N; i++)
          for (int j = 0; j < M; j++)
            g[i][j] <= val_t'(((wide_t'(G[i][j][kc[j]]) <<< D) +
                               (wide_t'(G[i][j][kc[j] + 1'b1]) - wide_t'(G[i][j][kc[j]])) *
                               wide_t'({1'b0, fc[j]})) >>> D);
      end
      if (sum_en) begin
        for (int i = 0; i < N; i++) begin
          val_t acc;
          acc = '0;
          for (int j = 0; j < M; j++) acc = acc + g[i][j];
          z[i] <= acc;
        end
      end
      if (uhi_en)
        for (int i = 0; i < N; i++)
          for (int j = 0; j < M; j++)
            dhi[i][j] <= val_t'(shr_round(rf[i][j], D + MU));
      if (ulo_en)
        for (int i = 0; i < N; i++)
          for (int j = 0; j < M; j++)
            dlo[i][j] <= val_t'(shr_round((wide_t'(r[i]) <<< D) - rf[i][j], D + MU));
    end
  end

  // parameter memory: random-looking initial model at reset, two-node updates
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < M; j++)
          for (int k = 0; k < P; k++)
            G[i][j][k] <= init_param(SEED, i, j, k, INIT_BASE, INIT_SPREAD_LOG);
    end else if (ahi_en) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < M; j++)
          G[i][j][kq[j] + 1'b1] <= G[i][j][kq[j] + 1'b1] + dhi[i][j];
    end else if (alo_en) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < M; j++)
          G[i][j][kq[j]] <= G[i][j][kq[j]] + dlo[i][j];
    end
  end

  // The sequencer never overlaps steps that touch the same registers.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({clr, fn_en, sum_en, uhi_en, ulo_en, ahi_en, alo_en}))
    else $error("kan_layer: overlapping phase strobes");
endmodule
