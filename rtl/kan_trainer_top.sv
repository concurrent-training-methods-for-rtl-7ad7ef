// kan_trainer_top: on-chip trainer for a two-layer Kolmogorov-Arnold network.
//
// The chip learns to predict the determinant of random 3x3 matrices while it
// generates them. The model is z = sum_j g_j(y_j), y_j = sum_l h_jl(x_l), with
// 9 inputs, 6 hidden values and one output; every h_jl is a piecewise-linear
// function with 3 nodes and every g_j one with 21 nodes. One record is
// trained every 17 clocks:
//   clr                  per-record state cleared
//   gen, det             a new matrix and its determinant (det3_datagen)
//   l1_fn, l1_sum        hidden values y (inner kan_layer), truncated to
//                        the outer domain by range_clamp
//   l2_fn, l2_sum        prediction z (outer kan_layer)
//   res_out              r = z* - z, registered here
//   res_in               hidden residuals J^T r (kan_backprop); r is pushed
//                        into the error window (err_ring)
//   l2_uhi .. l1_alo     two update terms per function, then the two nodes
//                        per function updated, outer layer first
// kan_sequencer issues the strobes; each step is one clock regardless of the
// layer sizes. pred and resid are measured before the record's own update,
// so mae is an error on unseen data. trunc_lo/hi_count count hidden values
// that had to be truncated. rd_* reads any parameter for exporting the model
// (rd_layer 0 = inner, 1 = outer); read it while busy is low or in the clr
// cycle. x, target: the record being trained. All outputs are registered
// except rd_val and err_rd_diff.
// Network shape, the 256-entry error window and the 14 + 2 + 1 cycle budget
// follow the published Det3 demonstrator; word widths, node spacings, damping
// shifts, the random generator and the initial model are choices of this
// implementation.
module kan_trainer_top
  import kan_pkg::*;
#(
  parameter int N_HID     = kan_pkg::N_HID,
  parameter int P_IN      = kan_pkg::P_IN,
  parameter int P_OUT     = kan_pkg::P_OUT,
  parameter int D_IN      = kan_pkg::D_IN,
  parameter int D_OUT     = kan_pkg::D_OUT,
  parameter int MU_IN     = kan_pkg::MU_IN,
  parameter int MU_OUT    = kan_pkg::MU_OUT,
  parameter int SBP       = kan_pkg::SBP,
  parameter int TSHIFT    = kan_pkg::TSHIFT,
  parameter int ERR_DEPTH = kan_pkg::ERR_DEPTH,
  localparam int HMAX     = (P_OUT - 1) << D_OUT,
  localparam int IW       = (N_HID > 1) ? $clog2(N_HID) : 1,
  localparam int JW       = $clog2(N_IN > N_HID ? N_IN : N_HID),
  localparam int KW       = $clog2(P_IN > P_OUT ? P_IN : P_OUT),
  localparam int EAW      = $clog2(ERR_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           run,
  output logic           busy,
  output logic           rec_done,
  output logic [31:0]    rec_count,
  output logic [XW-1:0]  x [N_IN],
  output val_t           target,
  output val_t           pred,
  output val_t           resid,
  output val_t           mae,
  output logic [EAW+31:0] err_sum,
  output logic           err_full,
  input  logic [EAW-1:0] err_rd_addr,
  output val_t           err_rd_diff,
  output logic [31:0]    trunc_lo_count,
  output logic [31:0]    trunc_hi_count,
  input  logic           rd_layer,
  input  logic [IW-1:0]  rd_i,
  input  logic [JW-1:0]  rd_j,
  input  logic [KW-1:0]  rd_k,
  output val_t           rd_val
);
  localparam int KW1 = $clog2(P_IN);
  localparam int KW2 = $clog2(P_OUT);
  localparam int JW1 = $clog2(N_IN);
  localparam int JW2 = (N_HID > 1) ? $clog2(N_HID) : 1;

  phase_t ph;
  val_t   x1   [N_IN];      // inner inputs
  val_t   y    [N_HID];     // inner sums
  val_t   yc   [N_HID];     // truncated hidden values
  logic   lo_hit [N_HID], hi_hit [N_HID];
  val_t   ry   [N_HID];     // hidden residuals
  val_t   z    [1];
  val_t   r2   [1];
  val_t   dg2  [1][N_HID];
  val_t   dg1  [N_HID][N_IN];   // inner Jacobian: unused, the inputs have no layer before them
  val_t   rd1, rd2;

  kan_sequencer u_seq (
    .clk, .rst_n, .run, .ph, .busy, .rec_done, .rec_count
  );

  det3_datagen #(.XW(XW), .TSHIFT(TSHIFT)) u_gen (
    .clk, .rst_n, .gen(ph.gen), .calc(ph.det), .x, .target, .det()
  );

  always_comb
    for (int l = 0; l < N_IN; l++) x1[l] = val_t'({1'b0, x[l]});

  kan_layer #(
    .M(N_IN), .N(N_HID), .P(P_IN), .D(D_IN), .MU(MU_IN), .YMIN(0),
    .INIT_BASE(((HMAX / 2) / N_IN)), .INIT_SPREAD_LOG(INIT_IN_SPREAD), .SEED(1)
  ) u_l1 (
    .clk, .rst_n, .clr(ph.clr),
    .fn_en(ph.l1_fn), .sum_en(ph.l1_sum),
    .uhi_en(ph.l1_uhi), .ulo_en(ph.l1_ulo),
    .ahi_en(ph.l1_ahi), .alo_en(ph.l1_alo),
    .x(x1), .r(ry), .z(y), .dg(dg1),
    .rd_i(rd_i), .rd_j(JW1'(rd_j)), .rd_k(KW1'(rd_k)), .rd_val(rd1)
  );

  for (genvar j = 0; j < N_HID; j++) begin : g_clamp
    range_clamp #(.LO(HID_MIN), .HI(HMAX)) u_clamp (
      .v(y[j]), .q(yc[j]), .lo_hit(lo_hit[j]), .hi_hit(hi_hit[j])
    );
  end

  kan_layer #(
    .M(N_HID), .N(1), .P(P_OUT), .D(D_OUT), .MU(MU_OUT), .YMIN(HID_MIN),
    .INIT_BASE(INIT_OUT_BASE), .INIT_SPREAD_LOG(INIT_OUT_SPREAD), .SEED(2)
  ) u_l2 (
    .clk, .rst_n, .clr(ph.clr),
    .fn_en(ph.l2_fn), .sum_en(ph.l2_sum),
    .uhi_en(ph.l2_uhi), .ulo_en(ph.l2_ulo),
    .ahi_en(ph.l2_ahi), .alo_en(ph.l2_alo),
    .x(yc), .r(r2), .z(z), .dg(dg2),
    .rd_i(1'b0), .rd_j(JW2'(rd_j)), .rd_k(KW2'(rd_k)), .rd_val(rd2)
  );

  kan_backprop #(.M(N_HID), .N(1), .D(D_OUT), .SBP(SBP)) u_bp (
    .clk, .rst_n, .clr(ph.clr), .en(ph.res_in), .dg(dg2), .r(r2), .ry(ry)
  );

  err_ring #(.DEPTH(ERR_DEPTH)) u_err (
    .clk, .rst_n, .push(ph.res_in), .diff(resid),
    .sum_abs(err_sum), .mae, .full(err_full),
    .rd_addr(err_rd_addr), .rd_diff(err_rd_diff)
  );

  assign r2[0]  = resid;
  assign rd_val = rd_layer ? rd2 : rd1;

  // output residual and truncation statistics
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pred           <= '0;
      resid          <= '0;
      trunc_lo_count <= '0;
      trunc_hi_count <= '0;
    end else begin
      if (ph.res_out) begin
        pred  <= z[0];
        resid <= target - z[0];
      end
      if (ph.l2_fn) begin
        logic [31:0] nlo, nhi;
        nlo = '0; nhi = '0;
        for (int j = 0; j < N_HID; j++) begin
          nlo = nlo + 32'(lo_hit[j]);
          nhi = nhi + 32'(hi_hit[j]);
        end
        trunc_lo_count <= trunc_lo_count + nlo;
        trunc_hi_count <= trunc_hi_count + nhi;
      end
    end
  end
endmodule
