// tb_kan_layer: checks one KAN layer against a reference model.
// Layer under test: 6 inputs, 2 blocks, 21 nodes per function, spacing 2^10,
// domain starting at -2048, damping 2^-3. After reset the initial parameters
// are read back (and checked to lie in INIT_BASE +- 2^INIT_SPREAD_LOG and not
// to be all equal); from then on the testbench keeps its own copy and, for
// 300 random records, predicts the sums z, the Jacobian numerators dg and
// every parameter after the two-node updates, using the interpolation and
// update formulas written out here. Each phase strobe is one clock, and its
// result must be visible right after that clock edge.
module tb_kan_layer;
  import kan_pkg::*;
  localparam int M = 6, N = 2, P = 21, D = 10, MU = 3;
  localparam int YMIN = -2048, BASE = 100, SP = 6;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic clr = 0, fn_en = 0, sum_en = 0, uhi_en = 0, ulo_en = 0, ahi_en = 0, alo_en = 0;
  val_t x [M];
  val_t r [N];
  val_t z [N];
  val_t dg [N][M];
  logic [0:0] rd_i = 0;
  logic [2:0] rd_j = 0;
  logic [4:0] rd_k = 0;
  val_t rd_val;
  longint Gm [N][M][P];

  kan_layer #(.M(M), .N(N), .P(P), .D(D), .MU(MU), .YMIN(YMIN),
              .INIT_BASE(BASE), .INIT_SPREAD_LOG(SP), .SEED(7)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic strobe(ref logic s);
    @(negedge clk) s = 1;
    @(negedge clk) s = 0;
  endtask

  function automatic longint rnd(input longint v, input int s);
    return (v + (longint'(1) << (s - 1))) >>> s;
  endfunction

  initial begin
    int k [M];
    longint f [M], zexp, dexp;
    bit differ;
    for (int j = 0; j < M; j++) x[j] = YMIN;
    for (int i = 0; i < N; i++) r[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    differ = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        for (int q = 0; q < P; q++) begin
          rd_i = 1'(i); rd_j = 3'(j); rd_k = 5'(q); #1;
          Gm[i][j][q] = rd_val;
          chk(rd_val >= BASE - (1 << SP) && rd_val < BASE + (1 << SP), "initial value range");
          if (rd_val != Gm[0][0][0]) differ = 1;
        end
    chk(differ, "initial values are not all equal");

    for (int n = 0; n < 300; n++) begin
      strobe(clr);
      for (int j = 0; j < M; j++) begin
        x[j] = YMIN + val_t'($urandom_range((P - 1) * (1 << D) - 1));
        k[j] = (x[j] - YMIN) / (1 << D);
        f[j] = (x[j] - YMIN) % (1 << D);
      end
      strobe(fn_en);
      strobe(sum_en);
      for (int i = 0; i < N; i++) begin
        zexp = 0;
        for (int j = 0; j < M; j++)
          zexp += (Gm[i][j][k[j]] * ((1 << D) - f[j]) + Gm[i][j][k[j]+1] * f[j]) >>> D;
        chk(z[i] == val_t'(zexp), $sformatf("rec %0d z[%0d]=%0d exp %0d", n, i, z[i], zexp));
        for (int j = 0; j < M; j++) begin
          dexp = Gm[i][j][k[j]+1] - Gm[i][j][k[j]];
          chk(dg[i][j] == val_t'(dexp), $sformatf("rec %0d dg[%0d][%0d]", n, i, j));
        end
        r[i] = val_t'($urandom_range(4000)) - 2000;
      end
      strobe(uhi_en);
      strobe(ulo_en);
      strobe(ahi_en);
      strobe(alo_en);
      for (int i = 0; i < N; i++)
        for (int j = 0; j < M; j++) begin
          Gm[i][j][k[j]+1] += rnd(longint'(r[i]) * f[j], D + MU);
          Gm[i][j][k[j]]   += rnd(longint'(r[i]) * ((1 << D) - f[j]), D + MU);
        end
      if (n % 30 == 29 || n < 3)
        for (int i = 0; i < N; i++)
          for (int j = 0; j < M; j++)
            for (int q = 0; q < P; q++) begin
              rd_i = 1'(i); rd_j = 3'(j); rd_k = 5'(q); #1;
              chk(rd_val == val_t'(Gm[i][j][q]),
                  $sformatf("rec %0d G[%0d][%0d][%0d]=%0d exp %0d", n, i, j, q, rd_val, Gm[i][j][q]));
            end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
