// tb_kan_backprop: checks the J^T r residual unit.
// Uses 4 outputs of the preceding layer and 3 blocks (N = 3) so that the
// sum over blocks is exercised; random dg and r, including large values,
// are compared with round(sum_i dg_ij r_i / 2^(D+SBP)) computed here.
// ry must change exactly one clock after en and clear on clr.
module tb_kan_backprop;
  import kan_pkg::*;
  localparam int M = 4, N = 3, D = 10, SBP = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  val_t dg [N][M];
  val_t r [N];
  val_t ry [M];

  kan_backprop #(.M(M), .N(N), .D(D), .SBP(SBP)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    longint acc, e, prev [M];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        r[i] = (n % 5 == 0) ? val_t'($urandom_range(2000000)) - 1000000
                            : val_t'($urandom_range(40000)) - 20000;
        for (int j = 0; j < M; j++) dg[i][j] = val_t'($urandom_range(60000)) - 30000;
      end
      for (int j = 0; j < M; j++) prev[j] = ry[j];
      #1;
      for (int j = 0; j < M; j++) chk(ry[j] == val_t'(prev[j]), "ry holds without en");
      en = 1;
      @(negedge clk) en = 0;
      for (int j = 0; j < M; j++) begin
        acc = 0;
        for (int i = 0; i < N; i++) acc += longint'(dg[i][j]) * longint'(r[i]);
        e = (acc + (longint'(1) << (D + SBP - 1))) >>> (D + SBP);
        chk(ry[j] == val_t'(e), $sformatf("n=%0d ry[%0d]=%0d exp %0d", n, j, ry[j], e));
      end
      if (n % 50 == 49) begin
        clr = 1;
        @(negedge clk) clr = 0;
        for (int j = 0; j < M; j++) chk(ry[j] == 0, "clr zeroes ry");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
