// tb_det3_datagen: checks the on-chip Det3 record generator.
// A reference xorshift128 generator in the testbench predicts the nine
// entries of every record; the determinant is recomputed here by the rule
// of Sarrus (not the cofactor expansion the generator uses) and the target
// as det >>> 10. Records are requested with the gen/calc strobe pair
// (the two generation cycles); the outputs must hold between requests.
module tb_det3_datagen;
  import kan_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, gen = 0, calc = 0;
  logic [7:0] x [9];
  val_t target, det;
  logic [31:0] r0, r1, r2, r3;
  int neg = 0, pos = 0;

  det3_datagen dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] t, w;
    logic [127:0] st;
    longint a [9];
    longint d;
    {r0, r1, r2, r3} = 128'h0123456789abcdef_fedcba9876543210;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk) gen = 1;
      @(negedge clk) gen = 0; calc = 1;
      t = r0 ^ (r0 << 11);
      w = r3 ^ (r3 >> 19) ^ t ^ (t >> 8);
      {r0, r1, r2, r3} = {r1, r2, r3, w};
      st = {r0, r1, r2, r3};
      for (int e = 0; e < 9; e++) begin
        a[e] = longint'(st[e*8 +: 8]);
        chk(x[e] == st[e*8 +: 8], $sformatf("rec %0d entry %0d", n, e));
      end
      @(negedge clk) calc = 0;
      d = a[0]*a[4]*a[8] + a[1]*a[5]*a[6] + a[2]*a[3]*a[7]
        - a[2]*a[4]*a[6] - a[0]*a[5]*a[7] - a[1]*a[3]*a[8];
      chk(det == val_t'(d), $sformatf("rec %0d det=%0d exp=%0d", n, det, d));
      chk(target == val_t'(d >>> 10), $sformatf("rec %0d target", n));
      if (d < 0) neg++; else pos++;
      repeat ($urandom_range(2)) @(negedge clk);
      chk(det == val_t'(d) && x[4] == st[39:32], "outputs hold between records");
    end
    chk(neg > 300 && pos > 300, $sformatf("determinant sign balance %0d/%0d", neg, pos));
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
