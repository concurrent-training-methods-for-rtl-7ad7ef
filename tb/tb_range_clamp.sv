// tb_range_clamp: checks truncation to the open interval (LO, HI).
// Values below, at and above both bounds and random values are compared
// with the rule: v < LO -> LO+1, v >= HI -> HI-1, otherwise v.
module tb_range_clamp;
  import kan_pkg::*;
  int checks = 0, failures = 0;
  val_t v, q, exp_q;
  logic lo, hi;

  range_clamp #(.LO(-50), .HI(1000)) dut (.v(v), .q(q), .lo_hit(lo), .hi_hit(hi));

  task automatic try(input val_t t);
    v = t; #1;
    exp_q = (t < -50) ? -49 : (t >= 1000) ? 999 : t;
    checks++;
    if (q !== exp_q || lo !== (t < -50) || hi !== (t >= 1000)) begin
      failures++;
      $display("FAIL v=%0d q=%0d lo=%b hi=%b", t, q, lo, hi);
    end
  endtask

  initial begin
    val_t edges [10] = '{-51, -50, -49, 0, 998, 999, 1000, 1001, 32'sh7fffffff, 32'sh80000000};
    foreach (edges[e]) try(edges[e]);
    repeat (200) try(val_t'($urandom_range(2200)) - 600);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
