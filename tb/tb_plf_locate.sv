// tb_plf_locate: checks the shift-and-mask segment locator.
// Sweeps every value of a 21-node grid with spacing 2^4 and offset -100 and
// every value of the default 3-node grid, comparing k and f with
// integer division and remainder computed here.
module tb_plf_locate;
  import kan_pkg::*;
  int checks = 0, failures = 0;

  val_t y1 = 0, y2 = 0;
  logic [1:0] k1; logic [7:0] f1;
  logic [4:0] k2; logic [4:0] f2;

  plf_locate u_def (.y(y1), .k(k1), .f(f1));
  plf_locate #(.D(4), .P(21), .YMIN(-100)) u_big (.y(y2), .k(k2), .f(f2));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int v = 0; v < 256; v++) begin
      y1 = v; #1;
      chk(k1 == v / 128 && f1 == v % 128,
          $sformatf("default y=%0d k=%0d f=%0d", v, k1, f1));
    end
    for (int v = -100; v < -100 + 20 * 16; v++) begin
      y2 = v; #1;
      chk(k2 == (v + 100) / 16 && f2 == (v + 100) % 16,
          $sformatf("big y=%0d k=%0d f=%0d", v, k2, f2));
    end
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
