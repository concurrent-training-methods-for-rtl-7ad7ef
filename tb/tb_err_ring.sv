// tb_err_ring: checks the 256-entry circular error buffer.
// Pushes 700 random signed differences with random gaps, keeps its own
// queue of the last 256 values, and after every push compares sum_abs, mae
// and full with sums recomputed from that queue; also reads back stored
// entries through the read port.
module tb_err_ring;
  import kan_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, push = 0;
  val_t diff = 0, mae, rd_diff;
  logic [39:0] sum_abs;
  logic full;
  logic [7:0] rd_addr = 0;
  val_t hist [$];

  err_ring dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    longint s;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 700; n++) begin
      @(negedge clk);
      diff = val_t'($urandom_range(200000)) - 100000;
      push = 1;
      @(negedge clk);
      push = 0;
      hist.push_back(diff);
      if (hist.size() > 256) void'(hist.pop_front());
      s = 0;
      foreach (hist[h]) s += (hist[h] < 0) ? -hist[h] : hist[h];
      chk(sum_abs == 40'(s), $sformatf("n=%0d sum_abs=%0d exp=%0d", n, sum_abs, s));
      chk(mae == val_t'(s >> 8), $sformatf("n=%0d mae=%0d", n, mae));
      chk(full == (n >= 255), $sformatf("n=%0d full=%b", n, full));
      rd_addr = 8'($urandom_range(hist.size() - 1));
      #1;
      chk(rd_diff == hist[hist.size() - 1 - rd_addr], $sformatf("n=%0d rd", n));
      repeat ($urandom_range(2)) @(negedge clk);
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
