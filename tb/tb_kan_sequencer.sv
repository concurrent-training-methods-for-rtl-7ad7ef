// tb_kan_sequencer: checks the 17-cycle record schedule.
// Runs records back to back, then stops and restarts. Every cycle exactly
// one strobe must be high, in the fixed order clr, gen, det, then the 14
// training steps; a record must last 17 cycles with the 14 training steps
// contiguous; run dropped mid-record must not cut the record short.
module tb_kan_sequencer;
  import kan_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, run = 0;
  phase_t ph;
  logic busy, rec_done;
  logic [31:0] rec_count;

  kan_sequencer dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // expected strobe in slot s of a record: bit (16 - s) of the packed struct
  function automatic phase_t slot(input int s);
    return phase_t'(17'(1) << (16 - s));
  endfunction

  initial begin
    int first_train, last_train;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(ph == '0 && !busy, "idle after reset");
    run = 1;
    for (int r = 0; r < 5; r++) begin
      first_train = -1; last_train = -1;
      for (int s = 0; s < REC_CYCLES; s++) begin
        @(negedge clk);
        chk(ph == slot(s), $sformatf("rec %0d slot %0d ph=%b", r, s, ph));
        chk(busy, "busy");
        chk(rec_done == (s == REC_CYCLES - 1), "rec_done");
        if (ph.l1_fn) first_train = s;
        if (ph.l1_alo) last_train = s;
        if (r == 4 && s == 5) run = 0;   // drop run mid-record
      end
      chk(last_train - first_train + 1 == TRAIN_CYCLES,
          $sformatf("training takes %0d cycles", last_train - first_train + 1));
    end
    @(negedge clk);
    chk(!busy && ph == '0, "stopped after the record in progress");
    chk(rec_count == 5, $sformatf("rec_count=%0d", rec_count));
    repeat (3) @(negedge clk);
    chk(!busy, "stays idle");
    run = 1;
    @(negedge clk);
    chk(ph.clr, "restart begins with clr");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
