// tb_kan_trainer_stress: end-to-end run of the trainer with large inner steps.
//
// Same checks as tb_kan_trainer_top (bit-exact reference model, 17-clock
// schedule, pauses, error window, parameter readout), but the back-
// propagated residual is scaled by 2^-6 instead of 2^-8. The inner layer
// then takes steps large enough to push hidden values out of their range on
// both sides, so the truncation logic is exercised in both directions. The
// model still learns, though less well than at the default damping.
module tb_kan_trainer_stress;
  import kan_pkg::*;
  localparam int NREC   = 40000;  // records trained
  localparam int PAUSE  = 10000;   // pause the run every PAUSE records
  localparam int HMAXL  = (P_OUT - 1) << D_OUT;
  localparam int T_SBP   = 6;        // back-propagation scale of the trainer
  localparam int T_MU_IN = MU_IN;    // inner damping of the trainer
  localparam bit NEED_LO = 1'b1;     // large inner steps: both truncations occur
  localparam real MIN_PEARSON = 0.8;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, run = 0;
  logic busy, rec_done, err_full;
  logic [31:0] rec_count, trunc_lo_count, trunc_hi_count;
  logic [7:0] x [N_IN];
  val_t target, pred, resid, mae, err_rd_diff, rd_val;
  logic [39:0] err_sum;
  logic [7:0] err_rd_addr = 0;
  logic rd_layer = 0;
  logic [2:0] rd_i = 0;
  logic [3:0] rd_j = 0;
  logic [4:0] rd_k = 0;

  kan_trainer_top #(.SBP(T_SBP)) dut (.*);
  always #5 clk = ~clk;

  // reference model
  longint H [N_HID][N_IN][P_IN];
  longint G [N_HID][P_OUT];
  longint win_t [$], win_p [$], win_e [$];
  int cnt_lo = 0, cnt_hi = 0, cnt_seg0 = 0, cnt_seg1 = 0, cnt_pause = 0, cnt_full = 0;
  longint cyc = 0, last_done = -1;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  function automatic longint rnd(input longint v, input int s);
    if (s == 0) return v;
    return (v + (longint'(1) << (s - 1))) >>> s;
  endfunction

  task automatic read_param(input bit layer, input int i, input int j, input int k,
                            output longint v);
    rd_layer = layer; rd_i = 3'(i); rd_j = 4'(j); rd_k = 5'(k);
    #0.1;
    v = rd_val;
  endtask

  task automatic compare_model(input string when);
    longint v;
    int bad = 0;
    for (int j = 0; j < N_HID; j++)
      for (int l = 0; l < N_IN; l++)
        for (int k = 0; k < P_IN; k++) begin
          read_param(0, j, l, k, v);
          if (v != H[j][l][k]) bad++;
        end
    for (int j = 0; j < N_HID; j++)
      for (int k = 0; k < P_OUT; k++) begin
        read_param(1, 0, j, k, v);
        if (v != G[j][k]) bad++;
      end
    chk(bad == 0, $sformatf("%s: %0d parameters differ from the reference", when, bad));
  endtask

  // one training step of the reference model on record (a, zt)
  task automatic ref_step(input longint a [N_IN], input longint zt,
                          output longint zp, output longint rr);
    int  k1 [N_IN];
    longint f1 [N_IN], y [N_HID], f2 [N_HID], ry [N_HID];
    int  k2 [N_HID];
    for (int l = 0; l < N_IN; l++) begin
      k1[l] = int'(a[l] >> D_IN);
      f1[l] = a[l] % (1 << D_IN);
      if (k1[l] == 0) cnt_seg0++; else cnt_seg1++;
    end
    zp = 0;
    for (int j = 0; j < N_HID; j++) begin
      y[j] = 0;
      for (int l = 0; l < N_IN; l++)
        y[j] += (H[j][l][k1[l]] * ((1 << D_IN) - f1[l]) + H[j][l][k1[l]+1] * f1[l]) >>> D_IN;
      if (y[j] < 0) begin y[j] = 1; cnt_lo++; end
      else if (y[j] >= HMAXL) begin y[j] = HMAXL - 1; cnt_hi++; end
      k2[j] = int'(y[j] >> D_OUT);
      f2[j] = y[j] % (1 << D_OUT);
      zp += (G[j][k2[j]] * ((1 << D_OUT) - f2[j]) + G[j][k2[j]+1] * f2[j]) >>> D_OUT;
    end
    zp = longint'(val_t'(zp));
    rr = longint'(val_t'(zt - zp));
    for (int j = 0; j < N_HID; j++)
      ry[j] = longint'(val_t'(rnd((G[j][k2[j]+1] - G[j][k2[j]]) * rr, D_OUT + T_SBP)));
    for (int j = 0; j < N_HID; j++) begin
      G[j][k2[j]+1] += rnd(rr * f2[j], D_OUT + MU_OUT);
      G[j][k2[j]]   += rnd(rr * ((1 << D_OUT) - f2[j]), D_OUT + MU_OUT);
    end
    for (int j = 0; j < N_HID; j++)
      for (int l = 0; l < N_IN; l++) begin
        H[j][l][k1[l]+1] += rnd(ry[j] * f1[l], D_IN + T_MU_IN);
        H[j][l][k1[l]]   += rnd(ry[j] * ((1 << D_IN) - f1[l]), D_IN + T_MU_IN);
      end
  endtask

  function automatic real pearson();
    real mt = 0, mp = 0, st = 0, sp = 0, c = 0;
    foreach (win_t[n]) begin mt += win_t[n]; mp += win_p[n]; end
    mt /= win_t.size(); mp /= win_p.size();
    foreach (win_t[n]) begin
      st += (win_t[n] - mt) ** 2; sp += (win_p[n] - mp) ** 2;
      c  += (win_t[n] - mt) * (win_p[n] - mp);
    end
    return c / $sqrt(st * sp + 1.0e-9);
  endfunction

  initial begin
    longint v, a [N_IN], d, zp, rr, s;
    real p_first, p_last;
    int done_n = 0;
    longint run_cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int j = 0; j < N_HID; j++)
      for (int l = 0; l < N_IN; l++)
        for (int k = 0; k < P_IN; k++) begin read_param(0, j, l, k, v); H[j][l][k] = v; end
    for (int j = 0; j < N_HID; j++)
      for (int k = 0; k < P_OUT; k++) begin read_param(1, 0, j, k, v); G[j][k] = v; end
    @(negedge clk);
    run = 1;
    run_cyc = cyc;
    while (done_n < NREC) begin
      @(negedge clk);
      if (!rec_done) continue;
      if (last_done < 0)
        chk(cyc - run_cyc == REC_CYCLES,
            $sformatf("first record done %0d clocks after run", cyc - run_cyc));
      else
        chk(cyc - last_done == REC_CYCLES, $sformatf("record interval %0d", cyc - last_done));
      last_done = cyc;
      for (int l = 0; l < N_IN; l++) a[l] = longint'(x[l]);
      d = a[0]*a[4]*a[8] + a[1]*a[5]*a[6] + a[2]*a[3]*a[7]
        - a[2]*a[4]*a[6] - a[0]*a[5]*a[7] - a[1]*a[3]*a[8];
      chk(target == val_t'(d >>> TSHIFT), $sformatf("rec %0d target", done_n));
      ref_step(a, longint'(target), zp, rr);
      chk(pred == val_t'(zp) && resid == val_t'(rr),
          $sformatf("rec %0d pred %0d exp %0d resid %0d exp %0d", done_n, pred, zp, resid, rr));
      win_t.push_back(longint'(target)); win_p.push_back(zp); win_e.push_back(rr);
      if (win_t.size() > ERR_DEPTH) begin
        void'(win_t.pop_front()); void'(win_p.pop_front()); void'(win_e.pop_front());
      end
      done_n++;
      if (done_n == 2000) p_first = pearson();
      if (done_n % PAUSE == 0 || done_n == NREC) begin
        // pause: run drops in the last cycle of a record, so none follows
        run = 0;
        @(negedge clk);
        chk(!busy, "idle after the pause request");
        cnt_pause++;
        chk(rec_count == 32'(done_n), $sformatf("rec_count %0d", rec_count));
        compare_model($sformatf("after %0d records", done_n));
        s = 0;
        foreach (win_e[n]) s += (win_e[n] < 0) ? -win_e[n] : win_e[n];
        chk(err_sum == 40'(s) && mae == val_t'(s >> 8),
            $sformatf("error window sum %0d exp %0d", err_sum, s));
        if (err_full) cnt_full++;
        err_rd_addr = 0; #0.1;
        chk(err_rd_diff == val_t'(win_e[win_e.size()-1]), "error window newest entry");
        chk(trunc_lo_count == 32'(cnt_lo) && trunc_hi_count == 32'(cnt_hi),
            $sformatf("truncation counts %0d/%0d exp %0d/%0d",
                      trunc_lo_count, trunc_hi_count, cnt_lo, cnt_hi));
        $display("after %0d records: pearson(last 256) = %.4f  mae = %0d  trunc lo/hi = %0d/%0d",
                 done_n, pearson(), mae, cnt_lo, cnt_hi);
        if (done_n < NREC) begin
          repeat (5) @(negedge clk);
          run = 1;
          last_done = -1;
          run_cyc = cyc;
        end
      end
    end
    p_last = pearson();
    $display("pearson after 2000 records %.4f, at the end %.4f", p_first, p_last);
    chk(p_last > MIN_PEARSON, $sformatf("trained model correlation %.4f", p_last));
    chk(p_last > p_first, "correlation improved during training");
    // mechanism coverage
    $display("mechanisms: pauses=%0d window_full=%0d trunc_lo=%0d trunc_hi=%0d seg0=%0d seg1=%0d",
             cnt_pause, cnt_full, cnt_lo, cnt_hi, cnt_seg0, cnt_seg1);
    chk(cnt_pause > 0, "run paused and resumed");
    chk(cnt_full > 0, "error window filled");
    if (NEED_LO) chk(cnt_lo > 0, "hidden value truncated below the range");
    chk(cnt_hi > 0, "hidden value truncated above the range");
    chk(cnt_seg0 > 0 && cnt_seg1 > 0, "both inner segments used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NREC * REC_CYCLES + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
