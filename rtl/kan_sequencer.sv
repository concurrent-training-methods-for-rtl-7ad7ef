// kan_sequencer: the 17-cycle record schedule of the trainer.
//
// One training record takes 14 clock cycles of network work, preceded by one
// cycle that resets the per-record state and two cycles that generate the
// record. The sequencer is a ring of 17 states, each raising exactly one
// strobe of the phase_t bundle:
//   CLR  GEN  DET | L1_FN L1_SUM L2_FN L2_SUM | RES_OUT RES_IN |
//   L2_UHI L2_ULO L1_UHI L1_ULO | L2_AHI L2_ALO L1_AHI L1_ALO
// (forward, residuals, update terms, applying updates; L1 = inner layer,
// L2 = outer layer). While run is high the ring repeats back to back, one
// record every 17 clocks (5.88 M records/s at 100 MHz) whatever the layer
// sizes. run is sampled only at record boundaries: a record once begun is
// always completed. rec_done marks the last cycle of a record and
// rec_count counts completed records. The cycle counts follow the published
// schedule; their order (reset and generation first, outer layer before
// inner in each update pair) is this design's choice.
module kan_sequencer
  import kan_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  output phase_t      ph,
  output logic        busy,
  output logic        rec_done,
  output logic [31:0] rec_count
);
  typedef enum logic [4:0] {
    S_IDLE, S_CLR, S_GEN, S_DET,
    S_L1_FN, S_L1_SUM, S_L2_FN, S_L2_SUM,
    S_RES_OUT, S_RES_IN,
    S_L2_UHI, S_L2_ULO, S_L1_UHI, S_L1_ULO,
    S_L2_AHI, S_L2_ALO, S_L1_AHI, S_L1_ALO
  } state_t;

  state_t st, st_nx;

  always_comb begin
    st_nx = st;
    unique case (st)
      S_IDLE:    st_nx = run ? S_CLR : S_IDLE;
      S_L1_ALO:  st_nx = run ? S_CLR : S_IDLE;
      default:   st_nx = state_t'(st + 1'b1);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      rec_count <= '0;
    end else begin
      st <= st_nx;
      if (st == S_L1_ALO) rec_count <= rec_count + 1'b1;
    end
  end

  always_comb begin
    ph         = '0;
    ph.clr     = (st == S_CLR);
    ph.gen     = (st == S_GEN);
    ph.det     = (st == S_DET);
    ph.l1_fn   = (st == S_L1_FN);
    ph.l1_sum  = (st == S_L1_SUM);
    ph.l2_fn   = (st == S_L2_FN);
    ph.l2_sum  = (st == S_L2_SUM);
    ph.res_out = (st == S_RES_OUT);
    ph.res_in  = (st == S_RES_IN);
    ph.l2_uhi  = (st == S_L2_UHI);
    ph.l2_ulo  = (st == S_L2_ULO);
    ph.l1_uhi  = (st == S_L1_UHI);
    ph.l1_ulo  = (st == S_L1_ULO);
    ph.l2_ahi  = (st == S_L2_AHI);
    ph.l2_alo  = (st == S_L2_ALO);
    ph.l1_ahi  = (st == S_L1_AHI);
    ph.l1_alo  = (st == S_L1_ALO);
  end

  assign busy     = (st != S_IDLE);
  assign rec_done = (st == S_L1_ALO);

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ph))
    else $error("kan_sequencer: more than one phase strobe");
endmodule
