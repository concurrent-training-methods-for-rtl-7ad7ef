// det3_datagen: on-chip generator of Det3 training records.
//
// The training set is produced while training runs, so every record is new
// data. In the gen cycle a 128-bit xorshift128 generator advances one step
// and nine XW-bit matrix entries are taken from its new state (row-major,
// a[0..8]). In the det cycle the determinant is formed by cofactor
// expansion along the first row,
//   det = a0(a4 a8 - a5 a7) - a1(a3 a8 - a5 a6) + a2(a3 a7 - a4 a6),
// and registered together with target = det >>> TSHIFT, the training target
// on the model's output scale. x is stable from the gen cycle on until the
// next gen; det and target from the det cycle on.
// That records are generated in two cycles on the device follows the
// published design; the generator, entry width and target scaling are
// choices of this implementation. Entries are unsigned, so det is signed
// with |det| < 2^(3*XW+1).
module det3_datagen
  import kan_pkg::*;
#(
  parameter int           XW     = 8,
  parameter int           TSHIFT = 10,
  parameter logic [127:0] SEED   = 128'h0123456789abcdef_fedcba9876543210
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          gen,
  input  logic          calc,
  output logic [XW-1:0] x [9],
  output val_t          target,
  output val_t          det
);
  logic [31:0] s0, s1, s2, s3;        // xorshift128 state
  logic [31:0] t, nw;
  logic [127:0] nstate;
  wide_t a [9];
  wide_t dv;

  // one xorshift128 step (Marsaglia 2003)
  always_comb begin
    t      = s0 ^ (s0 << 11);
    nw     = s3 ^ (s3 >> 19) ^ t ^ (t >> 8);
    nstate = {s1, s2, s3, nw};
  end

  always_comb begin
    for (int e = 0; e < 9; e++) a[e] = wide_t'({1'b0, x[e]});
    dv = a[0] * (a[4] * a[8] - a[5] * a[7])
       - a[1] * (a[3] * a[8] - a[5] * a[6])
       + a[2] * (a[3] * a[7] - a[4] * a[6]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s0, s1, s2, s3} <= SEED;
      for (int e = 0; e < 9; e++) x[e] <= '0;
      det    <= '0;
      target <= '0;
    end else begin
      if (gen) begin
        {s0, s1, s2, s3} <= nstate;
        for (int e = 0; e < 9; e++) x[e] <= nstate[e*XW +: XW];
      end
      if (calc) begin
        det    <= val_t'(dv);
        target <= val_t'(dv >>> TSHIFT);
      end
    end
  end

  initial assert (9 * XW <= 128 && 3 * XW + 2 <= 32)
    else $error("det3_datagen: XW too large");
endmodule
