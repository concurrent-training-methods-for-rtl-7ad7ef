// plf_locate: segment index and offset of a value on a uniform node grid.
//
// A piecewise-linear function with P nodes spaced 2^D apart starting at YMIN
// is evaluated from the left node index k = (y - YMIN) >> D and the offset
// f = (y - YMIN) & (2^D - 1). The shift and the mask replace the division
// of the floating-point algorithm, which is the central trick of the
// division-free design. f is the weight of the right node scaled by 2^D;
// the left node's weight is 2^D - f. With YMIN = 0 the unit is pure bit
// selection and costs no logic at all, which is why the node spacing is a
// power of two; a nonzero YMIN adds one subtractor.
// Purely combinational. The input must lie in [YMIN, YMIN + (P-1)*2^D);
// out-of-range values are truncated upstream (range_clamp). Indices start
// at 0 here, where the usual formula counts from 1.
module plf_locate
  import kan_pkg::*;
#(
  parameter int   D    = 7,
  parameter int   P    = 3,
  parameter val_t YMIN = 0,
  localparam int  KW   = $clog2(P)
) (
  input  val_t          y,
  output logic [KW-1:0] k,
  output logic [D:0]    f
);
  val_t off;

  always_comb begin
    off = y - YMIN;
    k   = KW'(off >>> D);
    f   = {1'b0, off[D-1:0]};
  end

  // The domain rule: the caller keeps y inside [YMIN, YMIN + (P-1)*2^D).
  always_comb begin
    assert (off >= 0 && (off >>> D) < P - 1)
      else $error("plf_locate: value %0d outside the domain", y);
  end
endmodule
