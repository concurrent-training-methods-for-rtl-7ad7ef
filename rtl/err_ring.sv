// err_ring: running accuracy monitor over the most recent predictions.
//
// Every trained record leaves one difference z* - z, measured before the
// record's own update, so it is an error on data the model has not seen.
// The last DEPTH differences are kept in a circular buffer. A running sum
// of their absolute values is kept by adding the new |diff| and subtracting
// the |diff| it overwrites, so the window mean absolute error is a shift,
// mae = sum_abs >> log2(DEPTH), with no divider. Until DEPTH values have
// arrived the missing entries count as zero and full is low.
// The buffer size (256) follows the published demonstrator; the choice of
// the mean absolute error as the accuracy figure is this design's own.
// Timing: push takes effect at the clock edge; sum_abs, mae and full are
// registered and change one clock after the push. rd_diff reads an entry
// combinationally; entries not yet written since reset read as arbitrary
// values. DEPTH must be a power of two.
module err_ring
  import kan_pkg::*;
#(
  parameter int DEPTH = 256,
  localparam int AW = $clog2(DEPTH),
  localparam int SW = 32 + AW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  val_t          diff,
  output logic [SW-1:0] sum_abs,
  output val_t          mae,
  output logic          full,
  input  logic [AW-1:0] rd_addr,   // entry written rd_addr+1 pushes ago
  output val_t          rd_diff
);
  val_t          mem [DEPTH];
  logic [AW-1:0] wp;
  logic [31:0]   new_abs, old_abs;
  val_t          old_val;

  assign old_val = full ? mem[wp] : '0;
  assign new_abs = (diff < 0) ? 32'(-diff) : 32'(diff);
  assign old_abs = (old_val < 0) ? 32'(-old_val) : 32'(old_val);
  assign mae     = val_t'(sum_abs >> AW);
  assign rd_diff = mem[wp - rd_addr - 1'b1];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= diff;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp      <= '0;
      full    <= 1'b0;
      sum_abs <= '0;
    end else if (push) begin
      wp      <= wp + 1'b1;
      if (wp == AW'(DEPTH - 1)) full <= 1'b1;
      sum_abs <= sum_abs + SW'(new_abs) - SW'(old_abs);
    end
  end

  a_pow2: assert property (@(posedge clk) (1 << AW) == DEPTH)
    else $error("err_ring: DEPTH must be a power of two");
endmodule
