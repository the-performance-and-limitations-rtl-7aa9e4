// iir_sat: clamp a signed word to a narrower signed range.
//
// This is the saturation block of the IIR section. The accumulator, after the
// first division by 2^R, is IN_W bits wide (32 in the first-order Q5.10
// section, 49 in the default third-order Q3.28 section); the feedback word is
// OUT_W = DATA_W + R bits (24 and 42). A value outside the OUT_W range is
// replaced by the most positive or most negative OUT_W value, so that the
// filter feedback cannot overflow and the output cannot wrap around. The
// clamp itself follows the filter description; the 'clipped' flag is an
// addition of this design that lets the rest of the logic see when the
// clamp acts.
//
// Purely combinational. Requires IN_W >= OUT_W.
module iir_sat #(
  parameter int unsigned IN_W  = 49,
  parameter int unsigned OUT_W = 42
) (
  input  logic signed [IN_W-1:0]  din,
  output logic signed [OUT_W-1:0] dout,
  output logic                    clipped
);

  localparam logic signed [OUT_W-1:0] POS_RAIL = {1'b0, {(OUT_W-1){1'b1}}};
  localparam logic signed [OUT_W-1:0] NEG_RAIL = {1'b1, {(OUT_W-1){1'b0}}};

  // The value fits when the bits above the OUT_W sign bit all equal it.
  logic [IN_W-OUT_W:0] top_bits;
  logic                fits;

  always_comb begin
    top_bits = din[IN_W-1:OUT_W-1];
    fits     = (top_bits == '0) || (top_bits == '1);
    clipped  = !fits;
    if (fits)             dout = din[OUT_W-1:0];
    else if (din[IN_W-1]) dout = NEG_RAIL;
    else                  dout = POS_RAIL;
  end

  initial begin
    assert (IN_W >= OUT_W) else $error("iir_sat: IN_W must not be below OUT_W");
  end

endmodule
