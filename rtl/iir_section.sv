// iir_section: one fixed-point IIR filter section with one clock of latency.
//
// Computes, for a section of order N = ORDER with coefficients B0..BN and
// A1..AN in fixed point with R = FRAC fractional bits,
//
//   s[n]  = sum_{k=0..N} B_k * x[n-k]                       (feed-forward)
//   acc   = s[n] * 2^R + sum_{k=1..N} A_k * w[n-k]           (feedback added)
//   w[n]  = clamp( acc / 2^R )   to DATA_W + R bits          (kept with R extra LSBs)
//   y[n]  = w[n] / 2^R           to DATA_W bits              (registered output)
//
// so that, with b_k = B_k / 2^R and a_k = -A_k / 2^R, y follows the usual
// direct-form-I recursion. The feedback coefficients are added rather than
// subtracted, which saves negating past outputs. The feedback history w keeps
// R bits below the output LSB: this is what lets the filter benefit from
// over-sampling instead of re-quantising its own state to 14 bits every
// sample. Divisions by 2^R are arithmetic right shifts (round towards minus
// infinity) and the multiplication by 2^R is a left shift.
//
// The structure, the place of every shift and the clamp, and the widths
// follow the published first-order schematic (14-bit data, Q5.10
// coefficients: 14 -> 30 -> 31 -> 41 -> 42 -> 32 -> 24 -> 14, with a 40-bit
// feedback product); the formulas below reproduce those widths for ORDER=1,
// COEF_W=16, FRAC=10. The default is the third-order section with 32-bit
// Q3.28 coefficients. Reset behaviour is this design's choice: histories and
// output are cleared.
//
// Timing: x is used in the same cycle (combinational multiply-accumulate);
// y and clipped are registered, so y[n] appears one clock after x[n].
// Coefficients are read every cycle and may change at any time.
module iir_section
#(
  parameter int unsigned DATA_W = servo_pkg::DEF_DATA_W,
  parameter int unsigned COEF_W = servo_pkg::DEF_COEF_W,
  parameter int unsigned FRAC   = servo_pkg::DEF_FRAC,
  parameter int unsigned ORDER  = servo_pkg::DEF_ORDER
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] x,
  input  logic signed [COEF_W-1:0] b [ORDER+1],  // B0..BN
  input  logic signed [COEF_W-1:0] a [ORDER],    // a[k-1] holds A_k
  output logic signed [DATA_W-1:0] y,
  output logic                     clipped
);

  localparam int unsigned YW_W  = DATA_W + FRAC;                    // feedback word (24 in Q5.10)
  localparam int unsigned BP_W  = DATA_W + COEF_W;                  // B_k * x      (30)
  localparam int unsigned BS_W  = BP_W + $clog2(ORDER + 1);         // sum of B terms (31)
  localparam int unsigned AP_W  = YW_W + COEF_W;                    // A_k * w      (40)
  localparam int unsigned AS_W  = AP_W + $clog2(ORDER);             // sum of A terms
  localparam int unsigned ACC_W = servo_pkg::max2(BS_W + FRAC, AS_W) + 1;      // accumulator  (42)
  localparam int unsigned SH_W  = ACC_W - FRAC;                     // after /2^R   (32)

  logic signed [DATA_W-1:0] x_hist [ORDER];   // x[n-1] .. x[n-N]
  logic signed [YW_W-1:0]   w_hist [ORDER];   // w[n-1] .. w[n-N]

  logic signed [BS_W-1:0]  bsum;
  logic signed [AS_W-1:0]  asum;
  logic signed [ACC_W-1:0] acc;
  logic signed [SH_W-1:0]  acc_sh;
  logic signed [YW_W-1:0]  w_next;
  logic                    clip_next;

  always_comb begin
    logic signed [BP_W-1:0] bp;
    logic signed [AP_W-1:0] ap;
    bp   = x * b[0];
    bsum = BS_W'(bp);
    for (int k = 1; k <= ORDER; k++) begin
      bp   = x_hist[k-1] * b[k];
      bsum = bsum + BS_W'(bp);
    end
    asum = '0;
    for (int k = 1; k <= ORDER; k++) begin
      ap   = w_hist[k-1] * a[k-1];
      asum = asum + AS_W'(ap);
    end
    acc    = (ACC_W'(bsum) <<< FRAC) + ACC_W'(asum);
    acc_sh = SH_W'(acc >>> FRAC);
  end

  iir_sat #(.IN_W(SH_W), .OUT_W(YW_W)) u_sat (
    .din    (acc_sh),
    .dout   (w_next),
    .clipped(clip_next)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < ORDER; k++) begin
        x_hist[k] <= '0;
        w_hist[k] <= '0;
      end
      y       <= '0;
      clipped <= 1'b0;
    end else begin
      x_hist[0] <= x;
      w_hist[0] <= w_next;
      for (int k = 1; k < ORDER; k++) begin
        x_hist[k] <= x_hist[k-1];
        w_hist[k] <= w_hist[k-1];
      end
      y       <= DATA_W'(w_next >>> FRAC);
      clipped <= clip_next;
    end
  end

endmodule
