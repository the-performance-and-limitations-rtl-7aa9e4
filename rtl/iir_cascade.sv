// iir_cascade: N_STAGES IIR sections in series.
//
// Higher-order transfer functions (PII, PI^3, PII with a lag-lead notch) are
// built by chaining sections rather than by one high-order section: this
// keeps coefficient rounding from moving poles and zeros much, and avoids the
// wind-up of a single section that integrates more than once, which cannot
// hold its output at the clamp rails. Each stage has its own coefficient set
// and passes its DATA_W-bit output to the next. The stage count of three
// follows the configuration used for the bandwidth and PI^3 measurements.
//
// Timing: one clock per stage, so y lags x by N_STAGES clocks.
// clipped[s] is the registered saturation flag of stage s.
module iir_cascade
#(
  parameter int unsigned N_STAGES = servo_pkg::DEF_N_STAGES,
  parameter int unsigned DATA_W   = servo_pkg::DEF_DATA_W,
  parameter int unsigned COEF_W   = servo_pkg::DEF_COEF_W,
  parameter int unsigned FRAC     = servo_pkg::DEF_FRAC,
  parameter int unsigned ORDER    = servo_pkg::DEF_ORDER
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] x,
  input  logic signed [COEF_W-1:0] b [N_STAGES][ORDER+1],
  input  logic signed [COEF_W-1:0] a [N_STAGES][ORDER],
  output logic signed [DATA_W-1:0] y,
  output logic [N_STAGES-1:0]      clipped
);

  logic signed [DATA_W-1:0] link [N_STAGES+1];

  assign link[0] = x;

  for (genvar s = 0; s < N_STAGES; s++) begin : g_stage
    iir_section #(
      .DATA_W(DATA_W), .COEF_W(COEF_W), .FRAC(FRAC), .ORDER(ORDER)
    ) u_sec (
      .clk    (clk),
      .rst_n  (rst_n),
      .x      (link[s]),
      .b      (b[s]),
      .a      (a[s]),
      .y      (link[s+1]),
      .clipped(clipped[s])
    );
  end

  assign y = link[N_STAGES];

endmodule
