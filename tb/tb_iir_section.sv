// tb_iir_section: self-checking test of iir_section in two configurations.
//
// DUT 0 is the default third-order section with Q3.28 coefficients; DUT 1 is
// the first-order Q5.10 section of the published schematic (COEF_W=16,
// FRAC=10, 24-bit feedback word). Both are compared every clock against a
// reference written in 128-bit integer arithmetic, which uses the identity
//   w[n] = clamp( sum B_k x[n-k] + floor( sum A_k w[n-k] / 2^R ) )
// rather than the shift-and-accumulate structure of the RTL. Phases:
// unity-gain proportional (checks the one-clock latency), an integrator
// driven into the rail (checks the clamp holds the output there), and random
// coefficients and inputs, both stable and unstable. The internal widths of
// the Q5.10 instance are compared with the published ones.
module tb_iir_section;

  localparam int unsigned DW = 14;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int clip_seen = 0;

  // ---------------- DUT 0: third order, Q3.28 ----------------
  localparam int unsigned O0 = 3, C0 = 32, F0 = 28;
  logic signed [DW-1:0] x0;
  logic signed [C0-1:0] b0 [O0+1];
  logic signed [C0-1:0] a0 [O0];
  logic signed [DW-1:0] y0;
  logic clip0;

  iir_section #(.DATA_W(DW), .COEF_W(C0), .FRAC(F0), .ORDER(O0)) dut0 (
    .clk(clk), .rst_n(rst_n), .x(x0), .b(b0), .a(a0), .y(y0), .clipped(clip0));

  // ---------------- DUT 1: first order, Q5.10 ----------------
  localparam int unsigned O1 = 1, C1 = 16, F1 = 10;
  logic signed [DW-1:0] x1;
  logic signed [C1-1:0] b1 [O1+1];
  logic signed [C1-1:0] a1 [O1];
  logic signed [DW-1:0] y1;
  logic clip1;

  iir_section #(.DATA_W(DW), .COEF_W(C1), .FRAC(F1), .ORDER(O1)) dut1 (
    .clk(clk), .rst_n(rst_n), .x(x1), .b(b1), .a(a1), .y(y1), .clipped(clip1));

  // ---------------- reference model ----------------
  typedef logic signed [127:0] wide_t;

  // One reference filter: histories, coefficients and format.
  typedef struct {
    int    order, frac, yw;
    wide_t bc [4];
    wide_t ac [4];
    wide_t xh [4];
    wide_t wh [4];
    wide_t y;
    bit    clip;
  } ref_t;

  ref_t r0, r1;

  function automatic wide_t floor_pow2(wide_t v, int sh);
    wide_t d = wide_t'(1) <<< sh;
    wide_t q = v / d;              // truncates towards zero
    if (v < 0 && q * d != v) q = q - 1;
    return q;
  endfunction

  function automatic void ref_reset(ref ref_t r);
    for (int k = 0; k < 4; k++) begin r.xh[k] = 0; r.wh[k] = 0; end
    r.y = 0; r.clip = 0;
  endfunction

  // Advance one sample with input x.
  function automatic void ref_step(ref ref_t r, input wide_t x);
    wide_t s, t, w, hi, lo;
    s = r.bc[0] * x;
    for (int k = 1; k <= r.order; k++) s += r.bc[k] * r.xh[k-1];
    t = 0;
    for (int k = 1; k <= r.order; k++) t += r.ac[k-1] * r.wh[k-1];
    w  = s + floor_pow2(t, r.frac);
    hi = (wide_t'(1) <<< (r.yw - 1)) - 1;
    lo = -(wide_t'(1) <<< (r.yw - 1));
    r.clip = 0;
    if (w > hi) begin w = hi; r.clip = 1; end
    if (w < lo) begin w = lo; r.clip = 1; end
    for (int k = 3; k > 0; k--) begin r.xh[k] = r.xh[k-1]; r.wh[k] = r.wh[k-1]; end
    r.xh[0] = x;
    r.wh[0] = w;
    r.y = floor_pow2(w, r.frac);
  endfunction

  task automatic load_coefs();
    for (int k = 0; k <= O0; k++) r0.bc[k] = wide_t'(b0[k]);
    for (int k = 0; k <  O0; k++) r0.ac[k] = wide_t'(a0[k]);
    for (int k = 0; k <= O1; k++) r1.bc[k] = wide_t'(b1[k]);
    for (int k = 0; k <  O1; k++) r1.ac[k] = wide_t'(a1[k]);
  endtask

  // Apply inputs, clock once, compare both DUTs with the reference.
  task automatic step(input logic signed [DW-1:0] xa, input logic signed [DW-1:0] xb);
    x0 = xa; x1 = xb;
    load_coefs();
    ref_step(r0, wide_t'(xa));
    ref_step(r1, wide_t'(xb));
    @(posedge clk); #1;
    checks += 2;
    if (wide_t'(y0) != r0.y || clip0 != r0.clip) begin
      failures++;
      if (failures < 10) $display("MISMATCH dut0 y=%0d clip=%0b ref y=%0d clip=%0b", y0, clip0, r0.y, r0.clip);
    end
    if (wide_t'(y1) != r1.y || clip1 != r1.clip) begin
      failures++;
      if (failures < 10) $display("MISMATCH dut1 y=%0d clip=%0b ref y=%0d clip=%0b", y1, clip1, r1.y, r1.clip);
    end
    if (clip0) clip_seen++;
    if (clip1) clip_seen++;
  endtask

  task automatic clear_coefs();
    for (int k = 0; k <= O0; k++) b0[k] = '0;
    for (int k = 0; k <  O0; k++) a0[k] = '0;
    for (int k = 0; k <= O1; k++) b1[k] = '0;
    for (int k = 0; k <  O1; k++) a1[k] = '0;
  endtask

  function automatic logic signed [DW-1:0] rnd_x();
    return DW'($urandom);
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [DW-1:0] xv;
    int lat;
    r0.order = O0; r0.frac = F0; r0.yw = DW + F0;
    r1.order = O1; r1.frac = F1; r1.yw = DW + F1;
    clear_coefs();
    x0 = '0; x1 = '0;
    ref_reset(r0); ref_reset(r1);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // The Q5.10 section must have the signal widths of the published
    // first-order schematic: 30, 31, 41, 40, 42, 32, 24.
    checks++;
    if (!(dut1.BP_W == 30 && dut1.BS_W == 31 && dut1.BS_W + F1 == 41 && dut1.AP_W == 40 &&
          dut1.ACC_W == 42 && dut1.SH_W == 32 && dut1.YW_W == 24)) begin
      failures++;
      $display("Q5.10 widths differ from the schematic");
    end

    // Reset state: output zero.
    checks++;
    if (y0 != 0 || y1 != 0) failures++;

    // 1. Unity proportional gain: B0 = 2^R. y must equal the previous x.
    b0[0] = C0'(64'd1 << F0);
    b1[0] = C1'(64'd1 << F1);
    for (int n = 0; n < 200; n++) begin
      xv = rnd_x();
      step(xv, xv);
      checks += 2;
      if (y0 != xv) failures++;
      if (y1 != xv) failures++;
    end

    // Latency: an impulse shows at the output exactly one clock later.
    step('0, '0);
    x0 = 14'sd1000; x1 = 14'sd1000;
    load_coefs(); ref_step(r0, 1000); ref_step(r1, 1000);
    lat = 0;
    @(posedge clk); #1; lat++;
    checks++;
    if (!(y0 == 1000 && y1 == 1000 && lat == 1)) begin
      failures++; $display("latency check failed y0=%0d y1=%0d", y0, y1);
    end

    // 2. Integrator (A1 = 1.0, B0 = 1/64) with a constant input: the output
    //    ramps, reaches the positive rail, and is held there by the clamp.
    clear_coefs();
    b0[0] = C0'(64'd1 << (F0 - 6)); a0[0] = C0'(64'd1 << F0);
    b1[0] = C1'(64'd1 << (F1 - 6)); a1[0] = C1'(64'd1 << F1);
    for (int n = 0; n < 3000; n++) step(14'sd700, 14'sd700);
    checks += 4;
    if (y0 != 14'sd8191) failures++;
    if (y1 != 14'sd8191) failures++;
    if (!clip0 || !clip1) failures++;
    for (int n = 0; n < 50; n++) step(14'sd700, 14'sd700);
    if (y0 != 14'sd8191 || y1 != 14'sd8191) failures++;
    // Reverse the input: the integrator leaves the rail at once and ramps down.
    for (int n = 0; n < 6000; n++) step(-14'sd700, -14'sd700);
    checks++;
    if (y0 != -14'sd8192 || y1 != -14'sd8192) failures++;

    // 3. Random coefficients, stable-ish (|A| small) and arbitrary.
    for (int trial = 0; trial < 60; trial++) begin
      for (int k = 0; k <= O0; k++) b0[k] = C0'($urandom) >>> ($urandom_range(0, 8));
      for (int k = 0; k <  O0; k++) a0[k] = (trial % 2) ? C0'($urandom) : (C0'($urandom) >>> 4);
      for (int k = 0; k <= O1; k++) b1[k] = C1'($urandom) >>> ($urandom_range(0, 4));
      for (int k = 0; k <  O1; k++) a1[k] = (trial % 2) ? C1'($urandom) : (C1'($urandom) >>> 2);
      for (int n = 0; n < 100; n++) step(rnd_x(), rnd_x());
    end

    checks++;
    if (clip_seen == 0) begin failures++; $display("saturation never exercised"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
