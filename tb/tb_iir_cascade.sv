// tb_iir_cascade: three default third-order Q3.28 sections in series.
//
// Checks: unity-gain proportional in every stage gives y[n] = x[n-3] (three
// clocks of latency); random per-stage coefficients and inputs match a
// 128-bit reference of three chained sections clock by clock; a PI^3-like
// setting (three integrators) with a constant input drives the stages to
// the rail and sets their saturation flags.
module tb_iir_cascade;

  localparam int unsigned NS = 3, O = 3, C = 32, F = 28, DW = 14;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic signed [DW-1:0] x, y;
  logic signed [C-1:0]  b [NS][O+1];
  logic signed [C-1:0]  a [NS][O];
  logic [NS-1:0]        clipped;

  iir_cascade dut (.clk(clk), .rst_n(rst_n), .x(x), .b(b), .a(a), .y(y), .clipped(clipped));

  typedef logic signed [127:0] wide_t;
  wide_t xh [NS][O];
  wide_t wh [NS][O];
  wide_t yr [NS];          // registered output of each reference stage
  bit    cr [NS];

  function automatic wide_t floor_pow2(wide_t v, int sh);
    wide_t d = wide_t'(1) <<< sh;
    wide_t q = v / d;
    if (v < 0 && q * d != v) q = q - 1;
    return q;
  endfunction

  // One clock of the reference chain. Stage s sees the registered output of
  // stage s-1 from before this clock.
  task automatic ref_clock(input wide_t xin);
    wide_t in_s [NS];
    wide_t s_acc, t_acc, w, hi, lo;
    in_s[0] = xin;
    for (int s = 1; s < NS; s++) in_s[s] = yr[s-1];
    hi = (wide_t'(1) <<< (DW + F - 1)) - 1;
    lo = -(wide_t'(1) <<< (DW + F - 1));
    for (int s = 0; s < NS; s++) begin
      s_acc = wide_t'(b[s][0]) * in_s[s];
      for (int k = 1; k <= O; k++) s_acc += wide_t'(b[s][k]) * xh[s][k-1];
      t_acc = 0;
      for (int k = 1; k <= O; k++) t_acc += wide_t'(a[s][k-1]) * wh[s][k-1];
      w = s_acc + floor_pow2(t_acc, F);
      cr[s] = 0;
      if (w > hi) begin w = hi; cr[s] = 1; end
      if (w < lo) begin w = lo; cr[s] = 1; end
      for (int k = O - 1; k > 0; k--) begin xh[s][k] = xh[s][k-1]; wh[s][k] = wh[s][k-1]; end
      xh[s][0] = in_s[s];
      wh[s][0] = w;
    end
    for (int s = 0; s < NS; s++) yr[s] = floor_pow2(wh[s][0], F);
  endtask

  task automatic step(input logic signed [DW-1:0] xv);
    x = xv;
    ref_clock(wide_t'(xv));
    @(posedge clk); #1;
    checks++;
    if (wide_t'(y) != yr[NS-1]) begin
      failures++;
      if (failures < 10) $display("y=%0d ref=%0d", y, yr[NS-1]);
    end
    for (int s = 0; s < NS; s++) begin
      checks++;
      if (clipped[s] != cr[s]) failures++;
    end
  endtask

  task automatic set_all(input logic signed [C-1:0] b0, input logic signed [C-1:0] a1);
    for (int s = 0; s < NS; s++) begin
      for (int k = 0; k <= O; k++) b[s][k] = '0;
      for (int k = 0; k < O; k++)  a[s][k] = '0;
      b[s][0] = b0;
      a[s][0] = a1;
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [DW-1:0] hist [4];
    int clip_all;
    for (int s = 0; s < NS; s++) begin
      for (int k = 0; k < O; k++) begin xh[s][k] = 0; wh[s][k] = 0; end
      yr[s] = 0; cr[s] = 0;
    end
    x = '0;
    set_all(C'(64'd1 << F), '0);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Unity gain: the output is the input delayed by exactly NS clocks.
    for (int k = 0; k < 4; k++) hist[k] = '0;
    for (int n = 0; n < 300; n++) begin
      logic signed [DW-1:0] xv;
      xv = DW'($urandom);
      step(xv);
      for (int k = 3; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = xv;
      checks++;
      if (n >= NS && y != hist[NS-1]) failures++;
    end

    // Random coefficients per stage.
    for (int trial = 0; trial < 40; trial++) begin
      for (int s = 0; s < NS; s++) begin
        for (int k = 0; k <= O; k++) b[s][k] = C'($urandom) >>> $urandom_range(2, 10);
        for (int k = 0; k < O; k++)  a[s][k] = C'($urandom) >>> $urandom_range(2, 6);
      end
      for (int n = 0; n < 100; n++) step(DW'($urandom));
    end

    // Three integrators: a constant input saturates, the flags rise.
    for (int s = 0; s < NS; s++)
      for (int k = 0; k < O; k++) begin xh[s][k] = 0; wh[s][k] = 0; end
    rst_n = 1'b0; #1;
    for (int s = 0; s < NS; s++) begin yr[s] = 0; cr[s] = 0; end
    @(posedge clk); #1 rst_n = 1'b1;
    set_all(C'(64'd1 << F), C'(64'd1 << F));
    clip_all = 0;
    for (int n = 0; n < 2000; n++) begin
      step(14'sd100);
      if (&clipped) clip_all++;
    end
    checks += 2;
    if (clip_all == 0) begin failures++; $display("no saturation in all stages"); end
    if (y != 14'sd8191) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
