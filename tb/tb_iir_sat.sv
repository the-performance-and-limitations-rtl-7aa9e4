// tb_iir_sat: exhaustive check of the clamp at the published Q5.10 sizes
// shrunk in proportion (IN_W=12, OUT_W=8), plus random checks at the
// default sizes (49 -> 42 bits). Expected values come from integer
// comparisons with the rail values.
module tb_iir_sat;

  int checks = 0;
  int failures = 0;

  logic signed [11:0] din_s;
  logic signed [7:0]  dout_s;
  logic               clip_s;
  iir_sat #(.IN_W(12), .OUT_W(8)) dut_s (.din(din_s), .dout(dout_s), .clipped(clip_s));

  logic signed [48:0] din_d;
  logic signed [41:0] dout_d;
  logic               clip_d;
  iir_sat dut_d (.din(din_d), .dout(dout_d), .clipped(clip_d));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v, e, hi, lo;
    bit ec;
    for (int i = -2048; i < 2048; i++) begin
      din_s = 12'(i);
      #1;
      e = i; ec = 0;
      if (e > 127)  begin e = 127;  ec = 1; end
      if (e < -128) begin e = -128; ec = 1; end
      checks++;
      if (longint'(dout_s) != e || clip_s != ec) begin
        failures++;
        if (failures < 10) $display("small: in=%0d out=%0d clip=%0b exp=%0d", i, dout_s, clip_s, e);
      end
    end
    hi = (64'sd1 <<< 41) - 1;
    lo = -(64'sd1 <<< 41);
    for (int i = 0; i < 4000; i++) begin
      v = {$urandom, $urandom};
      v = v >>> $urandom_range(15, 40);        // spread magnitudes around the rails
      if (i < 4) v = (i == 0) ? hi : (i == 1) ? lo : (i == 2) ? hi + 1 : lo - 1;
      din_d = 49'(v);
      #1;
      e = v; ec = 0;
      if (e > hi) begin e = hi; ec = 1; end
      if (e < lo) begin e = lo; ec = 1; end
      checks++;
      if (longint'(dout_d) != e || clip_d != ec) begin
        failures++;
        if (failures < 10) $display("default: in=%0d out=%0d exp=%0d", v, dout_d, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
