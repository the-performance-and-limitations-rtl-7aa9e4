// tb_servo_channel: one default channel, ADC pins to DAC pins.
//
// With unity gain in all three sections the DAC code must equal the ADC
// code delayed by N_STAGES + 2 = 5 clocks (both offset binary). With a
// gain of -1/2 in the first section, the DAC must show the negated, halved
// value (arithmetic shift, rounded down), which checks the code conversions
// and the sign handling. A gain of 4 must drive large inputs to the rails and set the clamp flag.
module tb_servo_channel;

  localparam int unsigned NS = 3, O = 3, C = 32, F = 28, DW = 14;
  localparam int LAT = NS + 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic [DW-1:0]       adc_data, dac_data;
  logic signed [C-1:0] b [NS][O+1];
  logic signed [C-1:0] a [NS][O];
  logic [NS-1:0]       clipped;

  servo_channel dut (.clk(clk), .rst_n(rst_n), .adc_data(adc_data), .b(b), .a(a),
                     .dac_data(dac_data), .clipped(clipped));

  logic [DW-1:0] adc_hist [16];
  int clip_count = 0;
  always @(posedge clk) if (clipped[0]) clip_count++;

  // Offset-binary code of a signed value, and back.
  function automatic logic [DW-1:0] to_code(int v);
    return DW'(v + (1 << (DW - 1)));
  endfunction
  function automatic int from_code(logic [DW-1:0] c);
    return int'({1'b0, c}) - (1 << (DW - 1));
  endfunction

  task automatic set_stage(int s, logic signed [C-1:0] b0);
    for (int k = 0; k <= O; k++) b[s][k] = '0;
    for (int k = 0; k < O; k++)  a[s][k] = '0;
    b[s][0] = b0;
  endtask

  task automatic run(int n, bit check_delay, int gain_num, int gain_sh);
    for (int i = 0; i < n; i++) begin
      int v, e;
      v = $urandom_range(0, (1 << DW) - 1) - (1 << (DW - 1));
      @(negedge clk);
      adc_data = to_code(v);
      for (int k = 15; k > 0; k--) adc_hist[k] = adc_hist[k-1];
      adc_hist[0] = adc_data;
      @(posedge clk); #1;
      if (i >= LAT) begin
        // value that entered LAT clocks before the one now at the DAC
        e = from_code(adc_hist[LAT - 1]);
        e = (e * gain_num) >>> gain_sh;
        if (e > 8191) e = 8191;
        if (e < -8192) e = -8192;
        checks++;
        if (from_code(dac_data) != e) begin
          failures++;
          if (failures < 10) $display("dac=%0d exp=%0d", from_code(dac_data), e);
        end
      end
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    adc_data = to_code(0);
    for (int k = 0; k < 16; k++) adc_hist[k] = to_code(0);
    for (int s = 0; s < NS; s++) set_stage(s, C'(64'd1 << F));
    repeat (3) @(posedge clk);
    checks++;
    if (dac_data != to_code(0)) failures++;     // reset: mid-scale
    #1 rst_n = 1'b1;

    run(300, 1, 1, 0);

    // Measured latency of a step.
    @(negedge clk) adc_data = to_code(0);
    repeat (10) @(negedge clk);
    adc_data = to_code(4000);
    lat = 0;
    while (dac_data != to_code(4000) && lat < 20) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != LAT) begin failures++; $display("latency %0d expected %0d", lat, LAT); end

    // Gain -1/2 in stage 0: B0 = -2^(F-1).
    set_stage(0, -C'(64'd1 << (F - 1)));
    repeat (LAT) @(posedge clk);
    run(300, 1, -1, 1);

    // Gain 4 in stage 0 (Q3.28 holds gains below 8): large inputs clip at the rails.
    set_stage(0, C'(64'd1 << (F + 2)));
    repeat (LAT) @(posedge clk);
    clip_count = 0;
    run(300, 1, 4, 0);
    checks++;
    if (clip_count == 0) begin failures++; $display("clamp never acted"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
