// tb_fpga_servo_top: end-to-end test of the two-channel servo at its default
// parameters (Q3.28 coefficients, three third-order sections per channel).
//
// The testbench plays the processor on the register port and the analog
// world on the converter pins:
//  * channel 0 runs closed loop: its DAC output, inverted and delayed by
//    PLANT_DLY clocks, plus a disturbance D, is fed back to its ADC (the
//    self-locking arrangement with an inverting plant). Stage 0 is set as an
//    integrator; the error at the ADC must settle to zero and the DAC to D,
//    for two successive disturbance steps ("lock" events);
//  * channel 1 runs open loop: three cascaded integrators (PI^3-like) with a
//    constant input drive all stages into the clamp; the output must be held
//    at the rail while the input stays, and leave it when the input reverses
//    ("saturation" events). Then it is re-programmed on the fly to unity
//    proportional gain and must pass the input with the 5-clock latency
//    ("mode switch");
//  * coefficients are read back, and one frame is sent to each slow DAC and
//    decoded from the serial pins.
// Each mechanism is counted; one that never happens is a failure.
module tb_fpga_servo_top;

  localparam int unsigned DW = 14, F = 28, NS = 3, O = 3;
  localparam int LAT = NS + 2;
  localparam int PLANT_DLY = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;   // 50 MHz

  int checks = 0;
  int failures = 0;
  int n_lock = 0, n_sat = 0, n_switch = 0, n_frames = 0, n_readback = 0;

  logic        bus_we;
  logic [7:0]  bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic [1:0][DW-1:0] adc_data, dac_data;
  logic [1:0] sdac_cs_n, sdac_sclk, sdac_mosi;
  logic [1:0][NS-1:0] clipped;

  fpga_servo_top dut (
    .clk(clk), .rst_n(rst_n),
    .bus_we(bus_we), .bus_addr(bus_addr), .bus_wdata(bus_wdata), .bus_rdata(bus_rdata),
    .adc_data(adc_data), .dac_data(dac_data),
    .sdac_cs_n(sdac_cs_n), .sdac_sclk(sdac_sclk), .sdac_mosi(sdac_mosi),
    .clipped(clipped));

  function automatic logic [DW-1:0] to_code(int v);
    if (v > 8191) v = 8191;
    if (v < -8192) v = -8192;
    return DW'(v + (1 << (DW - 1)));
  endfunction
  function automatic int from_code(logic [DW-1:0] c);
    return int'({1'b0, c}) - (1 << (DW - 1));
  endfunction

  // ---------------- analog world ----------------
  int  disturb = 0;           // disturbance on channel 0
  int  ch1_in = 0;          // open-loop input of channel 1
  int  dac0_hist [8];
  always @(posedge clk) begin
    for (int k = 7; k > 0; k--) dac0_hist[k] <= dac0_hist[k-1];
    dac0_hist[0] <= from_code(dac_data[0]);
  end
  always_comb begin
    adc_data[0] = to_code(disturb - dac0_hist[PLANT_DLY - 1]);
    adc_data[1] = to_code(ch1_in);
  end

  // ---------------- slow-DAC receivers ----------------
  logic [23:0] rx [2], got [2];
  logic [1:0]  sclk_d = '0, cs_d = '1;
  int          got_n [2] = '{0, 0};
  always @(posedge clk) begin
    sclk_d <= sdac_sclk;
    cs_d   <= sdac_cs_n;
    for (int d = 0; d < 2; d++) begin
      if (!sdac_cs_n[d] && sclk_d[d] && !sdac_sclk[d]) rx[d] <= {rx[d][22:0], sdac_mosi[d]};
      if (rst_n && sdac_cs_n[d] && !cs_d[d]) begin got[d] <= rx[d]; got_n[d] <= got_n[d] + 1; end
    end
  end

  // ---------------- processor model ----------------
  function automatic logic [7:0] caddr(int c, int s, int idx);
    return 8'((c << 5) | (s << 3) | idx);
  endfunction

  task automatic wr(input logic [7:0] ad, input logic [31:0] d);
    @(negedge clk);
    bus_we = 1'b1; bus_addr = ad; bus_wdata = d;
    @(negedge clk);
    bus_we = 1'b0;
  endtask

  task automatic rd(input logic [7:0] ad, output logic [31:0] d);
    @(negedge clk);
    bus_addr = ad;
    @(negedge clk);
    d = bus_rdata;
  endtask

  // Program one stage: B0, B1 and A1, everything else zero.
  task automatic prog_stage(int c, int s, longint b0, longint b1, longint a1);
    for (int i = 0; i <= 2 * O; i++) begin
      longint v;
      v = 0;
      if (i == 0) v = b0;
      if (i == 1) v = b1;
      if (i == O + 1) v = a1;
      wr(caddr(c, s, i), 32'(v));
    end
  endtask

  localparam longint ONE = 64'sd1 <<< F;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    int e, t, held;
    bus_we = 1'b0; bus_addr = '0; bus_wdata = '0;
    for (int k = 0; k < 8; k++) dac0_hist[k] = 0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;

    // After reset all coefficients are zero: both DACs at mid-scale.
    repeat (10) @(posedge clk); #1;
    checks++;
    if (from_code(dac_data[0]) != 0 || from_code(dac_data[1]) != 0) failures++;

    // Channel 0: integrator in stage 0 (gain 1/16 per clock), unity stages 1, 2.
    prog_stage(0, 1, ONE, 0, 0);
    prog_stage(0, 2, ONE, 0, 0);
    prog_stage(0, 0, ONE / 16, 0, ONE);

    // Channel 1: three integrators with gain 1 per clock.
    for (int s = 0; s < NS; s++) prog_stage(1, s, ONE, 0, ONE);

    // Read back two coefficients.
    rd(caddr(0, 0, 0), r);
    checks++; if (r == 32'(ONE / 16)) n_readback++; else failures++;
    rd(caddr(1, 2, O + 1), r);
    checks++; if (r == 32'(ONE)) n_readback++; else failures++;

    // Lock to two disturbance steps.
    foreach (disturb_steps[i]) begin
      disturb = disturb_steps[i];
      t = 0;
      do begin @(posedge clk); #1; t++; end
      while (!(from_code(adc_data[0]) == 0 && from_code(dac_data[0]) == disturb) && t < 5000);
      // must stay locked
      held = 1;
      repeat (200) begin
        @(posedge clk); #1;
        if (from_code(adc_data[0]) != 0) held = 0;
      end
      checks++;
      if (t < 5000 && held) n_lock++;
      else begin failures++; $display("no lock to %0d (t=%0d held=%0d)", disturb, t, held); end
    end

    // Channel 1: constant input, all integrators saturate and hold the rail.
    ch1_in = 50;
    t = 0;
    do begin @(posedge clk); #1; t++; end while (!(&clipped[1]) && t < 2000);
    held = 1;
    repeat (300) begin
      @(posedge clk); #1;
      if (from_code(dac_data[1]) != 8191) held = 0;
    end
    checks++;
    if (t < 2000 && held) n_sat++;
    else begin failures++; $display("ch1 did not hold the positive rail"); end
    ch1_in = -50;
    t = 0;
    do begin @(posedge clk); #1; t++; end while (from_code(dac_data[1]) != -8192 && t < 5000);
    checks++;
    if (t < 5000) n_sat++; else begin failures++; $display("ch1 did not reach the negative rail"); end
    // Channel 0 must not have been disturbed by channel 1 meanwhile.
    checks++;
    if (from_code(adc_data[0]) != 0) failures++;

    // Mode switch on channel 1: unity proportional in all three stages.
    for (int s = 0; s < NS; s++) prog_stage(1, s, ONE, 0, 0);
    repeat (LAT + 4) @(posedge clk);
    begin
      int xin [16];
      int ok = 1;
      for (int n = 0; n < 200; n++) begin
        @(negedge clk);
        ch1_in = $urandom_range(0, 16383) - 8192;
        for (int k = 15; k > 0; k--) xin[k] = xin[k-1];
        xin[0] = ch1_in;
        @(posedge clk); #1;
        if (n >= LAT && from_code(dac_data[1]) != xin[LAT - 1]) ok = 0;
      end
      checks++;
      if (ok) n_switch++; else begin failures++; $display("unity P after switch failed"); end
    end

    // Slow-DAC frames, input side then output side.
    for (int d = 0; d < 2; d++) begin
      logic [23:0] w;
      int n0;
      w = 24'($urandom);
      n0 = got_n[d];
      wr((d == 0) ? servo_pkg::A_SDAC0 : servo_pkg::A_SDAC1, {8'h00, w});
      rd(servo_pkg::A_STATUS, r);
      checks++;
      if (r[d] != 1'b1) failures++;          // busy while sending
      t = 0;
      while (got_n[d] == n0 && t < 1000) begin @(posedge clk); t++; end
      @(posedge clk);
      checks++;
      if (got_n[d] == n0 + 1 && got[d] == w) n_frames++;
      else begin failures++; $display("slow DAC %0d frame %h exp %h n=%0d t=%0d", d, got[d], w, got_n[d], t); end
    end

    // Every mechanism must have happened.
    $display("events: lock=%0d saturation=%0d mode_switch=%0d sdac_frames=%0d readback=%0d",
             n_lock, n_sat, n_switch, n_frames, n_readback);
    checks += 5;
    if (n_lock != 2) failures++;
    if (n_sat != 2) failures++;
    if (n_switch == 0) failures++;
    if (n_frames != 2) failures++;
    if (n_readback != 2) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int disturb_steps [2] = '{3000, -2000};

endmodule
