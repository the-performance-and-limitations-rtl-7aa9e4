// tb_noise_eater: closed-loop intensity-stabilisation workloads on the full
// servo at its default parameters.
//
// Channel 0 of fpga_servo_top closes a loop through a plant model that
// inverts the DAC output, delays it by PLANT_DLY = 26 clocks (520 ns at the
// 50 MHz servo clock: about 400 ns of acoustic delay in an acousto-optic
// modulator plus the converter pipelines and analog stages) and adds a
// sinusoidal intensity disturbance d of amplitude AMP. The in-loop error
// (the ADC input) is then E = D / (1 + L), with
//   L(z) = z^-(PLANT_DLY + 5) * prod_k H_k(z),
// where H_k is stage k with the rounded Q3.28 coefficients actually loaded.
// The 5 clocks are the servo's own pin-to-pin latency.
//
// Three controllers are loaded through the register port, with coefficients
// computed here by the bilinear transform:
//   PII     : 0.5 * (1 + w70k/s) * (1 + w7k/s)
//   PI^3    : 0.5 * (1 + w100k/s)^2 * (1 + w10k/s)
//   PII+LL  : the PII followed by a lag-lead notch at 700 kHz,
//             (s^2 + 2*0.1*w0*s + w0^2) / (s^2 + 2*0.5*w0*s + w0^2).
// For each controller and each of several disturbance frequencies, the
// error amplitude at the disturbance frequency is measured by correlation
// over whole periods and must match A*|1/(1+L)| within 3 % + 1 LSB. A
// constant disturbance must be suppressed to a mean error of zero. The notch
// must lower the error at the loop resonance, compared with the plain PII.
module tb_noise_eater;

  localparam int unsigned DW = 14, F = 28, NS = 3, O = 3;
  localparam int    PLANT_DLY = 26;
  localparam int    LOOP_DLY  = PLANT_DLY + NS + 2;
  localparam real   FCLK = 50.0e6;
  localparam real   PI_R = 3.14159265358979323846;
  localparam real   AMP  = 1000.0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;

  int checks = 0;
  int failures = 0;

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

  // ---------------- plant ----------------
  int disturb = 0;
  int dac_hist [PLANT_DLY];
  int clip_cycles = 0;
  always @(posedge clk) begin
    for (int k = PLANT_DLY - 1; k > 0; k--) dac_hist[k] <= dac_hist[k-1];
    dac_hist[0] <= from_code(dac_data[0]);
    if (rst_n && |clipped[0]) clip_cycles++;
  end
  always_comb begin
    adc_data[0] = to_code(disturb - dac_hist[PLANT_DLY - 1]);
    adc_data[1] = to_code(0);
  end

  // ---------------- coefficients ----------------
  // cb[s][k], ca[s][k]: the rounded integer coefficients of stage s.
  longint cb [NS][O+1];
  longint ca [NS][O];

  function automatic longint q(real v);
    return longint'($floor(v * real'(64'd1 << F) + 0.5));
  endfunction

  task automatic clear_stage(int s);
    for (int k = 0; k <= O; k++) cb[s][k] = 0;
    for (int k = 0; k < O; k++)  ca[s][k] = 0;
  endtask

  // g * (1 + wc/s), bilinear with K = 2*FCLK.
  task automatic pi_stage(int s, real g, real fc);
    real r;
    clear_stage(s);
    r = 2.0 * PI_R * fc / (2.0 * FCLK);
    cb[s][0] = q(g * (1.0 + r));
    cb[s][1] = q(g * (r - 1.0));
    ca[s][0] = q(1.0);
  endtask

  task automatic unity_stage(int s);
    clear_stage(s);
    cb[s][0] = q(1.0);
  endtask

  // Lag-lead notch at f0, zero damping zz, pole damping zp; bilinear with
  // pre-warping at f0.
  task automatic notch_stage(int s, real f0, real zz, real zp);
    real w0, kk, n0, n1, n2, d0, d1, d2;
    clear_stage(s);
    w0 = 2.0 * PI_R * f0;
    kk = w0 / $tan(w0 / (2.0 * FCLK));
    n0 = kk * kk + 2.0 * zz * w0 * kk + w0 * w0;
    n1 = 2.0 * (w0 * w0 - kk * kk);
    n2 = kk * kk - 2.0 * zz * w0 * kk + w0 * w0;
    d0 = kk * kk + 2.0 * zp * w0 * kk + w0 * w0;
    d1 = n1;
    d2 = kk * kk - 2.0 * zp * w0 * kk + w0 * w0;
    cb[s][0] = q(n0 / d0);
    cb[s][1] = q(n1 / d0);
    cb[s][2] = q(n2 / d0);
    ca[s][0] = q(-d1 / d0);
    ca[s][1] = q(-d2 / d0);
  endtask

  // |1 / (1 + L)| at frequency f from the rounded coefficients.
  function automatic real predict(real f);
    real w, lr, li, hr, hi, nr, ni, dr, di, c, s, tr, ti, den;
    w  = 2.0 * PI_R * f / FCLK;
    lr = $cos(w * LOOP_DLY);
    li = -$sin(w * LOOP_DLY);
    for (int st = 0; st < NS; st++) begin
      nr = 0.0; ni = 0.0; dr = 1.0; di = 0.0;
      for (int k = 0; k <= O; k++) begin
        c = real'(cb[st][k]) / real'(64'd1 << F);
        nr += c * $cos(w * k);
        ni -= c * $sin(w * k);
      end
      for (int k = 1; k <= O; k++) begin
        c = real'(ca[st][k-1]) / real'(64'd1 << F);
        dr -= c * $cos(w * k);
        di += c * $sin(w * k);
      end
      den = dr * dr + di * di;
      hr = (nr * dr + ni * di) / den;
      hi = (ni * dr - nr * di) / den;
      tr = lr * hr - li * hi;
      ti = lr * hi + li * hr;
      lr = tr; li = ti;
    end
    tr = 1.0 + lr;
    return 1.0 / $sqrt(tr * tr + li * li);
  endfunction

  // ---------------- processor ----------------
  function automatic logic [7:0] caddr(int c, int s, int idx);
    return 8'((c << 5) | (s << 3) | idx);
  endfunction

  task automatic wr(input logic [7:0] ad, input logic [31:0] d);
    @(negedge clk);
    bus_we = 1'b1; bus_addr = ad; bus_wdata = d;
    @(negedge clk);
    bus_we = 1'b0;
  endtask

  task automatic load();
    for (int s = 0; s < NS; s++) begin
      for (int k = 0; k <= O; k++) wr(caddr(0, s, k), 32'(cb[s][k]));
      for (int k = 0; k < O; k++)  wr(caddr(0, s, O + 1 + k), 32'(ca[s][k]));
    end
  endtask

  // ---------------- measurement ----------------
  // Restart the loop, apply a sine of the given period (clocks), settle,
  // and return the error amplitude at that frequency.
  task automatic measure(int period, output real amp);
    real sc, ss, ph;
    int m;
    disturb = 0;
    @(negedge clk) rst_n = 1'b0;
    for (int k = 0; k < PLANT_DLY; k++) dac_hist[k] = 0;
    @(negedge clk) rst_n = 1'b1;
    load();
    m = period * ((20000 + period - 1) / period);
    sc = 0.0; ss = 0.0;
    for (int n = 0; n < 30000 + m; n++) begin
      @(negedge clk);
      ph = 2.0 * PI_R * real'(n % period) / real'(period);
      disturb = int'($floor(AMP * $sin(ph) + 0.5));
      #1;   // the value the servo registers at the coming clock edge
      if (n >= 30000) begin
        sc += real'(from_code(adc_data[0])) * $cos(ph);
        ss += real'(from_code(adc_data[0])) * $sin(ph);
      end
      @(posedge clk);
    end
    amp = 2.0 / real'(m) * $sqrt(sc * sc + ss * ss);
  endtask

  int periods [7] = '{10000, 2500, 1000, 500, 200, 62, 25};

  task automatic sweep(string name, output real at_res);
    real meas, pred, f;
    at_res = 0.0;
    foreach (periods[i]) begin
      f = FCLK / real'(periods[i]);
      measure(periods[i], meas);
      pred = AMP * predict(f);
      checks++;
      if (meas > pred * 1.03 + 1.0 || meas < pred * 0.97 - 1.0) begin
        failures++;
        $display("%s f=%0.0f Hz: measured %0.2f predicted %0.2f LSB  MISMATCH", name, f, meas, pred);
      end else begin
        $display("%s f=%0.0f Hz: measured %0.2f predicted %0.2f LSB", name, f, meas, pred);
      end
      if (periods[i] == 62) at_res = meas;
    end
  endtask

  // A constant disturbance: the integrators must bring the mean error to
  // zero. Stages after an integrator re-round their input every sample, so
  // the error may toggle by one LSB around zero; it may not do more.
  task automatic dc_lock(string name);
    int maxe, sum;
    disturb = 0;
    @(negedge clk) rst_n = 1'b0;
    for (int k = 0; k < PLANT_DLY; k++) dac_hist[k] = 0;
    @(negedge clk) rst_n = 1'b1;
    load();
    disturb = 2500;
    repeat (30000) @(posedge clk);
    maxe = 0; sum = 0;
    repeat (2000) begin
      @(negedge clk);
      if (from_code(adc_data[0]) > maxe) maxe = from_code(adc_data[0]);
      if (-from_code(adc_data[0]) > maxe) maxe = -from_code(adc_data[0]);
      sum += from_code(adc_data[0]);
    end
    $display("%s: constant disturbance 2500 LSB, residual error max %0d LSB, mean %0.3f LSB",
             name, maxe, real'(sum) / 2000.0);
    checks++;
    if (maxe > 1 || (sum > 100 || sum < -100)) begin
      failures++; $display("%s: constant disturbance not suppressed", name);
    end
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real res_pii, res_pi3, res_ll;
    bus_we = 1'b0; bus_addr = '0; bus_wdata = '0;
    for (int k = 0; k < PLANT_DLY; k++) dac_hist[k] = 0;
    repeat (4) @(posedge clk);

    pi_stage(0, 0.5, 70.0e3); pi_stage(1, 1.0, 7.0e3); unity_stage(2);
    sweep("PII", res_pii);
    dc_lock("PII");

    pi_stage(0, 0.5, 100.0e3); pi_stage(1, 1.0, 100.0e3); pi_stage(2, 1.0, 10.0e3);
    sweep("PI3", res_pi3);
    dc_lock("PI3");

    pi_stage(0, 0.5, 70.0e3); pi_stage(1, 1.0, 7.0e3); notch_stage(2, 700.0e3, 0.1, 0.5);
    sweep("PII+LL", res_ll);
    dc_lock("PII+LL");

    // The notch must lower the error at the loop resonance (806 kHz here).
    checks++;
    if (!(res_ll < res_pii)) begin
      failures++; $display("lag-lead did not reduce the resonance: %0.2f vs %0.2f", res_ll, res_pii);
    end
    checks++;
    if (clip_cycles != 0) begin failures++; $display("filters saturated during linear tests"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
