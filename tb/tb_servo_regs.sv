// tb_servo_regs: writes random values to every coefficient address of the
// default bank (2 channels x 3 stages x (4 B + 3 A) coefficients) and checks
// each against a shadow copy on the coefficient outputs and through the
// read port (one clock of read latency); checks the slow-DAC start strobes
// and the status read-back of the busy flags.
module tb_servo_regs;

  localparam int unsigned NC = 2, NS = 3, O = 3, C = 32, AW = 8, BW = 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic          wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [BW-1:0] wr_data, rd_data;
  logic signed [C-1:0] b [NC][NS][O+1];
  logic signed [C-1:0] a [NC][NS][O];
  logic [1:0]    sdac_start, sdac_busy;
  logic [23:0]   sdac_word;

  servo_regs dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .rd_addr(rd_addr), .rd_data(rd_data), .b(b), .a(a),
    .sdac_start(sdac_start), .sdac_word(sdac_word), .sdac_busy(sdac_busy));

  logic [C-1:0] shadow [NC][NS][2*O+1];

  // Address of coefficient idx of stage s of channel c: {c[0], s[1:0], idx[2:0]}.
  function automatic logic [AW-1:0] caddr(int c, int s, int idx);
    return AW'((c << 5) | (s << 3) | idx);
  endfunction

  function automatic logic [C-1:0] dut_coef(int c, int s, int idx);
    return (idx <= O) ? b[c][s][idx] : a[c][s][idx-O-1];
  endfunction

  task automatic wr(input logic [AW-1:0] ad, input logic [BW-1:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_addr = ad; wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 1'b0; wr_addr = '0; wr_data = '0; rd_addr = '0; sdac_busy = 2'b00;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Reset value zero everywhere.
    for (int c = 0; c < NC; c++)
      for (int s = 0; s < NS; s++)
        for (int i = 0; i <= 2 * O; i++) begin
          checks++;
          if (dut_coef(c, s, i) != '0) failures++;
        end

    for (int pass = 0; pass < 3; pass++) begin
      for (int c = 0; c < NC; c++)
        for (int s = 0; s < NS; s++)
          for (int i = 0; i <= 2 * O; i++) begin
            shadow[c][s][i] = $urandom;
            wr(caddr(c, s, i), shadow[c][s][i]);
          end
      for (int c = 0; c < NC; c++)
        for (int s = 0; s < NS; s++)
          for (int i = 0; i <= 2 * O; i++) begin
            checks += 2;
            if (dut_coef(c, s, i) != shadow[c][s][i]) begin
              failures++;
              if (failures < 10) $display("coef c%0d s%0d i%0d = %h exp %h", c, s, i, dut_coef(c, s, i), shadow[c][s][i]);
            end
            @(negedge clk) rd_addr = caddr(c, s, i);
            @(negedge clk);
            if (rd_data != shadow[c][s][i]) failures++;
          end
    end

    // Slow-DAC frame writes.
    for (int d = 0; d < 2; d++) begin
      logic [23:0] w;
      int seen;
      w = 24'($urandom);
      @(negedge clk);
      wr_en = 1'b1; wr_addr = (d == 0) ? servo_pkg::A_SDAC0 : servo_pkg::A_SDAC1; wr_data = {8'hAB, w};
      @(posedge clk); #1;
      wr_en = 1'b0;
      checks += 3;
      if (sdac_start != (2'b01 << d)) failures++;
      if (sdac_word != w) failures++;
      @(posedge clk); #1;
      if (sdac_start != 2'b00) failures++;   // one-clock strobe
      seen = 0;
    end
    // A slow-DAC write does not disturb the coefficients.
    checks++;
    if (dut_coef(0, 0, 0) != shadow[0][0][0]) failures++;

    // Status read-back.
    for (int v = 0; v < 4; v++) begin
      @(negedge clk);
      sdac_busy = 2'(v); rd_addr = servo_pkg::A_STATUS;
      @(negedge clk);
      checks++;
      if (rd_data != BW'(v)) failures++;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
