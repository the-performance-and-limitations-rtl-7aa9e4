// tb_slow_dac_spi: sends random 24-bit frames and decodes the serial lines
// like the DAC would (sample mosi on each falling sclk edge while cs_n is
// low, latch on cs_n rising). Checks the received word, the number of sclk
// edges, the frame duration FRAME_W*2*CLK_DIV + CLK_DIV + 1 clocks, and
// that a start while busy is ignored.
module tb_slow_dac_spi;

  localparam int unsigned FW = 24, DIV = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic          start;
  logic [FW-1:0] word;
  logic          busy, cs_n, sclk, mosi;

  slow_dac_spi #(.FRAME_W(FW), .CLK_DIV(DIV)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .word(word),
    .busy(busy), .cs_n(cs_n), .sclk(sclk), .mosi(mosi));

  // Receiver model.
  logic [FW-1:0] rx;
  int            nbits;
  logic [FW-1:0] latched;
  int            frames = 0;
  logic          sclk_d = 1'b0, cs_d = 1'b1;

  always @(posedge clk) begin
    sclk_d <= sclk;
    cs_d   <= cs_n;
    if (!cs_n && sclk_d && !sclk) begin   // falling sclk edge
      rx    <= {rx[FW-2:0], mosi};
      nbits <= nbits + 1;
    end
    if (cs_n && !cs_d) begin
      latched <= rx;
      frames  <= frames + 1;
    end
    if (cs_d && !cs_n) nbits <= 0;
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, dur, f0;
    logic [FW-1:0] w;
    start = 1'b0; word = '0; nbits = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++;
    if (!cs_n || sclk || busy) failures++;

    for (int i = 0; i < 40; i++) begin
      w = FW'($urandom);
      f0 = frames;
      @(negedge clk);
      start = 1'b1; word = w;
      @(negedge clk);
      start = 1'b0; word = ~w;
      dur = 1;
      // a second start in the middle of a frame must be ignored
      repeat (10) @(negedge clk);
      dur += 10;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      dur++;
      while (busy) begin @(negedge clk); dur++; end
      repeat (3) @(negedge clk);
      checks += 4;
      if (frames != f0 + 1) begin failures++; $display("frame count %0d", frames - f0); end
      if (latched != w) begin failures++; $display("rx %h exp %h", latched, w); end
      if (nbits != FW) begin failures++; $display("bits %0d", nbits); end
      if (dur != FW * 2 * DIV + DIV + 1) begin failures++; $display("duration %0d", dur); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
