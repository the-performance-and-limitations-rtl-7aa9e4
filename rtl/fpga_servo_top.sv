// fpga_servo_top: FPGA logic of a two-channel digital laser servo.
//
// Each channel takes the error signal from a fast 14-bit ADC, filters it with
// three cascaded third-order fixed-point IIR sections (one clock each) and
// drives a fast 14-bit DAC, so the loop transfer function (P, PI, PII, PI^3,
// PII with a lag-lead notch, ...) is set entirely by coefficients. A soft-core
// processor, which talks to a PC, loads the coefficients through the register
// port and sets the analog conditioning (offset and gain before the ADC and
// after the DAC) through two slow serial DACs. The processor, its PC link and
// the clock PLL are not part of this module: the register port and the clock
// are ports, as are the converter pins. Two channels, three third-order
// sections each, 32-bit Q3.28 coefficients and the two slow DACs (one before
// the ADC, one after the DAC) follow the original servo; the register port
// and its address map are this design's own (see servo_regs).
//
// Timing: ADC pins to DAC pins in N_STAGES + 2 clocks (5 by default, 100 ns
// at the 50 MHz servo clock of the larger board). Register writes take effect
// on the next clock; reads return data one clock after bus_addr.
module fpga_servo_top #(
  parameter int unsigned N_CHAN   = servo_pkg::DEF_N_CHAN,
  parameter int unsigned N_STAGES = servo_pkg::DEF_N_STAGES,
  parameter int unsigned DATA_W   = servo_pkg::DEF_DATA_W,
  parameter int unsigned COEF_W   = servo_pkg::DEF_COEF_W,
  parameter int unsigned FRAC     = servo_pkg::DEF_FRAC,
  parameter int unsigned ORDER    = servo_pkg::DEF_ORDER,
  parameter int unsigned SDAC_DIV = 4
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // processor register port
  input  logic                                 bus_we,
  input  logic [servo_pkg::DEF_ADDR_W-1:0]     bus_addr,
  input  logic [servo_pkg::DEF_BUS_W-1:0]      bus_wdata,
  output logic [servo_pkg::DEF_BUS_W-1:0]      bus_rdata,
  // fast converters
  input  logic [N_CHAN-1:0][DATA_W-1:0]        adc_data,
  output logic [N_CHAN-1:0][DATA_W-1:0]        dac_data,
  // slow DACs: [0] input side (VO, VGA before the ADC), [1] output side
  output logic [1:0]                           sdac_cs_n,
  output logic [1:0]                           sdac_sclk,
  output logic [1:0]                           sdac_mosi,
  // saturation flags of every filter section
  output logic [N_CHAN-1:0][N_STAGES-1:0]      clipped
);

  logic signed [COEF_W-1:0] b [N_CHAN][N_STAGES][ORDER+1];
  logic signed [COEF_W-1:0] a [N_CHAN][N_STAGES][ORDER];
  logic [1:0]                              sdac_start;
  logic [1:0]                              sdac_busy;
  logic [servo_pkg::SDAC_FRAME_W-1:0]      sdac_word;

  servo_regs #(
    .N_CHAN(N_CHAN), .N_STAGES(N_STAGES), .ORDER(ORDER), .COEF_W(COEF_W)
  ) u_regs (
    .clk       (clk),
    .rst_n     (rst_n),
    .wr_en     (bus_we),
    .wr_addr   (bus_addr),
    .wr_data   (bus_wdata),
    .rd_addr   (bus_addr),
    .rd_data   (bus_rdata),
    .b         (b),
    .a         (a),
    .sdac_start(sdac_start),
    .sdac_word (sdac_word),
    .sdac_busy (sdac_busy)
  );

  for (genvar c = 0; c < N_CHAN; c++) begin : g_chan
    servo_channel #(
      .N_STAGES(N_STAGES), .DATA_W(DATA_W), .COEF_W(COEF_W), .FRAC(FRAC), .ORDER(ORDER)
    ) u_chan (
      .clk     (clk),
      .rst_n   (rst_n),
      .adc_data(adc_data[c]),
      .b       (b[c]),
      .a       (a[c]),
      .dac_data(dac_data[c]),
      .clipped (clipped[c])
    );
  end

  for (genvar d = 0; d < 2; d++) begin : g_sdac
    slow_dac_spi #(.CLK_DIV(SDAC_DIV)) u_sdac (
      .clk  (clk),
      .rst_n(rst_n),
      .start(sdac_start[d]),
      .word (sdac_word),
      .busy (sdac_busy[d]),
      .cs_n (sdac_cs_n[d]),
      .sclk (sdac_sclk[d]),
      .mosi (sdac_mosi[d])
    );
  end

endmodule
