// servo_channel: one channel of the digital servo, from ADC pins to DAC pins.
//
// The fast ADC's parallel word is registered and converted to two's
// complement, filtered by a cascade of N_STAGES IIR sections, converted back
// to the fast DAC's input code and registered at the pins. The ADC and DAC
// are assumed to be clocked from the servo clock (all converters run at
// multiples of one base clock), so no clock-domain crossing is built here.
// Offset-binary codes at both converters are this design's assumption
// (parameters ADC_OFFSET_BINARY and DAC_OFFSET_BINARY; 0 selects two's
// complement pins).
//
// Timing: N_STAGES + 2 clocks from adc_data to dac_data (input register, one
// clock per IIR section, output register). Reset drives the DAC to the code
// of zero.
module servo_channel #(
  parameter int unsigned N_STAGES          = servo_pkg::DEF_N_STAGES,
  parameter int unsigned DATA_W            = servo_pkg::DEF_DATA_W,
  parameter int unsigned COEF_W            = servo_pkg::DEF_COEF_W,
  parameter int unsigned FRAC              = servo_pkg::DEF_FRAC,
  parameter int unsigned ORDER             = servo_pkg::DEF_ORDER,
  parameter bit          ADC_OFFSET_BINARY = 1'b1,
  parameter bit          DAC_OFFSET_BINARY = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [DATA_W-1:0]        adc_data,
  input  logic signed [COEF_W-1:0] b [N_STAGES][ORDER+1],
  input  logic signed [COEF_W-1:0] a [N_STAGES][ORDER],
  output logic [DATA_W-1:0]        dac_data,
  output logic [N_STAGES-1:0]      clipped
);

  localparam logic [DATA_W-1:0] ADC_FLIP = {ADC_OFFSET_BINARY, {(DATA_W-1){1'b0}}};
  localparam logic [DATA_W-1:0] DAC_FLIP = {DAC_OFFSET_BINARY, {(DATA_W-1){1'b0}}};

  logic signed [DATA_W-1:0] sample_in;
  logic signed [DATA_W-1:0] sample_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample_in <= '0;
      dac_data  <= DAC_FLIP;
    end else begin
      sample_in <= adc_data ^ ADC_FLIP;
      dac_data  <= sample_out ^ DAC_FLIP;
    end
  end

  iir_cascade #(
    .N_STAGES(N_STAGES), .DATA_W(DATA_W), .COEF_W(COEF_W), .FRAC(FRAC), .ORDER(ORDER)
  ) u_cascade (
    .clk    (clk),
    .rst_n  (rst_n),
    .x      (sample_in),
    .b      (b),
    .a      (a),
    .y      (sample_out),
    .clipped(clipped)
  );

endmodule
