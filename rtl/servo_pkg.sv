// servo_pkg: sizes and register map shared by the digital servo.
//
// The defaults describe the third-order fixed-point IIR servo with 32-bit
// Q3.28 coefficients (1 sign bit, 3 integer bits, 28 fractional bits) and
// 14-bit ADC/DAC samples, two channels, three cascaded filter sections per
// channel. The narrower Q5.10 variant (16-bit coefficients, 10 fractional
// bits, first order) is obtained by overriding COEF_W, FRAC and ORDER on the
// modules. The register map (address fields, control addresses) is this
// design's own choice: the processor bus of the original system is not
// documented.
package servo_pkg;

  // Data and coefficient formats.
  localparam int unsigned DEF_DATA_W   = 14;  // ADC and DAC sample width
  localparam int unsigned DEF_COEF_W   = 32;  // coefficient width (Q3.28)
  localparam int unsigned DEF_FRAC     = 28;  // fractional coefficient bits R
  localparam int unsigned DEF_ORDER    = 3;   // order of one IIR section
  localparam int unsigned DEF_N_STAGES = 3;   // cascaded sections per channel
  localparam int unsigned DEF_N_CHAN   = 2;   // servo channels

  // Processor register port.
  localparam int unsigned DEF_ADDR_W   = 8;
  localparam int unsigned DEF_BUS_W    = 32;

  // Control region (address bit ADDR_W-1 set).
  localparam logic [DEF_ADDR_W-1:0] A_SDAC0  = 8'h80;  // write: send frame to input-side slow DAC
  localparam logic [DEF_ADDR_W-1:0] A_SDAC1  = 8'h81;  // write: send frame to output-side slow DAC
  localparam logic [DEF_ADDR_W-1:0] A_STATUS = 8'h82;  // read: {.., sdac1_busy, sdac0_busy}

  // Slow-DAC serial frame.
  localparam int unsigned SDAC_FRAME_W = 24;

  // Width of a field that indexes n items (at least one bit).
  function automatic int unsigned idx_w(int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

  function automatic int unsigned max2(int unsigned p, int unsigned q);
    return (p > q) ? p : q;
  endfunction

endpackage
