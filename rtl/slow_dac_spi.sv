// slow_dac_spi: serial writer for a slow multichannel DAC.
//
// The offsets of the VO stages and the gains of the VGA stages, before the
// fast ADC and after the fast DAC, are set by slow DACs (a DAC8734-class
// serial part on the daughter card). This block shifts one FRAME_W-bit word,
// MSB first, to such a DAC: chip select (cs_n) goes low, each bit is put on
// mosi as sclk rises and is held while sclk falls (the edge on which the DAC
// samples), and cs_n returns high CLK_DIV clocks after the last falling edge,
// which latches the word in the DAC. Composing the word (register address
// and code) is left to the processor. The serial protocol, the frame length
// and the divider are this design's choices; the paper only names the parts.
//
// Interface: a one-clock 'start' with 'word' begins a frame when idle and is
// ignored while 'busy'. A frame takes FRAME_W*2*CLK_DIV + CLK_DIV + 1 clocks
// from start to busy falling; sclk has period 2*CLK_DIV clocks.
module slow_dac_spi #(
  parameter int unsigned FRAME_W = servo_pkg::SDAC_FRAME_W,
  parameter int unsigned CLK_DIV = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [FRAME_W-1:0] word,
  output logic               busy,
  output logic               cs_n,
  output logic               sclk,
  output logic               mosi
);

  typedef enum logic [1:0] {S_IDLE, S_HIGH, S_LOW, S_END} state_t;

  localparam int unsigned CNT_W = servo_pkg::idx_w(CLK_DIV);
  localparam int unsigned BIT_W = servo_pkg::idx_w(FRAME_W);

  state_t             state;
  logic [CNT_W-1:0]   cnt;
  logic [BIT_W-1:0]   bits_left;
  logic [FRAME_W-1:0] shreg;
  logic               tick;

  assign tick = (cnt == CNT_W'(CLK_DIV - 1));
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      bits_left <= '0;
      shreg     <= '0;
      cs_n      <= 1'b1;
      sclk      <= 1'b0;
      mosi      <= 1'b0;
    end else begin
      cnt <= (state == S_IDLE || tick) ? '0 : cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          shreg     <= word;
          mosi      <= word[FRAME_W-1];
          bits_left <= BIT_W'(FRAME_W - 1);
          cs_n      <= 1'b0;
          sclk      <= 1'b1;
          state     <= S_HIGH;
        end
        S_HIGH: if (tick) begin
          sclk  <= 1'b0;
          state <= S_LOW;
        end
        S_LOW: if (tick) begin
          if (bits_left == '0) begin
            state <= S_END;
          end else begin
            bits_left <= bits_left - 1'b1;
            shreg     <= shreg << 1;
            mosi      <= shreg[FRAME_W-2];
            sclk      <= 1'b1;
            state     <= S_HIGH;
          end
        end
        S_END: if (tick) begin
          cs_n  <= 1'b1;
          mosi  <= 1'b0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Chip select is low exactly while a frame is in progress, and sclk idles low.
  property p_cs_busy;
    @(posedge clk) disable iff (!rst_n) (state == S_IDLE) |-> (cs_n && !sclk);
  endproperty
  a_cs_busy: assert property (p_cs_busy);

endmodule
