// servo_regs: register bank between the soft-core processor and the servo.
//
// The PC computes the IIR coefficients and the analog front-end settings and
// sends them to the processor, which writes them here. The bank holds every
// coefficient of every channel and stage and drives them to the filters
// continuously; a write takes effect on the next clock, one word at a time.
// Writes to the two slow-DAC addresses start a frame on the input-side or
// output-side slow-DAC writer. The bus, the address map and the reset values
// (all coefficients zero, so the servo outputs 0) are this design's choices.
//
// Address map (word addresses, ADDR_W bits):
//   bit ADDR_W-1 = 0 : coefficient {channel, stage, index}; index 0..ORDER
//                      selects B0..BN, ORDER+1..2*ORDER selects A1..AN.
//                      COEF_W bits, read back sign-extended to BUS_W.
//   A_SDAC0 / A_SDAC1: write the low SDAC_FRAME_W bits as a slow-DAC frame.
//   A_STATUS         : read {.., sdac_busy[1], sdac_busy[0]}.
// Reads return data one clock after rd_addr is presented.
module servo_regs #(
  parameter int unsigned N_CHAN   = servo_pkg::DEF_N_CHAN,
  parameter int unsigned N_STAGES = servo_pkg::DEF_N_STAGES,
  parameter int unsigned ORDER    = servo_pkg::DEF_ORDER,
  parameter int unsigned COEF_W   = servo_pkg::DEF_COEF_W,
  parameter int unsigned ADDR_W   = servo_pkg::DEF_ADDR_W,
  parameter int unsigned BUS_W    = servo_pkg::DEF_BUS_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // processor port
  input  logic                     wr_en,
  input  logic [ADDR_W-1:0]        wr_addr,
  input  logic [BUS_W-1:0]         wr_data,
  input  logic [ADDR_W-1:0]        rd_addr,
  output logic [BUS_W-1:0]         rd_data,
  // coefficients
  output logic signed [COEF_W-1:0] b [N_CHAN][N_STAGES][ORDER+1],
  output logic signed [COEF_W-1:0] a [N_CHAN][N_STAGES][ORDER],
  // slow-DAC writers
  output logic [1:0]               sdac_start,
  output logic [servo_pkg::SDAC_FRAME_W-1:0] sdac_word,
  input  logic [1:0]               sdac_busy
);

  localparam int unsigned IDX_W = servo_pkg::idx_w(2 * ORDER + 1);
  localparam int unsigned STG_W = servo_pkg::idx_w(N_STAGES);
  localparam int unsigned CH_W  = servo_pkg::idx_w(N_CHAN);

  typedef struct packed {
    logic [CH_W-1:0]  ch;
    logic [STG_W-1:0] stage;
    logic [IDX_W-1:0] idx;
  } coef_addr_t;

  localparam int unsigned CA_W = CH_W + STG_W + IDX_W;

  coef_addr_t wa, ra;
  assign wa = coef_addr_t'(wr_addr[CA_W-1:0]);
  assign ra = coef_addr_t'(rd_addr[CA_W-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CHAN; c++)
        for (int s = 0; s < N_STAGES; s++) begin
          for (int k = 0; k <= ORDER; k++) b[c][s][k] <= '0;
          for (int k = 0; k < ORDER; k++)  a[c][s][k] <= '0;
        end
      sdac_start <= '0;
      sdac_word  <= '0;
    end else begin
      sdac_start <= '0;
      if (wr_en && !wr_addr[ADDR_W-1]) begin
        for (int c = 0; c < N_CHAN; c++)
          for (int s = 0; s < N_STAGES; s++)
            if (int'(wa.ch) == c && int'(wa.stage) == s) begin
              for (int k = 0; k <= ORDER; k++)
                if (int'(wa.idx) == k) b[c][s][k] <= wr_data[COEF_W-1:0];
              for (int k = 0; k < ORDER; k++)
                if (int'(wa.idx) == ORDER + 1 + k) a[c][s][k] <= wr_data[COEF_W-1:0];
            end
      end
      if (wr_en && wr_addr == servo_pkg::A_SDAC0) begin
        sdac_start[0] <= 1'b1;
        sdac_word     <= wr_data[servo_pkg::SDAC_FRAME_W-1:0];
      end
      if (wr_en && wr_addr == servo_pkg::A_SDAC1) begin
        sdac_start[1] <= 1'b1;
        sdac_word     <= wr_data[servo_pkg::SDAC_FRAME_W-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data <= '0;
    end else begin
      rd_data <= '0;
      if (!rd_addr[ADDR_W-1]) begin
        for (int c = 0; c < N_CHAN; c++)
          for (int s = 0; s < N_STAGES; s++)
            if (int'(ra.ch) == c && int'(ra.stage) == s) begin
              for (int k = 0; k <= ORDER; k++)
                if (int'(ra.idx) == k) rd_data <= BUS_W'(b[c][s][k]);
              for (int k = 0; k < ORDER; k++)
                if (int'(ra.idx) == ORDER + 1 + k) rd_data <= BUS_W'(a[c][s][k]);
            end
      end else if (rd_addr == servo_pkg::A_STATUS) begin
        rd_data <= BUS_W'(sdac_busy);
      end
    end
  end

  initial begin
    assert (CA_W < ADDR_W)
      else $error("servo_regs: coefficient address fields do not fit in ADDR_W-1 bits");
    assert (COEF_W <= BUS_W) else $error("servo_regs: COEF_W exceeds BUS_W");
  end

endmodule
