// pixel_buffer: the bank of BRAMs between the two clock domains.
//
// NBANK = ITER*P*P banks, each DEPTH = 2*N/ITER words of 16 bits. Port A
// (pixel clock) writes one pixel per cycle into the bank picked by the
// one-hot chip select. Port B (slope clock) reads every bank at one common
// address, so the P*P pixels of ITER subapertures come out together one cycle
// after the read is issued; rd_valid marks that cycle. One bank per pixel
// position of ITER subapertures, and room for two rows of subapertures, is the
// design's layout; the one-cycle registered read is this implementation's.
module pixel_buffer
  import wpu_pkg::*;
#(
  parameter int unsigned N    = DEF_N,
  parameter int unsigned P    = DEF_P,
  parameter int unsigned ITER = DEF_ITER,
  localparam int unsigned G     = N / ITER,
  localparam int unsigned DEPTH = 2 * G,
  localparam int unsigned NBANK = ITER * P * P,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  // Port A, pixel clock
  input  logic             clk_pix,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [NBANK-1:0] wr_cs,
  input  pixel_t           wr_data,
  // Port B, slope clock
  input  logic             clk_slow,
  input  logic             rst_slow,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output pixel_t           rd_data [NBANK],
  output logic             rd_valid
);

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    bram_bank #(.WIDTH(PIX_W), .DEPTH(DEPTH)) u_bank (
      .clk_a  (clk_pix),
      .we_a   (wr_en && wr_cs[b]),
      .addr_a (wr_addr),
      .din_a  (wr_data),
      .clk_b  (clk_slow),
      .re_b   (rd_en),
      .addr_b (rd_addr),
      .dout_b (rd_data[b])
    );
  end

  always_ff @(posedge clk_slow) begin
    if (rst_slow) rd_valid <= 1'b0;
    else          rd_valid <= rd_en;
  end

endmodule
