// wpu_channel: wavefront processing unit for one CCD channel.
//
// Pixel clock domain: input_addr_cs places each incoming 16-bit pixel in the
// pixel_buffer. Slope clock domain (CLK_RATIO = 16 times slower, supplied from
// outside): when a row of subapertures is complete, row_done crosses over
// through pulse_sync and starts slope_fsm; output_addr_unit reads the row out
// ITER subapertures at a time, subap_array regroups them, ITER cog_centroid
// units compute the x and y slopes in parallel, and slope_fsm presents them to
// the reconstructor with pipe_out. Pixel acquisition of the next row goes on
// in the other half of the buffer while a row is being computed.
//
// Timing: a row's slopes start 3 slope-clock cycles after slope_fsm leaves
// ST_INIT, which itself follows the row's last pixel by 2 to 3 slope-clock
// cycles of synchronisation; then ITER slopes per cycle for N/ITER cycles.
// The slope clock must be the pixel clock divided by 16 or anything faster
// that keeps the readout of a row (N/ITER cycles) shorter than the arrival of
// the next row (N*P*P pixel cycles).
module wpu_channel
  import wpu_pkg::*;
#(
  parameter int unsigned N    = DEF_N,
  parameter int unsigned P    = DEF_P,
  parameter int unsigned ITER = DEF_ITER,
  parameter int unsigned ROWS = DEF_N,
  localparam int unsigned PW  = $clog2(N * ROWS + 1)
) (
  input  logic          clk_pix,
  input  logic          rst_pix,
  input  logic          pix_en,
  input  pixel_t        pix_in,
  input  logic          clk_slow,
  input  logic          rst_slow,
  output slope_t        x_slope [ITER],
  output slope_t        y_slope [ITER],
  output logic          slope_valid,
  output logic [PW-1:0] pipe_out,
  output logic          slope_done,
  output logic          row_done,        // pixel clock domain
  output logic          even_row_done,   // pixel clock domain
  output logic          iter_shift,      // pixel clock domain
  output slope_state_t  fsm_state,
  output logic          row_pending_overrun
);

  localparam int unsigned G     = N / ITER;
  localparam int unsigned DEPTH = 2 * G;
  localparam int unsigned NBANK = ITER * P * P;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  // pixel clock domain
  logic             wr_en;
  pixel_t           wr_data;
  logic [AW-1:0]    wr_addr;
  logic [NBANK-1:0] wr_cs;

  input_addr_cs #(.N(N), .P(P), .ITER(ITER)) u_in_addr (
    .clk_pix, .rst(rst_pix), .pix_en, .pix_in,
    .wr_en, .wr_data, .wr_addr, .wr_cs,
    .iter_shift, .row_done, .even_row_done
  );

  // slope clock domain
  logic          rd_en, rd_last, rd_valid;
  logic [AW-1:0] rd_addr;
  pixel_t        rd_data [NBANK];
  logic          rd_last_q;

  pixel_buffer #(.N(N), .P(P), .ITER(ITER)) u_buf (
    .clk_pix, .wr_en, .wr_addr, .wr_cs, .wr_data,
    .clk_slow, .rst_slow, .rd_en, .rd_addr, .rd_data, .rd_valid
  );

  logic row_done_slow;
  pulse_sync u_row_sync (
    .clk_src(clk_pix), .rst_src(rst_pix), .pulse_src(row_done),
    .clk_dst(clk_slow), .rst_dst(rst_slow), .pulse_dst(row_done_slow)
  );

  logic rd_start, rd_half;
  output_addr_unit #(.N(N), .ITER(ITER)) u_out_addr (
    .clk_slow, .rst(rst_slow), .start(rd_start), .half(rd_half),
    .busy(), .rd_en, .rd_addr, .rd_last
  );

  // the last tag travels alongside the one-cycle buffer read
  always_ff @(posedge clk_slow) begin
    if (rst_slow) rd_last_q <= 1'b0;
    else          rd_last_q <= rd_last;
  end

  pixel_t        subap [ITER][P*P];
  logic          sa_valid, sa_last;

  subap_array #(.P(P), .ITER(ITER)) u_subap (
    .clk_slow, .rst(rst_slow), .load(rd_valid), .load_last(rd_last_q),
    .rd_data, .subap, .valid(sa_valid), .last(sa_last)
  );

  slope_t x_c [ITER];
  slope_t y_c [ITER];

  for (genvar l = 0; l < ITER; l++) begin : g_cog
    cog_centroid #(.P(P)) u_cog (
      .pix(subap[l]), .x_slope(x_c[l]), .y_slope(y_c[l])
    );
  end

  slope_fsm #(.N(N), .ITER(ITER), .ROWS(ROWS)) u_fsm (
    .clk_slow, .rst(rst_slow), .row_done(row_done_slow),
    .rd_start, .rd_half,
    .in_valid(sa_valid), .in_last(sa_last), .x_in(x_c), .y_in(y_c),
    .x_slope, .y_slope, .slope_valid, .pipe_out, .slope_done,
    .state(fsm_state), .row_pending_overrun
  );

endmodule
