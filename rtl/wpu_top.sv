// wpu_top: four-channel wavefront processing unit for a four-quadrant CCD.
//
// A 512 x 512 pixel CCD is read out as four quadrants of 256 x 256 pixels,
// each over its own link at one pixel per pixel clock (131.072 MHz reads a
// quadrant in 0.5 ms). Each quadrant has its own wpu_channel with N = 64
// subapertures per row of P = 4 x 4 pixels, and computes ITER = 16 x- and
// y-slopes per slope-clock cycle. The channels share the pixel clock and the
// slope clock (pixel clock / 16), both generated outside this module, and are
// otherwise independent; their slope streams go to the AO reconstructor
// side by side. The per-channel sizes and the four channels are the design's
// four-channel configuration; shared clocks and resets are this
// implementation's choice.
module wpu_top
  import wpu_pkg::*;
#(
  parameter int unsigned NUM_CH = DEF_NUM_CH,
  parameter int unsigned N      = DEF_N,
  parameter int unsigned P      = DEF_P,
  parameter int unsigned ITER   = DEF_ITER,
  parameter int unsigned ROWS   = DEF_N,
  localparam int unsigned PW    = $clog2(N * ROWS + 1)
) (
  input  logic          clk_pix,
  input  logic          rst_pix,
  input  logic          clk_slow,
  input  logic          rst_slow,
  input  logic          pix_en      [NUM_CH],
  input  pixel_t        pix_in      [NUM_CH],
  output slope_t        x_slope     [NUM_CH][ITER],
  output slope_t        y_slope     [NUM_CH][ITER],
  output logic          slope_valid [NUM_CH],
  output logic [PW-1:0] pipe_out    [NUM_CH],
  output logic          slope_done  [NUM_CH],
  output logic          row_done    [NUM_CH],
  output logic          even_row_done [NUM_CH],
  output logic          iter_shift  [NUM_CH],
  output slope_state_t  fsm_state   [NUM_CH],
  output logic          row_pending_overrun [NUM_CH]
);

  for (genvar ch = 0; ch < NUM_CH; ch++) begin : g_ch
    wpu_channel #(.N(N), .P(P), .ITER(ITER), .ROWS(ROWS)) u_ch (
      .clk_pix, .rst_pix,
      .pix_en        (pix_en[ch]),
      .pix_in        (pix_in[ch]),
      .clk_slow, .rst_slow,
      .x_slope       (x_slope[ch]),
      .y_slope       (y_slope[ch]),
      .slope_valid   (slope_valid[ch]),
      .pipe_out      (pipe_out[ch]),
      .slope_done    (slope_done[ch]),
      .row_done      (row_done[ch]),
      .even_row_done (even_row_done[ch]),
      .iter_shift    (iter_shift[ch]),
      .fsm_state     (fsm_state[ch]),
      .row_pending_overrun (row_pending_overrun[ch])
    );
  end

endmodule
