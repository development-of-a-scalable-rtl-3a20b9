// tb_wpu_top: end-to-end test of the four-channel WPU at its default size:
// four 256 x 256 pixel quadrants, N = 64 subapertures of 4 x 4 pixels per row,
// ITER = 16 slopes per slope cycle, pixel clock 131.072 MHz (7.629 ns) and
// slope clock 1/16 of it.
//
// Two frames are sent on every channel. In the first, all four quadrants
// stream at one pixel per clock; the frame must then be read and all 4096
// slopes of each quadrant delivered within 0.5 ms plus the short row
// pipeline. In the second, channels 1 and 3 get random gaps in pix_en.
// Every slope is compared with a value computed here from the frame (offset
// of the centre of gravity from the subaperture centre, 8 fractional bits,
// truncated toward zero, 0 for a dark subaperture), in subaperture order, with
// pipe_out counting the frame's slopes and restarting at the next frame. Each
// mechanism must happen at least once: row_done, even_row_done, iter_shift,
// a Initialize -> Centroid Computation transition, slopes computed while the
// next row is being written, a pipe_out restart, a dark subaperture and a
// gap in the pixel stream.
module tb_wpu_top;
  import wpu_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NUM_CH = DEF_NUM_CH, N = DEF_N, P = DEF_P, ITER = DEF_ITER, ROWS = DEF_N;
  localparam int G = N / ITER, W = N * P, H = ROWS * P, FRAMES = 2;
  localparam int PW = $clog2(N * ROWS + 1);
  localparam realtime T_PIX = 7.629ns;

  logic clk_pix = 0, clk_slow = 0, rst = 1;
  logic   pix_en [NUM_CH];
  pixel_t pix_in [NUM_CH];
  slope_t x_slope [NUM_CH][ITER], y_slope [NUM_CH][ITER];
  logic slope_valid [NUM_CH], slope_done [NUM_CH], row_done [NUM_CH];
  logic even_row_done [NUM_CH], iter_shift [NUM_CH], overrun [NUM_CH];
  logic [PW-1:0] pipe_out [NUM_CH];
  slope_state_t fsm_state [NUM_CH];

  wpu_top dut (
    .clk_pix, .rst_pix(rst), .clk_slow, .rst_slow(rst), .pix_en, .pix_in,
    .x_slope, .y_slope, .slope_valid, .pipe_out, .slope_done, .row_done,
    .even_row_done, .iter_shift, .fsm_state, .row_pending_overrun(overrun)
  );

  always #(T_PIX / 2) clk_pix = ~clk_pix;
  always #(T_PIX * CLK_RATIO / 2) clk_slow = ~clk_slow;

  int checks = 0, failures = 0;
  pixel_t img [NUM_CH][FRAMES][H][W];
  slope_t exp_x [NUM_CH][$], exp_y [NUM_CH][$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic slope_t ref_slope(input int ch, input int f, input int sr, input int sc, input bit xaxis);
    longint s, m, q;
    s = 0; m = 0;
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) begin
        s += img[ch][f][sr * P + r][sc * P + c];
        m += longint'(img[ch][f][sr * P + r][sc * P + c]) * (2 * (xaxis ? c : r) - (P - 1));
      end
    if (s == 0) return '0;
    q = ((m < 0 ? -m : m) * 256) / (2 * s);
    return slope_t'(m < 0 ? -q : q);
  endfunction

  // mechanism counters
  int n_row_done = 0, n_even = 0, n_shift = 0, n_start = 0, n_overlap = 0;
  int n_restart = 0, n_dark = 0, n_gap = 0, n_groups = 0;
  int cnt [NUM_CH];
  int run_len [NUM_CH];
  slope_state_t prev_state [NUM_CH];
  realtime t_first_pixel, t_frame0_done [NUM_CH];

  always @(posedge clk_pix) begin
    if (!rst) begin
      for (int ch = 0; ch < NUM_CH; ch++) begin
        n_row_done += row_done[ch]; n_even += even_row_done[ch]; n_shift += iter_shift[ch];
      end
    end
  end

  always @(posedge clk_slow) begin
    if (!rst) begin
      for (int ch = 0; ch < NUM_CH; ch++) begin
        if (prev_state[ch] == ST_INIT && fsm_state[ch] == ST_CENTROID) n_start++;
        prev_state[ch] = fsm_state[ch];
        if (slope_valid[ch]) begin
          n_groups++; run_len[ch]++;
          if (pix_en[ch]) n_overlap++;
          if (cnt[ch] == N * ROWS) begin cnt[ch] = 0; n_restart++; end
          cnt[ch] += ITER;
          check(pipe_out[ch] == PW'(cnt[ch]), $sformatf("ch%0d pipe_out %0d want %0d", ch, pipe_out[ch], cnt[ch]));
          for (int l = 0; l < ITER; l++) begin
            slope_t ex, ey;
            ex = exp_x[ch].pop_front(); ey = exp_y[ch].pop_front();
            check(x_slope[ch][l] == ex, $sformatf("ch%0d x slope got %0d want %0d", ch, x_slope[ch][l], ex));
            check(y_slope[ch][l] == ey, $sformatf("ch%0d y slope got %0d want %0d", ch, y_slope[ch][l], ey));
          end
          if (exp_x[ch].size() == (FRAMES - 1) * N * ROWS) t_frame0_done[ch] = $realtime;
        end else if (run_len[ch] != 0) begin
          check(run_len[ch] == G, $sformatf("ch%0d row came out in %0d cycles, want %0d", ch, run_len[ch], G));
          run_len[ch] = 0;
        end
      end
    end
  end

  // one pixel stream per channel; gaps on channels 1 and 3 in frame 1
  for (genvar ch = 0; ch < NUM_CH; ch++) begin : g_drv
    initial begin
      pix_en[ch] = 0; pix_in[ch] = '0;
      wait (!rst);
      for (int f = 0; f < FRAMES; f++)
        for (int y = 0; y < H; y++)
          for (int x = 0; x < W; x++) begin
            if (f == 1 && ch % 2 == 1) begin
              while ($urandom_range(3) == 0) begin
                @(posedge clk_pix) pix_en[ch] <= 0;
                n_gap++;
              end
            end
            @(posedge clk_pix);
            if (ch == 0 && f == 0 && y == 0 && x == 0) t_first_pixel = $realtime;
            pix_en[ch] <= 1; pix_in[ch] <= img[ch][f][y][x];
          end
      @(posedge clk_pix) pix_en[ch] <= 0;
    end
  end

  initial begin
    for (int ch = 0; ch < NUM_CH; ch++) begin
      cnt[ch] = 0; run_len[ch] = 0; prev_state[ch] = ST_INIT;
      for (int f = 0; f < FRAMES; f++) begin
        // a spot of light per subaperture on a weak random background
        for (int y = 0; y < H; y++)
          for (int x = 0; x < W; x++)
            img[ch][f][y][x] = pixel_t'($urandom_range(0, 200));
        for (int sr = 0; sr < ROWS; sr++)
          for (int sc = 0; sc < N; sc++) begin
            int r0, c0;
            r0 = $urandom_range(P - 1); c0 = $urandom_range(P - 1);
            img[ch][f][sr * P + r0][sc * P + c0] = pixel_t'($urandom_range(1000, 65535));
          end
        // some dark subapertures
        for (int k = 0; k < 4; k++) begin
          int sr, sc;
          sr = $urandom_range(ROWS - 1); sc = $urandom_range(N - 1);
          for (int r = 0; r < P; r++) for (int c = 0; c < P; c++) img[ch][f][sr * P + r][sc * P + c] = '0;
        end
        for (int sr = 0; sr < ROWS; sr++)
          for (int sc = 0; sc < N; sc++) begin
            exp_x[ch].push_back(ref_slope(ch, f, sr, sc, 1));
            exp_y[ch].push_back(ref_slope(ch, f, sr, sc, 0));
            if (exp_x[ch][$] == 0 && exp_y[ch][$] == 0) n_dark++;
          end
      end
    end
    repeat (4) @(posedge clk_slow);
    @(posedge clk_pix) rst <= 0;
    // wait for every slope of both frames
    for (int ch = 0; ch < NUM_CH; ch++) wait (exp_x[ch].size() == 0);
    repeat (20) @(posedge clk_slow);
    for (int ch = 0; ch < NUM_CH; ch++) begin
      realtime t;
      t = t_frame0_done[ch] - t_first_pixel;
      check(t <= 500.0us + 20 * CLK_RATIO * T_PIX,
            $sformatf("ch%0d frame slopes done after %0.3f us", ch, t / 1us));
      check(!overrun[ch], "no overrun");
      check(fsm_state[ch] == ST_INIT, "FSM idle at the end");
    end
    check(n_groups == NUM_CH * FRAMES * ROWS * G, "group count");
    check(n_row_done == NUM_CH * FRAMES * ROWS, "row_done count");
    check(n_even == NUM_CH * FRAMES * ROWS / 2, "even_row_done count");
    check(n_shift == NUM_CH * FRAMES * H * W / (ITER * P), "iter_shift count");
    check(n_start == NUM_CH * FRAMES * ROWS, "Initialize -> Centroid transitions");
    check(n_overlap > 0, "slopes computed while the next row is written");
    check(n_restart == NUM_CH * (FRAMES - 1), "pipe_out restarts");
    check(n_dark > 0, "dark subaperture");
    check(n_gap > 0, "gaps in the pixel stream");
    $display("frame 0 of channel 0: last slope %0.3f us after the first pixel", (t_frame0_done[0] - t_first_pixel) / 1us);
    $display("mechanisms: row_done=%0d even_row_done=%0d iter_shift=%0d fsm_starts=%0d overlap=%0d pipe_out_restart=%0d dark=%0d gaps=%0d",
             n_row_done, n_even, n_shift, n_start, n_overlap, n_restart, n_dark, n_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(T_PIX * (FRAMES * H * W * 2 + 20000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
