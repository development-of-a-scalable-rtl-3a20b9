// tb_wpu_channel: end-to-end test of one WPU channel at N = 8, P = 4,
// ITER = 2, ROWS = 8 (a 32 x 32 pixel frame), pixel clock 16 times the slope
// clock.
//
// Three frames of random pixels are streamed in raster order: the first and
// third at one pixel per clock, the second with random gaps in pix_en. Every
// subaperture's expected x and y slope is computed here from the frame with
// integer arithmetic (offset from the subaperture centre, 8 fractional bits,
// truncated toward zero; zero for a dark subaperture; some subapertures are
// made dark on purpose). The slopes must come out row by row, ITER per slope
// cycle in subaperture order, N/ITER cycles in a row, with pipe_out counting
// the slopes of the frame. Also checked: a row's first slopes follow its
// row_done within 8 slope cycles, slope computation overlaps the writing of
// the next row, and every row_done, even_row_done and iter_shift is seen.
module tb_wpu_channel;
  import wpu_pkg::*;

  localparam int N = 8, P = 4, ITER = 2, ROWS = 8;
  localparam int G = N / ITER, W = N * P, H = ROWS * P, FRAMES = 3;
  localparam int PW = $clog2(N * ROWS + 1);

  logic clk_pix = 0, clk_slow = 0, rst = 1, pix_en = 0;
  pixel_t pix_in = '0;
  slope_t x_slope [ITER], y_slope [ITER];
  logic slope_valid, slope_done, row_done, even_row_done, iter_shift, overrun;
  logic [PW-1:0] pipe_out;
  slope_state_t fsm_state;

  wpu_channel #(.N(N), .P(P), .ITER(ITER), .ROWS(ROWS)) dut (
    .clk_pix, .rst_pix(rst), .pix_en, .pix_in, .clk_slow, .rst_slow(rst),
    .x_slope, .y_slope, .slope_valid, .pipe_out, .slope_done,
    .row_done, .even_row_done, .iter_shift, .fsm_state, .row_pending_overrun(overrun)
  );

  always #5 clk_pix = ~clk_pix;
  always #80 clk_slow = ~clk_slow;

  int checks = 0, failures = 0;
  pixel_t img [FRAMES][H][W];
  slope_t exp_x [$], exp_y [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic slope_t ref_slope(input int f, input int sr, input int sc, input bit xaxis);
    longint s, m, q;
    s = 0; m = 0;
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) begin
        s += img[f][sr * P + r][sc * P + c];
        m += longint'(img[f][sr * P + r][sc * P + c]) * (2 * (xaxis ? c : r) - (P - 1));
      end
    if (s == 0) return '0;
    q = ((m < 0 ? -m : m) * 256) / (2 * s);
    return slope_t'(m < 0 ? -q : q);
  endfunction

  // mechanism counters
  int n_row_done = 0, n_even = 0, n_shift = 0, n_overlap = 0, n_groups = 0;
  int n_dark = 0, n_rows_out = 0, run_len = 0, slow_since_row = -1, max_lat = 0;

  always @(posedge clk_pix) begin
    if (!rst) begin
      n_row_done += row_done; n_even += even_row_done; n_shift += iter_shift;
    end
  end

  int cnt_in_frame = 0;
  always @(posedge clk_slow) begin
    if (!rst) begin
      if (slow_since_row >= 0) slow_since_row++;
      if (slope_valid) begin
        if (run_len == 0 && slow_since_row >= 0) begin
          if (slow_since_row > max_lat) max_lat = slow_since_row;
          slow_since_row = -1;
        end
        n_groups++; run_len++;
        if (pix_en) n_overlap++;
        cnt_in_frame += ITER;
        check(pipe_out == PW'(cnt_in_frame), $sformatf("pipe_out %0d want %0d", pipe_out, cnt_in_frame));
        for (int l = 0; l < ITER; l++) begin
          slope_t ex, ey;
          ex = exp_x.pop_front(); ey = exp_y.pop_front();
          check(x_slope[l] == ex, $sformatf("x slope got %0d want %0d", x_slope[l], ex));
          check(y_slope[l] == ey, $sformatf("y slope got %0d want %0d", y_slope[l], ey));
        end
        if (cnt_in_frame == N * ROWS) cnt_in_frame = 0;
      end else if (run_len != 0) begin
        check(run_len == G, $sformatf("row came out in %0d cycles, want %0d", run_len, G));
        n_rows_out++;
        run_len = 0;
      end
    end
  end

  // latency start: the slow edge after the row's last pixel
  always @(posedge clk_pix) if (!rst && row_done) slow_since_row = 0;

  initial begin
    for (int f = 0; f < FRAMES; f++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          img[f][y][x] = pixel_t'($urandom_range(0, 60000));
      // a few dark subapertures
      for (int k = 0; k < 3; k++) begin
        int sr, sc;
        sr = $urandom_range(ROWS - 1); sc = $urandom_range(N - 1);
        for (int r = 0; r < P; r++) for (int c = 0; c < P; c++) img[f][sr * P + r][sc * P + c] = '0;
      end
      for (int sr = 0; sr < ROWS; sr++)
        for (int sc = 0; sc < N; sc++) begin
          exp_x.push_back(ref_slope(f, sr, sc, 1));
          exp_y.push_back(ref_slope(f, sr, sc, 0));
          if (ref_slope(f, sr, sc, 1) == 0 && ref_slope(f, sr, sc, 0) == 0) n_dark++;
        end
    end
    repeat (4) @(posedge clk_slow);
    @(posedge clk_pix) rst <= 0;
    repeat (20) @(posedge clk_pix);
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          if (f == 1) begin
            while ($urandom_range(2) == 0) begin
              @(posedge clk_pix) pix_en <= 0;
            end
          end
          @(posedge clk_pix);
          pix_en <= 1; pix_in <= img[f][y][x];
        end
    @(posedge clk_pix) pix_en <= 0;
    repeat (20) @(posedge clk_slow);
    check(exp_x.size() == 0, $sformatf("all slopes delivered, %0d left", exp_x.size()));
    check(n_groups == FRAMES * ROWS * G, "group count");
    check(n_rows_out == FRAMES * ROWS, "rows out");
    check(n_row_done == FRAMES * ROWS && n_even == FRAMES * ROWS / 2, "row flags");
    check(n_shift == FRAMES * H * W / (ITER * P), "iter_shift count");
    check(n_overlap > 0, "slopes computed while pixels arrive");
    check(n_dark > 0, "dark subapertures exercised");
    check(max_lat <= 8, $sformatf("row_done to slopes %0d slope cycles", max_lat));
    check(!overrun, "no overrun");
    check(fsm_state == ST_INIT, "FSM idle at the end");
    $display("rows=%0d groups=%0d overlap=%0d max_latency=%0d dark=%0d", n_rows_out, n_groups, n_overlap, max_lat, n_dark);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (FRAMES * H * W * 4 + 2000) @(posedge clk_pix);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
