// wpu_frame_check: drives one wpu_channel of a given size with FRAMES random
// frames at one pixel per pixel clock and checks every slope it returns.
//
// Used by tb_wpu_configs to run several channel sizes side by side. Each
// subaperture gets a bright spot at a random pixel on a weak background;
// the expected slope is the centroid offset from the subaperture centre,
// computed here with integers (8 fractional bits, truncated toward zero).
// Also checked: each row's slopes come out in N/ITER consecutive slope
// cycles, pipe_out counts them, and the last slope of a frame follows the
// frame's last pixel within 20 slope cycles. `done` rises when all frames
// have been checked; checks and failures are reported on ports.
module wpu_frame_check
  import wpu_pkg::*;
#(
  parameter int unsigned N      = 32,
  parameter int unsigned P      = 4,
  parameter int unsigned ITER   = 4,
  parameter int unsigned FRAMES = 1
) (
  input  logic clk_pix,
  input  logic clk_slow,
  input  logic rst,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int ROWS = N, G = N / ITER, W = N * P, H = ROWS * P;
  localparam int PW = $clog2(N * ROWS + 1);

  logic   pix_en = 0;
  pixel_t pix_in = '0;
  slope_t x_slope [ITER], y_slope [ITER];
  logic slope_valid, slope_done, row_done, even_row_done, iter_shift, overrun;
  logic [PW-1:0] pipe_out;
  slope_state_t fsm_state;

  wpu_channel #(.N(N), .P(P), .ITER(ITER), .ROWS(ROWS)) u_dut (
    .clk_pix, .rst_pix(rst), .pix_en, .pix_in, .clk_slow, .rst_slow(rst),
    .x_slope, .y_slope, .slope_valid, .pipe_out, .slope_done,
    .row_done, .even_row_done, .iter_shift, .fsm_state, .row_pending_overrun(overrun)
  );

  pixel_t img [FRAMES][H][W];
  slope_t exp_x [$], exp_y [$];

  initial begin
    checks = 0; failures = 0; done = 0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 5) $display("FAIL N=%0d P=%0d ITER=%0d: %s", N, P, ITER, what);
    end
  endtask

  function automatic slope_t ref_slope(input int f, input int sr, input int sc, input bit xaxis);
    longint s, m, q;
    s = 0; m = 0;
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) begin
        s += img[f][sr * P + r][sc * P + c];
        m += longint'(img[f][sr * P + r][sc * P + c]) * (2 * (xaxis ? c : r) - (int'(P) - 1));
      end
    if (s == 0) return '0;
    q = ((m < 0 ? -m : m) * 256) / (2 * s);
    return slope_t'(m < 0 ? -q : q);
  endfunction

  int cnt = 0, run_len = 0, slow_since_last_pixel = -1, frames_out = 0;

  always @(posedge clk_slow) begin
    if (!rst) begin
      if (slow_since_last_pixel >= 0) slow_since_last_pixel++;
      if (slope_valid) begin
        run_len++;
        cnt += ITER;
        check(pipe_out == PW'(cnt), "pipe_out");
        for (int l = 0; l < ITER; l++) begin
          check(x_slope[l] == exp_x.pop_front(), "x slope");
          check(y_slope[l] == exp_y.pop_front(), "y slope");
        end
        if (cnt == N * ROWS) begin
          cnt = 0;
          frames_out++;
          check(slow_since_last_pixel >= 0 && slow_since_last_pixel <= 20,
                $sformatf("frame slopes done %0d slope cycles after its last pixel", slow_since_last_pixel));
          slow_since_last_pixel = -1;
        end
      end else if (run_len != 0) begin
        check(run_len == G, $sformatf("row out in %0d cycles, want %0d", run_len, G));
        run_len = 0;
      end
    end
  end

  initial begin
    for (int f = 0; f < FRAMES; f++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          img[f][y][x] = pixel_t'($urandom_range(0, 300));
      for (int sr = 0; sr < ROWS; sr++)
        for (int sc = 0; sc < N; sc++) begin
          img[f][sr * P + $urandom_range(P - 1)][sc * P + $urandom_range(P - 1)] = pixel_t'($urandom_range(2000, 65535));
          exp_x.push_back(ref_slope(f, sr, sc, 1));
          exp_y.push_back(ref_slope(f, sr, sc, 0));
        end
    end
    wait (!rst);
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(posedge clk_pix);
          pix_en <= 1; pix_in <= img[f][y][x];
          if (y == H - 1 && x == W - 1) slow_since_last_pixel = 0;
        end
    @(posedge clk_pix) pix_en <= 0;
    wait (frames_out == FRAMES);
    repeat (8) @(posedge clk_slow);
    check(exp_x.size() == 0, "all slopes delivered");
    check(!overrun, "no overrun");
    check(fsm_state == ST_INIT, "FSM idle at the end");
    done = 1;
  end
endmodule
