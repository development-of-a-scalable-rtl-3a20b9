// tb_slope_fsm: self-checking test of the slope state machine at N = 8,
// ITER = 2, ROWS = 4 (G = 4 groups per row, 16 slopes per frame here).
//
// The testbench plays the readout path: after each rd_start it returns G
// groups of random slopes, the last one tagged, after a delay of 2 cycles.
// Checked: rd_start only after a row_done, in ST_INIT; rd_half alternates with
// the row number; each group's slopes appear one cycle later with
// slope_valid; pipe_out counts 2, 4, ... 16 and starts again each frame;
// slope_done ends every row and the machine returns to ST_INIT. A row_done
// that arrives mid-row must be served afterwards, and three rows with none
// served must raise the overrun flag.
module tb_slope_fsm;
  import wpu_pkg::*;

  localparam int N = 8, ITER = 2, ROWS = 4, G = N / ITER;
  localparam int PW = $clog2(N * ROWS + 1);

  logic clk = 0, rst = 1, row_done = 0;
  logic rd_start, rd_half, in_valid = 0, in_last = 0;
  slope_t x_in [ITER], y_in [ITER], x_slope [ITER], y_slope [ITER];
  logic slope_valid, slope_done, overrun;
  logic [PW-1:0] pipe_out;
  slope_state_t state;

  slope_fsm #(.N(N), .ITER(ITER), .ROWS(ROWS)) dut (
    .clk_slow(clk), .rst, .row_done, .rd_start, .rd_half,
    .in_valid, .in_last, .x_in, .y_in,
    .x_slope, .y_slope, .slope_valid, .pipe_out, .slope_done,
    .state, .row_pending_overrun(overrun)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int starts = 0, rows_served = 0, n_valid = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (row %0d)", what, rows_served);
    end
  endtask

  // readout path model: G groups, 2 cycles after rd_start
  slope_t exp_x [$], exp_y [$];
  initial begin
    foreach (x_in[i]) begin x_in[i] = '0; y_in[i] = '0; end
    forever begin
      @(posedge clk);
      if (rd_start) begin
        check(state == ST_INIT, "rd_start in ST_INIT");
        check(rd_half == starts[0], "rd_half alternates");
        starts++;
        @(posedge clk);
        for (int g = 0; g < G; g++) begin
          @(posedge clk);
          in_valid <= 1; in_last <= (g == G - 1);
          foreach (x_in[i]) begin
            slope_t a, b;
            a = slope_t'($urandom); b = slope_t'($urandom);
            x_in[i] <= a; y_in[i] <= b;
            exp_x.push_back(a); exp_y.push_back(b);
          end
        end
        @(posedge clk);
        in_valid <= 0; in_last <= 0;
      end
    end
  end

  // output checker
  int cnt_in_frame = 0;
  always @(posedge clk) begin
    if (!rst && slope_valid) begin
      n_valid++;
      cnt_in_frame += ITER;
      check(pipe_out == PW'(cnt_in_frame), $sformatf("pipe_out %0d want %0d", pipe_out, cnt_in_frame));
      foreach (x_slope[i]) begin
        check(x_slope[i] == exp_x.pop_front(), "x slope");
        check(y_slope[i] == exp_y.pop_front(), "y slope");
      end
      if (cnt_in_frame == N * ROWS) cnt_in_frame = 0;
    end
    if (!rst && slope_done) begin
      rows_served++;
      check(n_valid == G * rows_served, "G groups per row");
    end
  end

  task automatic pulse_row_done();
    @(posedge clk) row_done <= 1;
    @(posedge clk) row_done <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    #1 check(state == ST_INIT && !rd_start, "idle without row_done");
    // two frames of rows, spaced out
    for (int r = 0; r < 2 * ROWS; r++) begin
      pulse_row_done();
      repeat (12) @(posedge clk);
      #1 check(state == ST_INIT, "back in ST_INIT");
      check(rows_served == r + 1, "row served");
    end
    // a row_done arriving while a row is computed is held
    pulse_row_done();
    repeat (3) @(posedge clk);
    #1 check(state == ST_CENTROID, "in ST_CENTROID");
    pulse_row_done();
    repeat (20) @(posedge clk);
    #1 check(rows_served == 2 * ROWS + 2, "held row_done served");
    check(!overrun, "no overrun yet");
    // three rows arriving together overrun the single held request
    pulse_row_done(); pulse_row_done(); pulse_row_done();
    repeat (30) @(posedge clk);
    #1 check(overrun, "overrun flagged");
    check(exp_x.size() == 0, "all slopes delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
