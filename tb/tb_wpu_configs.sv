// tb_wpu_configs: runs one WPU channel at each pixel-per-subaperture and
// subaperture-count pairing of the single-channel resource table of the
// source design, each with one of its slopes-per-cycle values:
//   N = 32, P = 4, ITER = 4     (128 x 128 pixels)
//   N = 32, P = 8, ITER = 8     (256 x 256 pixels)
//   N = 64, P = 4, ITER = 32    (256 x 256 pixels)
//   N = 64, P = 8, ITER = 8     (512 x 512 pixels)
// Each channel receives one full frame at one pixel per 7.629 ns pixel
// clock, with the slope clock at 1/16 of it, and every slope is checked
// (see wpu_frame_check). The four run in parallel on shared clocks.
module tb_wpu_configs;
  import wpu_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam realtime T_PIX = 7.629ns;
  localparam int NCFG = 4;

  logic clk_pix = 0, clk_slow = 0, rst = 1;
  logic done [NCFG];
  int   ck [NCFG], fl [NCFG];

  always #(T_PIX / 2) clk_pix = ~clk_pix;
  always #(T_PIX * CLK_RATIO / 2) clk_slow = ~clk_slow;

  wpu_frame_check #(.N(32), .P(4), .ITER(4))  u_c0 (.clk_pix, .clk_slow, .rst, .done(done[0]), .checks(ck[0]), .failures(fl[0]));
  wpu_frame_check #(.N(32), .P(8), .ITER(8))  u_c1 (.clk_pix, .clk_slow, .rst, .done(done[1]), .checks(ck[1]), .failures(fl[1]));
  wpu_frame_check #(.N(64), .P(4), .ITER(32)) u_c2 (.clk_pix, .clk_slow, .rst, .done(done[2]), .checks(ck[2]), .failures(fl[2]));
  wpu_frame_check #(.N(64), .P(8), .ITER(8))  u_c3 (.clk_pix, .clk_slow, .rst, .done(done[3]), .checks(ck[3]), .failures(fl[3]));

  int checks = 0, failures = 0;

  initial begin
    repeat (4) @(posedge clk_slow);
    @(posedge clk_pix) rst <= 0;
    for (int i = 0; i < NCFG; i++) wait (done[i]);
    for (int i = 0; i < NCFG; i++) begin
      $display("configuration %0d: checks=%0d failures=%0d", i, ck[i], fl[i]);
      checks += ck[i]; failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(T_PIX * (512 * 512 + 20000));
    for (int i = 0; i < NCFG; i++) begin checks += ck[i]; failures += fl[i]; end
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
