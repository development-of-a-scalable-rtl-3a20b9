// tb_cog_centroid: self-checking test of the centre-of-gravity unit, P = 4
// (default) and P = 8.
//
// Hand-worked cases first: a single lit pixel in a corner gives an offset of
// -(P-1)/2 pixels on both axes, a flat subaperture gives zero, a dark one
// gives zero. Then random subapertures: the expected slope is the real-valued
// centroid offset, computed here in floating point, and the unit's 8-bit
// fraction must lie within one least significant bit of it (truncation
// toward zero) and never round away from zero.
module tb_cog_centroid;
  import wpu_pkg::*;

  pixel_t pix4 [16];
  pixel_t pix8 [64];
  slope_t x4, y4, x8, y8;

  cog_centroid #(.P(4)) dut4 (.pix(pix4), .x_slope(x4), .y_slope(y4));
  cog_centroid #(.P(8)) dut8 (.pix(pix8), .x_slope(x8), .y_slope(y8));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // real centroid offset along one axis, in units of 1/256 pixel
  function automatic real ref_off(input int P, input pixel_t p [], input bit xaxis);
    real s, m;
    s = 0; m = 0;
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) begin
        s += p[r * P + c];
        m += p[r * P + c] * ((xaxis ? c : r) - (P - 1) / 2.0);
      end
    return (s == 0) ? 0.0 : 256.0 * m / s;
  endfunction

  task automatic check_close(input slope_t got, input real want, input string what);
    real d;
    d = real'(got) - want;
    // truncation toward zero: |got| <= |want| and within one step
    check((d > -1.0) && (d < 1.0) && ((want >= 0) ? (d <= 1e-9) : (d >= -1e-9)),
          $sformatf("%s got %0d want %f", what, got, want));
  endtask

  initial begin
    pixel_t dyn [];
    // single lit pixel in the top-left corner: offset -1.5 px = -384
    foreach (pix4[i]) pix4[i] = '0;
    pix4[0] = 16'd1000;
    #1 check(x4 == -16'sd384 && y4 == -16'sd384, "corner P=4");
    // pixel at row 2, column 3: x = +1.5 = 384, y = +0.5 = 128
    foreach (pix4[i]) pix4[i] = '0;
    pix4[2 * 4 + 3] = 16'd7;
    #1 check(x4 == 16'sd384 && y4 == 16'sd128, "row2 col3 P=4");
    // flat field
    foreach (pix4[i]) pix4[i] = 16'd500;
    #1 check(x4 == 0 && y4 == 0, "flat P=4");
    // dark
    foreach (pix4[i]) pix4[i] = '0;
    #1 check(x4 == 0 && y4 == 0, "dark P=4");
    // P = 8 corner (bottom right): +3.5 px = 896
    foreach (pix8[i]) pix8[i] = '0;
    pix8[63] = 16'hFFFF;
    #1 check(x8 == 16'sd896 && y8 == 16'sd896, "corner P=8");
    // two pixels of equal weight at columns 0 and 1 of row 0 (P=4):
    // x = -1.0 = -256, y = -1.5 = -384
    foreach (pix4[i]) pix4[i] = '0;
    pix4[0] = 16'd3; pix4[1] = 16'd3;
    #1 check(x4 == -16'sd256 && y4 == -16'sd384, "pair P=4");

    // random subapertures, including saturated ones
    for (int t = 0; t < 2000; t++) begin
      foreach (pix4[i]) pix4[i] = (t % 7 == 0) ? 16'hFFFF - pixel_t'($urandom_range(3)) : pixel_t'($urandom);
      foreach (pix8[i]) pix8[i] = pixel_t'($urandom_range(0, 4000));
      if (t % 5 == 0) pix4[$urandom_range(15)] = 16'hFFFF;
      #1;
      dyn = new[16]; foreach (pix4[i]) dyn[i] = pix4[i];
      check_close(x4, ref_off(4, dyn, 1), "x P=4");
      check_close(y4, ref_off(4, dyn, 0), "y P=4");
      dyn = new[64]; foreach (pix8[i]) dyn[i] = pix8[i];
      check_close(x8, ref_off(8, dyn, 1), "x P=8");
      check_close(y8, ref_off(8, dyn, 0), "y P=8");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
