// tb_input_addr_cs: self-checking test of the input addressing and chip
// select unit at N = 8, P = 4, ITER = 2 (the buffer layout example, scaled to
// eight subapertures per row).
//
// Two frames of 32 x 32 pixels are streamed in raster order with random gaps
// in pix_en. For every write the unit issues, the expected bank, address and
// flags are worked out from the pixel's (row, column) by division, not by
// counters, and compared. The flag counts over the two frames are checked.
module tb_input_addr_cs;
  import wpu_pkg::*;

  localparam int N = 8, P = 4, ITER = 2;
  localparam int G = N / ITER, NBANK = ITER * P * P, W = N * P;
  localparam int AW = $clog2(2 * G);

  logic clk = 0, rst = 1, pix_en = 0;
  pixel_t pix_in = '0;
  logic wr_en, iter_shift, row_done, even_row_done;
  pixel_t wr_data;
  logic [AW-1:0] wr_addr;
  logic [NBANK-1:0] wr_cs;

  input_addr_cs #(.N(N), .P(P), .ITER(ITER)) dut (
    .clk_pix(clk), .rst, .pix_en, .pix_in,
    .wr_en, .wr_data, .wr_addr, .wr_cs, .iter_shift, .row_done, .even_row_done
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int k = 0;               // index of the next expected write
  int n_row_done = 0, n_even = 0, n_shift = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at pixel %0d", what, k);
    end
  endtask

  // reference model of the address map
  always @(posedge clk) begin
    if (!rst && wr_en) begin
      int r, c, sr, pr, sc, pc, lane, grp, bank, addr;
      bit exp_shift, exp_row, exp_even;
      r = (k / W) % W;  c = k % W;
      sr = r / P; pr = r % P; sc = c / P; pc = c % P;
      lane = sc % ITER; grp = sc / ITER;
      bank = lane * P * P + pr * P + pc;
      addr = (sr % 2) * G + grp;
      exp_shift = ((c + 1) % (ITER * P)) == 0;
      exp_row   = (c == W - 1) && (pr == P - 1);
      exp_even  = exp_row && (sr % 2 == 1);
      check(wr_data == pixel_t'(k * 37 + 5), "data");
      check(wr_addr == AW'(addr), "addr");
      check(wr_cs == (NBANK'(1) << bank), "chip select");
      check(iter_shift == exp_shift, "iter_shift");
      check(row_done == exp_row, "row_done");
      check(even_row_done == exp_even, "even_row_done");
      n_row_done += row_done; n_even += even_row_done; n_shift += iter_shift;
      k++;
    end else if (!rst) begin
      check(!row_done && !even_row_done && !iter_shift, "flag without write");
    end
  end

  initial begin
    int sent = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    while (sent < 2 * W * W) begin
      @(posedge clk);
      if ($urandom_range(3) != 0) begin
        pix_en <= 1; pix_in <= pixel_t'(sent * 37 + 5); sent++;
      end else begin
        pix_en <= 0;
      end
    end
    @(posedge clk) pix_en <= 0;
    repeat (4) @(posedge clk);
    check(k == 2 * W * W, "write count");
    check(n_row_done == 2 * N, "row_done count");
    check(n_even == N, "even_row_done count");
    check(n_shift == 2 * W * W / (ITER * P), "iter_shift count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
