// tb_pixel_buffer: self-checking test of the dual-clock pixel buffer at
// N = 8, P = 2, ITER = 2 (8 banks of 8 words).
//
// Every (bank, address) is written through port A on a fast clock with a
// value drawn at random and remembered here; then every address is read on
// port B, on a clock 16 times slower, and all banks are compared with the
// remembered values. rd_valid must follow rd_en by exactly one slow cycle.
module tb_pixel_buffer;
  import wpu_pkg::*;

  localparam int N = 8, P = 2, ITER = 2;
  localparam int G = N / ITER, DEPTH = 2 * G, NBANK = ITER * P * P;
  localparam int AW = $clog2(DEPTH);

  logic clk_pix = 0, clk_slow = 0, rst_slow = 1;
  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [NBANK-1:0] wr_cs = '0;
  pixel_t wr_data = '0;
  pixel_t rd_data [NBANK];

  pixel_buffer #(.N(N), .P(P), .ITER(ITER)) dut (
    .clk_pix, .wr_en, .wr_addr, .wr_cs, .wr_data,
    .clk_slow, .rst_slow, .rd_en, .rd_addr, .rd_data, .rd_valid
  );

  always #5 clk_pix = ~clk_pix;
  always #80 clk_slow = ~clk_slow;

  int checks = 0, failures = 0;
  pixel_t model [NBANK][DEPTH];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk_slow);
    rst_slow <= 0;
    // fill every word through port A
    for (int a = 0; a < DEPTH; a++) begin
      for (int b = 0; b < NBANK; b++) begin
        pixel_t v;
        v = pixel_t'($urandom);
        model[b][a] = v;
        @(posedge clk_pix);
        wr_en <= 1; wr_addr <= AW'(a); wr_cs <= NBANK'(1) << b; wr_data <= v;
      end
    end
    @(posedge clk_pix) wr_en <= 0;
    // a write with no chip select must change nothing
    @(posedge clk_pix) begin wr_en <= 1; wr_cs <= '0; wr_addr <= '0; wr_data <= ~model[0][0]; end
    @(posedge clk_pix) wr_en <= 0;
    // read everything back through port B
    for (int a = DEPTH - 1; a >= 0; a--) begin
      @(posedge clk_slow);
      rd_en <= 1; rd_addr <= AW'(a);
      @(posedge clk_slow);
      rd_en <= 0;
      #1;
      check(rd_valid == 1'b1, "rd_valid one cycle after rd_en");
      for (int b = 0; b < NBANK; b++) check(rd_data[b] == model[b][a], $sformatf("bank %0d addr %0d", b, a));
      @(posedge clk_slow); #1;
      check(rd_valid == 1'b0, "rd_valid drops");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk_slow);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
