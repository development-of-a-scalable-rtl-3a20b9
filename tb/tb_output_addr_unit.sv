// tb_output_addr_unit: self-checking test of the port B address sequencer at
// N = 16, ITER = 4 (G = 4 groups, 8 buffer words).
//
// Each start must be followed, from the next cycle on, by exactly G
// consecutive reads at half*G .. half*G+G-1 with rd_last on the final one,
// and then by idle cycles. A start during a readout must be ignored.
module tb_output_addr_unit;
  import wpu_pkg::*;

  localparam int N = 16, ITER = 4, G = N / ITER, AW = $clog2(2 * G);

  logic clk = 0, rst = 1, start = 0, half = 0;
  logic busy, rd_en, rd_last;
  logic [AW-1:0] rd_addr;

  output_addr_unit #(.N(N), .ITER(ITER)) dut (
    .clk_slow(clk), .rst, .start, .half, .busy, .rd_en, .rd_addr, .rd_last
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic run(input bit h, input bit poke);
    @(posedge clk);
    start <= 1; half <= h;
    @(posedge clk);
    start <= poke; half <= ~h;     // optional start during the readout
    for (int g = 0; g < G; g++) begin
      #1;
      check(rd_en && busy, $sformatf("read %0d issued", g));
      check(rd_addr == AW'(h * G + g), $sformatf("address %0d of half %0d", g, h));
      check(rd_last == (g == G - 1), "rd_last");
      @(posedge clk);
      start <= 0;
    end
    #1 check(!rd_en && !rd_last, "idle after the row");
    @(posedge clk);
    #1 check(!rd_en, "stays idle");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    #1 check(!rd_en, "idle after reset");
    run(0, 0);
    run(1, 0);
    run(0, 1);
    run(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
