// tb_subap_array: self-checking test of the subaperture array at P = 4,
// ITER = 2 (32 buffer banks).
//
// Random bank words are loaded; one cycle later subaperture l, pixel
// (r, c) must hold bank l*16 + r*4 + c, valid and last must follow load and
// load_last by one cycle, and the array must hold its contents while load is
// low.
module tb_subap_array;
  import wpu_pkg::*;

  localparam int P = 4, ITER = 2, NBANK = ITER * P * P;

  logic clk = 0, rst = 1, load = 0, load_last = 0, valid, last;
  pixel_t rd_data [NBANK];
  pixel_t subap [ITER][P*P];
  pixel_t ref_words [NBANK];

  subap_array #(.P(P), .ITER(ITER)) dut (
    .clk_slow(clk), .rst, .load, .load_last, .rd_data, .subap, .valid, .last
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

  task automatic check_contents();
    for (int l = 0; l < ITER; l++)
      for (int r = 0; r < P; r++)
        for (int c = 0; c < P; c++)
          check(subap[l][r * P + c] == ref_words[l * 16 + r * 4 + c],
                $sformatf("lane %0d pixel (%0d,%0d)", l, r, c));
  endtask

  initial begin
    foreach (rd_data[i]) rd_data[i] = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 20; t++) begin
      bit lst;
      lst = (t % 4 == 3);
      @(posedge clk);
      foreach (rd_data[i]) begin
        ref_words[i] = pixel_t'($urandom);
        rd_data[i] <= ref_words[i];
      end
      load <= 1; load_last <= lst;
      @(posedge clk);
      load <= 0; load_last <= 0;
      foreach (rd_data[i]) rd_data[i] <= pixel_t'($urandom);   // must not be taken
      #1;
      check(valid, "valid after load");
      check(last == lst, "last follows load_last");
      check_contents();
      @(posedge clk); #1;
      check(!valid && !last, "valid drops");
      check_contents();
    end
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
