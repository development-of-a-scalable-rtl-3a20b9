// bram_bank: one simple dual-port, dual-clock block RAM (one BRAM18 of the
// pixel buffer).
//
// Port A writes WIDTH-bit words in the write clock domain; port B reads in
// the read clock domain with one cycle of latency (registered output, as a
// block RAM's output latch). The two ports share nothing but the array, so
// the bank is the boundary between the pixel clock and the slope clock.
// Reading a word while it is being written is not defined; the addressing
// keeps the two ports on different halves of the buffer.
module bram_bank #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk_a,
  input  logic             we_a,
  input  logic [AW-1:0]    addr_a,
  input  logic [WIDTH-1:0] din_a,
  input  logic             clk_b,
  input  logic             re_b,
  input  logic [AW-1:0]    addr_b,
  output logic [WIDTH-1:0] dout_b
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_a) begin
    if (we_a) mem[addr_a] <= din_a;
  end

  always_ff @(posedge clk_b) begin
    if (re_b) dout_b <= mem[addr_b];
  end

endmodule
