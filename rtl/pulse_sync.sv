// pulse_sync: carries a single-cycle pulse from one clock domain to another.
//
// The source pulse flips a toggle register; the destination passes the toggle
// through two flip-flops and turns each change back into a one-cycle pulse,
// two to three destination cycles later. Pulses must be spaced by more than
// three destination cycles, which holds for the row flags of the pixel
// buffer (a row of subapertures takes far longer to arrive than that).
module pulse_sync (
  input  logic clk_src,
  input  logic rst_src,
  input  logic pulse_src,
  input  logic clk_dst,
  input  logic rst_dst,
  output logic pulse_dst
);

  logic       tog_src;
  logic [2:0] sync_dst;

  always_ff @(posedge clk_src) begin
    if (rst_src)        tog_src <= 1'b0;
    else if (pulse_src) tog_src <= ~tog_src;
  end

  always_ff @(posedge clk_dst) begin
    if (rst_dst) sync_dst <= '0;
    else         sync_dst <= {sync_dst[1:0], tog_src};
  end

  assign pulse_dst = sync_dst[2] ^ sync_dst[1];

endmodule
