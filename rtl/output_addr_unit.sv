// output_addr_unit: Output Addressing Unit (slope clock domain).
//
// On a start pulse it reads out one row of subapertures from the pixel
// buffer: it issues the Port B addresses half*G .. half*G + G - 1, one per
// cycle (G = N/ITER groups of ITER subapertures), and flags the last one.
// `half` selects which of the two buffered rows is read (subaperture row mod
// 2). A start while a readout is running is ignored. The address sequence
// follows from the buffer layout of the design; the start/busy handshake is
// this implementation's choice. The first address is presented in the cycle
// after the start pulse.
module output_addr_unit
  import wpu_pkg::*;
#(
  parameter int unsigned N    = DEF_N,
  parameter int unsigned ITER = DEF_ITER,
  localparam int unsigned G     = N / ITER,
  localparam int unsigned DEPTH = 2 * G,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned GW    = (G > 1) ? $clog2(G) : 1
) (
  input  logic          clk_slow,
  input  logic          rst,
  input  logic          start,
  input  logic          half,
  output logic          busy,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  output logic          rd_last
);

  logic [GW-1:0] grp;
  logic          half_r;
  logic          last_grp;

  assign last_grp = (32'(grp) == G - 1);

  always_ff @(posedge clk_slow) begin
    if (rst) begin
      busy   <= 1'b0;
      grp    <= '0;
      half_r <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        busy   <= 1'b1;
        grp    <= '0;
        half_r <= half;
      end
    end else if (last_grp) begin
      busy <= 1'b0;
      grp  <= '0;
    end else begin
      grp <= grp + 1'b1;
    end
  end

  assign rd_en   = busy;
  assign rd_addr = AW'(32'(half_r) * G + 32'(grp));
  assign rd_last = busy && last_grp;

endmodule
