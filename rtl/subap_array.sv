// subap_array: the Subaperture array between the pixel buffer and the
// centroid units (slope clock domain).
//
// When `load` is high it captures the NBANK = ITER*P*P words just read from
// the buffer and regroups them as ITER subapertures of P*P pixels in row-major
// order (bank lane*P*P + r*P + c holds pixel (r, c) of subaperture `lane`).
// It also carries the read's `last` tag and counts the groups of the current
// row, so that each loaded set is tagged with the index of its first
// subaperture in the row. One cycle of latency. The block and its name come
// from the design; its exact contents (a pipeline register with tags) are
// this implementation's choice.
module subap_array
  import wpu_pkg::*;
#(
  parameter int unsigned P    = DEF_P,
  parameter int unsigned ITER = DEF_ITER,
  localparam int unsigned NBANK = ITER * P * P
) (
  input  logic          clk_slow,
  input  logic          rst,
  input  logic          load,
  input  logic          load_last,
  input  pixel_t        rd_data [NBANK],
  output pixel_t        subap   [ITER][P*P],
  output logic          valid,
  output logic          last
);

  always_ff @(posedge clk_slow) begin
    if (rst) begin
      valid <= 1'b0;
      last  <= 1'b0;
    end else begin
      valid <= load;
      last  <= load && load_last;
    end
  end

  always_ff @(posedge clk_slow) begin
    if (load) begin
      for (int l = 0; l < ITER; l++) begin
        for (int k = 0; k < P * P; k++) begin
          subap[l][k] <= rd_data[l * P * P + k];
        end
      end
    end
  end

endmodule
