// input_addr_cs: Input Addressing and Chip Select unit (pixel clock domain).
//
// Pixels arrive in raster order, one per pixel clock while pix_en is high,
// starting at the top-left pixel of the channel's frame after reset. The unit
// tracks the pixel's place in its subaperture and in the row of subapertures,
// and registers, together with the pixel, the BRAM bank it belongs to (a
// one-hot chip select) and the Port A address within that bank:
//
//   lane = subaperture column mod ITER      group = subaperture column / ITER
//   bank = lane*P*P + pixel_row_in_subap*P + pixel_col_in_subap
//   addr = half*(N/ITER) + group,   half = subaperture row mod 2
//
// So the P*P pixels of each of ITER neighbouring subapertures land in P*P*ITER
// different banks at one common address, and two rows of subapertures are
// buffered (the BRAM layout example of the design). Three flags come out with
// the write they belong to:
//   iter_shift     the last of ITER*P pixels of a line group is written
//                  (the address moves to the next group)
//   row_done       the last pixel of a row of subapertures is written
//   even_row_done  the same, for every second row; addressing restarts at 0.
// The layout and the three flags follow the design; the counter structure,
// the registered outputs (one cycle of latency) and the synchronous
// active-high reset are this implementation's choice. N must be a multiple
// of ITER; a frame is assumed to hold an even number of subaperture rows so
// that the addressing wraps cleanly at the end of a frame.
module input_addr_cs
  import wpu_pkg::*;
#(
  parameter int unsigned N    = DEF_N,
  parameter int unsigned P    = DEF_P,
  parameter int unsigned ITER = DEF_ITER,
  localparam int unsigned G     = N / ITER,
  localparam int unsigned DEPTH = 2 * G,
  localparam int unsigned NBANK = ITER * P * P,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk_pix,
  input  logic             rst,
  input  logic             pix_en,        // pixel enable from the sensor link
  input  pixel_t           pix_in,        // 16-bit pixel
  output logic             wr_en,
  output pixel_t           wr_data,
  output logic [AW-1:0]    wr_addr,       // Port A address
  output logic [NBANK-1:0] wr_cs,         // one-hot chip select
  output logic             iter_shift,
  output logic             row_done,
  output logic             even_row_done
);

  localparam int unsigned PCW = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned LW  = (ITER > 1) ? $clog2(ITER) : 1;
  localparam int unsigned GW  = (G > 1) ? $clog2(G) : 1;

  logic [PCW-1:0] pc;     // pixel column inside the subaperture
  logic [PCW-1:0] pr;     // pixel row inside the subaperture
  logic [LW-1:0]  lane;   // subaperture column mod ITER
  logic [GW-1:0]  grp;    // subaperture column / ITER
  logic           half;   // subaperture row mod 2

  logic last_pc, last_lane, last_grp, last_pr;
  assign last_pc   = (32'(pc)   == P - 1);
  assign last_lane = (32'(lane) == ITER - 1);
  assign last_grp  = (32'(grp)  == G - 1);
  assign last_pr   = (32'(pr)   == P - 1);

  logic [31:0] bank;
  assign bank = 32'(lane) * (P * P) + 32'(pr) * P + 32'(pc);

  always_ff @(posedge clk_pix) begin
    if (rst) begin
      pc            <= '0;
      pr            <= '0;
      lane          <= '0;
      grp           <= '0;
      half          <= 1'b0;
      wr_en         <= 1'b0;
      wr_data       <= '0;
      wr_addr       <= '0;
      wr_cs         <= '0;
      iter_shift    <= 1'b0;
      row_done      <= 1'b0;
      even_row_done <= 1'b0;
    end else begin
      wr_en         <= pix_en;
      iter_shift    <= 1'b0;
      row_done      <= 1'b0;
      even_row_done <= 1'b0;
      if (pix_en) begin
        wr_data <= pix_in;
        wr_addr <= AW'(32'(half) * G + 32'(grp));
        wr_cs   <= NBANK'(1) << bank;
        // advance the raster position
        if (!last_pc) begin
          pc <= pc + 1'b1;
        end else begin
          pc <= '0;
          if (!last_lane) begin
            lane <= lane + 1'b1;
          end else begin
            lane       <= '0;
            iter_shift <= 1'b1;
            if (!last_grp) begin
              grp <= grp + 1'b1;
            end else begin
              grp <= '0;
              if (!last_pr) begin
                pr <= pr + 1'b1;
              end else begin
                pr            <= '0;
                half          <= ~half;
                row_done      <= 1'b1;
                even_row_done <= half;
              end
            end
          end
        end
      end
    end
  end

  // A chip select is one-hot whenever a write is issued.
  always_ff @(posedge clk_pix) begin
    if (!rst && wr_en) begin
      assert ($onehot(wr_cs)) else $error("input_addr_cs: chip select not one-hot");
    end
  end

endmodule
