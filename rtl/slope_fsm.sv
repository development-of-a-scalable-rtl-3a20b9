// slope_fsm: the Slope FSM (slope clock domain).
//
// Two states. In ST_INIT the machine waits until a row of subapertures is
// complete in the pixel buffer (row_done, already brought into this clock
// domain). It then pulses rd_start, with rd_half = row number mod 2 naming the
// buffer half to read, and moves to ST_CENTROID. There it registers the ITER
// x-slopes and ITER y-slopes that the centroid units deliver each cycle
// (in_valid), raises slope_valid with them and advances pipe_out, the number
// of slopes of the current frame computed so far. On the last group of the row
// (in_last) it pulses slope_done and returns to ST_INIT. After ROWS rows the
// frame is complete: the next row starts pipe_out again from ITER.
// A row_done that arrives during ST_CENTROID is held and served next.
//
// The two states, their triggers (row_done, slope_done), ITER slopes per
// cycle and pipe_out are the design's; the held request, the per-frame count
// and the exact output timing are this implementation's choices. Outputs are
// registered: a group's slopes appear one cycle after in_valid.
module slope_fsm
  import wpu_pkg::*;
#(
  parameter int unsigned N    = DEF_N,
  parameter int unsigned ITER = DEF_ITER,
  parameter int unsigned ROWS = DEF_N,            // subaperture rows per frame
  localparam int unsigned PW  = $clog2(N * ROWS + 1),
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk_slow,
  input  logic          rst,
  input  logic          row_done,
  // readout request to the output addressing unit
  output logic          rd_start,
  output logic          rd_half,
  // slopes from the centroid units
  input  logic          in_valid,
  input  logic          in_last,
  input  slope_t        x_in [ITER],
  input  slope_t        y_in [ITER],
  // to the AO reconstructor
  output slope_t        x_slope [ITER],
  output slope_t        y_slope [ITER],
  output logic          slope_valid,
  output logic [PW-1:0] pipe_out,
  output logic          slope_done,
  output slope_state_t  state,
  output logic          row_pending_overrun   // a third row arrived before the first was served
);

  logic          pending;
  logic [RW-1:0] row_cnt;
  logic          first_grp;

  assign rd_start = (state == ST_INIT) && pending;
  assign rd_half  = row_cnt[0];

  always_ff @(posedge clk_slow) begin
    if (rst) begin
      state               <= ST_INIT;
      pending             <= 1'b0;
      row_cnt             <= '0;
      first_grp           <= 1'b0;
      slope_valid         <= 1'b0;
      slope_done          <= 1'b0;
      pipe_out            <= '0;
      row_pending_overrun <= 1'b0;
    end else begin
      slope_valid <= 1'b0;
      slope_done  <= 1'b0;

      if (row_done) begin
        pending <= 1'b1;
        if (pending && !rd_start) row_pending_overrun <= 1'b1;
      end else if (rd_start) begin
        pending <= 1'b0;
      end

      unique case (state)
        ST_INIT: begin
          if (pending) begin
            state     <= ST_CENTROID;
            first_grp <= (row_cnt == '0);
          end
        end
        ST_CENTROID: begin
          if (in_valid) begin
            slope_valid <= 1'b1;
            first_grp   <= 1'b0;
            pipe_out    <= first_grp ? PW'(ITER) : pipe_out + PW'(ITER);
            if (in_last) begin
              slope_done <= 1'b1;
              state      <= ST_INIT;
              row_cnt    <= (32'(row_cnt) == ROWS - 1) ? '0 : row_cnt + 1'b1;
            end
          end
        end
        default: state <= ST_INIT;
      endcase
    end
  end

  always_ff @(posedge clk_slow) begin
    if (state == ST_CENTROID && in_valid) begin
      x_slope <= x_in;
      y_slope <= y_in;
    end
  end

  // Slopes only come while a row is being computed.
  always_ff @(posedge clk_slow) begin
    if (!rst && in_valid) begin
      assert (state == ST_CENTROID) else $error("slope_fsm: slopes outside ST_CENTROID");
    end
  end

endmodule
