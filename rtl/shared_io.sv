// shared_io: column decoder and shared off-chip interface of all planes.
//
// After every D-BAM read each plane's page buffer holds one result bit per
// bitline. On start this unit walks the planes in turn and, within a plane,
// the column addresses 0..COLS-1 (one column = IO_W bitlines). It drives the
// column address to all page buffers, picks the current plane's word and
// presents it on a valid/ready bus with its row index
// row = plane*COLS + column, which names the IO_W references it holds. A word
// moves when out_valid and out_ready are both high; done pulses one cycle
// after the last word moved. A transfer of a full page set takes
// PLANES*COLS cycles when out_ready stays high.
//
// The shared interface and the time-multiplexed column path are the paper's
// (Fig. 3, Sec. III-B); the bus width, the plane-major order and the
// handshake are this design's choices.
module shared_io #(
  parameter int unsigned PLANES = 23,
  parameter int unsigned BL     = 5462,
  parameter int unsigned IO_W   = 64,
  localparam int unsigned COLS  = (BL + IO_W - 1) / IO_W,
  localparam int unsigned CAW   = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned PAW   = (PLANES > 1) ? $clog2(PLANES) : 1,
  localparam int unsigned ROWS  = PLANES * COLS,
  localparam int unsigned RAW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            done,
  // to the page buffers
  output logic [CAW-1:0]  col,
  input  logic [IO_W-1:0] pb_dout [PLANES],
  // to the external accumulator
  output logic            out_valid,
  input  logic            out_ready,
  output logic [RAW-1:0]  out_row,
  output logic [IO_W-1:0] out_data
);

  logic [PAW-1:0] plane;
  logic [CAW-1:0] col_q;
  logic           active;

  assign busy      = active;
  assign col       = active ? col_q : '0;
  assign out_valid = active;
  assign out_data  = pb_dout[plane];
  assign out_row   = RAW'(int'(plane) * COLS + int'(col_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      plane  <= '0;
      col_q  <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          active <= 1'b1;
          plane  <= '0;
          col_q  <= '0;
        end
      end else if (out_ready) begin
        if (int'(col_q) == COLS - 1) begin
          col_q <= '0;
          if (int'(plane) == PLANES - 1) begin
            active <= 1'b0;
            done   <= 1'b1;
          end else begin
            plane <= plane + 1'b1;
          end
        end else begin
          col_q <= col_q + 1'b1;
        end
      end
    end
  end

  // A valid word must stay put until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_row);
  endproperty
  assert property (p_hold) else $error("shared_io: word dropped before it was taken");

endmodule
