// io_input: the input layer (IO instruction) of BinarEye.
//
// The chip takes its input map over a 16-bit port (paper, Fig. 2).  The
// paper does not say how the 7-bit RGB image becomes the 256 binary channels
// the first CNN layer reads; here the host sends those 256 bits per pixel
// itself, as 16 beats of 16 bits, channel 0 in bit 0 of the first beat.  The
// pixels come in raster order (x fastest) for a w x h map.  Each beat is
// written straight into the activation SRAM through the masked write port.
//
// Interface: start (one cycle, while idle) latches w and h.  in_valid /
// in_ready is a valid-ready handshake; in_ready is high while the map is not
// complete.  Each accepted beat gives one wr_* write in the same cycle.
// done pulses one cycle after the last beat.
module io_input
  import binareye_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [DIM_W-1:0]    w,
  input  logic [DIM_W-1:0]    h,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [IN_W-1:0]     in_data,
  output logic                wr_en,
  output logic [XY_W-1:0]     wr_x,
  output logic [XY_W-1:0]     wr_y,
  output logic [CHANNELS-1:0] wr_mask,
  output logic [CHANNELS-1:0] wr_data,
  output logic                done
);
  localparam int unsigned BEATS = CHANNELS / IN_W;  // 16

  logic                     active;
  logic [DIM_W-1:0]         w_q, h_q;
  logic [XY_W-1:0]          x, y;
  logic [$clog2(BEATS)-1:0] beat;
  logic                     fire, last;

  assign in_ready = active;
  assign fire     = in_valid && active;
  assign last     = (&beat) && (DIM_W'(x) == w_q - 1) && (DIM_W'(y) == h_q - 1);

  assign wr_en   = fire;
  assign wr_x    = x;
  assign wr_y    = y;
  assign wr_data = {BEATS{in_data}};
  assign wr_mask = {{(CHANNELS - IN_W){1'b0}}, {IN_W{1'b1}}} << (IN_W * beat);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      done   <= 1'b0;
      w_q    <= '0;
      h_q    <= '0;
      x      <= '0;
      y      <= '0;
      beat   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active <= 1'b1;
        w_q    <= w;
        h_q    <= h;
        x      <= '0;
        y      <= '0;
        beat   <= '0;
      end else if (fire) begin
        beat <= beat + 1'b1;
        if (&beat) begin
          if (DIM_W'(x) == w_q - 1) begin
            x <= '0;
            y <= y + 1'b1;
          end else begin
            x <= x + 1'b1;
          end
        end
        if (last) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end
endmodule
