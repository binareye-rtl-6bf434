// maxpool: streamed 2x2 / stride-2 max pooling of binary conv outputs.
//
// The paper states that CNN instructions support streamed max pooling; the
// feature-map sizes it lists (29x29 pooled to 14x14, 13x13 to 6x6) imply a
// 2x2 window with stride 2 that drops an odd last row or column.  With +1
// coded as 1 and -1 as 0, the maximum of binary values is their OR.
//
// Conv outputs arrive in raster order (x fastest).  An output at even x is
// kept in a register; at odd x it is ORed with that register.  On even rows
// the pair result goes into a row buffer of MAXDIM/2 entries; on odd rows it
// is ORed with the buffer entry and sent out as the pooled pixel
// (x/2, y/2).  Outputs without a partner (odd last column or row) are never
// sent.  The row-buffer organisation is this design's choice.
//
// Interface: in_* is one conv output pixel (data and channel mask), out_*
// one pooled pixel.  out_* is registered: one cycle after the input that
// completes the 2x2 block.  The mask is passed through with the data.
module maxpool
  import binareye_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [XY_W-1:0]     in_x,
  input  logic [XY_W-1:0]     in_y,
  input  logic [CHANNELS-1:0] in_data,
  input  logic [CHANNELS-1:0] in_mask,
  output logic                out_valid,
  output logic [XY_W-1:0]     out_x,
  output logic [XY_W-1:0]     out_y,
  output logic [CHANNELS-1:0] out_data,
  output logic [CHANNELS-1:0] out_mask
);
  logic [CHANNELS-1:0] hreg;
  logic [CHANNELS-1:0] rowbuf [MAXDIM/2];
  logic [CHANNELS-1:0] pair;
  logic [XY_W-2:0]     px;

  assign pair = hreg | in_data;
  assign px   = in_x[XY_W-1:1];

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (!in_x[0]) hreg <= in_data;
      else if (!in_y[0]) rowbuf[px] <= pair;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
      out_data  <= '0;
      out_mask  <= '0;
    end else begin
      out_valid <= in_valid && in_x[0] && in_y[0];
      if (in_valid && in_x[0] && in_y[0]) begin
        out_x    <= XY_W'(px);
        out_y    <= XY_W'(in_y[XY_W-1:1]);
        out_data <= pair | rowbuf[px];
        out_mask <= in_mask;
      end
    end
  end
endmodule
