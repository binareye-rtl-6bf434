// act_window: the activation buffer at the edge of the neuron array.
//
// A 2x2 convolution window moving one step to the right shares two of its
// four pixels with the previous step, so only one new column of two pixels
// (x+1,y) and (x+1,y+1) is fetched per step; the paper gives this reuse.
// The buffer is four 256-bit pixel registers.  On `shift` the right column
// moves to the left and the two new pixels enter the right column.
//
// Interface: win[k] is the pixel at kernel position k = 2*dy + dx
// (k=0 top-left, 1 top-right, 2 bottom-left, 3 bottom-right).  The position
// numbering is this design's choice.  Updates on the rising clock edge.
module act_window
  import binareye_pkg::*;
(
  input  logic                        clk,
  input  logic                        shift,
  input  logic [CHANNELS-1:0]         top_in,
  input  logic [CHANNELS-1:0]         bot_in,
  output logic [KK-1:0][CHANNELS-1:0] win
);
  always_ff @(posedge clk) begin
    if (shift) begin
      win[0] <= win[1];
      win[2] <= win[3];
      win[1] <= top_in;
      win[3] <= bot_in;
    end
  end
endmodule
