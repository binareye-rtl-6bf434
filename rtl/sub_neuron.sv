// sub_neuron: one quarter of a BinarEye neuron.
//
// It forms the binary dot product of 64 channels x 2x2 kernel positions:
// 256 XNOR gates compare activation and weight bits (+1 coded as 1, -1 as 0)
// and a bit count adds up the agreeing pairs.  The XNOR-and-count structure
// and the 8-bit output width are the paper's (Fig. 2 and Fig. 3).  A count of
// 256 inputs can reach 256, one more than 8 bits hold; this design saturates
// the count at 255, which only clips the case in which every pair agrees.
//
// Interface: act and wgt are 256-bit vectors indexed k*64+c (kernel position
// k = 2*dy+dx, channel c of the sub-neuron); the order only has to match
// between the two.  cnt is combinational.
module sub_neuron
  import binareye_pkg::*;
#(
  parameter int unsigned N_IN  = SN_IN,
  parameter int unsigned OUT_W = binareye_pkg::CNT_W
) (
  input  logic [N_IN-1:0]  act,
  input  logic [N_IN-1:0]  wgt,
  output logic [OUT_W-1:0] cnt
);
  localparam int unsigned FULL_W = $clog2(N_IN + 1);
  localparam logic [FULL_W-1:0] SAT = FULL_W'((1 << OUT_W) - 1);

  logic [N_IN-1:0]   agree;
  logic [FULL_W-1:0] full;

  assign agree = ~(act ^ wgt);   // XNOR = product of two +/-1 values

  assign full = FULL_W'($countones(agree));

  assign cnt = (full > SAT) ? OUT_W'(SAT) : OUT_W'(full);

endmodule
