// neuron_array: the 64-neuron binary compute array of BinarEye.
//
// All 64 neurons receive the same 2x2x256 activation window and work in
// parallel, each with its own locally stored weights (paper, Sec. II).  The
// weights are written through a load bus during the LD phase: one neuron per
// two cycles.  With ld_half=0 the north word goes to sub-neuron 0 and the
// south word to sub-neuron 2, with ld_half=1 to sub-neurons 1 and 3; the bias
// is written when ld_bias_en is set.  The load-bus organisation is this
// design's choice; the paper says only that the weights come from the north
// and south SRAMs.
//
// Timing: out_bits is registered, one cycle after the window it belongs to.
module neuron_array
  import binareye_pkg::*;
(
  input  logic                              clk,
  input  logic                              ld_en,
  input  logic [5:0]                        ld_idx,
  input  logic                              ld_half,
  input  logic [SN_IN-1:0]                  ld_north,
  input  logic [SN_IN-1:0]                  ld_south,
  input  logic                              ld_bias_en,
  input  logic signed [BIAS_W-1:0]          ld_bias,
  input  s_code_e                           s_code,
  input  logic [KK-1:0][CHANNELS-1:0]       win,
  output logic [NEURONS-1:0][SUBN-1:0]      out_bits
);
  logic [NEURONS-1:0][SUBN-1:0] o;

  for (genvar n = 0; n < NEURONS; n++) begin : g_n
    logic            sel;
    logic [SUBN-1:0] we;
    assign sel = (ld_idx == 6'(n));
    assign we  = (ld_en && sel) ? (ld_half ? 4'b1010 : 4'b0101) : 4'b0000;
    neuron u_neuron (
      .clk       (clk),
      .ld_we     (we),
      .ld_north  (ld_north),
      .ld_south  (ld_south),
      .bias_we   (ld_bias_en && sel),
      .bias_wdata(ld_bias),
      .s_code    (s_code),
      .win       (win),
      .out_bits  (o[n])
    );
  end

  always_ff @(posedge clk) out_bits <= o;

endmodule
