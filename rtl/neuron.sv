// neuron: one reconfigurable binary neuron of the BinarEye array.
//
// The neuron keeps its weights locally: four 256-bit sub-neuron weight
// registers (1024 flip-flops) and a 9-bit signed bias, all written only on a
// load so that they act as clock-gated storage while a convolution runs.
// Sub-neurons 0 and 1 are written from ld_north, 2 and 3 from ld_south.
// Four sub_neuron instances see the four 64-channel quarters of the 2x2x256
// activation window.  As in Fig. 3 of the paper, their 8-bit counts are
// added pairwise into two 9-bit sums and then into one 10-bit sum, and the
// batch size S picks which of these feed the binary comparators:
//   S=1: one output,  out[0] = sum10        + bias >= 512
//   S=2: two outputs, out[m] = sum9[m]      + bias >= 256  (m = 0,1)
//   S=4: four outputs,out[m] = cnt[m]       + bias >= 128  (m = 0..3)
// The threshold N/2 (N = number of inputs) makes the rule equal to
// sign(A.W + 2*bias) in +/-1 arithmetic; the paper gives only
// "A_in . W + b = a_out" and a binary comparator, so this rule is this
// design's choice, as is sharing the one bias among the S outputs (they apply
// the same filter to S different maps).  Unused output bits are 0.
//
// Timing: ld_we/bias_we write on the rising clock edge; out_bits is
// combinational from the registers and win.
module neuron
  import binareye_pkg::*;
(
  input  logic                              clk,
  input  logic [SUBN-1:0]                   ld_we,
  input  logic [SN_IN-1:0]                  ld_north,
  input  logic [SN_IN-1:0]                  ld_south,
  input  logic                              bias_we,
  input  logic signed [BIAS_W-1:0]          bias_wdata,
  input  s_code_e                           s_code,
  input  logic [KK-1:0][CHANNELS-1:0]       win,
  output logic [SUBN-1:0]                   out_bits
);
  logic [SUBN-1:0][SN_IN-1:0] wreg;
  logic signed [BIAS_W-1:0]   bias;
  logic [SUBN-1:0][SN_IN-1:0] act;
  logic [SUBN-1:0][CNT_W-1:0] cnt;
  logic [1:0][CNT_W:0]        sum9;
  logic [CNT_W+1:0]           sum10;

  always_ff @(posedge clk) begin
    for (int j = 0; j < SUBN; j++)
      if (ld_we[j]) wreg[j] <= (j < SUBN/2) ? ld_north : ld_south;
    if (bias_we) bias <= bias_wdata;
  end

  // Sub-neuron j takes channels 64j..64j+63; input index k*64+c
  always_comb begin
    for (int j = 0; j < SUBN; j++)
      for (int k = 0; k < KK; k++)
        act[j][k*SN_CH +: SN_CH] = win[k][j*SN_CH +: SN_CH];
  end

  for (genvar j = 0; j < SUBN; j++) begin : g_sn
    sub_neuron u_sn (.act(act[j]), .wgt(wreg[j]), .cnt(cnt[j]));
  end

  assign sum9[0] = {1'b0, cnt[0]} + {1'b0, cnt[1]};
  assign sum9[1] = {1'b0, cnt[2]} + {1'b0, cnt[3]};
  assign sum10   = {1'b0, sum9[0]} + {1'b0, sum9[1]};

  // Comparators: signed 12-bit compare of count + bias against N/2
  function automatic logic cmp(input logic [CNT_W+1:0] s, input logic signed [BIAS_W-1:0] b,
                               input logic [12:0] half);
    logic signed [12:0] v;
    v = $signed({3'b000, s}) + 13'(b);
    return v >= $signed(half);
  endfunction

  always_comb begin
    out_bits = '0;
    case (s_code)
      S1: out_bits[0] = cmp(sum10, bias, 512);
      S2: begin
        out_bits[0] = cmp({1'b0, sum9[0]}, bias, 256);
        out_bits[1] = cmp({1'b0, sum9[1]}, bias, 256);
      end
      default:
        for (int m = 0; m < SUBN; m++) out_bits[m] = cmp({2'b00, cnt[m]}, bias, 128);
    endcase
  end

endmodule
