// binareye_pkg: constants, types and small functions shared by the BinarEye
// binary-CNN processor.
//
// The array holds 64 neurons; each neuron is split into 4 sub-neurons of
// 64 channels x 2x2 kernel positions, so one neuron sees all 256 channels of a
// 2x2 activation patch.  The batch size S (1, 2 or 4) decides how the
// sub-neuron counts are combined: S=1 gives one 256x2x2 dot product per neuron,
// S=2 two 128x2x2 products on two maps, S=4 four 64x2x2 products on four maps.
// These numbers follow the paper.  The instruction encoding below (field
// order and widths) is this design's own: the paper lists only the fields an
// instruction carries (IO: S, WxH; CNN: S, pooling, WxH; FC: S, WxH, #labels)
// and a 16-entry program memory.
package binareye_pkg;

  localparam int unsigned NEURONS    = 64;   // neurons in the array
  localparam int unsigned SUBN       = 4;    // sub-neurons per neuron
  localparam int unsigned SN_CH      = 64;   // channels per sub-neuron
  localparam int unsigned KK         = 4;    // 2x2 kernel positions
  localparam int unsigned CHANNELS   = SUBN * SN_CH;  // 256
  localparam int unsigned SN_IN      = SN_CH * KK;    // 256 inputs per sub-neuron
  localparam int unsigned CNT_W      = 8;    // sub-neuron count width (Fig. 3)
  localparam int unsigned BIAS_W     = 9;    // neuron bias width (Fig. 2)
  localparam int unsigned MAXDIM     = 32;   // largest W or H
  localparam int unsigned XY_W       = 5;    // coordinate width (0..31)
  localparam int unsigned DIM_W      = 6;    // size width (1..32)
  localparam int unsigned PM_DEPTH   = 16;   // program memory entries
  localparam int unsigned IN_W       = 16;   // input port width
  localparam int unsigned LABEL_W    = 4;    // label port width
  localparam int unsigned MAX_CLASSES = 10;  // FC classes

  // Memory geometry (word widths are this design's choice, sizes the paper's)
  localparam int unsigned WSRAM_DEPTH = 4096;  // 4096 x 256 b = 128 kB per side
  localparam int unsigned BSRAM_DEPTH = 2730;  // 2730 x 9 b ~= 3 kB of biases
  localparam int unsigned FSRAM_DEPTH = 160;   // 160 x 256 b = 5 kB FC weights

  // Batch size S, encoded
  typedef enum logic [1:0] {
    S1 = 2'd0,
    S2 = 2'd1,
    S4 = 2'd2
  } s_code_e;

  typedef enum logic [1:0] {
    OP_IO  = 2'd0,
    OP_CNN = 2'd1,
    OP_FC  = 2'd2,
    OP_NOP = 2'd3
  } op_e;

  // One program-memory instruction (22 bits)
  typedef struct packed {
    logic             last;     // stop after this instruction
    logic [3:0]       nlabels;  // FC: number of classes (1..10)
    logic [DIM_W-1:0] h;        // input map height (1..32)
    logic [DIM_W-1:0] w;        // input map width  (1..32)
    logic             pool;     // CNN: 2x2 max pooling of the outputs
    s_code_e          s;        // batch size S
    op_e              op;
  } instr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);

  // Scan-loader targets
  typedef enum logic [2:0] {
    TGT_NORTH = 3'd0,
    TGT_SOUTH = 3'd1,
    TGT_BIAS  = 3'd2,
    TGT_FC    = 3'd3,
    TGT_PM    = 3'd4
  } tgt_e;

  // Number of LD-CONV phases of a CNN layer: 4/S
  function automatic logic [2:0] phases_of(s_code_e s);
    case (s)
      S1:      return 3'd4;
      S2:      return 3'd2;
      default: return 3'd1;
    endcase
  endfunction

  // Place the 64x4 neuron output bits of LD-CONV phase `ph` into the 256
  // channels of an output pixel, with the mask of the channels written.
  //   S=1: neuron n -> channel 64*ph + n
  //   S=2: neuron n, map m (0/1) -> channel 128*m + 64*ph + n
  //   S=4: neuron n, map m (0..3) -> channel 64*m + n
  function automatic void place_outputs(input s_code_e s, input logic [1:0] ph,
                                        input logic [NEURONS-1:0][SUBN-1:0] o,
                                        output logic [CHANNELS-1:0] data,
                                        output logic [CHANNELS-1:0] mask);
    data = '0;
    mask = '0;
    for (int n = 0; n < NEURONS; n++) begin
      case (s)
        S1: begin
          data[64*ph + n] = o[n][0];
          mask[64*ph + n] = 1'b1;
        end
        S2: begin
          for (int m = 0; m < 2; m++) begin
            data[128*m + 64*ph[0] + n] = o[n][m];
            mask[128*m + 64*ph[0] + n] = 1'b1;
          end
        end
        default: begin
          for (int m = 0; m < 4; m++) begin
            data[64*m + n] = o[n][m];
            mask[64*m + n] = 1'b1;
          end
        end
      endcase
    end
  endfunction

endpackage
