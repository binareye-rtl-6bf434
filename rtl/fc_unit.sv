// fc_unit: the binary fully-connected (classifier) layer of BinarEye.
//
// After the last CNN layer the feature map (w x h pixels, 256 channels holding
// S maps) is classified into up to 10 classes.  For each class c the unit
// XNORs every pixel word with a 256-bit weight word from the FC SRAM and
// counts the agreeing bits, in four 64-channel segments.  The segment counts
// are summed per map as in the neuron array (S=1: all four, S=2: pairs,
// S=4: each alone), accumulated over the pixels, and the class with the
// largest count becomes the map's 4-bit label.  The paper gives the function
// (binary FC layer, up to 10 classes, 5 kB of FC SRAM = 10 x 4x4 x 256 bits);
// the sequencing, the absence of an FC bias and the tie rule (lowest class
// wins) are this design's choices.
//
// Weight layout: FC SRAM word c*w*h + (y*w + x) holds the weights of class c
// for pixel (x,y), bit i for channel i.  For S>1 each map uses its own
// channel slice of the word.
//
// Interface and timing: start (while idle) latches the sizes.  The unit
// issues one activation read (act_rd_*, data back next cycle on act_rd_data)
// and one FC SRAM read per cycle, w*h*nlabels cycles in all, then sends the S
// labels on consecutive cycles (label_valid, label_map = map index) and
// pulses done with the last one.
module fc_unit
  import binareye_pkg::*;
#(
  parameter int unsigned FC_DEPTH = FSRAM_DEPTH,
  parameter int unsigned ACC_W    = 17
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  s_code_e                     s_code,
  input  logic [DIM_W-1:0]            w,
  input  logic [DIM_W-1:0]            h,
  input  logic [3:0]                  nlabels,
  output logic                        act_rd_en,
  output logic [XY_W-1:0]             act_rd_x,
  output logic [XY_W-1:0]             act_rd_y,
  input  logic [CHANNELS-1:0]         act_rd_data,
  output logic                        fc_rd_en,
  output logic [$clog2(FC_DEPTH)-1:0] fc_rd_addr,
  input  logic [CHANNELS-1:0]         fc_rd_data,
  output logic                        label_valid,
  output logic [LABEL_W-1:0]          label,
  output logic [1:0]                  label_map,
  output logic                        done
);
  typedef enum logic [1:0] {F_IDLE, F_RUN, F_WAIT, F_OUT} fstate_e;

  fstate_e                  st;
  s_code_e                  s_q;
  logic [DIM_W-1:0]         w_q, h_q;
  logic [3:0]               nl_q;
  logic [XY_W-1:0]          x, y;
  logic [3:0]               cls;
  logic                     v_q, lastpix_q;
  logic [3:0]               cls_q;
  logic [SUBN-1:0][ACC_W-1:0] acc;
  logic [SUBN-1:0][ACC_W-1:0] nacc;
  logic [SUBN-1:0][ACC_W-1:0] score;
  logic [SUBN-1:0][ACC_W-1:0] best;
  logic [SUBN-1:0][3:0]       best_cls;
  logic [SUBN-1:0][6:0]       seg;
  logic [CHANNELS-1:0]        agree;
  logic [1:0]                 omap;
  logic                       lastpix, lastcls;

  assign lastpix = (DIM_W'(x) == w_q - 1) && (DIM_W'(y) == h_q - 1);
  assign lastcls = (cls == nl_q - 1);

  assign act_rd_en = (st == F_RUN);
  assign act_rd_x  = x;
  assign act_rd_y  = y;
  assign fc_rd_en  = (st == F_RUN);

  // Segment counts of the word returned this cycle
  assign agree = ~(act_rd_data ^ fc_rd_data);
  always_comb begin
    for (int j = 0; j < SUBN; j++) seg[j] = 7'($countones(agree[j*SN_CH +: SN_CH]));
    for (int j = 0; j < SUBN; j++) nacc[j] = acc[j] + ACC_W'(seg[j]);
    score = '0;
    case (s_q)
      S1: score[0] = nacc[0] + nacc[1] + nacc[2] + nacc[3];
      S2: begin
        score[0] = nacc[0] + nacc[1];
        score[1] = nacc[2] + nacc[3];
      end
      default: score = nacc;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= F_IDLE;
      s_q         <= S1;
      w_q         <= '0;
      h_q         <= '0;
      nl_q        <= '0;
      x           <= '0;
      y           <= '0;
      cls         <= '0;
      fc_rd_addr  <= '0;
      v_q         <= 1'b0;
      lastpix_q   <= 1'b0;
      cls_q       <= '0;
      acc         <= '0;
      best        <= '0;
      best_cls    <= '0;
      omap        <= '0;
      label_valid <= 1'b0;
      label       <= '0;
      label_map   <= '0;
      done        <= 1'b0;
    end else begin
      label_valid <= 1'b0;
      done        <= 1'b0;
      v_q         <= 1'b0;
      // accumulate the returned word
      if (v_q) begin
        if (lastpix_q) begin
          acc <= '0;
          for (int m = 0; m < SUBN; m++)
            if (cls_q == 0 || score[m] > best[m]) begin
              best[m]     <= score[m];
              best_cls[m] <= cls_q;
            end
        end else begin
          acc <= nacc;
        end
      end
      case (st)
        F_IDLE: if (start) begin
          st         <= F_RUN;
          s_q        <= s_code;
          w_q        <= w;
          h_q        <= h;
          nl_q       <= nlabels;
          x          <= '0;
          y          <= '0;
          cls        <= '0;
          fc_rd_addr <= '0;
          acc        <= '0;
        end
        F_RUN: begin
          v_q        <= 1'b1;
          lastpix_q  <= lastpix;
          cls_q      <= cls;
          fc_rd_addr <= fc_rd_addr + 1'b1;
          if (DIM_W'(x) == w_q - 1) begin
            x <= '0;
            y <= (DIM_W'(y) == h_q - 1) ? '0 : y + 1'b1;
          end else begin
            x <= x + 1'b1;
          end
          if (lastpix) begin
            cls <= cls + 1'b1;
            if (lastcls) st <= F_WAIT;
          end
        end
        F_WAIT: begin
          st   <= F_OUT;
          omap <= '0;
        end
        default: begin  // F_OUT: one label per map
          label_valid <= 1'b1;
          label       <= best_cls[omap];
          label_map   <= omap;
          omap        <= omap + 1'b1;
          if ({1'b0, omap} == 3'(phases_of(S1) / phases_of(s_q)) - 1) begin
            done <= 1'b1;
            st   <= F_IDLE;
          end
        end
      endcase
    end
  end
endmodule
