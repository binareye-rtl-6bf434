// controller: program memory and sequencer of BinarEye.
//
// The paper makes the network depth programmable through a 16-entry program
// memory of custom IO, CNN and FC instructions, and describes each CNN layer
// as 4/S phases of LD (preload the weights of 64 neurons from the north and
// south SRAMs into the array's flip-flops) followed by CONV (all neurons
// convolve the whole input map with stride 1).  This module holds the program
// memory and runs that schedule.  The detailed timing below is this design's
// own; the paper does not give it.
//
//   IO   start io_input, wait for its done.  The map lands in the west SRAM,
//        which becomes the source of the next layer.
//   CNN  for each phase p = 0 .. 4/S-1:
//          LD   128 cycles: cycle 2n reads north/south word wptr+2n (to
//               sub-neurons 0/2 of neuron n) and bias bptr+n; cycle 2n+1
//               reads word wptr+2n+1 (to sub-neurons 1/3).  The load bus is
//               driven one cycle later, when the SRAM data is there.
//          CONV for each output row y = 0 .. h-2, fetch window columns
//               x = 0 .. w-1 (pixels (x,y) and (x,y+1) in one read).  The
//               fetch of column x completes the window of output (x-1,y), so
//               a row of w-1 outputs takes w cycles.  Fetch at t, window
//               shift at t+1, registered neuron outputs at t+2, output pixel
//               (conv_*) at t+3.
//          DRAIN 4 cycles so the last output (and a pooled pixel) is written.
//        The outputs go to the other SRAM, which becomes the new source.
//        wptr and bptr advance through the weight memories in program order.
//   FC   start fc_unit on the current source, wait for its done.
// The program ends after an instruction with `last` set or after entry 15.
//
// Interface: start (while idle) runs the program; busy is high until done
// pulses.  pm_we/pm_addr/pm_wdata write the program memory while idle.
module controller
  import binareye_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // program memory write port
  input  logic                          pm_we,
  input  logic [3:0]                    pm_addr,
  input  instr_t                        pm_wdata,
  // current instruction
  output instr_t                        instr,
  // weight / bias SRAM reads
  output logic                          w_rd_en,
  output logic [11:0]                   w_rd_addr,
  output logic                          b_rd_en,
  output logic [11:0]                   b_rd_addr,
  // neuron-array load bus
  output logic                          ld_en,
  output logic [5:0]                    ld_idx,
  output logic                          ld_half,
  output logic                          ld_bias_en,
  // convolution
  output logic                          act_sel,    // SRAM holding the source map: 0 west, 1 east
  output logic                          conv_rd_en,
  output logic [XY_W-1:0]               conv_rd_x,
  output logic [XY_W-1:0]               conv_rd_y,
  output logic                          win_shift,
  input  logic [NEURONS-1:0][SUBN-1:0]  nout,
  output logic                          conv_valid,
  output logic [XY_W-1:0]               conv_x,
  output logic [XY_W-1:0]               conv_y,
  output logic [CHANNELS-1:0]           conv_data,
  output logic [CHANNELS-1:0]           conv_mask,
  // IO and FC sub-units
  output logic                          io_start,
  input  logic                          io_done,
  output logic                          fc_start,
  input  logic                          fc_done,
  output logic                          in_io,
  output logic                          in_fc
);
  typedef enum logic [3:0] {
    C_IDLE, C_FETCH, C_IO, C_LD, C_CONV, C_DRAIN, C_FC, C_NEXT
  } cstate_e;

  instr_t pm [PM_DEPTH];

  cstate_e          st;
  logic [3:0]       pc;
  logic [1:0]       phase;
  logic [6:0]       ldcnt;
  logic [11:0]      wptr, bptr;
  logic [XY_W-1:0]  fx, fy;
  logic [2:0]       drain;
  // pipeline tags
  logic             rd_q, out_q;
  logic [XY_W-1:0]  x_q, y_q, x_qq, y_qq;
  logic             ld_q;
  logic [6:0]       ldcnt_q;

  always_ff @(posedge clk)
    if (pm_we && st == C_IDLE) pm[pm_addr] <= pm_wdata;

  assign busy       = (st != C_IDLE);
  assign in_io      = (st == C_IO);
  assign in_fc      = (st == C_FC);

  assign w_rd_en    = (st == C_LD);
  assign w_rd_addr  = wptr + 12'(ldcnt);
  assign b_rd_en    = (st == C_LD) && !ldcnt[0];
  assign b_rd_addr  = bptr + 12'(ldcnt[6:1]);

  assign ld_en      = ld_q;
  assign ld_idx     = ldcnt_q[6:1];
  assign ld_half    = ldcnt_q[0];
  assign ld_bias_en = ld_q && !ldcnt_q[0];

  assign conv_rd_en = (st == C_CONV);
  assign conv_rd_x  = fx;
  assign conv_rd_y  = fy;
  assign win_shift  = rd_q;

  always_comb begin
    place_outputs(instr.s, phase, nout, conv_data, conv_mask);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= C_IDLE;
      pc         <= '0;
      instr      <= '0;
      phase      <= '0;
      ldcnt      <= '0;
      wptr       <= '0;
      bptr       <= '0;
      fx         <= '0;
      fy         <= '0;
      drain      <= '0;
      act_sel    <= 1'b0;
      rd_q       <= 1'b0;
      out_q      <= 1'b0;
      conv_valid <= 1'b0;
      conv_x     <= '0;
      conv_y     <= '0;
      x_q        <= '0;
      y_q        <= '0;
      x_qq       <= '0;
      y_qq       <= '0;
      ld_q       <= 1'b0;
      ldcnt_q    <= '0;
      io_start   <= 1'b0;
      fc_start   <= 1'b0;
      done       <= 1'b0;
    end else begin
      io_start <= 1'b0;
      fc_start <= 1'b0;
      done     <= 1'b0;
      // LD pipeline: SRAM data arrives one cycle after the read
      ld_q    <= (st == C_LD);
      ldcnt_q <= ldcnt;
      // CONV pipeline
      rd_q       <= (st == C_CONV);
      x_q        <= fx - 1'b1;
      y_q        <= fy;
      out_q      <= rd_q && (x_q != XY_W'(MAXDIM - 1));   // fetch of column 0 gives no output
      x_qq       <= x_q;
      y_qq       <= y_q;
      conv_valid <= out_q;
      conv_x     <= x_qq;
      conv_y     <= y_qq;

      case (st)
        C_IDLE: if (start) begin
          st      <= C_FETCH;
          pc      <= '0;
          wptr    <= '0;
          bptr    <= '0;
          act_sel <= 1'b0;
        end
        C_FETCH: begin
          instr <= pm[pc];
          phase <= '0;
          case (pm[pc].op)
            OP_IO: begin
              st       <= C_IO;
              io_start <= 1'b1;
            end
            OP_CNN: begin
              st    <= C_LD;
              ldcnt <= '0;
            end
            OP_FC: begin
              st       <= C_FC;
              fc_start <= 1'b1;
            end
            default: st <= C_NEXT;
          endcase
        end
        C_IO: if (io_done) begin
          act_sel <= 1'b0;
          st      <= C_NEXT;
        end
        C_LD: begin
          ldcnt <= ldcnt + 1'b1;
          if (ldcnt == 7'd127) begin
            wptr <= wptr + 12'd128;
            bptr <= bptr + 12'd64;
            fx   <= '0;
            fy   <= '0;
            st   <= C_CONV;
          end
        end
        C_CONV: begin
          if (DIM_W'(fx) == instr.w - 1) begin
            fx <= '0;
            if (DIM_W'(fy) == instr.h - 2) begin
              st    <= C_DRAIN;
              drain <= '0;
            end else begin
              fy <= fy + 1'b1;
            end
          end else begin
            fx <= fx + 1'b1;
          end
        end
        C_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd3) begin
            if (3'(phase) == phases_of(instr.s) - 1) begin
              act_sel <= ~act_sel;
              st      <= C_NEXT;
            end else begin
              phase <= phase + 1'b1;
              ldcnt <= '0;
              st    <= C_LD;
            end
          end
        end
        C_FC: if (fc_done) st <= C_NEXT;
        default: begin  // C_NEXT
          if (instr.last || pc == 4'(PM_DEPTH - 1)) begin
            st   <= C_IDLE;
            done <= 1'b1;
          end else begin
            pc <= pc + 1'b1;
            st <= C_FETCH;
          end
        end
      endcase
    end
  end

  // A CNN layer needs at least a 2x2 input map
  always_ff @(posedge clk)
    if (st == C_FETCH && pm[pc].op == OP_CNN)
      assert (pm[pc].w >= 2 && pm[pc].h >= 2) else $error("CNN instruction with map smaller than 2x2");

endmodule
