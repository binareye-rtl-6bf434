// binareye_top: the BinarEye binary-CNN processor.
//
// A 64-neuron binary array with local weight flip-flops sits between two
// 32 kB activation SRAMs (west and east) and two weight SRAMs (north and
// south, 128 kB each, plus a 3 kB bias SRAM on the south side).  All model
// weights and feature maps stay on chip.  A 16-instruction program runs an
// input (IO) layer, any number of 2x2 binary CNN layers and a binary
// fully-connected (FC) layer that emits class labels.  Each CNN layer reads
// its input map from one activation SRAM and writes its output map into the
// other, optionally max-pooled 2x2.  The batch size S of each layer (1, 2, 4)
// trades network width (F = C = 256/S) against work: S maps of 256/S
// channels are processed side by side.
//
// Ports follow the chip's pin groups: a 16-bit input-map port, a 4-bit label
// output and a 3-wire weight-scan port that loads all memories once before
// use.  The start/busy/done signals and the handshakes are this design's
// own.  The memories may only be loaded while busy is low.
//
//   wscan        {commit, shift, data}, see scan_loader
//   start        run the program; busy high until done pulses
//   in_*         valid/ready input beats for an IO instruction
//   label_*      one 4-bit label per map after an FC instruction
module binareye_top
  import binareye_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [2:0]          wscan,
  input  logic                start,
  output logic                busy,
  output logic                done,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [IN_W-1:0]     in_data,
  output logic                label_valid,
  output logic [LABEL_W-1:0]  label,
  output logic [1:0]          label_map
);
  localparam int unsigned FAW = $clog2(FSRAM_DEPTH);

  // scan loader
  logic        sl_we;
  tgt_e        sl_tgt;
  logic [11:0] sl_addr;
  logic [255:0] sl_data;

  // controller
  instr_t      instr;
  logic        w_rd_en, b_rd_en;
  logic [11:0] w_rd_addr, b_rd_addr;
  logic        ld_en, ld_half, ld_bias_en;
  logic [5:0]  ld_idx;
  logic        act_sel, conv_rd_en, win_shift, conv_valid;
  logic [XY_W-1:0] conv_rd_x, conv_rd_y, conv_x, conv_y;
  logic [CHANNELS-1:0] conv_data, conv_mask;
  logic        io_start, io_done, fc_start, fc_done, in_io, in_fc;

  // memories
  logic [SN_IN-1:0]        north_q, south_q;
  logic [BIAS_W-1:0]       bias_q;
  logic [CHANNELS-1:0]     fcw_q;
  logic [1:0][CHANNELS-1:0] act_top, act_bot;

  // datapath
  logic [KK-1:0][CHANNELS-1:0]  win;
  logic [NEURONS-1:0][SUBN-1:0] nout;
  logic                mp_valid;
  logic [XY_W-1:0]     mp_x, mp_y;
  logic [CHANNELS-1:0] mp_data, mp_mask;
  logic                io_wr;
  logic [XY_W-1:0]     io_x, io_y;
  logic [CHANNELS-1:0] io_mask, io_data;
  logic                fc_act_en, fc_w_en;
  logic [XY_W-1:0]     fc_x, fc_y;
  logic [FAW-1:0]      fc_w_addr;

  scan_loader u_scan (
    .clk, .rst_n, .wscan,
    .wr_en(sl_we), .wr_tgt(sl_tgt), .wr_addr(sl_addr), .wr_data(sl_data)
  );

  controller u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .pm_we   (sl_we && sl_tgt == TGT_PM),
    .pm_addr (sl_addr[3:0]),
    .pm_wdata(instr_t'(sl_data[INSTR_W-1:0])),
    .instr,
    .w_rd_en, .w_rd_addr, .b_rd_en, .b_rd_addr,
    .ld_en, .ld_idx, .ld_half, .ld_bias_en,
    .act_sel, .conv_rd_en, .conv_rd_x, .conv_rd_y, .win_shift,
    .nout, .conv_valid, .conv_x, .conv_y, .conv_data, .conv_mask,
    .io_start, .io_done, .fc_start, .fc_done, .in_io, .in_fc
  );

  // ---- weight memories: written by the scan loader while idle, read by LD
  function automatic logic ld_wr(input logic we, input tgt_e t, input tgt_e want, input logic bsy);
    return we && t == want && !bsy;
  endfunction

  sram_1p #(.DEPTH(WSRAM_DEPTH), .WIDTH(SN_IN)) u_north (
    .clk, .en(busy ? w_rd_en : ld_wr(sl_we, sl_tgt, TGT_NORTH, busy)),
    .we(ld_wr(sl_we, sl_tgt, TGT_NORTH, busy)),
    .addr(busy ? w_rd_addr : sl_addr), .wmask('1), .wdata(sl_data), .rdata(north_q)
  );
  sram_1p #(.DEPTH(WSRAM_DEPTH), .WIDTH(SN_IN)) u_south (
    .clk, .en(busy ? w_rd_en : ld_wr(sl_we, sl_tgt, TGT_SOUTH, busy)),
    .we(ld_wr(sl_we, sl_tgt, TGT_SOUTH, busy)),
    .addr(busy ? w_rd_addr : sl_addr), .wmask('1), .wdata(sl_data), .rdata(south_q)
  );
  sram_1p #(.DEPTH(BSRAM_DEPTH), .WIDTH(BIAS_W)) u_bias (
    .clk, .en(busy ? b_rd_en : ld_wr(sl_we, sl_tgt, TGT_BIAS, busy)),
    .we(ld_wr(sl_we, sl_tgt, TGT_BIAS, busy)),
    .addr(busy ? b_rd_addr : sl_addr), .wmask('1), .wdata(sl_data[BIAS_W-1:0]), .rdata(bias_q)
  );
  sram_1p #(.DEPTH(FSRAM_DEPTH), .WIDTH(CHANNELS)) u_fc_sram (
    .clk, .en(busy ? fc_w_en : ld_wr(sl_we, sl_tgt, TGT_FC, busy)),
    .we(ld_wr(sl_we, sl_tgt, TGT_FC, busy)),
    .addr(busy ? fc_w_addr : sl_addr[FAW-1:0]), .wmask('1), .wdata(sl_data), .rdata(fcw_q)
  );

  // ---- neuron array and its edge buffer
  act_window u_win (
    .clk, .shift(win_shift),
    .top_in(act_top[act_sel]), .bot_in(act_bot[act_sel]), .win
  );

  neuron_array u_array (
    .clk, .ld_en, .ld_idx, .ld_half,
    .ld_north(north_q), .ld_south(south_q),
    .ld_bias_en, .ld_bias(signed'(bias_q)),
    .s_code(instr.s), .win, .out_bits(nout)
  );

  maxpool u_pool (
    .clk, .rst_n,
    .in_valid(conv_valid && instr.pool), .in_x(conv_x), .in_y(conv_y),
    .in_data(conv_data), .in_mask(conv_mask),
    .out_valid(mp_valid), .out_x(mp_x), .out_y(mp_y), .out_data(mp_data), .out_mask(mp_mask)
  );

  io_input u_io (
    .clk, .rst_n, .start(io_start), .w(instr.w), .h(instr.h),
    .in_valid, .in_ready, .in_data,
    .wr_en(io_wr), .wr_x(io_x), .wr_y(io_y), .wr_mask(io_mask), .wr_data(io_data),
    .done(io_done)
  );

  fc_unit u_fc (
    .clk, .rst_n, .start(fc_start), .s_code(instr.s), .w(instr.w), .h(instr.h),
    .nlabels(instr.nlabels),
    .act_rd_en(fc_act_en), .act_rd_x(fc_x), .act_rd_y(fc_y), .act_rd_data(act_top[act_sel]),
    .fc_rd_en(fc_w_en), .fc_rd_addr(fc_w_addr), .fc_rd_data(fcw_q),
    .label_valid, .label, .label_map, .done(fc_done)
  );

  // ---- activation SRAMs: side act_sel is read, the other side written
  for (genvar sd = 0; sd < 2; sd++) begin : g_act
    logic                rd_en, wr_en;
    logic [XY_W-1:0]     rd_x, rd_y, wr_x, wr_y;
    logic [CHANNELS-1:0] wr_mask, wr_data;
    always_comb begin
      rd_en   = (act_sel == sd[0]) && (conv_rd_en || (in_fc && fc_act_en));
      rd_x    = in_fc ? fc_x : conv_rd_x;
      rd_y    = in_fc ? fc_y : conv_rd_y;
      wr_en   = 1'b0;
      wr_x    = conv_x;
      wr_y    = conv_y;
      wr_mask = conv_mask;
      wr_data = conv_data;
      if (in_io) begin
        wr_en   = (sd == 0) && io_wr;
        wr_x    = io_x;
        wr_y    = io_y;
        wr_mask = io_mask;
        wr_data = io_data;
      end else if (instr.pool) begin
        wr_en   = (act_sel != sd[0]) && mp_valid;
        wr_x    = mp_x;
        wr_y    = mp_y;
        wr_mask = mp_mask;
        wr_data = mp_data;
      end else begin
        wr_en   = (act_sel != sd[0]) && conv_valid;
      end
    end
    act_sram u_act (
      .clk, .rd_en, .rd_x, .rd_y, .rd_top(act_top[sd]), .rd_bot(act_bot[sd]),
      .wr_en, .wr_x, .wr_y, .wr_mask, .wr_data
    );

    // The schedule never reads and writes one activation SRAM in a cycle
    a_no_rw: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && wr_en))
      else $error("activation SRAM %0d read and written in one cycle", sd);
  end

  // The memories are loaded only while the program is stopped
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) !(sl_we && busy))
    else $error("scan write while the program runs");

endmodule
