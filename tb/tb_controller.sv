// tb_controller: runs programs on the sequencer alone, with the IO and FC
// units replaced by fixed-delay done pulses and random neuron outputs.
// Checks the LD read addresses (weights and biases advance through memory),
// the load-bus timing, the raster order of window fetches, the number and
// coordinates of output pixels, the placement of neuron outputs into
// channels for S = 1, 2, 4, the source/destination ping-pong, the length of
// every CNN layer in cycles, and that the program stops at `last`.
module tb_controller;
  import binareye_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, pm_we;
  logic [3:0] pm_addr;
  instr_t pm_wdata, instr;
  logic w_rd_en, b_rd_en, ld_en, ld_half, ld_bias_en;
  logic [11:0] w_rd_addr, b_rd_addr;
  logic [5:0] ld_idx;
  logic act_sel, conv_rd_en, win_shift, conv_valid;
  logic [4:0] conv_rd_x, conv_rd_y, conv_x, conv_y;
  logic [63:0][3:0] nout;
  logic [255:0] conv_data, conv_mask;
  logic io_start, io_done, fc_start, fc_done, in_io, in_fc;

  controller dut (.*);

  // expected state of the schedule
  int exp_w, exp_b, ld_cnt, rd_cnt, out_cnt, layer_cycles, ios, fcs;
  logic [11:0] exp_w_q;
  logic w_rd_q;
  int exp_rx, exp_ry, exp_ox, exp_oy;

  function automatic instr_t mk(op_e op, s_code_e s, logic pool, int w, int h, int nl, logic last);
    instr_t i;
    i.op = op; i.s = s; i.pool = pool; i.w = 6'(w); i.h = 6'(h); i.nlabels = 4'(nl); i.last = last;
    return i;
  endfunction

  // IO / FC stand-ins
  initial begin
    io_done = 0; fc_done = 0;
    forever begin
      @(posedge clk);
      if (io_start) begin ios++; repeat (5) @(posedge clk); io_done <= 1; @(posedge clk); io_done <= 0; end
      if (fc_start) begin fcs++; repeat (3) @(posedge clk); fc_done <= 1; @(posedge clk); fc_done <= 0; end
    end
  end

  always @(negedge clk) for (int n = 0; n < 64; n++) nout[n] = 4'($urandom);

  // load-bus check: one cycle after each weight read
  always @(posedge clk) begin
    w_rd_q  <= w_rd_en;
    exp_w_q <= w_rd_addr;
    if (rst_n && w_rd_en && !w_rd_q) begin
      exp_rx = 0; exp_ry = 0; exp_ox = 0; exp_oy = 0;
    end
    if (rst_n && w_rd_en) begin
      checks++;
      if (w_rd_addr != 12'(exp_w) || b_rd_en != !exp_w[0] || (b_rd_en && b_rd_addr != 12'(exp_b)))
        begin failures++; $display("FAIL LD read w=%0d exp %0d b=%0d", w_rd_addr, exp_w, b_rd_addr); end
      if (b_rd_en) exp_b++;
      exp_w++;
      ld_cnt++;
    end
    if (rst_n && w_rd_q) begin
      checks++;
      if (!ld_en || {ld_idx, ld_half} != 7'(exp_w_q) || ld_bias_en != !exp_w_q[0])
        begin failures++; $display("FAIL LD bus"); end
    end else if (rst_n && ld_en) begin failures++; $display("FAIL stray ld_en"); end
  end

  // fetch order and outputs
  always @(posedge clk) begin
    if (rst_n && conv_rd_en) begin
      checks++;
      if (conv_rd_x != 5'(exp_rx) || conv_rd_y != 5'(exp_ry)) begin
        failures++; $display("FAIL fetch %0d,%0d exp %0d,%0d", conv_rd_x, conv_rd_y, exp_rx, exp_ry);
      end
      if (exp_rx == instr.w - 1) begin exp_rx = 0; exp_ry++; end else exp_rx++;
      rd_cnt++;
    end
    if (rst_n && conv_valid) begin
      logic [255:0] d, m;
      d = '0; m = '0;
      for (int n = 0; n < 64; n++) begin
        case (instr.s)
          S1: begin d[64*dut.phase + n] = nout[n][0]; m[64*dut.phase + n] = 1; end
          S2: for (int k = 0; k < 2; k++) begin
                d[128*k + 64*dut.phase + n] = nout[n][k]; m[128*k + 64*dut.phase + n] = 1;
              end
          default: for (int k = 0; k < 4; k++) begin d[64*k + n] = nout[n][k]; m[64*k + n] = 1; end
        endcase
      end
      checks++;
      if (conv_x != 5'(exp_ox) || conv_y != 5'(exp_oy) || conv_data != d || conv_mask != m) begin
        failures++; $display("FAIL out %0d,%0d exp %0d,%0d", conv_x, conv_y, exp_ox, exp_oy);
      end
      if (exp_ox == instr.w - 2) begin exp_ox = 0; exp_oy++; end else exp_ox++;
      out_cnt++;
    end
  end

  task automatic load(input instr_t p [$]);
    foreach (p[i]) begin
      @(negedge clk);
      pm_we = 1; pm_addr = 4'(i); pm_wdata = p[i];
    end
    @(negedge clk);
    pm_we = 0;
  endtask

  task automatic run_cnn_check(input instr_t p [$], input logic exp_sel);
    int cyc;
    exp_w = 0; exp_b = 0;
    ios = 0; fcs = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    foreach (p[i]) begin
      if (p[i].op == OP_CNN) begin
        int ph, c0, expc;
        ph = (p[i].s == S1) ? 4 : (p[i].s == S2) ? 2 : 1;
        while (!w_rd_en) begin @(negedge clk); cyc++; end
        c0 = cyc;
        ld_cnt = 0; rd_cnt = 0; out_cnt = 0;
        while (w_rd_en || conv_rd_en || dut.st == dut.C_DRAIN) begin @(negedge clk); cyc++; end
        expc = ph * (128 + (p[i].h - 1) * p[i].w + 4);
        checks += 4;
        if (cyc - c0 != expc) begin failures++; $display("FAIL layer %0d cycles %0d exp %0d", i, cyc - c0, expc); end
        if (ld_cnt != 128 * ph) begin failures++; $display("FAIL ld count %0d", ld_cnt); end
        if (rd_cnt != ph * (p[i].h - 1) * p[i].w) begin failures++; $display("FAIL fetch count"); end
        if (out_cnt != ph * (p[i].h - 1) * (p[i].w - 1)) begin failures++; $display("FAIL out count %0d", out_cnt); end
      end
    end
    while (!done) begin @(negedge clk); cyc++; if (cyc > 100000) break; end
    checks += 3;
    if (!done) begin failures++; $display("FAIL no done"); end
    if (act_sel != exp_sel) begin failures++; $display("FAIL act_sel"); end
    @(negedge clk);
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    instr_t p1 [$], p2 [$];
    rst_n = 0; start = 0; pm_we = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // IO, CNN S=1, CNN S=2 (pool), CNN S=4, FC ; then an entry that must not run
    p1 = '{mk(OP_IO, S1, 0, 6, 5, 0, 0), mk(OP_CNN, S1, 0, 6, 5, 0, 0), mk(OP_CNN, S2, 1, 5, 4, 0, 0),
           mk(OP_CNN, S4, 0, 3, 3, 0, 0), mk(OP_FC, S4, 0, 2, 2, 10, 1), mk(OP_IO, S1, 0, 2, 2, 0, 0)};
    load(p1);
    run_cnn_check(p1, 1'b1);
    checks += 2;
    if (ios != 1) begin failures++; $display("FAIL io count %0d", ios); end
    if (fcs != 1) begin failures++; $display("FAIL fc count %0d", fcs); end
    // two CNN layers: source returns to the west SRAM
    p2 = '{mk(OP_IO, S4, 0, 4, 4, 0, 0), mk(OP_CNN, S4, 0, 4, 4, 0, 0), mk(OP_CNN, S2, 0, 3, 3, 0, 1)};
    load(p2);
    run_cnn_check(p2, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
