// tb_binareye_top: end-to-end test of the whole processor at its real size.
//
// Everything goes through the chip's own ports: the program, all weights,
// biases and FC weights are shifted in through the 3-wire scan port, the
// input map is sent over the 16-bit port (with random gaps), and the labels
// come out of the 4-bit label port.  A reference model in the testbench
// computes every layer from the same random data: 2x2 binary convolution per
// neuron (XNOR counts per 64-channel quarter, saturated at 255, combined by
// S, compared with 512/S - bias), output-channel placement, 2x2 max pooling
// and the FC arg-max.  Checked: every label, the final contents of both
// activation SRAMs, and the cycle count of each run.
//
// Program A: IO 6x6 -> CNN S=1 6x6 -> CNN S=2 5x5 + pool -> CNN S=4 2x2 ->
//            FC S=4 1x1, 10 classes (4 labels)
// Program B: IO 5x5 -> CNN S=1 5x5 + pool -> FC S=1 2x2, 7 classes (1 label)
// Together they make every mechanism happen: IO back-pressure, LD phases,
// the three batch sizes, pooling, the west/east ping-pong, FC labels.
module tb_binareye_top;
  import binareye_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, in_valid, in_ready, label_valid;
  logic [2:0] wscan;
  logic [15:0] in_data;
  logic [3:0] label;
  logic [1:0] label_map;

  binareye_top dut (.*);

  // reference copies of the memories
  logic [255:0] north [WSRAM_DEPTH];
  logic [255:0] south [WSRAM_DEPTH];
  int           bias  [BSRAM_DEPTH];
  logic [255:0] fcw   [FSRAM_DEPTH];
  logic [255:0] west  [32][32];
  logic [255:0] east  [32][32];
  logic [255:0] src   [32][32];
  logic [255:0] dst   [32][32];

  // mechanism counters
  int n_io_stall, n_ld, n_conv, n_pool, n_s[3], n_swap, n_label;
  logic sel_q;

  function automatic logic [255:0] rnd256();
    logic [255:0] r;
    for (int k = 0; k < 8; k++) r[32*k +: 32] = $urandom;
    return r;
  endfunction

  function automatic instr_t mk(op_e op, s_code_e s, logic pool, int w, int h, int nl, logic last);
    instr_t i;
    i.op = op; i.s = s; i.pool = pool; i.w = 6'(w); i.h = 6'(h); i.nlabels = 4'(nl); i.last = last;
    return i;
  endfunction

  task automatic scan_frame(input tgt_e t, input int addr, input logic [255:0] d);
    logic [270:0] f;
    f = {3'(t), 12'(addr), d};
    for (int i = 270; i >= 0; i--) begin
      wscan = {1'b0, 1'b1, f[i]};
      @(negedge clk);
    end
    wscan = 3'b100;
    @(negedge clk);
    wscan = 3'b000;
  endtask

  // ---------------- reference model
  task automatic ref_layer(input s_code_e s, input logic pool, input int w, input int h,
                           inout int wptr, inout int bptr);
    int nph, wo, ho;
    logic [255:0] o [32][32];
    nph = (s == S1) ? 4 : (s == S2) ? 2 : 1;
    wo = w - 1; ho = h - 1;
    for (int y = 0; y < ho; y++) for (int x = 0; x < wo; x++) o[y][x] = '0;
    for (int p = 0; p < nph; p++) begin
      for (int n = 0; n < 64; n++) begin
        logic [255:0] wv [4];
        int b;
        wv[0] = north[wptr + 2*n]; wv[1] = north[wptr + 2*n + 1];
        wv[2] = south[wptr + 2*n]; wv[3] = south[wptr + 2*n + 1];
        b = bias[bptr + n];
        for (int y = 0; y < ho; y++) for (int x = 0; x < wo; x++) begin
          int c[4];
          for (int j = 0; j < 4; j++) begin
            logic [255:0] a;
            a = {src[y+1][x+1][64*j +: 64], src[y+1][x][64*j +: 64], src[y][x+1][64*j +: 64], src[y][x][64*j +: 64]};
            c[j] = $countones(~(a ^ wv[j]));
            if (c[j] > 255) c[j] = 255;
          end
          case (s)
            S1: o[y][x][64*p + n] = (c[0] + c[1] + c[2] + c[3] + b) >= 512;
            S2: begin
              o[y][x][64*p + n]       = (c[0] + c[1] + b) >= 256;
              o[y][x][128 + 64*p + n] = (c[2] + c[3] + b) >= 256;
            end
            default: for (int m = 0; m < 4; m++) o[y][x][64*m + n] = (c[m] + b) >= 128;
          endcase
        end
      end
      wptr += 128; bptr += 64;
    end
    if (pool) begin
      for (int y = 0; y < ho / 2; y++) for (int x = 0; x < wo / 2; x++)
        dst[y][x] = o[2*y][2*x] | o[2*y][2*x+1] | o[2*y+1][2*x] | o[2*y+1][2*x+1];
    end else begin
      for (int y = 0; y < ho; y++) for (int x = 0; x < wo; x++) dst[y][x] = o[y][x];
    end
  endtask

  function automatic int ref_fc(input int m, input int nm, input int w, input int h, input int nl);
    int best, bc;
    best = -1; bc = 0;
    for (int c = 0; c < nl; c++) begin
      int sc;
      sc = 0;
      for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
        logic [255:0] e;
        e = ~(src[y][x] ^ fcw[c*w*h + y*w + x]);
        sc += $countones(e[m * (256 / nm) +: 64]);
        if (nm < 4) sc += $countones(e[m * (256 / nm) + 64 +: 64]);
        if (nm < 2) sc += $countones(e[128 +: 128]);
      end
      if (sc > best) begin best = sc; bc = c; end
    end
    return bc;
  endfunction

  // reads a pixel of an activation SRAM of the design
  function automatic logic [255:0] dut_pix(input int side, input int x, input int y);
    int a;
    a = (y / 2) * 32 + x;
    if (side == 0) return (y % 2 == 0) ? dut.g_act[0].u_act.g_bank[0].u_bank.mem[a]
                                       : dut.g_act[0].u_act.g_bank[1].u_bank.mem[a];
    else           return (y % 2 == 0) ? dut.g_act[1].u_act.g_bank[0].u_bank.mem[a]
                                       : dut.g_act[1].u_act.g_bank[1].u_bank.mem[a];
  endfunction

  // mechanism monitor
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.st == dut.u_ctrl.C_LD && dut.u_ctrl.ldcnt == 0) n_ld++;
    if (dut.conv_valid) begin
      n_conv++;
      n_s[dut.instr.s]++;
    end
    if (dut.mp_valid) n_pool++;
    if (dut.u_io.active && !in_valid) n_io_stall++;
    sel_q <= dut.act_sel;
    if (sel_q != dut.act_sel) n_swap++;
  end

  // run one program and compare
  task automatic run_program(input instr_t p [$], input logic [255:0] img [32][32],
                             input int iw, input int ih, input int exp_labels [4], input int nexp);
    int cyc, got;
    foreach (p[i]) scan_frame(TGT_PM, i, 256'(p[i]));
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    got = 0;
    // input map: 16 beats per pixel, raster order
    for (int y = 0; y < ih; y++) for (int x = 0; x < iw; x++) for (int b = 0; b < 16; b++) begin
      while ($urandom_range(0, 4) == 0) begin in_valid = 0; @(negedge clk); cyc++; end
      in_valid = 1; in_data = img[y][x][16*b +: 16];
      while (!in_ready) begin @(negedge clk); cyc++; end
      @(negedge clk); cyc++;
    end
    in_valid = 0;
    while (!done && cyc < 400000) begin
      if (label_valid) begin
        checks++;
        if (got >= nexp || label_map != 2'(got) || label != 4'(exp_labels[got])) begin
          failures++;
          $display("FAIL label %0d: got %0d (map %0d) expected %0d", got, label, label_map, exp_labels[got]);
        end
        got++;
        n_label++;
      end
      @(negedge clk); cyc++;
    end
    checks += 2;
    if (!done) begin failures++; $display("FAIL program did not finish"); end
    if (got != nexp) begin failures++; $display("FAIL %0d labels, expected %0d", got, nexp); end
    $display("program finished after %0d cycles", cyc);
  endtask

  initial begin
    instr_t pa [$], pb [$];
    logic [255:0] img [32][32];
    int wptr, bptr, lab [4], nlab;
    rst_n = 0; start = 0; in_valid = 0; in_data = 0; wscan = 0;
    n_io_stall = 0; n_ld = 0; n_conv = 0; n_pool = 0; n_s = '{0, 0, 0}; n_swap = 0; n_label = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- model: 7 LD phases of weights (4 + 2 + 1), biases, FC weights
    for (int a = 0; a < 7 * 128; a++) begin
      north[a] = rnd256(); south[a] = rnd256();
      scan_frame(TGT_NORTH, a, north[a]);
      scan_frame(TGT_SOUTH, a, south[a]);
    end
    for (int a = 0; a < 7 * 64; a++) begin
      bias[a] = int'($urandom_range(0, 40)) - 20;
      scan_frame(TGT_BIAS, a, 256'(9'(bias[a])));
    end
    for (int a = 0; a < 40; a++) begin
      fcw[a] = rnd256();
      scan_frame(TGT_FC, a, fcw[a]);
    end
    $display("model loaded");

    // ---- program A
    pa = '{mk(OP_IO, S1, 0, 6, 6, 0, 0), mk(OP_CNN, S1, 0, 6, 6, 0, 0), mk(OP_CNN, S2, 1, 5, 5, 0, 0),
           mk(OP_CNN, S4, 0, 2, 2, 0, 0), mk(OP_FC, S4, 0, 1, 1, 10, 1)};
    for (int y = 0; y < 6; y++) for (int x = 0; x < 6; x++) img[y][x] = rnd256();
    for (int y = 0; y < 6; y++) for (int x = 0; x < 6; x++) src[y][x] = img[y][x];
    wptr = 0; bptr = 0;
    ref_layer(S1, 0, 6, 6, wptr, bptr);
    for (int y = 0; y < 5; y++) for (int x = 0; x < 5; x++) begin east[y][x] = dst[y][x]; src[y][x] = dst[y][x]; end
    ref_layer(S2, 1, 5, 5, wptr, bptr);
    for (int y = 0; y < 2; y++) for (int x = 0; x < 2; x++) begin west[y][x] = dst[y][x]; src[y][x] = dst[y][x]; end
    ref_layer(S4, 0, 2, 2, wptr, bptr);
    east[0][0] = dst[0][0]; src[0][0] = dst[0][0];
    for (int m = 0; m < 4; m++) lab[m] = ref_fc(m, 4, 1, 1, 10);
    run_program(pa, img, 6, 6, lab, 4);
    for (int y = 0; y < 5; y++) for (int x = 0; x < 5; x++) begin
      checks++;
      if (dut_pix(1, x, y) !== east[y][x]) begin failures++; $display("FAIL east pixel %0d,%0d", x, y); end
    end
    for (int y = 0; y < 2; y++) for (int x = 0; x < 2; x++) begin
      checks++;
      if (dut_pix(0, x, y) !== west[y][x]) begin failures++; $display("FAIL west pixel %0d,%0d", x, y); end
    end

    // ---- program B (pointers restart at the first layer's weights)
    pb = '{mk(OP_IO, S1, 0, 5, 5, 0, 0), mk(OP_CNN, S1, 1, 5, 5, 0, 0), mk(OP_FC, S1, 0, 2, 2, 7, 1)};
    for (int y = 0; y < 5; y++) for (int x = 0; x < 5; x++) begin img[y][x] = rnd256(); src[y][x] = img[y][x]; end
    wptr = 0; bptr = 0;
    ref_layer(S1, 1, 5, 5, wptr, bptr);
    for (int y = 0; y < 2; y++) for (int x = 0; x < 2; x++) begin east[y][x] = dst[y][x]; src[y][x] = dst[y][x]; end
    lab[0] = ref_fc(0, 1, 2, 2, 7);
    run_program(pb, img, 5, 5, lab, 1);
    for (int y = 0; y < 2; y++) for (int x = 0; x < 2; x++) begin
      checks++;
      if (dut_pix(1, x, y) !== east[y][x]) begin failures++; $display("FAIL B east pixel %0d,%0d", x, y); end
    end

    $display("mechanisms: io_stall=%0d ld_phases=%0d conv_outputs=%0d pooled=%0d S1=%0d S2=%0d S4=%0d swaps=%0d labels=%0d",
             n_io_stall, n_ld, n_conv, n_pool, n_s[0], n_s[1], n_s[2], n_swap, n_label);
    checks += 9;
    if (n_io_stall == 0) begin failures++; $display("FAIL no input gap"); end
    if (n_ld != 11) begin failures++; $display("FAIL LD phases %0d", n_ld); end
    if (n_conv == 0) failures++;
    if (n_pool != 2 * 4 + 4 * 4) begin failures++; $display("FAIL pooled %0d", n_pool); end
    if (n_s[0] == 0) failures++;
    if (n_s[1] == 0) failures++;
    if (n_s[2] == 0) failures++;
    if (n_swap == 0) failures++;
    if (n_label != 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
