// tb_benchmark9: runs the paper's 9-layer benchmark network on the whole
// processor at its real size, once for each batch size S = 4, 2, 1.
//
// Layer shapes follow the benchmark table of the paper: a 32x32 input,
// eight 2x2 CNN layers on 32, 31, 30, 29 (pooled), 14, 13 (pooled), 6 and 5
// pixel squares, and an FC layer on the final 4x4 map with 10 classes.  The
// weights are random (no trained model is available), loaded through the
// scan port; the input image is random and sent over the 16-bit port.  The
// labels are compared with a reference model, and each CNN layer's length in
// cycles with phases * (128 + (h-1)*w + 4).
module tb_benchmark9;
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

  int n_layers;  // set at run time, so the layer loop stays a loop

  // one run of the 9-layer network at batch size s: load the model through
  // the scan port, run the program, compare labels and layer timing
  task automatic run_network(input s_code_e s);
    instr_t p [$];
    logic [255:0] img [32][32];
    int wptr, bptr, lab [4], nm, nph, t0, cyc;
    int dims[8] = '{32, 31, 30, 29, 14, 13, 6, 5};
    logic pool[8] = '{0, 0, 0, 1, 0, 1, 0, 0};
    nm  = (s == S1) ? 1 : (s == S2) ? 2 : 4;
    nph = 4 / nm;
    for (int a = 0; a < 8 * nph * 128; a++) begin
      north[a] = rnd256(); south[a] = rnd256();
      scan_frame(TGT_NORTH, a, north[a]);
      scan_frame(TGT_SOUTH, a, south[a]);
    end
    for (int a = 0; a < 8 * nph * 64; a++) begin
      bias[a] = int'($urandom_range(0, 40)) - 20;
      scan_frame(TGT_BIAS, a, 256'(9'(bias[a])));
    end
    for (int a = 0; a < 160; a++) begin
      fcw[a] = rnd256();
      scan_frame(TGT_FC, a, fcw[a]);
    end
    p.push_back(mk(OP_IO, s, 0, 32, 32, 0, 0));
    for (int l = 0; l < 8; l++) p.push_back(mk(OP_CNN, s, pool[l], dims[l], dims[l], 0, 0));
    p.push_back(mk(OP_FC, s, 0, 4, 4, 10, 1));
    // reference
    for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) begin img[y][x] = rnd256(); src[y][x] = img[y][x]; end
    wptr = 0; bptr = 0;
    for (int l = 0; l < n_layers; l++) begin
      int d;
      ref_layer(s, pool[l], dims[l], dims[l], wptr, bptr);
      d = pool[l] ? (dims[l] - 1) / 2 : dims[l] - 1;
      for (int y = 0; y < d; y++) for (int x = 0; x < d; x++) src[y][x] = dst[y][x];
    end
    for (int m = 0; m < nm; m++) lab[m] = ref_fc(m, nm, 4, 4, 10);
    t0 = n_ld;
    run_program(p, img, 32, 32, lab, nm);
    checks++;
    if (n_ld - t0 != 8 * nph) begin failures++; $display("FAIL %0d LD phases", n_ld - t0); end
  endtask

  // cycles of each CNN layer, against phases * (128 + (h-1)*w + 4)
  int lay_start, lay_cycles [$];
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.st == dut.u_ctrl.C_FETCH) lay_start <= 0;
    else lay_start <= lay_start + 1;
    if (dut.u_ctrl.st == dut.u_ctrl.C_NEXT && dut.instr.op == OP_CNN) lay_cycles.push_back(lay_start);
  end

  initial begin
    static int dims[8] = '{32, 31, 30, 29, 14, 13, 6, 5};
    n_layers = 8;
    rst_n = 0; start = 0; in_valid = 0; in_data = 0; wscan = 0;
    n_io_stall = 0; n_ld = 0; n_conv = 0; n_pool = 0; n_s = '{0, 0, 0}; n_swap = 0; n_label = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      s_code_e s;
      int nph;
      s = (r == 0) ? S4 : (r == 1) ? S2 : S1;
      nph = (s == S1) ? 4 : (s == S2) ? 2 : 1;
      lay_cycles.delete();
      run_network(s);
      for (int l = 0; l < 8; l++) begin
        checks++;
        if (lay_cycles[l] != nph * (128 + (dims[l] - 1) * dims[l] + 4)) begin
          failures++; $display("FAIL layer %0d took %0d cycles", l + 1, lay_cycles[l]);
        end
      end
      $display("S=%0d: layer cycles %p", 4 / nph, lay_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
