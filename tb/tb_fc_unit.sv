// tb_fc_unit: runs the FC layer on random maps and weights held in
// testbench memories (one-cycle read latency, like the SRAMs) for S = 1, 2
// and 4 and several sizes and class counts.  Checks the S labels against an
// independent arg-max of XNOR counts, the label order and the cycle count
// (w*h*nlabels read cycles, then one label per cycle).
module tb_fc_unit;
  import binareye_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start;
  s_code_e s_code;
  logic [5:0] w, h;
  logic [3:0] nlabels;
  logic act_rd_en, fc_rd_en, label_valid, done;
  logic [4:0] act_rd_x, act_rd_y;
  logic [255:0] act_rd_data, fc_rd_data;
  logic [7:0] fc_rd_addr;
  logic [3:0] label;
  logic [1:0] label_map;

  logic [255:0] amem [32][32];
  logic [255:0] fmem [160];

  fc_unit dut (.clk, .rst_n, .start, .s_code, .w, .h, .nlabels,
               .act_rd_en, .act_rd_x, .act_rd_y, .act_rd_data,
               .fc_rd_en, .fc_rd_addr, .fc_rd_data,
               .label_valid, .label, .label_map, .done);

  always @(posedge clk) begin
    if (act_rd_en) act_rd_data <= amem[act_rd_y][act_rd_x];
    if (fc_rd_en)  fc_rd_data  <= fmem[fc_rd_addr];
  end

  function automatic logic [255:0] rnd256();
    logic [255:0] r;
    for (int k = 0; k < 8; k++) r[32*k +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    rst_n = 0; start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      int nm, best[4], bcls[4], cyc, nlab, wd, ht;
      s_code = s_code_e'(t % 3);
      nm = (s_code == S1) ? 1 : (s_code == S2) ? 2 : 4;
      case (t % 4)
        0: begin wd = 4; ht = 4; end
        1: begin wd = 2; ht = 3; end
        2: begin wd = 1; ht = 1; end
        default: begin wd = 4; ht = 2; end
      endcase
      nlab = (t % 5 == 0) ? 10 : int'($urandom_range(1, 10));
      w = 6'(wd); h = 6'(ht); nlabels = 4'(nlab);
      for (int y = 0; y < ht; y++) for (int x = 0; x < wd; x++) amem[y][x] = rnd256();
      for (int a = 0; a < 160; a++) fmem[a] = rnd256();
      // reference
      for (int m = 0; m < nm; m++) begin best[m] = -1; bcls[m] = 0; end
      for (int c = 0; c < nlab; c++) begin
        int sc[4];
        for (int m = 0; m < 4; m++) sc[m] = 0;
        for (int y = 0; y < ht; y++) for (int x = 0; x < wd; x++)
          for (int i = 0; i < 256; i++)
            if (amem[y][x][i] == fmem[c*wd*ht + y*wd + x][i]) sc[i / (256 / nm)]++;
        for (int m = 0; m < nm; m++) if (sc[m] > best[m]) begin best[m] = sc[m]; bcls[m] = c; end
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!label_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != wd * ht * nlab + 3) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int m = 0; m < nm; m++) begin
        checks++;
        if (!label_valid || label_map != 2'(m) || label != 4'(bcls[m])) begin
          failures++;
          $display("FAIL t=%0d S=%0d map %0d label %0d ref %0d", t, nm, m, label, bcls[m]);
        end
        if (m == nm - 1) begin
          checks++;
          if (!done) begin failures++; $display("FAIL done"); end
        end
        @(negedge clk);
      end
      checks++;
      if (label_valid) begin failures++; $display("FAIL extra label"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
