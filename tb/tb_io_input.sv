// tb_io_input: sends a w x h map as 16-bit beats with random gaps and checks
// that the masked writes rebuild every pixel, that in_ready drops after the
// last beat, and that done pulses once.
module tb_io_input;
  import binareye_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, start, in_valid, in_ready, wr_en, done;
  logic [5:0] w, h;
  logic [15:0] in_data;
  logic [4:0] wr_x, wr_y;
  logic [255:0] wr_mask, wr_data;
  logic [255:0] img [32][32], mem [32][32];
  int ndone;

  io_input dut (.clk, .rst_n, .start, .w, .h, .in_valid, .in_ready, .in_data,
                .wr_en, .wr_x, .wr_y, .wr_mask, .wr_data, .done);

  always @(posedge clk) begin
    if (wr_en) mem[wr_y][wr_x] <= (mem[wr_y][wr_x] & ~wr_mask) | (wr_data & wr_mask);
    if (done) ndone <= ndone + 1;
  end

  initial begin
    int dims[3][2] = '{'{3, 2}, '{7, 5}, '{32, 2}};
    rst_n = 0; start = 0; in_valid = 0; ndone = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (dims[d]) begin
      int cyc;
      w = 6'(dims[d][0]); h = 6'(dims[d][1]);
      for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) mem[y][x] = '0;
      for (int y = 0; y < h; y++) for (int x = 0; x < w; x++)
        for (int k = 0; k < 8; k++) img[y][x][32*k +: 32] = $urandom;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) for (int b = 0; b < 16; b++) begin
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_data = img[y][x][16*b +: 16];
        checks++;
        if (!in_ready) begin failures++; $display("FAIL not ready"); end
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      checks++;
      if (in_ready) begin failures++; $display("FAIL ready after last beat"); end
      for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
        checks++;
        if (mem[y][x] !== img[y][x]) begin failures++; $display("FAIL pixel %0d,%0d", x, y); end
      end
      checks++;
      if (ndone != d + 1) begin failures++; $display("FAIL done count %0d", ndone); end
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
