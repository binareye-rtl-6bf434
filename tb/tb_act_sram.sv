// tb_act_sram: fills a 32x32 map with random masked pixel writes, then reads
// random pixel pairs (x,y)/(x,y+1) and checks both against a shadow copy.
module tb_act_sram;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rd_en, wr_en;
  logic [4:0] rd_x, rd_y, wr_x, wr_y;
  logic [255:0] rd_top, rd_bot, wr_mask, wr_data;
  logic [255:0] shadow [32][32];

  act_sram dut (.clk, .rd_en, .rd_x, .rd_y, .rd_top, .rd_bot, .wr_en, .wr_x, .wr_y, .wr_mask, .wr_data);

  function automatic logic [255:0] rnd256();
    logic [255:0] r;
    for (int k = 0; k < 8; k++) r[32*k +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    rd_en = 0; wr_en = 0;
    for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) begin
      @(negedge clk);
      wr_en = 1; wr_x = 5'(x); wr_y = 5'(y); wr_mask = '1; wr_data = rnd256();
      shadow[y][x] = wr_data;
    end
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      wr_en = 1; wr_x = 5'($urandom_range(0, 31)); wr_y = 5'($urandom_range(0, 31));
      wr_mask = rnd256(); wr_data = rnd256();
      shadow[wr_y][wr_x] = (shadow[wr_y][wr_x] & ~wr_mask) | (wr_data & wr_mask);
      @(negedge clk);
      wr_en = 0; rd_en = 1;
      rd_x = 5'($urandom_range(0, 31)); rd_y = 5'($urandom_range(0, 30));
      @(negedge clk);
      rd_en = 0;
      checks += 2;
      if (rd_top !== shadow[rd_y][rd_x]) begin failures++; $display("FAIL top %0d,%0d", rd_x, rd_y); end
      if (rd_bot !== shadow[rd_y + 1][rd_x]) begin failures++; $display("FAIL bot %0d,%0d", rd_x, rd_y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
