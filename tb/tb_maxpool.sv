// tb_maxpool: streams conv outputs of several map sizes (odd and even) in
// raster order and checks the pooled pixels (positions, data as OR of the
// 2x2 block, mask, count) and their one-cycle latency.
module tb_maxpool;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, in_valid, out_valid;
  logic [4:0] in_x, in_y, out_x, out_y;
  logic [255:0] in_data, in_mask, out_data, out_mask;
  logic [255:0] img [32][32];
  int got;

  maxpool dut (.clk, .rst_n, .in_valid, .in_x, .in_y, .in_data, .in_mask,
               .out_valid, .out_x, .out_y, .out_data, .out_mask);

  function automatic logic [255:0] rnd256();
    logic [255:0] r;
    for (int k = 0; k < 8; k++) r[32*k +: 32] = $urandom & $urandom;  // sparse ones
    return r;
  endfunction

  initial begin
    int sizes[4] = '{31, 28, 5, 12};
    rst_n = 0; in_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (sizes[i]) begin
      int wo, ho;
      logic [255:0] m;
      wo = sizes[i]; ho = sizes[(i + 1) % 4];
      m = rnd256();
      got = 0;
      for (int y = 0; y < ho; y++) for (int x = 0; x < wo; x++) img[y][x] = rnd256();
      for (int y = 0; y < ho; y++) for (int x = 0; x < wo; x++) begin
        @(negedge clk);
        // check the output produced by the previous input
        if (out_valid) begin
          logic [255:0] r;
          int px, py;
          px = out_x; py = out_y;
          r = img[2*py][2*px] | img[2*py][2*px+1] | img[2*py+1][2*px] | img[2*py+1][2*px+1];
          checks++; got++;
          if (out_data !== r || out_mask !== m || !(in_x == 5'(2*px+1) && in_y == 5'(2*py+1))) begin
            failures++; $display("FAIL pooled %0d,%0d", px, py);
          end
        end
        in_valid = 1; in_x = 5'(x); in_y = 5'(y); in_data = img[y][x]; in_mask = m;
        if ($urandom_range(0, 5) == 0) begin  // a bubble must not disturb anything
          in_valid = 0;
          @(negedge clk);
          if (out_valid) begin
            checks++; got++;
          end
          in_valid = 1;
        end
      end
      @(negedge clk);
      in_valid = 0;
      if (out_valid) begin checks++; got++; end
      @(negedge clk);
      checks++;
      if (got != (wo / 2) * (ho / 2)) begin failures++; $display("FAIL count %0d vs %0d", got, (wo/2)*(ho/2)); end
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
