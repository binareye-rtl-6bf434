// tb_neuron: loads random weights and biases into one neuron and checks its
// 1, 2 or 4 binary outputs for S = 1, 2, 4 against a reference that counts
// agreeing bits per 64-channel quarter, saturates each at 255 and compares
// the S-dependent sums plus the bias with half the number of inputs.
module tb_neuron;
  import binareye_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0]   ld_we;
  logic [255:0] ld_north, ld_south;
  logic         bias_we;
  logic signed [8:0] bias_wdata;
  s_code_e      s_code;
  logic [3:0][255:0] win;
  logic [3:0]   out_bits;

  logic [3:0][255:0] W;
  int                B;

  neuron dut (.clk, .ld_we, .ld_north, .ld_south, .bias_we, .bias_wdata, .s_code, .win, .out_bits);

  function automatic logic [255:0] rnd256();
    logic [255:0] r;
    for (int k = 0; k < 8; k++) r[32*k +: 32] = $urandom;
    return r;
  endfunction

  function automatic logic [3:0] ref_out(input s_code_e s);
    int c[4];
    logic [3:0] r;
    for (int j = 0; j < 4; j++) begin
      c[j] = 0;
      for (int ch = 0; ch < 64; ch++)
        for (int k = 0; k < 4; k++)
          if (win[k][64*j + ch] == W[j][k*64 + ch]) c[j]++;
      if (c[j] > 255) c[j] = 255;
    end
    r = '0;
    case (s)
      S1: r[0] = (c[0] + c[1] + c[2] + c[3] + B) >= 512;
      S2: begin
        r[0] = (c[0] + c[1] + B) >= 256;
        r[1] = (c[2] + c[3] + B) >= 256;
      end
      default: for (int m = 0; m < 4; m++) r[m] = (c[m] + B) >= 128;
    endcase
    return r;
  endfunction

  initial begin
    ld_we = 0; bias_we = 0; s_code = S1; win = '0;
    for (int t = 0; t < 200; t++) begin
      // load two sub-neurons from north/south at a time
      @(negedge clk);
      W[0] = rnd256(); W[2] = rnd256();
      ld_north = W[0]; ld_south = W[2]; ld_we = 4'b0101;
      bias_we = 1; B = int'($urandom_range(0, 511)) - 256; bias_wdata = 9'(B);
      @(negedge clk);
      W[1] = rnd256(); W[3] = rnd256();
      ld_north = W[1]; ld_south = W[3]; ld_we = 4'b1010; bias_we = 0;
      @(negedge clk);
      ld_we = 0;
      ld_north = rnd256(); ld_south = rnd256(); // must be ignored
      for (int r = 0; r < 4; r++) begin
        // windows near the weights make outputs of both signs likely
        for (int k = 0; k < 4; k++) win[k] = rnd256();
        if (r >= 2) for (int j = 0; j < 4; j++) for (int ch = 0; ch < 64; ch++) for (int k = 0; k < 4; k++)
          if ($urandom_range(0, 3) != 0) win[k][64*j + ch] = W[j][k*64 + ch];
        for (int sc = 0; sc < 3; sc++) begin
          s_code = s_code_e'(sc);
          #1;
          checks++;
          if (out_bits !== ref_out(s_code)) begin
            failures++;
            $display("FAIL t=%0d S=%0d out=%b ref=%b", t, sc, out_bits, ref_out(s_code));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
