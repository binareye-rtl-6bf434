// tb_neuron_array: loads all 64 neurons through the LD bus (two cycles per
// neuron, as the controller does), applies random 2x2x256 windows and checks
// every neuron's registered outputs one cycle later for S = 1, 2 and 4
// against a reference dot-product model.
module tb_neuron_array;
  import binareye_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_en, ld_half, ld_bias_en;
  logic [5:0] ld_idx;
  logic [255:0] ld_north, ld_south;
  logic signed [8:0] ld_bias;
  s_code_e s_code;
  logic [3:0][255:0] win;
  logic [63:0][3:0] out_bits;

  logic [63:0][3:0][255:0] W;
  int B [64];

  neuron_array dut (.clk, .ld_en, .ld_idx, .ld_half, .ld_north, .ld_south, .ld_bias_en, .ld_bias,
                    .s_code, .win, .out_bits);

  function automatic logic [255:0] rnd256();
    logic [255:0] r;
    for (int k = 0; k < 8; k++) r[32*k +: 32] = $urandom;
    return r;
  endfunction

  function automatic logic [3:0] ref_out(input int n, input s_code_e s, input logic [3:0][255:0] wv);
    int c[4];
    logic [3:0] r;
    for (int j = 0; j < 4; j++) begin
      c[j] = 0;
      for (int ch = 0; ch < 64; ch++)
        for (int k = 0; k < 4; k++)
          if (wv[k][64*j + ch] == W[n][j][k*64 + ch]) c[j]++;
      if (c[j] > 255) c[j] = 255;
    end
    r = '0;
    case (s)
      S1: r[0] = (c[0] + c[1] + c[2] + c[3] + B[n]) >= 512;
      S2: begin r[0] = (c[0] + c[1] + B[n]) >= 256; r[1] = (c[2] + c[3] + B[n]) >= 256; end
      default: for (int m = 0; m < 4; m++) r[m] = (c[m] + B[n]) >= 128;
    endcase
    return r;
  endfunction

  initial begin
    logic [3:0][255:0] wprev;
    s_code_e sprev;
    int ones = 0;
    ld_en = 0; ld_bias_en = 0; s_code = S1; win = '0;
    for (int rep = 0; rep < 2; rep++) begin
      for (int n = 0; n < 64; n++) begin
        for (int j = 0; j < 4; j++) W[n][j] = rnd256();
        B[n] = int'($urandom_range(0, 160)) - 80;
        @(negedge clk);
        ld_en = 1; ld_idx = 6'(n); ld_half = 0; ld_north = W[n][0]; ld_south = W[n][2];
        ld_bias_en = 1; ld_bias = 9'(B[n]);
        @(negedge clk);
        ld_half = 1; ld_north = W[n][1]; ld_south = W[n][3]; ld_bias_en = 0;
      end
      @(negedge clk);
      ld_en = 0;
      for (int t = 0; t < 12; t++) begin
        wprev = win; sprev = s_code;
        win = {rnd256(), rnd256(), rnd256(), rnd256()};
        if (t % 2 == 1) begin  // copy neuron t's weights into the window so some outputs are 1
          for (int j = 0; j < 4; j++) for (int ch = 0; ch < 64; ch++) for (int k = 0; k < 4; k++)
            win[k][64*j + ch] = W[t][j][k*64 + ch];
        end
        s_code = s_code_e'(t % 3);
        @(negedge clk);
        for (int n = 0; n < 64; n++) begin
          logic [3:0] r;
          r = ref_out(n, s_code, win);
          ones += $countones(r);
          checks++;
          if (out_bits[n] !== r) begin
            failures++;
            if (failures < 10) $display("FAIL rep=%0d t=%0d n=%0d out=%b ref=%b", rep, t, n, out_bits[n], r);
          end
        end
      end
    end
    if (ones == 0) begin failures++; $display("FAIL no output was ever 1"); end
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
