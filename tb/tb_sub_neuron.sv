// tb_sub_neuron: checks the XNOR / bit-count sub-neuron against an
// independent count, including the saturation at 255 when all 256 pairs agree.
module tb_sub_neuron;
  logic [255:0] act, wgt;
  logic [7:0]   cnt;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  sub_neuron dut (.act, .wgt, .cnt);

  task automatic check(input logic [255:0] a, input logic [255:0] w);
    int ref_cnt;
    act = a; wgt = w;
    #1;
    ref_cnt = 0;
    for (int i = 0; i < 256; i++) if (a[i] == w[i]) ref_cnt++;
    if (ref_cnt > 255) ref_cnt = 255;
    checks++;
    if (cnt !== 8'(ref_cnt)) begin
      failures++;
      $display("FAIL cnt=%0d ref=%0d", cnt, ref_cnt);
    end
  endtask

  initial begin
    logic [255:0] a, w;
    check('0, '0);          // all agree -> saturate
    check('0, '1);          // none agree
    check({128{2'b01}}, '0);
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < 8; k++) begin
        a[32*k +: 32] = $urandom;
        w[32*k +: 32] = $urandom;
      end
      if (t % 3 == 0) w = a ^ (256'(1) << (t % 256)); // 255 agree
      check(a, w);
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
