// tb_act_window: shifts random pixel columns into the 2x2 window buffer and
// checks that each window holds the previous and the newest column.
module tb_act_window;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic shift;
  logic [255:0] top_in, bot_in, pt, pb, ct, cb;
  logic [3:0][255:0] win;

  act_window dut (.clk, .shift, .top_in, .bot_in, .win);

  function automatic logic [255:0] rnd256();
    logic [255:0] r;
    for (int k = 0; k < 8; k++) r[32*k +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    shift = 0;
    ct = '0; cb = '0;
    @(negedge clk);
    shift = 1; top_in = '0; bot_in = '0;
    @(negedge clk);
    for (int t = 0; t < 200; t++) begin
      pt = ct; pb = cb;
      ct = rnd256(); cb = rnd256();
      shift = ($urandom_range(0, 3) != 0);
      top_in = ct; bot_in = cb;
      if (!shift) begin ct = pt; cb = pb; end
      @(negedge clk);
      if (shift) begin
        checks++;
        if (win[0] !== pt || win[2] !== pb || win[1] !== ct || win[3] !== cb) begin
          failures++;
          $display("FAIL t=%0d", t);
        end
      end else begin
        checks++;
        if (win[1] !== ct || win[3] !== cb) begin failures++; $display("FAIL hold t=%0d", t); end
        ct = pt; cb = pb; // restore the pair as before
        ct = win[1]; cb = win[3];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
