// tb_scan_loader: shifts random frames {target, address, data} through the
// 3-wire scan port, with idle cycles in between, and checks each write.
module tb_scan_loader;
  import binareye_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;
  logic [2:0] wscan;
  logic wr_en;
  tgt_e wr_tgt;
  logic [11:0] wr_addr;
  logic [255:0] wr_data;
  int nwr;

  scan_loader dut (.clk, .rst_n, .wscan, .wr_en, .wr_tgt, .wr_addr, .wr_data);

  always @(posedge clk) if (wr_en) nwr <= nwr + 1;

  initial begin
    logic [270:0] f;
    rst_n = 0; wscan = 0; nwr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      for (int k = 0; k < 8; k++) f[32*k +: 32] = $urandom;
      f[267:256] = 12'($urandom);
      f[270:268] = 3'($urandom_range(0, 4));
      for (int i = 270; i >= 0; i--) begin
        @(negedge clk);
        wscan = {1'b0, 1'b1, f[i]};
        if ($urandom_range(0, 9) == 0) begin @(negedge clk); wscan = 3'b000; end
      end
      @(negedge clk);
      wscan = 3'b100;
      @(negedge clk);
      wscan = 3'b000;
      checks++;
      if (!(wr_en && wr_tgt == tgt_e'(f[270:268]) && wr_addr == f[267:256] && wr_data == f[255:0])) begin
        failures++; $display("FAIL frame %0d", t);
      end
      @(negedge clk);
    end
    checks++;
    if (nwr != 40) begin failures++; $display("FAIL %0d writes", nwr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
