// tb_sram_1p: random masked writes and reads against a shadow array;
// checks the one-cycle read latency and that rdata holds while idle.
module tb_sram_1p;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 64, WD = 40;
  logic en, we;
  logic [5:0] addr;
  logic [WD-1:0] wmask, wdata, rdata, shadow [D], expect_q;

  sram_1p #(.DEPTH(D), .WIDTH(WD)) dut (.clk, .en, .we, .addr, .wmask, .wdata, .rdata);

  initial begin
    en = 0; we = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 6'(a); wmask = '1; wdata = {$urandom, $urandom};
      shadow[a] = wdata;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      we = $urandom_range(0, 1);
      addr = 6'($urandom_range(0, D - 1));
      wmask = {$urandom, $urandom};
      wdata = {$urandom, $urandom};
      if (en && we) shadow[addr] = (shadow[addr] & ~wmask) | (wdata & wmask);
      if (en && !we) begin
        expect_q = shadow[addr];
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== expect_q) begin failures++; $display("FAIL read a=%0d", addr); end
        @(negedge clk);
        checks++;
        if (rdata !== expect_q) begin failures++; $display("FAIL hold a=%0d", addr); end
      end
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
