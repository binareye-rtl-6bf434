// act_sram: one 32 kB activation (feature-map) SRAM of BinarEye.
//
// The memory holds a whole 256-channel map of up to 32x32 pixels; one word is
// one pixel with all 256 channel bits, so 1024 words x 256 bits = 32 kB, the
// size the paper gives for each of the west and east SRAMs.  A convolution
// step needs the two pixels (x,y) and (x,y+1) of the next window column in one
// cycle.  This design gets them by splitting the memory into two banks by row
// parity: row y lives in bank y%2 at address (y/2)*32 + x, so rows y and y+1
// are always in different banks.  The banking is this design's choice.
//
// Interface and timing: a read (rd_en) of (rd_x, rd_y) returns pixel (x,y) on
// rd_top and pixel (x,y+1) on rd_bot one cycle later (rd_bot is meaningless
// when y is the last row).  A write (wr_en) updates the channels of pixel
// (wr_x, wr_y) selected by wr_mask.  A read and a write in the same cycle must
// hit different banks or the write wins in its bank; the controller never
// reads and writes the same SRAM in one cycle.
module act_sram
  import binareye_pkg::*;
(
  input  logic                clk,
  input  logic                rd_en,
  input  logic [XY_W-1:0]     rd_x,
  input  logic [XY_W-1:0]     rd_y,
  output logic [CHANNELS-1:0] rd_top,
  output logic [CHANNELS-1:0] rd_bot,
  input  logic                wr_en,
  input  logic [XY_W-1:0]     wr_x,
  input  logic [XY_W-1:0]     wr_y,
  input  logic [CHANNELS-1:0] wr_mask,
  input  logic [CHANNELS-1:0] wr_data
);
  localparam int unsigned BANK_DEPTH = MAXDIM * MAXDIM / 2;  // 512
  localparam int unsigned BAW = $clog2(BANK_DEPTH);

  logic [XY_W-1:0]     y1;
  logic                bank_top_q;
  logic [1:0]          en, we;
  logic [1:0][BAW-1:0] addr;
  logic [1:0][CHANNELS-1:0] rdata;

  assign y1 = rd_y + 1'b1;

  always_comb begin
    en   = '0;
    we   = '0;
    addr = '0;
    if (rd_en) begin
      en[rd_y[0]]   = 1'b1;
      addr[rd_y[0]] = {rd_y[XY_W-1:1], rd_x};
      en[y1[0]]     = 1'b1;
      addr[y1[0]]   = {y1[XY_W-1:1], rd_x};
    end
    if (wr_en) begin
      en[wr_y[0]]   = 1'b1;
      we[wr_y[0]]   = 1'b1;
      addr[wr_y[0]] = {wr_y[XY_W-1:1], wr_x};
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    sram_1p #(.DEPTH(BANK_DEPTH), .WIDTH(CHANNELS)) u_bank (
      .clk  (clk),
      .en   (en[b]),
      .we   (we[b]),
      .addr (addr[b]),
      .wmask(wr_mask),
      .wdata(wr_data),
      .rdata(rdata[b])
    );
  end

  always_ff @(posedge clk)
    if (rd_en) bank_top_q <= rd_y[0];

  assign rd_top = rdata[bank_top_q];
  assign rd_bot = rdata[~bank_top_q];

endmodule
