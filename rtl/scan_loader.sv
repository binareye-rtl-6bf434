// scan_loader: the 3-wire weight-scan interface of BinarEye.
//
// The paper shows a 3-bit "weight scan" port used once to fill the on-chip
// memories; it gives no protocol.  This design uses the three wires as a
// serial loader: wscan[0] is the data bit, wscan[1] shifts it into a frame
// register (MSB first), wscan[2] commits the frame as one memory write.  A
// frame is {target[2:0], addr[11:0], data[255:0]} (271 bits); the target
// selects north weights, south weights, biases, FC weights or the program
// memory (tgt_e in binareye_pkg), and each memory takes the low bits of data
// it needs.
//
// Timing: one bit per shift cycle; the write (wr_en) is issued in the cycle
// after the commit.  A commit uses the frame as it was before any shift in
// the same cycle.
module scan_loader
  import binareye_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic [2:0]    wscan,
  output logic          wr_en,
  output tgt_e          wr_tgt,
  output logic [11:0]   wr_addr,
  output logic [255:0]  wr_data
);
  localparam int unsigned SR_W = 3 + 12 + 256;

  logic [SR_W-1:0] sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr      <= '0;
      wr_en   <= 1'b0;
      wr_tgt  <= TGT_NORTH;
      wr_addr <= '0;
      wr_data <= '0;
    end else begin
      wr_en <= wscan[2];
      if (wscan[2]) begin
        wr_tgt  <= tgt_e'(sr[SR_W-1 -: 3]);
        wr_addr <= sr[256 +: 12];
        wr_data <= sr[255:0];
      end
      if (wscan[1]) sr <= {sr[SR_W-2:0], wscan[0]};
    end
  end

  a_no_shift_commit: assert property (@(posedge clk) disable iff (!rst_n) !(wscan[1] && wscan[2]))
    else $error("scan shift and commit in the same cycle");
endmodule
