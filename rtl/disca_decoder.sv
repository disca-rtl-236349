// disca_decoder: the DISCA split row decoder with an address latch.
//
// A 7-to-128 row decoder is split into two 6-to-64 decoders. Decoder-1 drives
// the upper half of the array (rows 0 .. ROWS/2-1, weight matrix U) straight
// from the address bus. Decoder-2 drives the lower half (rows ROWS/2 ..
// ROWS-1, input matrix L) from the same bus through a set of address latches.
// While latch_en is high the latch is transparent and Decoder-2 follows the
// bus (and the address is kept); while it is low Decoder-2 keeps the last
// latched L row. One address thus activates U.Row(addr) together with the
// held L.Row, and a GEMM loop steps through every U row for one L row before
// loading the next L row: no second decoder address and no microcontroller.
//
// Commands (one per clock, given on op/half/latch_en/addr):
//   OP_WRITE / OP_READ, half=HALF_U : one wordline, row addr
//   OP_WRITE / OP_READ, half=HALF_L : one wordline, row ROWS/2 + latched addr
//                                     (latch_en must be high)
//   OP_SCMUL                        : rows addr and ROWS/2 + latched addr
//   OP_NOP                          : no wordline
// Timing: the wordlines and the operation are registered, so they drive the
// array during the clock cycle after the command (wl/op_q). The latch is a
// hold register with a bypass; the latch itself, the address sharing and the
// U/L halves follow the published design, while the register stage and the
// command encoding are this design's choices.
module disca_decoder
  import disca_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  localparam int unsigned AW  = $clog2(ROWS) - 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  op_e             op,
  input  half_e           half,
  input  logic            latch_en,
  input  logic [AW-1:0]   addr,
  output logic [ROWS-1:0] wl,
  output op_e             op_q
);

  localparam int unsigned HROWS = ROWS / 2;

  logic [AW-1:0]    lat_q;
  logic [AW-1:0]    lat_addr;        // address seen by Decoder-2
  logic             up_en, lo_en;
  logic [HROWS-1:0] dec_up, dec_lo;

  assign lat_addr = latch_en ? addr : lat_q;

  always_comb begin
    up_en = 1'b0;
    lo_en = 1'b0;
    unique case (op)
      OP_WRITE, OP_READ: begin
        up_en = (half == HALF_U);
        lo_en = (half == HALF_L);
      end
      OP_SCMUL: begin
        up_en = 1'b1;
        lo_en = 1'b1;
      end
      default: ;
    endcase
  end

  // Two (n-1) to 2^(n-1) decoders.
  always_comb begin
    dec_up = '0;
    dec_lo = '0;
    dec_up[addr]     = up_en;
    dec_lo[lat_addr] = lo_en;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lat_q <= '0;
      wl    <= '0;
      op_q  <= OP_NOP;
    end else begin
      if (latch_en) lat_q <= addr;
      wl   <= {dec_lo, dec_up};
      op_q <= op;
    end
  end

  // An L-row read or write goes through the latch, which must be open.
  a_l_access_latched: assert property (@(posedge clk) disable iff (!rst_n)
      ((op == OP_WRITE || op == OP_READ) && half == HALF_L) |-> latch_en)
    else $error("L-half access with the address latch closed");

endmodule
