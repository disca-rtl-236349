// disca_bank: one DISCA bank, SUBARRAYS 4 KB subarrays of which each group of
// SHARE neighbours is driven by one shared decoder.
//
// Because a GEMM runs the same address sequence on many subarrays at once,
// one split decoder (disca_decoder) drives the wordlines of SHARE subarrays
// (two by default), halving the decoding cost. Each decoder has its own
// command port (op, half, latch_en, addr); each subarray has its own write
// data and its own outputs. Subarray s is driven by decoder s / SHARE.
// Timing is that of disca_subarray: read or SC-MUL bits one clock after the
// command is registered, the dot product two clocks after that.
// Four subarrays per bank and the decoder shared by two subarrays follow the
// published design; the port arrangement is this design's choice.
module disca_bank
  import disca_pkg::*;
#(
  parameter int unsigned ROWS       = 128,
  parameter int unsigned COLS       = 256,
  parameter int unsigned SLICE_COLS = 8,
  parameter int unsigned SEG        = disca_pkg::BP_BITS,
  parameter int unsigned SUBARRAYS  = 4,
  parameter int unsigned SHARE      = 2,
  localparam int unsigned NDEC      = SUBARRAYS / SHARE,
  localparam int unsigned AW        = $clog2(ROWS) - 1,
  localparam int unsigned SW        = $clog2(COLS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // one command port per decoder
  input  op_e             op       [NDEC],
  input  half_e           half     [NDEC],
  input  logic            latch_en [NDEC],
  input  logic [AW-1:0]   addr     [NDEC],
  // one data port per subarray
  input  logic [COLS-1:0] wdata    [SUBARRAYS],
  output logic [COLS-1:0] rdata    [SUBARRAYS],
  output logic            rd_valid [SUBARRAYS],
  output logic [SW-1:0]   dot      [SUBARRAYS],
  output logic            dot_valid[SUBARRAYS]
);

  logic [ROWS-1:0] wl     [NDEC];
  op_e             op_q   [NDEC];

  initial begin
    if (SUBARRAYS % SHARE != 0) $fatal(1, "SUBARRAYS must be a multiple of SHARE");
  end

  for (genvar d = 0; d < NDEC; d++) begin : g_dec
    disca_decoder #(.ROWS(ROWS)) u_dec (
      .clk     (clk),
      .rst_n   (rst_n),
      .op      (op[d]),
      .half    (half[d]),
      .latch_en(latch_en[d]),
      .addr    (addr[d]),
      .wl      (wl[d]),
      .op_q    (op_q[d])
    );
  end

  for (genvar s = 0; s < SUBARRAYS; s++) begin : g_sub
    disca_subarray #(
      .ROWS      (ROWS),
      .COLS      (COLS),
      .SLICE_COLS(SLICE_COLS),
      .SEG       (SEG)
    ) u_sub (
      .clk      (clk),
      .rst_n    (rst_n),
      .wl       (wl[s / SHARE]),
      .op_q     (op_q[s / SHARE]),
      .wdata    (wdata[s]),
      .rdata    (rdata[s]),
      .rd_valid (rd_valid[s]),
      .dot      (dot[s]),
      .dot_valid(dot_valid[s])
    );
  end

endmodule
