// disca_engine: the 128 KB DISCA engine, BANKS banks of four 4 KB subarrays
// (32 subarrays, 1 Mbit of SRAM), the top of the design.
//
// Every subarray stores BP8-coded matrices: input matrix L rows in its lower
// half (rows 64..127), weight matrix U columns in its upper half (rows 0..63),
// 32 eight-bit codes per 256-bit row. One SC-MUL command ANDs a U row with
// the latched L row in place and the accumulator turns the 256 result bits
// into one output element O(i,j) of the matrix product. All 32 subarrays can
// do so in the same clock, so the engine delivers 32 dot products of length
// 32 (1024 BP8 multiply-accumulates) per clock.
// Ports: BANKS*SUBARRAYS/SHARE decoder command ports (decoder d drives the
// subarrays 2d and 2d+1) and one data port per subarray, numbered bank-major.
// Timing is that of disca_subarray. What issues the commands (the GEMM loop)
// is outside this block. The bank/subarray organisation follows the published
// design; the flat command and data ports are this design's choices.
module disca_engine
  import disca_pkg::*;
#(
  parameter int unsigned BANKS      = 8,
  parameter int unsigned SUBARRAYS  = 4,
  parameter int unsigned SHARE      = 2,
  parameter int unsigned ROWS       = 128,
  parameter int unsigned COLS       = 256,
  parameter int unsigned SLICE_COLS = 8,
  parameter int unsigned SEG        = disca_pkg::BP_BITS,
  localparam int unsigned DPB       = SUBARRAYS / SHARE,
  localparam int unsigned NDEC      = BANKS * DPB,
  localparam int unsigned NSUB      = BANKS * SUBARRAYS,
  localparam int unsigned AW        = $clog2(ROWS) - 1,
  localparam int unsigned SW        = $clog2(COLS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  op_e             op       [NDEC],
  input  half_e           half     [NDEC],
  input  logic            latch_en [NDEC],
  input  logic [AW-1:0]   addr     [NDEC],
  input  logic [COLS-1:0] wdata    [NSUB],
  output logic [COLS-1:0] rdata    [NSUB],
  output logic            rd_valid [NSUB],
  output logic [SW-1:0]   dot      [NSUB],
  output logic            dot_valid[NSUB]
);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    disca_bank #(
      .ROWS      (ROWS),
      .COLS      (COLS),
      .SLICE_COLS(SLICE_COLS),
      .SEG       (SEG),
      .SUBARRAYS (SUBARRAYS),
      .SHARE     (SHARE)
    ) u_bank (
      .clk      (clk),
      .rst_n    (rst_n),
      .op       (op[b*DPB +: DPB]),
      .half     (half[b*DPB +: DPB]),
      .latch_en (latch_en[b*DPB +: DPB]),
      .addr     (addr[b*DPB +: DPB]),
      .wdata    (wdata[b*SUBARRAYS +: SUBARRAYS]),
      .rdata    (rdata[b*SUBARRAYS +: SUBARRAYS]),
      .rd_valid (rd_valid[b*SUBARRAYS +: SUBARRAYS]),
      .dot      (dot[b*SUBARRAYS +: SUBARRAYS]),
      .dot_valid(dot_valid[b*SUBARRAYS +: SUBARRAYS])
    );
  end

endmodule
