// disca_subarray: one 4 KB DISCA subarray, an SRAM core with bitline
// computing plus its near-memory SC-to-binary accumulator.
//
// The wordlines and the operation come from a decoder that may be shared with
// a neighbouring subarray (disca_decoder, registered outputs). The operation
// selects the SRAM behaviour in the cycle the wordlines are active:
//   OP_WRITE : the write data of the command is written to the active row;
//   OP_READ  : differential read of the active row;
//   OP_SCMUL : single-ended sensing of the AND of the U row and the L row,
//              whose 256 bits also go to the accumulator.
// Timing, counted from the clock edge that registers the command in the
// decoder (cycle 0): the write takes place or the row is sensed at the end
// of cycle 1 (rdata/rd_valid then valid, for READ and SCMUL), and the dot
// product of an SCMUL appears two clocks later (dot/dot_valid). wdata is
// given together with the command and is delayed here by one register to
// meet the registered wordlines; that register, the valid flags and the
// output formats are this design's choices. Operations may be issued every
// clock.
module disca_subarray
  import disca_pkg::*;
#(
  parameter int unsigned ROWS       = 128,
  parameter int unsigned COLS       = 256,
  parameter int unsigned SLICE_COLS = 8,
  parameter int unsigned SEG        = disca_pkg::BP_BITS,
  localparam int unsigned SW        = $clog2(COLS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [ROWS-1:0] wl,
  input  op_e             op_q,
  input  logic [COLS-1:0] wdata,
  output logic [COLS-1:0] rdata,
  output logic            rd_valid,
  output logic [SW-1:0]   dot,
  output logic            dot_valid
);

  logic [COLS-1:0] wdata_q;
  logic            we, sense_en;
  sa_mode_e        sa_mode;
  logic            scmul_q;

  always_ff @(posedge clk) wdata_q <= wdata;

  assign we       = (op_q == OP_WRITE);
  assign sense_en = (op_q == OP_READ) || (op_q == OP_SCMUL);
  assign sa_mode  = (op_q == OP_SCMUL) ? SA_SINGLE : SA_DIFF;

  disca_sram_core #(
    .ROWS      (ROWS),
    .COLS      (COLS),
    .SLICE_COLS(SLICE_COLS)
  ) u_core (
    .clk     (clk),
    .wl      (wl),
    .we      (we),
    .wdata   (wdata_q),
    .sense_en(sense_en),
    .sa_mode (sa_mode),
    .rdata   (rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      scmul_q  <= 1'b0;
    end else begin
      rd_valid <= sense_en;
      scmul_q  <= (op_q == OP_SCMUL);
    end
  end

  disca_sc2bin_acc #(
    .COLS(COLS),
    .SEG (SEG)
  ) u_acc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (scmul_q),
    .bits     (rdata),
    .out_valid(dot_valid),
    .sum      (dot)
  );

endmodule
