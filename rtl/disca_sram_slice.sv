// disca_sram_slice: one 8-column x 128-row slice of the DISCA SRAM core with
// bitline computing.
//
// The slice is the unit from which the 256-column core is tiled. It holds
// ROWS x COLS bits, written one row at a time through the write drivers, and
// has one sense amplifier per column. The sense amplifiers work in two modes:
//   * SA_DIFF   - differential read of the single active wordline;
//   * SA_SINGLE - single-ended sensing of BL against a reference. With two
//                 wordlines active a bitline stays precharged only when both
//                 cells store 1, so the sensed value is the bitwise AND of the
//                 two rows: the stochastic (SC) multiplication.
// The analog bitline is modelled as a wired-AND over all active rows; the
// precharge, write-driver and sense-amplifier circuits themselves are not
// modelled. Storage has no reset, as in an SRAM.
//
// Timing (one clock = one memory operation, 500 MHz in the original):
//   * we=1: on the rising edge, wdata is stored in every row whose wordline is
//     high (one row in normal use);
//   * sense_en=1: on the rising edge rdata takes the sensed column values and
//     holds them until the next sensing edge.
// The mode split and the AND behaviour follow the published description; the
// edge-triggered sensing and the absence of a write mask are choices of this
// design.
module disca_sram_slice
  import disca_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 8
) (
  input  logic            clk,
  input  logic [ROWS-1:0] wl,
  input  logic            we,
  input  logic [COLS-1:0] wdata,
  input  logic            sense_en,
  input  sa_mode_e        sa_mode,
  output logic [COLS-1:0] rdata
);

  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] bl;           // bitline level after evaluation (1 = high)

  // Wired-AND of every cell on an active wordline.
  always_comb begin
    bl = '1;
    for (int r = 0; r < ROWS; r++) begin
      if (wl[r]) bl &= mem[r];
    end
  end

  always_ff @(posedge clk) begin
    if (we) begin
      for (int r = 0; r < ROWS; r++) begin
        if (wl[r]) mem[r] <= wdata;
      end
    end
    if (sense_en) rdata <= bl;
  end

  // Differential sensing resolves a single cell per bitline pair.
  property p_diff_single_row;
    @(posedge clk) (sense_en && sa_mode == SA_DIFF) |-> $onehot(wl);
  endproperty
  a_diff_single_row: assert property (p_diff_single_row)
    else $error("differential read with %0d active wordlines", $countones(wl));

  // Single-ended AND sensing uses one or two wordlines.
  a_single_rows: assert property (@(posedge clk)
      (sense_en && sa_mode == SA_SINGLE) |-> ($countones(wl) inside {1, 2}))
    else $error("single-ended sense with %0d active wordlines", $countones(wl));

  a_write_one_row: assert property (@(posedge clk) we |-> $onehot(wl))
    else $error("write with %0d active wordlines", $countones(wl));

endmodule
