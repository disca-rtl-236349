// disca_sram_core: the 256-column x 128-row SRAM core of one DISCA subarray
// (4 KB), with bitline computing.
//
// The core is a row of COLS/SLICE_COLS identical slices (disca_sram_slice),
// each owning SLICE_COLS bitline pairs and their sense amplifiers. All slices
// share the wordlines, the write enable and the sense controls, so one
// operation acts on a full 256-bit wordline: a row write, a row read, or the
// bitwise AND of two rows (256 SC-multiplication bits, i.e. 32 BP8 products).
// Interface and timing are those of the slice: writes and sensing take effect
// on the rising clock edge and rdata holds the last sensed row.
// The 256 x 128 size and the tiling from 8-column slices follow the published
// design.
module disca_sram_core
  import disca_pkg::*;
#(
  parameter int unsigned ROWS       = 128,
  parameter int unsigned COLS       = 256,
  parameter int unsigned SLICE_COLS = 8
) (
  input  logic            clk,
  input  logic [ROWS-1:0] wl,
  input  logic            we,
  input  logic [COLS-1:0] wdata,
  input  logic            sense_en,
  input  sa_mode_e        sa_mode,
  output logic [COLS-1:0] rdata
);

  localparam int unsigned SLICES = COLS / SLICE_COLS;

  initial begin
    if (COLS % SLICE_COLS != 0) $fatal(1, "COLS must be a multiple of SLICE_COLS");
  end

  for (genvar s = 0; s < SLICES; s++) begin : g_slice
    disca_sram_slice #(
      .ROWS(ROWS),
      .COLS(SLICE_COLS)
    ) u_slice (
      .clk     (clk),
      .wl      (wl),
      .we      (we),
      .wdata   (wdata[s*SLICE_COLS +: SLICE_COLS]),
      .sense_en(sense_en),
      .sa_mode (sa_mode),
      .rdata   (rdata[s*SLICE_COLS +: SLICE_COLS])
    );
  end

endmodule
