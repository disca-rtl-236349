// disca_pkg: types and constants shared by the DISCA in-SRAM stochastic
// computing engine, and the compressed 8-bit Bent-Pyramid (BP8) code tables.
//
// BP8 represents a probability 0.0 ... 0.9 (a decimal digit d = 0..9) as an
// 8-bit quasi-stochastic code word. It is derived from the 10-bit
// Bent-Pyramid format, in which the code of d holds d ones, by dropping the
// leftmost and rightmost bit; the dropped bits become implicit and are never
// stored. Two complementary sets exist: the right-biased set, used for the
// multiplier (weight matrix U), and the left-biased set, used for the
// multiplicand (input matrix L). In the 10-bit format the right-biased codes
// always have a 0 at the left end and the left-biased codes a 0 at the right
// end, so the dropped bits of a left/right pair always AND to zero and the
// compression does not change the number of ones of any product. A bitwise
// AND of one code of each set holds about d1*d2/10 ones, so the population
// count of the AND is the product in units of 0.1.
// Bit 7 of a code is its leftmost position. The table values follow the
// published format; the row layout (32 codes per 256-bit wordline, code k in
// bits [8k+7:8k]) is this design's choice.
package disca_pkg;

  // Operation carried with the wordlines from the decoder to the SRAM core.
  typedef enum logic [1:0] {
    OP_NOP   = 2'd0,
    OP_WRITE = 2'd1,   // write one row
    OP_READ  = 2'd2,   // read one row (differential sensing)
    OP_SCMUL = 2'd3    // activate a U row and the latched L row, sense the AND
  } op_e;

  // Which half of the array a READ or WRITE addresses.
  typedef enum logic {
    HALF_U = 1'b0,     // upper rows 0 .. ROWS/2-1: weight matrix U
    HALF_L = 1'b1      // lower rows ROWS/2 .. ROWS-1: input matrix L
  } half_e;

  // Sense-amplifier configuration.
  typedef enum logic {
    SA_DIFF   = 1'b0,  // compares BL against BLb (normal read)
    SA_SINGLE = 1'b1   // compares BL against a reference (bitline AND)
  } sa_mode_e;

  localparam int unsigned BP_BITS = 8;   // compressed Bent-Pyramid code length

  // Right-biased (multiplier) BP8 code of digit d.
  function automatic logic [7:0] bp8_right(input logic [3:0] d);
    case (d)
      4'd0: return 8'b0000_0000;
      4'd1: return 8'b0000_1000;
      4'd2: return 8'b0000_1100;
      4'd3: return 8'b0000_1110;
      4'd4: return 8'b0001_1110;
      4'd5: return 8'b0001_1111;
      4'd6: return 8'b0011_1111;
      4'd7: return 8'b0011_1111;
      4'd8: return 8'b0111_1111;
      default: return 8'b1111_1111;
    endcase
  endfunction

  // Left-biased (multiplicand) BP8 code of digit d.
  function automatic logic [7:0] bp8_left(input logic [3:0] d);
    case (d)
      4'd0: return 8'b0000_0000;
      4'd1: return 8'b0001_0000;
      4'd2: return 8'b0011_0000;
      4'd3: return 8'b0111_0000;
      4'd4: return 8'b0111_1000;
      4'd5: return 8'b1111_1000;
      4'd6: return 8'b1111_1100;
      4'd7: return 8'b1111_1100;
      4'd8: return 8'b1111_1110;
      default: return 8'b1111_1111;
    endcase
  endfunction

endpackage
