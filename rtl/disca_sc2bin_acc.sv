// disca_sc2bin_acc: SC-to-binary accumulator of one DISCA subarray.
//
// Takes a full wordline of SC multiplication bits (COLS = 256: 32 BP8
// products of SEG = 8 bits) and returns their binary sum, which is the dot
// product of one L row with one U row in units of 0.1 (each product of two
// BP8 digits d1, d2 has about d1*d2/10 ones). SC-to-binary conversion and
// accumulation happen in the same pass, once per clock:
//   stage 1: COLS/SEG parallel counters (disca_parallel_counter), registered;
//   stage 2: adder tree (disca_adder_tree) over the counts, registered.
// Latency is two clocks from in_valid/bits to out_valid/sum, with a new
// wordline accepted every clock. Because the whole wordline is summed, the
// split of 256 bits into n products of m bits changes only the grouping of
// the counters, not the result. The counter layer, adder tree and the single
// pipeline cut follow the published design; the position of the cut (after
// the counters) and the valid bits are this design's choices.
module disca_sc2bin_acc #(
  parameter int unsigned COLS = 256,
  parameter int unsigned SEG  = disca_pkg::BP_BITS,
  localparam int unsigned SW  = $clog2(COLS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [COLS-1:0] bits,
  output logic            out_valid,
  output logic [SW-1:0]   sum
);

  localparam int unsigned NSEG  = COLS / SEG;
  localparam int unsigned CW    = $clog2(SEG + 1);
  localparam int unsigned TW    = CW + $clog2(NSEG);

  logic [CW-1:0] cnt   [NSEG];
  logic [CW-1:0] cnt_q [NSEG];
  logic          v1_q;
  logic [TW-1:0] tree_sum;

  initial begin
    if (COLS % SEG != 0) $fatal(1, "COLS must be a multiple of SEG");
  end

  for (genvar g = 0; g < NSEG; g++) begin : g_cnt
    disca_parallel_counter #(.W(SEG)) u_cnt (
      .bits (bits[g*SEG +: SEG]),
      .count(cnt[g])
    );
  end

  // Stage 1 register: counter outputs.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q <= 1'b0;
      for (int g = 0; g < NSEG; g++) cnt_q[g] <= '0;
    end else begin
      v1_q <= in_valid;
      if (in_valid) cnt_q <= cnt;
    end
  end

  disca_adder_tree #(.N(NSEG), .IN_W(CW)) u_tree (
    .in (cnt_q),
    .sum(tree_sum)
  );

  // Stage 2 register: accumulated result.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= v1_q;
      if (v1_q) sum <= SW'(tree_sum);
    end
  end

endmodule
