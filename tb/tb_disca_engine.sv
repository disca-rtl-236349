// tb_disca_engine: end-to-end test of the full 128 KB engine at its default
// size (8 banks x 4 subarrays of 256 x 128, 16 shared decoders).
//
// Every subarray gets its own random BP8 matrices: NU = 64 weight rows
// (columns of U, right-biased codes) in rows 0..63 and NL = 64 input rows
// (rows of L, left-biased codes) in rows 64..127, 32 digits per row. The test
// then runs the matrix product O = L x U on all 32 subarrays at once, as a
// host would: for each L row i the first command is an SC-MUL at address i
// with the address latch open (it loads L row i and multiplies it with U row
// i), and the other U rows follow with the latch closed, one per clock.
// Decoder d visits the L rows in an order rotated by d, so the decoders
// carry different addresses. Every dot product is compared with the sum of
// popcount(left & right) over the 32 code pairs, computed here from the
// digits, and must arrive four clocks after its command; reads must arrive
// two clocks after theirs. The BP8 tables are also checked against the
// 10-bit Bent-Pyramid tables: each BP8 code must be its 10-bit code without
// the end bits, and every product must keep its number of ones.
// The test counts each mechanism of the design and fails if one never
// happens: U and L row writes, row reads, latch loads, SC-MULs with a held
// L row, a decoder serving two subarrays in the same clock, and results
// delivered on consecutive clocks.
module tb_disca_engine;
  import disca_pkg::*;

  localparam int NSUB = 32;
  localparam int NDEC = 16;
  localparam int NU   = 64;
  localparam int NL   = 64;
  localparam int K    = 32;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  int cycle = 0;

  op_e          op       [NDEC];
  half_e        half     [NDEC];
  logic         latch_en [NDEC];
  logic [5:0]   addr     [NDEC];
  logic [255:0] wdata    [NSUB];
  logic [255:0] rdata    [NSUB];
  logic         rd_valid [NSUB];
  logic [8:0]   dot      [NSUB];
  logic         dot_valid[NSUB];

  disca_engine dut (
    .clk(clk), .rst_n(rst_n), .op(op), .half(half), .latch_en(latch_en),
    .addr(addr), .wdata(wdata), .rdata(rdata), .rd_valid(rd_valid),
    .dot(dot), .dot_valid(dot_valid)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  logic [3:0] ud [NSUB][NU][K];
  logic [3:0] ld [NSUB][NL][K];

  // 10-bit Bent-Pyramid codes (leftmost bit = bit 9).
  localparam logic [9:0] BP10_R [10] = '{
    10'b0000000000, 10'b0000010000, 10'b0000011000, 10'b0000011100, 10'b0000111100,
    10'b0000111110, 10'b0001111110, 10'b0001111111, 10'b0011111111, 10'b0111111111
  };
  localparam logic [9:0] BP10_L [10] = '{
    10'b0000000000, 10'b0000100000, 10'b0001100000, 10'b0011100000, 10'b0011110000,
    10'b0111110000, 10'b0111111000, 10'b1111111000, 10'b1111111100, 10'b1111111110
  };

  function automatic logic [255:0] enc_u(input int s, input int j);
    logic [255:0] v;
    for (int k = 0; k < K; k++) v[k*8 +: 8] = bp8_right(ud[s][j][k]);
    return v;
  endfunction
  function automatic logic [255:0] enc_l(input int s, input int i);
    logic [255:0] v;
    for (int k = 0; k < K; k++) v[k*8 +: 8] = bp8_left(ld[s][i][k]);
    return v;
  endfunction
  function automatic int ref_dot(input int s, input int i, input int j);
    int acc = 0;
    for (int k = 0; k < K; k++) acc += $countones(bp8_left(ld[s][i][k]) & bp8_right(ud[s][j][k]));
    return acc;
  endfunction

  // Scoreboards, one per subarray.
  int exp_dot [NSUB][$];
  int exp_dcyc[NSUB][$];
  logic [255:0] exp_rd [NSUB][$];
  int exp_rcyc[NSUB][$];
  int n_dot = 0, n_rd_checked = 0;

  // Mechanism counters.
  int n_write_u = 0, n_write_l = 0, n_read = 0, n_latch_load = 0, n_latch_hold = 0;
  int n_shared = 0, n_back_to_back = 0;
  logic prev_dot_valid [NSUB];
  real err_sum = 0.0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < NSUB; s++) begin
      if (dot_valid[s]) begin
        int e, c;
        checks++;
        if (exp_dot[s].size() == 0) begin
          failures++;
          $display("FAIL subarray %0d: unexpected dot %0d", s, dot[s]);
        end else begin
          e = exp_dot[s].pop_front();
          c = exp_dcyc[s].pop_front();
          n_dot++;
          if (int'(dot[s]) != e || cycle != c) begin
            failures++;
            $display("FAIL subarray %0d: dot %0d expected %0d, cycle %0d expected %0d",
                     s, dot[s], e, cycle, c);
          end
        end
        if (prev_dot_valid[s]) n_back_to_back++;
      end
      prev_dot_valid[s] = dot_valid[s];
      if (exp_rcyc[s].size() != 0 && exp_rcyc[s][0] == cycle) begin
        logic [255:0] er;
        void'(exp_rcyc[s].pop_front());
        er = exp_rd[s].pop_front();
        checks++;
        n_rd_checked++;
        if (!rd_valid[s] || rdata[s] !== er) begin
          failures++;
          $display("FAIL subarray %0d: read data mismatch at cycle %0d", s, cycle);
        end
      end
    end
    for (int d = 0; d < NDEC; d++)
      if (dot_valid[2*d] && dot_valid[2*d+1]) n_shared++;
  end

  task automatic idle();
    for (int d = 0; d < NDEC; d++) begin
      op[d] = OP_NOP; half[d] = HALF_U; latch_en[d] = 1'b0; addr[d] = '0;
    end
  endtask

  task automatic require(input int n, input string what);
    checks++;
    $display("%-40s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    idle();
    for (int s = 0; s < NSUB; s++) begin
      wdata[s] = '0;
      prev_dot_valid[s] = 1'b0;
    end
    foreach (ud[s, j, k]) ud[s][j][k] = 4'($urandom_range(0, 9));
    foreach (ld[s, i, k]) ld[s][i][k] = 4'($urandom_range(0, 9));

    // Compression check of the code tables.
    for (int a = 0; a < 10; a++)
      for (int b = 0; b < 10; b++) begin
        checks++;
        if ($countones(bp8_left(4'(a)) & bp8_right(4'(b))) != $countones(BP10_L[a] & BP10_R[b])
            || bp8_right(4'(a)) != BP10_R[a][8:1]
            || bp8_left(4'(a))  != BP10_L[a][8:1]
            || $countones(BP10_R[a]) != a || $countones(BP10_L[a]) != a) begin
          failures++;
          $display("FAIL BP8 table entry %0d x %0d", a, b);
        end
      end

    repeat (2) @(negedge clk);
    rst_n = 1;

    // Load U rows then L rows, one row per clock into every subarray.
    for (int j = 0; j < NU; j++) begin
      @(negedge clk);
      for (int d = 0; d < NDEC; d++) begin
        op[d] = OP_WRITE; half[d] = HALF_U; latch_en[d] = 1'b0; addr[d] = 6'(j);
      end
      for (int s = 0; s < NSUB; s++) wdata[s] = enc_u(s, j);
      n_write_u++;
    end
    for (int i = 0; i < NL; i++) begin
      @(negedge clk);
      for (int d = 0; d < NDEC; d++) begin
        op[d] = OP_WRITE; half[d] = HALF_L; latch_en[d] = 1'b1; addr[d] = 6'(i);
      end
      for (int s = 0; s < NSUB; s++) wdata[s] = enc_l(s, i);
      n_write_l++;
    end

    // Read back some rows of both halves.
    for (int t = 0; t < 16; t++) begin
      @(negedge clk);
      for (int d = 0; d < NDEC; d++) begin
        int r;
        r = $urandom_range(0, 63);
        op[d] = OP_READ;
        half[d] = (t % 2 == 0) ? HALF_U : HALF_L;
        latch_en[d] = (half[d] == HALF_L);
        addr[d] = 6'(r);
        for (int m = 0; m < 2; m++) begin
          exp_rd[2*d+m].push_back((half[d] == HALF_U) ? enc_u(2*d+m, r) : enc_l(2*d+m, r));
          exp_rcyc[2*d+m].push_back(cycle + 2);
        end
      end
      n_read++;
    end

    // Matrix product.
    for (int i = 0; i < NL; i++) begin
      for (int n = 0; n < NU; n++) begin
        @(negedge clk);
        for (int d = 0; d < NDEC; d++) begin
          int li, uj;
          li = (i + d) % NL;
          uj = (li + n) % NU;              // first U row = li, loads the latch
          op[d] = OP_SCMUL;
          half[d] = HALF_U;
          latch_en[d] = (n == 0);
          addr[d] = 6'(uj);
          for (int m = 0; m < 2; m++) begin
            int s, e;
            real exact;
            s = 2*d + m;
            e = ref_dot(s, li, uj);
            exp_dot[s].push_back(e);
            exp_dcyc[s].push_back(cycle + 4);
            exact = 0.0;
            for (int k = 0; k < K; k++) exact += real'(int'(ld[s][li][k]) * int'(ud[s][uj][k])) / 10.0;
            err_sum += (real'(e) > exact) ? real'(e) - exact : exact - real'(e);
          end
        end
        if (n == 0) n_latch_load++; else n_latch_hold++;
      end
    end
    @(negedge clk);
    idle();
    repeat (8) @(negedge clk);

    checks++;
    if (n_dot != NSUB * NL * NU || n_rd_checked != NSUB * 16) begin
      failures++;
      $display("FAIL got %0d dot products (expected %0d), %0d reads (expected %0d)",
               n_dot, NSUB * NL * NU, n_rd_checked, NSUB * 16);
    end
    require(n_write_u,      "U row writes");
    require(n_write_l,      "L row writes (latch open)");
    require(n_read,         "row reads");
    require(n_latch_load,   "SC-MUL with latch load");
    require(n_latch_hold,   "SC-MUL with held L row");
    require(n_shared,       "decoder serving two subarrays at once");
    require(n_back_to_back, "dot products on consecutive clocks");
    $display("mean |BP8 dot - exact dot| in units of 0.1: %0.3f",
             err_sum / real'(NSUB * NL * NU));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
