// tb_disca_bank: checks one bank (four 256 x 128 subarrays, two decoders each
// shared by two subarrays). Each subarray holds its own random BP8 rows
// (8 U rows, 8 L rows). Decoder 0 and decoder 1 then run different
// SC-MUL address sequences in the same clocks; every dot product is checked
// against popcount(left & right) summed over the 32 code pairs, and must be
// produced by both subarrays of a decoder in the same clock, four clocks
// after the command.
module tb_disca_bank;
  import disca_pkg::*;
  localparam int NS = 4, ND = 2, NR = 8, K = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  int cycle = 0;

  op_e          op       [ND];
  half_e        half     [ND];
  logic         latch_en [ND];
  logic [5:0]   addr     [ND];
  logic [255:0] wdata    [NS];
  logic [255:0] rdata    [NS];
  logic         rd_valid [NS];
  logic [8:0]   dot      [NS];
  logic         dot_valid[NS];

  disca_bank dut (
    .clk(clk), .rst_n(rst_n), .op(op), .half(half), .latch_en(latch_en),
    .addr(addr), .wdata(wdata), .rdata(rdata), .rd_valid(rd_valid),
    .dot(dot), .dot_valid(dot_valid)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  logic [3:0] ud [NS][NR][K];
  logic [3:0] ld [NS][NR][K];
  int exp_dot [NS][$];
  int exp_cyc [NS][$];
  int n_dot = 0, n_pair = 0;

  function automatic int ref_dot(input int s, input int i, input int j);
    int acc = 0;
    for (int k = 0; k < K; k++) acc += $countones(bp8_left(ld[s][i][k]) & bp8_right(ud[s][j][k]));
    return acc;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) if (dot_valid[s]) begin
      int e, c;
      checks++;
      if (exp_dot[s].size() == 0) begin
        failures++;
        $display("FAIL subarray %0d: unexpected dot", s);
      end else begin
        e = exp_dot[s].pop_front();
        c = exp_cyc[s].pop_front();
        n_dot++;
        if (int'(dot[s]) != e || cycle != c) begin
          failures++;
          $display("FAIL subarray %0d: dot %0d expected %0d (cycle %0d/%0d)", s, dot[s], e, cycle, c);
        end
      end
    end
    for (int d = 0; d < ND; d++) if (dot_valid[2*d] && dot_valid[2*d+1]) n_pair++;
  end

  initial begin
    foreach (ud[s, j, k]) ud[s][j][k] = 4'($urandom_range(0, 9));
    foreach (ld[s, i, k]) ld[s][i][k] = 4'($urandom_range(0, 9));
    for (int d = 0; d < ND; d++) begin
      op[d] = OP_NOP; half[d] = HALF_U; latch_en[d] = 0; addr[d] = '0;
    end
    foreach (wdata[s]) wdata[s] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 2 * NR; r++) begin
      @(negedge clk);
      for (int d = 0; d < ND; d++) begin
        op[d] = OP_WRITE;
        half[d] = (r < NR) ? HALF_U : HALF_L;
        latch_en[d] = (r >= NR);
        addr[d] = 6'(r % NR);
      end
      for (int s = 0; s < NS; s++)
        for (int k = 0; k < K; k++)
          wdata[s][k*8 +: 8] = (r < NR) ? bp8_right(ud[s][r][k]) : bp8_left(ld[s][r-NR][k]);
    end
    for (int i = 0; i < NR; i++)
      for (int n = 0; n < NR; n++) begin
        @(negedge clk);
        for (int d = 0; d < ND; d++) begin
          int li, uj;
          li = (d == 0) ? i : NR - 1 - i;
          uj = (d == 0) ? (li + n) % NR : (li + NR - n) % NR;
          op[d] = OP_SCMUL; half[d] = HALF_U; latch_en[d] = (n == 0); addr[d] = 6'(uj);
          for (int m = 0; m < 2; m++) begin
            exp_dot[2*d+m].push_back(ref_dot(2*d+m, li, uj));
            exp_cyc[2*d+m].push_back(cycle + 4);
          end
        end
      end
    @(negedge clk);
    for (int d = 0; d < ND; d++) op[d] = OP_NOP;
    repeat (6) @(negedge clk);
    checks++;
    if (n_dot != NS * NR * NR || n_pair != ND * NR * NR) begin
      failures++;
      $display("FAIL %0d dot products, %0d shared-decoder pairs", n_dot, n_pair);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
