// tb_disca_subarray: checks one 4 KB subarray (256 x 128) with BP8 data.
// Rows 0..63 receive 64 random U rows coded right-biased, rows 64..127
// receive 64 random L rows coded left-biased (32 digits each). A few rows are
// read back. Then SC-MUL commands of random L/U pairs are issued back to back
// and each dot product is compared with the sum over the 32 positions of
// popcount(left(L digit) & right(U digit)), computed here from the digits.
// The subarray is driven as a decoder would drive it: wordlines and
// operation registered, write data one clock ahead. Checked latencies: read
// data one clock after the wordlines, dot product three clocks after.
module tb_disca_subarray;
  import disca_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [127:0] wl = '0;
  op_e op_q = OP_NOP;
  logic [255:0] wdata = '0;
  logic [255:0] rdata;
  logic rd_valid, dot_valid;
  logic [8:0] dot;
  int cycle = 0;

  disca_subarray dut (
    .clk(clk), .rst_n(rst_n), .wl(wl), .op_q(op_q), .wdata(wdata),
    .rdata(rdata), .rd_valid(rd_valid), .dot(dot), .dot_valid(dot_valid)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  logic [3:0] ud [64][32];
  logic [3:0] ld [64][32];

  function automatic logic [255:0] enc_u(input int j);
    logic [255:0] v;
    for (int k = 0; k < 32; k++) v[k*8 +: 8] = bp8_right(ud[j][k]);
    return v;
  endfunction
  function automatic logic [255:0] enc_l(input int i);
    logic [255:0] v;
    for (int k = 0; k < 32; k++) v[k*8 +: 8] = bp8_left(ld[i][k]);
    return v;
  endfunction
  function automatic int ref_dot(input int i, input int j);
    int s = 0;
    for (int k = 0; k < 32; k++) s += $countones(bp8_left(ld[i][k]) & bp8_right(ud[j][k]));
    return s;
  endfunction

  int exp_dot[$], exp_cyc[$];
  int n_dot = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && dot_valid) begin
    int e, c;
    checks++;
    if (exp_dot.size() == 0) begin
      failures++;
      $display("FAIL unexpected dot %0d", dot);
    end else begin
      e = exp_dot.pop_front();
      c = exp_cyc.pop_front();
      n_dot++;
      if (int'(dot) != e || cycle != c) begin
        failures++;
        $display("FAIL dot=%0d expected %0d (cycle %0d, expected %0d)", dot, e, cycle, c);
      end
    end
  end

  task automatic write_row(input int r, input logic [255:0] d);
    @(negedge clk);
    wdata = d; wl = '0; op_q = OP_NOP;
    @(negedge clk);
    wl[r] = 1'b1; op_q = OP_WRITE;
  endtask

  initial begin
    foreach (ud[j, k]) ud[j][k] = 4'($urandom_range(0, 9));
    foreach (ld[i, k]) ld[i][k] = 4'($urandom_range(0, 9));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 64; j++) write_row(j, enc_u(j));
    for (int i = 0; i < 64; i++) write_row(64 + i, enc_l(i));
    // Read back.
    for (int t = 0; t < 16; t++) begin
      int r;
      r = $urandom_range(0, 127);
      @(negedge clk);
      wl = '0; wl[r] = 1'b1; op_q = OP_READ;
      @(negedge clk);
      wl = '0; op_q = OP_NOP;
      checks++;
      if (!rd_valid || rdata !== ((r < 64) ? enc_u(r) : enc_l(r - 64))) begin
        failures++;
        $display("FAIL read row %0d", r);
      end
    end
    // Back-to-back SC-MUL stream. At each falling edge the bits of the
    // previous command (sensed at the rising edge just passed) are checked.
    begin
      logic [255:0] prev_bits;
      logic have_prev;
      have_prev = 0;
      prev_bits = '0;
      for (int t = 0; t <= 300; t++) begin
        int i, j;
        i = $urandom_range(0, 63);
        j = $urandom_range(0, 63);
        @(negedge clk);
        if (have_prev) begin
          checks++;
          if (!rd_valid || rdata !== prev_bits) begin
            failures++;
            $display("FAIL SC-MUL bits at cycle %0d", cycle);
          end
        end
        if (t == 300) begin
          wl = '0; op_q = OP_NOP;
          break;
        end
        wl = '0; wl[j] = 1'b1; wl[64 + i] = 1'b1; op_q = OP_SCMUL;
        exp_dot.push_back(ref_dot(i, j));
        exp_cyc.push_back(cycle + 3);
        prev_bits = enc_l(i) & enc_u(j);
        have_prev = 1;
      end
    end
    @(negedge clk);
    wl = '0; op_q = OP_NOP;
    repeat (6) @(negedge clk);
    checks++;
    if (n_dot != 300) begin
      failures++;
      $display("FAIL %0d dot products of 300", n_dot);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
