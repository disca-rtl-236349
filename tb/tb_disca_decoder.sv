// tb_disca_decoder: checks the split decoder with its address latch.
// Random commands are applied every clock; an independent model keeps the
// latched L address and predicts the wordlines, which must appear exactly
// one clock after the command. The test also counts latch loads and SC-MUL
// commands issued with the latch closed (the L row is reused) and requires
// both to occur. Inputs change on the falling clock edge.
module tb_disca_decoder;
  import disca_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  op_e op = OP_NOP;
  half_e half = HALF_U;
  logic latch_en = 0;
  logic [5:0] addr = '0;
  logic [127:0] wl;
  op_e op_q;

  disca_decoder dut (
    .clk(clk), .rst_n(rst_n), .op(op), .half(half), .latch_en(latch_en),
    .addr(addr), .wl(wl), .op_q(op_q)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lat = 0;
  int n_hold = 0, n_load = 0;

  initial begin
    logic [127:0] exp_wl;
    op_e exp_op;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      op = op_e'($urandom_range(0, 3));
      half = half_e'($urandom_range(0, 1));
      addr = 6'($urandom);
      latch_en = ($urandom_range(0, 3) == 0);
      if ((op == OP_WRITE || op == OP_READ) && half == HALF_L) latch_en = 1;
      // model
      if (latch_en) lat = int'(addr);
      exp_wl = '0;
      case (op)
        OP_WRITE, OP_READ: if (half == HALF_U) exp_wl[addr] = 1'b1;
                           else exp_wl[64 + lat] = 1'b1;
        OP_SCMUL: begin
          exp_wl[addr] = 1'b1;
          exp_wl[64 + lat] = 1'b1;
          if (latch_en) n_load++; else n_hold++;
        end
        default: ;
      endcase
      exp_op = op;
      @(negedge clk);
      checks++;
      if (wl !== exp_wl || op_q !== exp_op) begin
        failures++;
        $display("FAIL t=%0d op=%s: wl=%h expected %h", t, exp_op.name(), wl, exp_wl);
      end
    end
    checks++;
    if (n_load == 0 || n_hold == 0) begin
      failures++;
      $display("FAIL latch load %0d / hold %0d never happened", n_load, n_hold);
    end
    $display("latch loads %0d, latch holds %0d", n_load, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
