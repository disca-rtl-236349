// tb_disca_adder_tree: random and corner-case checks of the adder tree at its
// default size (32 operands of 4 bits, as used after the BP8 counters) and of
// a 5-operand instance, which exercises an unbalanced tree.
module tb_disca_adder_tree;
  int checks = 0, failures = 0;

  logic [3:0] a32 [32];
  logic [8:0] s32;
  logic [5:0] a5  [5];
  logic [8:0] s5;

  disca_adder_tree #(.N(32), .IN_W(4)) dut32 (.in(a32), .sum(s32));
  disca_adder_tree #(.N(5),  .IN_W(6)) dut5  (.in(a5),  .sum(s5));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check32();
    int exp = 0;
    foreach (a32[i]) exp += int'(a32[i]);
    #1;
    checks++;
    if (int'(s32) != exp) begin
      failures++;
      $display("FAIL N=32 sum=%0d expected %0d", s32, exp);
    end
  endtask

  initial begin
    foreach (a32[i]) a32[i] = 4'd15;   // largest sum
    check32();
    foreach (a32[i]) a32[i] = 4'd0;
    check32();
    foreach (a32[i]) a32[i] = 4'd8;    // all BP8 products full
    check32();
    for (int t = 0; t < 300; t++) begin
      foreach (a32[i]) a32[i] = 4'($urandom);
      check32();
    end
    for (int t = 0; t < 100; t++) begin
      int exp;
      exp = 0;
      foreach (a5[i]) begin
        a5[i] = 6'($urandom);
        exp += int'(a5[i]);
      end
      #1;
      checks++;
      if (int'(s5) != exp) begin
        failures++;
        $display("FAIL N=5 sum=%0d expected %0d", s5, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
