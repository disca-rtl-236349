// tb_disca_sc2bin_acc: drives random 256-bit SC-MUL wordlines, some back to
// back and some with gaps, into the accumulator and checks that each sum
// equals the number of ones of its wordline and arrives exactly two clocks
// after it was given. Inputs are driven and outputs sampled on the falling
// clock edge.
module tb_disca_sc2bin_acc;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [255:0] bits = '0;
  logic out_valid;
  logic [8:0] sum;
  int cycle = 0;

  disca_sc2bin_acc dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .bits(bits),
    .out_valid(out_valid), .sum(sum)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  int exp_sum[$];
  int exp_cyc[$];
  int n_out = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor.
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (exp_sum.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %0d", sum);
      end else begin
        int es, ec;
        es = exp_sum.pop_front();
        ec = exp_cyc.pop_front();
        n_out++;
        if (int'(sum) != es || cycle != ec) begin
          failures++;
          $display("FAIL sum=%0d exp=%0d at cycle %0d exp cycle %0d", sum, es, cycle, ec);
        end
      end
    end
  end

  initial begin
    int n_in;
    n_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = (t < 100) ? 1'b1 : 1'($urandom_range(0, 1));
      case (t)
        0: bits = '1;
        1: bits = '0;
        default: for (int w = 0; w < 8; w++) bits[w*32 +: 32] = $urandom;
      endcase
      if (in_valid) begin
        int n;
        n = 0;
        for (int b = 0; b < 256; b++) n += int'(bits[b]);
        exp_sum.push_back(n);
        exp_cyc.push_back(cycle + 2);  // two register stages
        n_in++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != n_in || exp_sum.size() != 0) begin
      failures++;
      $display("FAIL %0d inputs, %0d outputs", n_in, n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
