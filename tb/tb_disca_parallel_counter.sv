// tb_disca_parallel_counter: exhaustive check of the 8-bit population count
// used for one BP8 product, plus random checks of a 16-bit instance.
// The reference counts bits with an independent shift loop.
module tb_disca_parallel_counter;
  int checks = 0, failures = 0;

  logic [7:0]  b8;
  logic [3:0]  c8;
  logic [15:0] b16;
  logic [4:0]  c16;

  disca_parallel_counter #(.W(8))  dut8  (.bits(b8),  .count(c8));
  disca_parallel_counter #(.W(16)) dut16 (.bits(b16), .count(c16));

  function automatic int ref_count(input logic [31:0] v);
    int n = 0;
    while (v != 0) begin
      n += int'(v[0]);
      v >>= 1;
    end
    return n;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      b8 = 8'(v);
      #1;
      checks++;
      if (int'(c8) != ref_count(32'(v))) begin
        failures++;
        $display("FAIL W=8 bits=%b count=%0d", b8, c8);
      end
    end
    for (int t = 0; t < 200; t++) begin
      b16 = 16'($urandom);
      #1;
      checks++;
      if (int'(c16) != ref_count(32'(b16))) begin
        failures++;
        $display("FAIL W=16 bits=%b count=%0d", b16, c16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
