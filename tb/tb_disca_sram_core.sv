// tb_disca_sram_core: checks the 256 x 128 SRAM core built from 32 slices.
// Random 256-bit rows are written to all 128 rows; random single-row reads
// and random two-row ANDs are compared with a model array, so that every
// slice and every column position is exercised. Inputs change on the falling
// clock edge and rdata is checked on the next falling edge.
module tb_disca_sram_core;
  import disca_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [127:0] wl = '0;
  logic we = 0, sense_en = 0;
  logic [255:0] wdata = '0;
  sa_mode_e sa_mode = SA_DIFF;
  logic [255:0] rdata;
  logic [255:0] model [128];

  disca_sram_core dut (
    .clk(clk), .wl(wl), .we(we), .wdata(wdata), .sense_en(sense_en),
    .sa_mode(sa_mode), .rdata(rdata)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [255:0] rand256();
    logic [255:0] v;
    for (int w = 0; w < 8; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int r = 0; r < 128; r++) begin
      @(negedge clk);
      wl = '0; wl[r] = 1'b1; we = 1; wdata = rand256();
      model[r] = wdata;
    end
    @(negedge clk);
    we = 0; wl = '0;
    for (int t = 0; t < 300; t++) begin
      int r0, r1;
      logic [255:0] exp;
      r0 = $urandom_range(0, 127);
      r1 = (t % 2 == 0) ? r0 : $urandom_range(0, 127);
      @(negedge clk);
      wl = '0; wl[r0] = 1'b1; wl[r1] = 1'b1; sense_en = 1;
      sa_mode = (t % 2 == 0) ? SA_DIFF : SA_SINGLE;
      exp = model[r0] & model[r1];
      @(negedge clk);
      sense_en = 0; wl = '0;
      checks++;
      if (rdata !== exp) begin
        failures++;
        $display("FAIL rows %0d,%0d: got %h expected %h", r0, r1, rdata, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
