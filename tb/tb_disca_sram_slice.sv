// tb_disca_sram_slice: checks the 8-column x 128-row slice.
// Part 1 uses the 8 x 8 data set of the published post-layout simulation:
// eight rows are written, read back one by one (differential sensing) and
// multiplied in pairs WL0&WL1, WL2&WL3, WL4&WL5, WL6&WL7 (single-ended
// sensing); the results are compared with the printed expected values.
// Part 2 writes random data to all 128 rows and checks random reads and
// random two-row ANDs against a model array. Inputs change on the falling
// clock edge; rdata is checked on the next falling edge.
module tb_disca_sram_slice;
  import disca_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [127:0] wl = '0;
  logic we = 0, sense_en = 0;
  logic [7:0] wdata = '0;
  sa_mode_e sa_mode = SA_DIFF;
  logic [7:0] rdata;

  disca_sram_slice dut (
    .clk(clk), .wl(wl), .we(we), .wdata(wdata), .sense_en(sense_en),
    .sa_mode(sa_mode), .rdata(rdata)
  );

  always #5 clk = ~clk;

  // Printed data: entry [c] lists bitline c over WL0..WL7 (WL0 leftmost).
  localparam logic [7:0] FIG_DATA [8] = '{
    8'b10100001, 8'b11010010, 8'b01010111, 8'b00001100,
    8'b00001011, 8'b11100101, 8'b01110110, 8'b10111100
  };
  // Printed expected SC-MUL results: entry [c] lists bitline c over the pairs
  // WL0&WL1, WL2&WL3, WL4&WL5, WL6&WL7 (leftmost first).
  localparam logic [3:0] FIG_SCMUL [8] = '{
    4'b0000, 4'b1000, 4'b0001, 4'b0010, 4'b0001, 4'b1000, 4'b0100, 4'b0110
  };

  logic [7:0] model [128];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(input int r, input logic [7:0] d);
    @(negedge clk);
    wl = '0; wl[r] = 1'b1; we = 1; sense_en = 0; wdata = d;
    @(negedge clk);
    we = 0; wl = '0;
    model[r] = d;
  endtask

  task automatic sense(input int r0, input int r1, input sa_mode_e m,
                       input logic [7:0] exp, input string what);
    @(negedge clk);
    wl = '0; wl[r0] = 1'b1; wl[r1] = 1'b1; we = 0; sense_en = 1; sa_mode = m;
    @(negedge clk);
    sense_en = 0; wl = '0;
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s rows %0d,%0d: got %b expected %b", what, r0, r1, rdata, exp);
    end
  endtask

  initial begin
    // Part 1: published data set in rows 0..7.
    for (int r = 0; r < 8; r++) begin
      logic [7:0] d;
      for (int c = 0; c < 8; c++) d[c] = FIG_DATA[c][7-r];
      write_row(r, d);
    end
    for (int r = 0; r < 8; r++) begin
      logic [7:0] e;
      for (int c = 0; c < 8; c++) e[c] = FIG_DATA[c][7-r];
      sense(r, r, SA_DIFF, e, "published data read");
    end
    for (int p = 0; p < 4; p++) begin
      logic [7:0] e;
      for (int c = 0; c < 8; c++) e[c] = FIG_SCMUL[c][3-p];
      sense(2*p, 2*p+1, SA_SINGLE, e, "published data SC-MUL");
    end
    // rdata holds between sensing edges.
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (rdata !== 8'b0000_0000 && rdata !== {FIG_SCMUL[7][0], FIG_SCMUL[6][0], FIG_SCMUL[5][0],
        FIG_SCMUL[4][0], FIG_SCMUL[3][0], FIG_SCMUL[2][0], FIG_SCMUL[1][0], FIG_SCMUL[0][0]}) begin
      failures++;
      $display("FAIL rdata did not hold");
    end
    // Part 2: random data in all rows.
    for (int r = 0; r < 128; r++) write_row(r, 8'($urandom));
    for (int t = 0; t < 200; t++) begin
      int r0 = $urandom_range(0, 127);
      int r1 = $urandom_range(0, 127);
      if (t % 2 == 0) sense(r0, r0, SA_DIFF, model[r0], "random read");
      else            sense(r0, r1, SA_SINGLE, model[r0] & model[r1], "random SC-MUL");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
