// Testbench for repair_map: unmapped rows map to themselves; after entries
// are written, each faulty row maps to its backup row at the top of the
// array and the remapped flag is raised.
module repair_map_tb;
  import cim_pkg::*;
  localparam int NSPARE = 16;
  logic clk = 0, rst_n = 0, wr = 0, remapped;
  logic [3:0] wr_idx;
  logic [ROW_W-1:0] wr_row, log_row, phys_row;
  int bad [NSPARE];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  repair_map dut (.clk, .rst_n, .wr, .wr_idx, .wr_row, .log_row, .phys_row, .remapped);

  task automatic chk(input int lr, input int epr, input bit erm);
    log_row = ROW_W'(lr); #1;
    checks++;
    if (phys_row != ROW_W'(epr) || remapped != erm) begin
      failures++;
      $display("FAIL row %0d -> %0d (%b), exp %0d (%b)", lr, phys_row, remapped, epr, erm);
    end
  endtask

  initial begin
    wr_idx = 0; wr_row = 0; log_row = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) chk(r * 12, r * 12, 0);
    for (int e = 0; e < NSPARE; e++) begin
      bad[e] = e * 31 + 5;
      @(negedge clk) begin wr = 1; wr_idx = 4'(e); wr_row = ROW_W'(bad[e]); end
    end
    @(negedge clk) wr = 0;
    for (int e = 0; e < NSPARE; e++) chk(bad[e], ROWS - NSPARE + e, 1);
    chk(6, 6, 0);
    chk(100, 100, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
