// Testbench for the rram_array model: after forming, cells are stepped to
// target levels with set/reset pulses, then read back row by row. Checks
// saturation at levels 0 and 3, that a block without enable is not written,
// and that columns whose bit line carries X = 0 read as level 0.
module rram_array_tb;
  import cim_pkg::*;
  logic clk = 0, form = 0, en = 0, set_pulse = 0, reset_pulse = 0;
  logic [ROWS-1:0] wl;
  logic [COLS-1:0] bl;
  logic [COLS-1:0][LEVEL_W-1:0] cell_level;
  int checks = 0, failures = 0;
  int model [8][COLS];

  always #5 clk = ~clk;
  rram_array dut (.clk, .form, .en, .set_pulse, .reset_pulse, .wl, .bl, .cell_level);

  task automatic pulse(input int row, input int col, input bit s);
    @(negedge clk) begin
      wl = ROWS'(1) << row; bl = COLS'(1) << col; en = 1;
      set_pulse = s; reset_pulse = !s;
    end
    @(negedge clk) begin set_pulse = 0; reset_pulse = 0; en = 0; end
  endtask

  initial begin
    wl = '0; bl = '0;
    @(negedge clk) form = 1;
    @(negedge clk) form = 0;
    // drive rows 0..7 (spread over the array) to known levels: 4 resets reach
    // level 0 from anywhere, then n sets reach level n
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < COLS; c++) begin
        model[r][c] = (r * 7 + c * 3) % 4;
        for (int i = 0; i < 4; i++) pulse(r * 60, c, 0);
        for (int i = 0; i < model[r][c]; i++) pulse(r * 60, c, 1);
      end
    // extra sets on a cell at level 3 stay at 3
    pulse(0, 1, 1); pulse(0, 1, 1); pulse(0, 1, 1); pulse(0, 1, 1);
    model[0][1] = 3;
    // a pulse without block enable does nothing
    @(negedge clk) begin wl = ROWS'(1) << 60; bl = '1; en = 0; reset_pulse = 1; end
    @(negedge clk) reset_pulse = 0;
    for (int r = 0; r < 8; r++) begin
      @(negedge clk) begin wl = ROWS'(1) << (r * 60); bl = '1; end
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (cell_level[c] != LEVEL_W'(model[r][c])) begin
          failures++;
          $display("FAIL r%0d c%0d level=%0d exp=%0d", r, c, cell_level[c], model[r][c]);
        end
      end
      bl = 32'h5555_5555; #1;
      for (int c = 1; c < COLS; c += 2) begin
        checks++;
        if (cell_level[c] != 0) begin failures++; $display("FAIL undriven column %0d", c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
