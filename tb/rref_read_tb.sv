// Testbench for rref_read: every 2-bit level on every column against every
// reference setting; the expected bit is 1 exactly when the cell's level
// reaches the reference step (low resistance, Rref > Rw).
module rref_read_tb;
  import cim_pkg::*;
  logic [COLS-1:0][LEVEL_W-1:0] cell_level;
  logic [2:0] vtran;
  logic [COLS-1:0] w_bit;
  int checks = 0, failures = 0;

  rref_read dut (.cell_level, .vtran, .w_bit);

  initial begin
    for (int t = 0; t < 40; t++)
      for (int n = 1; n <= 3; n++) begin
        for (int c = 0; c < COLS; c++) cell_level[c] = LEVEL_W'((c + t) % 4);
        vtran = 3'b001 << (n - 1);
        #1;
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (w_bit[c] !== (((c + t) % 4) >= n)) begin
            failures++;
            $display("FAIL level=%0d ref=%0d bit=%b", (c + t) % 4, n, w_bit[c]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
