// Testbench for accumulator: random signed INT8-mode products and random
// binary-mode 4-bit products added over many rows with random lane masks,
// against reference sums kept in the testbench; then a clear.
module accumulator_tb;
  import cim_pkg::*;
  localparam int N = NBLK * COLS;
  logic clk = 0, rst_n = 0, clr = 0, add = 0, wbin = 0;
  logic [N-1:0] lane_en;
  logic [NBLK-1:0][LANES*PROD_W-1:0] prod;
  logic [N-1:0][ACC_W-1:0] acc;
  longint ref_sum [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  accumulator dut (.clk, .rst_n, .wbin, .clr, .add, .lane_en, .prod, .acc);

  initial begin
    prod = '0; lane_en = '0;
    foreach (ref_sum[i]) ref_sum[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      add = 1; lane_en = {$urandom, $urandom}; wbin = (t >= 200);
      for (int b = 0; b < NBLK; b++)
        if (!wbin)
          for (int l = 0; l < LANES; l++) begin
            int v;
            v = int'($urandom_range(0, 32767)) - 16384;
            prod[b][l*PROD_W +: PROD_W] = PROD_W'(v);
            if (lane_en[b*LANES+l]) ref_sum[b*LANES+l] += v;
          end
        else
          for (int c = 0; c < COLS; c++) begin
            int v;
            v = int'($urandom_range(0, 15));
            prod[b][c*BIN_W +: BIN_W] = BIN_W'(v);
            if (lane_en[b*COLS+c]) ref_sum[b*COLS+c] += v;
          end
    end
    @(negedge clk) add = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if ($signed(acc[i]) != ref_sum[i]) begin
        failures++;
        $display("FAIL lane %0d acc=%0d exp=%0d", i, $signed(acc[i]), ref_sum[i]);
      end
    end
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    checks++;
    if (acc !== '0) begin failures++; $display("FAIL clear"); end
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
