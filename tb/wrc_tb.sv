// Testbench for wrc: word-line token position after starts and shifts, the
// word-line enable, and the phase sequence of one operation (fire, then
// precharge with K latched, then compute, then result-valid), including
// back-to-back operations every two clocks.
module wrc_tb;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0, wl_start = 0, wl_shift = 0, wl_en = 0, fire = 0;
  logic [COLS-1:0] k_in, k_out;
  logic_op_e op_in, op_out;
  logic [ROWS-1:0] wl;
  logic pre, eval, res_valid, out_inv;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  wrc dut (.clk, .rst_n, .wl_start, .wl_shift, .wl_en, .fire, .k_in, .op_in,
           .wl, .pre, .eval, .res_valid, .k_out, .op_out, .out_inv);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    k_in = '0; op_in = OP_NAND;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wl_en = 1;
    @(negedge clk) wl_start = 1;
    @(negedge clk) wl_start = 0;
    chk(wl == ROWS'(1), "start selects row 0");
    for (int m = 1; m < ROWS; m++) begin
      @(negedge clk) wl_shift = 1;
      @(negedge clk) wl_shift = 0;
      chk(wl == (ROWS'(1) << m), $sformatf("row %0d after shifts", m));
    end
    wl_en = 0; #1;
    chk(wl == '0, "word lines off without enable");
    // phases of two back-to-back operations
    @(negedge clk) begin fire = 1; end
    @(negedge clk) begin fire = 0; k_in = 32'hA5A5_0F0F; op_in = OP_AND; end
    chk(pre && !eval && !res_valid, "precharge after fire");
    @(negedge clk) begin fire = 1; k_in = 32'h1234_5678; op_in = OP_XOR; end
    chk(!pre && eval, "compute phase");
    chk(k_out == 32'hA5A5_0F0F && op_out == OP_AND && out_inv, "K and op latched in precharge");
    @(negedge clk) fire = 0;
    chk(res_valid && pre, "result valid with next precharge");
    @(negedge clk);
    chk(eval && k_out == 32'h1234_5678 && op_out == OP_XOR && !out_inv, "second operation");
    @(negedge clk);
    chk(res_valid && !pre && !eval, "second result");
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
