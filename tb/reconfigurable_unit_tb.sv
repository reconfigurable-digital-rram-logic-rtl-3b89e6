// Testbench for reconfigurable_unit, driven through input_logic: for each of
// the four operations and all eight (X, W, K) combinations per column, one
// precharge and one computing phase, then OUT is compared with the printed
// truth table of the RU (X AND W combined with K by NAND, AND, XOR or OR).
// Also checks that precharge alone leaves OUT high.
module reconfigurable_unit_tb;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0, pre = 0, eval = 0, out_inv = 0;
  logic [COLS-1:0] xw, k, inr, inl, out, x, w;
  logic_op_e op;
  int checks = 0, failures = 0;

  // The paper's truth table, columns (X,W,K) = 000..111, one row per operation.
  localparam logic [7:0] TT_NAND = 8'b0111_1111;  // bit index = {X,W,K}
  localparam logic [7:0] TT_AND  = 8'b1000_0000;
  localparam logic [7:0] TT_XOR  = 8'b0110_1010;
  localparam logic [7:0] TT_OR   = 8'b1110_1010;

  always #5 clk = ~clk;

  input_logic il (.op, .k, .inr, .inl);
  reconfigurable_unit dut (.clk, .rst_n, .pre, .eval, .out_inv, .xw, .inr, .inl, .out);

  task automatic run(input logic_op_e o);
    op = o; out_inv = (o == OP_AND);
    xw = x & w;
    @(negedge clk) pre = 1;
    @(negedge clk) begin pre = 0; eval = 1; end
    @(negedge clk) eval = 0;
    for (int c = 0; c < COLS; c++) begin
      logic [7:0] tt;
      case (o)
        OP_NAND: tt = TT_NAND;
        OP_AND:  tt = TT_AND;
        OP_XOR:  tt = TT_XOR;
        default: tt = TT_OR;
      endcase
      checks++;
      if (out[c] !== tt[{x[c], w[c], k[c]}]) begin
        failures++;
        $display("FAIL op=%0d col=%0d x=%b w=%b k=%b out=%b", o, c, x[c], w[c], k[c], out[c]);
      end
    end
  endtask

  initial begin
    xw = 0; k = 0; op = OP_NAND;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 8; rep++)
      for (int o = 0; o < 4; o++) begin
        // columns 0..7 walk all combinations, the rest are random
        x = $urandom; w = $urandom; k = $urandom;
        for (int c = 0; c < 8; c++) begin x[c] = c[2]; w[c] = c[1]; k[c] = c[0]; end
        run(logic_op_e'(o));
      end
    // precharge only: node high, so OUT = 1 with no inversion
    out_inv = 0;
    @(negedge clk) pre = 1;
    @(negedge clk) pre = 0;
    checks++;
    if (out !== '1) begin failures++; $display("FAIL precharge out=%h", out); end
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
