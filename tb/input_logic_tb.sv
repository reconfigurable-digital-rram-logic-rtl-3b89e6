// Testbench for input_logic: every operation with random K vectors, checked
// against the INR/INL table (NAND/AND: INR=K, INL=0; XOR: INR=K, INL=~K;
// OR: INR=0, INL=~K).
module input_logic_tb;
  import cim_pkg::*;
  logic_op_e op;
  logic [COLS-1:0] k, inr, inl, er, el;
  int checks = 0, failures = 0;

  input_logic dut (.op, .k, .inr, .inl);

  initial begin
    for (int t = 0; t < 64; t++) begin
      op = logic_op_e'(t % 4);
      k  = $urandom;
      #1;
      case (t % 4)
        0, 1: begin er = k;  el = '0; end
        2:    begin er = k;  el = ~k; end
        default: begin er = '0; el = ~k; end
      endcase
      checks++;
      if (inr !== er || inl !== el) begin
        failures++;
        $display("FAIL op=%0d k=%h inr=%h inl=%h", t % 4, k, inr, inl);
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
