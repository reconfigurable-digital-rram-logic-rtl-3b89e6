// Input Logic: converts the per-column input K and the selected logic
// operation into the two pull-down control lines INR and INL of the
// reconfigurable unit.
//
// The mapping is the paper's table: NAND and AND use INR = K, INL = 0;
// XOR uses INR = K, INL = ~K; OR uses INR = 0, INL = ~K. NAND and AND share
// the same settings; AND is the inverted NAND output, which the
// reconfigurable unit takes care of. Combinational, one copy per bit line.
module input_logic
  import cim_pkg::*;
#(
  parameter int COLS = cim_pkg::COLS
) (
  input  logic_op_e        op,
  input  logic [COLS-1:0]  k,
  output logic [COLS-1:0]  inr,
  output logic [COLS-1:0]  inl
);
  always_comb begin
    unique case (op)
      OP_NAND, OP_AND: begin inr = k;   inl = '0; end
      OP_XOR:          begin inr = k;   inl = ~k; end
      OP_OR:           begin inr = '0;  inl = ~k; end
      default:         begin inr = k;   inl = '0; end
    endcase
  end
endmodule
