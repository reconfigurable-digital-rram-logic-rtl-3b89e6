// Behavioural model of the Rref Read (RR) module: one resistive-divider
// comparator per bit line. This is a model of an analogue circuit. In the
// real part the cell resistance Rw and a reference resistor Rref form a
// divider whose midpoint passes through three inverters; the reference is
// tuned by three NMOS transistors Vtran1..Vtran3. The output is 1 when
// Rref > Rw (low-resistance cell), else 0.
//
// Here the cell is represented by its 2-bit level and the reference by the
// one-hot vtran vector: vtran[0] places Rref between levels 0 and 1,
// vtran[1] between 1 and 2, vtran[2] between 2 and 3, so w_bit = level >= n
// for vtran[n-1]. Reading a 2-bit cell with all three settings gives its
// level as a thermometer code. That mapping of the three transistors to
// three thresholds is this design's reading of the figure; the paper only
// says the reference is tunable. Combinational.
module rref_read #(
  parameter int COLS    = cim_pkg::COLS,
  parameter int LEVEL_W = cim_pkg::LEVEL_W
) (
  input  logic [COLS-1:0][LEVEL_W-1:0] cell_level,
  input  logic [2:0]                   vtran,
  output logic [COLS-1:0]              w_bit
);
  logic [LEVEL_W-1:0] thr;

  always_comb begin
    unique case (vtran)
      3'b001:  thr = LEVEL_W'(1);
      3'b010:  thr = LEVEL_W'(2);
      3'b100:  thr = LEVEL_W'(3);
      default: thr = LEVEL_W'(1);
    endcase
    for (int c = 0; c < COLS; c++)
      w_bit[c] = (cell_level[c] >= thr);
  end
endmodule
