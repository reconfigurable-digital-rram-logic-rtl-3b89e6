// Accumulator (ACC): sums the element-wise products of successive rows into
// vector-matrix multiplication results.
//
// With one kernel per lane and one input element per row, a kernel's output
// is the sum over rows of that lane's product, so the accumulator keeps one
// signed ACC_W-bit word per possible lane: NBLK*COLS words, enough for
// binary weights where every bit line is a lane. With INT8 weights
// (wbin = 0) word b*LANES+l receives the sign-extended 16-bit product of
// lane l of S&A group b; with binary weights (wbin = 1) word b*COLS+c
// receives the 4-bit unsigned product of column c. lane_en uses the same
// numbering. clr zeroes all words. Results are registered.
// The paper says only that the accumulator sums partial products for VMM;
// the per-lane organisation and word width are this design's choices.
module accumulator #(
  parameter int NBLK   = cim_pkg::NBLK,
  parameter int COLS   = cim_pkg::COLS,
  parameter int LANES  = cim_pkg::LANES,
  parameter int PROD_W = cim_pkg::PROD_W,
  parameter int ACC_W  = cim_pkg::ACC_W,
  parameter int N      = NBLK * COLS,
  parameter int BIN_W  = (LANES * PROD_W) / COLS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              wbin,
  input  logic                              clr,
  input  logic                              add,
  input  logic [N-1:0]                      lane_en,
  input  logic [NBLK-1:0][LANES*PROD_W-1:0] prod,
  output logic [N-1:0][ACC_W-1:0]           acc
);
  logic [N-1:0][ACC_W-1:0] inc;

  always_comb begin
    inc = '0;
    for (int b = 0; b < NBLK; b++) begin
      if (wbin) begin
        for (int c = 0; c < COLS; c++)
          inc[b*COLS + c] = ACC_W'(prod[b][c*BIN_W +: BIN_W]);
      end else begin
        for (int l = 0; l < LANES; l++)
          inc[b*LANES + l] = ACC_W'(signed'(prod[b][l*PROD_W +: PROD_W]));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (clr) acc <= '0;
    else if (add)
      for (int i = 0; i < N; i++)
        if (lane_en[i]) acc[i] <= acc[i] + inc[i];
  end
endmodule
