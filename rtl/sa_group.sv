// Shift & Adder (S&A) group: rebuilds multi-bit element-wise products from
// the single-bit outputs of the reconfigurable unit of one block.
//
// INT8 weights (wbin = 0): the block's 32 bit lines form 8 lanes of four
// 2-bit cells; cell c of a lane holds weight bits [2c+1:2c], so one INT8
// weight occupies one lane. One array pass applies input bit i of every
// lane's input on its bit lines and reads every cell against reference n
// (1..3); the AND result of cell c is then (x_i AND level_c >= n). Summed
// over n = 1..3 that gives x_i * level_c, so each pass adds
// sum_c out[4l+c] << 2c, shifted left by i, to lane l. Two's complement is
// handled by two corrections: on the n = 2 pass the top cell's result (its
// bit 7) is also subtracted at weight 256, turning the unsigned weight into a
// signed one, and for signed inputs the pass of the input's top bit is
// subtracted instead of added. Lane l is prod[16l+15:16l].
//
// Binary weights (wbin = 1): every cell holds one weight (level 0 or 1,
// read with reference 1), so each bit line is its own lane. Each pass adds
// out[c] << i to a 4-bit field, giving x * w for unsigned inputs of up to
// 4 bits. Column c is prod[4c+3:4c].
//
// Controls: clr zeroes the products; add (with bit_idx, sub_msb, neg) adds
// the current pass; lane_en masks pruned kernels (bit l for INT8 lane l,
// bit c for binary column c). prod is registered, 128 bits as in the paper's
// figure. The bit-serial scheme, the sign handling and the 4-bit binary
// fields are this design's own; the paper names the block, its 128-bit
// output, 4 cells per INT8 weight and the binary/2-bit storage modes.
module sa_group #(
  parameter int COLS        = cim_pkg::COLS,
  parameter int CELLS_PER_W = cim_pkg::CELLS_PER_W,
  parameter int LANES       = COLS / CELLS_PER_W,
  parameter int PROD_W      = cim_pkg::PROD_W,
  parameter int BIN_W       = (LANES * PROD_W) / COLS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wbin,
  input  logic                          clr,
  input  logic                          add,
  input  logic [2:0]                    bit_idx,
  input  logic                          sub_msb,
  input  logic                          neg,
  input  logic [COLS-1:0]               lane_en,
  input  logic [COLS-1:0]               ru_out,
  output logic [LANES*PROD_W-1:0]       prod
);
  logic [LANES-1:0][PROD_W-1:0] term;
  logic [COLS-1:0][BIN_W-1:0]   bterm;
  logic [LANES-1:0][PROD_W-1:0] lanes_q;
  logic [COLS-1:0][BIN_W-1:0]   cols_q;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [PROD_W-1:0] partial;
      partial = '0;
      for (int c = 0; c < CELLS_PER_W; c++)
        partial = partial + (PROD_W'(ru_out[l*CELLS_PER_W + c]) << (2 * c));
      if (sub_msb)
        partial = partial - (PROD_W'(ru_out[l*CELLS_PER_W + CELLS_PER_W - 1]) << (2 * CELLS_PER_W));
      partial = partial << bit_idx;
      term[l] = neg ? (~partial + 1'b1) : partial;
    end
    for (int c = 0; c < COLS; c++)
      bterm[c] = BIN_W'(ru_out[c]) << bit_idx;
  end

  assign lanes_q = prod;
  assign cols_q  = prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prod <= '0;
    else if (clr) prod <= '0;
    else if (add) begin
      if (wbin) begin
        for (int c = 0; c < COLS; c++)
          if (lane_en[c]) prod[c*BIN_W +: BIN_W] <= cols_q[c] + bterm[c];
      end else begin
        for (int l = 0; l < LANES; l++)
          if (lane_en[l]) prod[l*PROD_W +: PROD_W] <= lanes_q[l] + term[l];
      end
    end
  end
endmodule
