// Behavioural model of one 512 x 32 1T1R RRAM block (Block One or Block Two).
// This is not synthesizable hardware but a model of the analogue array: each
// lvl_mem holds a 2-bit conductance level, 0 being the highest resistance and 3
// the lowest.
//
// Forming (form pulse) sets every lvl_mem to a random level, the stochastic
// initial state the paper uses as random weight initialisation. A set pulse
// raises and a reset pulse lowers the level of every lvl_mem whose word line is
// selected and whose bit line is driven, by one step per pulse; the
// write-verify loop that uses these pulses lives in the controller. For
// reading and computing, the selected row appears on the cell_level outputs:
// a column whose bit line carries X = 0 conducts no read current and shows
// level 0, so the readout sees X AND W.
//
// Interface: wl is the one-hot word-line vector from the WL driver, bl the bit
// lines from the BL driver, en selects this block for programming. Pulses take
// effect at the rising clock edge; reading is combinational.
// The array size and 2-bit cells follow the paper; one level step per pulse is
// this model's simplification of multilevel programming.
module rram_array #(
  parameter int ROWS    = cim_pkg::ROWS,
  parameter int COLS    = cim_pkg::COLS,
  parameter int LEVEL_W = cim_pkg::LEVEL_W
) (
  input  logic                           clk,
  input  logic                           form,
  input  logic                           en,
  input  logic                           set_pulse,
  input  logic                           reset_pulse,
  input  logic [ROWS-1:0]                wl,
  input  logic [COLS-1:0]                bl,
  output logic [COLS-1:0][LEVEL_W-1:0]   cell_level
);
  localparam int LMAX = (1 << LEVEL_W) - 1;

  logic [LEVEL_W-1:0] lvl_mem [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (form) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          lvl_mem[r][c] <= LEVEL_W'($urandom);
    end else if (en && (set_pulse || reset_pulse)) begin
      for (int r = 0; r < ROWS; r++)
        if (wl[r])
          for (int c = 0; c < COLS; c++)
            if (bl[c]) begin
              if (set_pulse && lvl_mem[r][c] != LEVEL_W'(LMAX))
                lvl_mem[r][c] <= lvl_mem[r][c] + 1'b1;
              else if (reset_pulse && lvl_mem[r][c] != '0)
                lvl_mem[r][c] <= lvl_mem[r][c] - 1'b1;
            end
    end
  end

  always_comb begin
    cell_level = '0;
    for (int r = 0; r < ROWS; r++)
      if (wl[r])
        for (int c = 0; c < COLS; c++)
          if (bl[c]) cell_level[c] = cell_level[c] | lvl_mem[r][c];
  end
endmodule
