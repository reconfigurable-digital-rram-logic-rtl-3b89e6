// BL and SL Driver Circuits & Input Controller (BSIC).
//
// In programming mode a decoder selects the single bit line given by col,
// and the set or reset request is passed as a pulse to the block chosen by
// blk (set is applied through the bit line, reset through the source line;
// the drivers' analogue levels are outside this model). In computing mode
// the input vector X is driven onto all bit lines at once and no
// programming pulse is issued. When neither mode is active the bit lines
// are released (0).
//
// The paper gives the two roles (select one BL for programming, broadcast
// inputs for computation); the block-enable per array and the separate
// set/reset outputs are this design's choices. Combinational.
module bsic #(
  parameter int COLS = cim_pkg::COLS,
  parameter int NBLK = cim_pkg::NBLK
) (
  input  logic                     prog_mode,
  input  logic                     comp_mode,
  input  logic                     set_req,
  input  logic                     reset_req,
  input  logic [$clog2(NBLK)-1:0]  blk,
  input  logic [$clog2(COLS)-1:0]  col,
  input  logic [COLS-1:0]          x,
  output logic [COLS-1:0]          bl,
  output logic [NBLK-1:0]          blk_en,
  output logic                     set_pulse,
  output logic                     reset_pulse
);
  always_comb begin
    bl          = '0;
    blk_en      = '0;
    set_pulse   = 1'b0;
    reset_pulse = 1'b0;
    if (prog_mode) begin
      bl[col]     = 1'b1;
      blk_en[blk] = 1'b1;
      set_pulse   = set_req;
      reset_pulse = reset_req && !set_req;
    end else if (comp_mode) begin
      bl = x;
    end
  end
endmodule
