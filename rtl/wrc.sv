// WL Driver & RU Controller (WRC).
//
// Word-line selection uses a one-hot shift register, as in the paper: wl_start
// loads the token into row 0 and each wl_shift moves it one row up. Reaching
// row m therefore costs m shifts after a start; the controller keeps track of
// the position. The word lines are driven only while wl_en is high.
//
// The RU-controller part runs the two phases of the reconfigurable unit. A
// fire request starts one operation: the next clock is the precharge phase
// (pre = 1), in which K and the operation are latched; the clock after is
// the computing phase (eval = 1), in which the latched INR/INL settings are
// applied; res_valid marks the following clock, in which the RU output holds
// the result. A new fire may be issued during the computing phase, so
// operations follow each other every two clocks. The one-clock-per-phase
// timing is this design's choice; the paper shows only the alternation of
// precharge and computing phases.
module wrc
  import cim_pkg::*;
#(
  parameter int ROWS = cim_pkg::ROWS,
  parameter int COLS = cim_pkg::COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wl_start,
  input  logic              wl_shift,
  input  logic              wl_en,
  input  logic              fire,
  input  logic [COLS-1:0]   k_in,
  input  logic_op_e         op_in,
  output logic [ROWS-1:0]   wl,
  output logic              pre,
  output logic              eval,
  output logic              res_valid,
  output logic [COLS-1:0]   k_out,
  output logic_op_e         op_out,
  output logic              out_inv
);
  logic [ROWS-1:0] sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         sr <= '0;
    else if (wl_start)  sr <= ROWS'(1);
    else if (wl_shift)  sr <= {sr[ROWS-2:0], 1'b0};
  end

  assign wl = wl_en ? sr : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre       <= 1'b0;
      eval      <= 1'b0;
      res_valid <= 1'b0;
      k_out     <= '0;
      op_out    <= OP_NAND;
    end else begin
      pre       <= fire;
      eval      <= pre;
      res_valid <= eval;
      if (pre) begin
        k_out  <= k_in;
        op_out <= op_in;
      end
    end
  end

  assign out_inv = (op_out == OP_AND);

  // A new operation may not start while one is in its precharge phase.
  a_no_fire_in_pre: assert property (@(posedge clk) disable iff (!rst_n) pre |-> !fire);
endmodule
