// Reconfigurable Unit (RU): one precharged logic cell per bit line.
//
// Each cell has a precharge device that pulls OUT high in the precharge
// phase and two pull-down branches that may discharge it in the computing
// phase: one branch conducts when the readout bit XW (= X AND W from the
// Rref Read module) is 1 and INR is 1, the other when XW is 0 and INL is 1.
// Thus OUT = ~((XW & INR) | (~XW & INL)). With the INR/INL settings of the
// input logic this yields the paper's truth table: NAND(XW,K), XOR(XW,K) and
// OR(XW,K); AND is the inverted NAND output, selected by out_inv.
//
// The discharge equation is the one function that satisfies both printed
// tables of the paper; it is not a transcription of the transistor-level
// netlist. Timing: assert pre for one clock (precharge), then eval for one
// clock (compute); out is valid from the clock after eval until the next
// precharge. A flip-flop stands in for the dynamic node.
module reconfigurable_unit #(
  parameter int COLS = cim_pkg::COLS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pre,
  input  logic             eval,
  input  logic             out_inv,
  input  logic [COLS-1:0]  xw,
  input  logic [COLS-1:0]  inr,
  input  logic [COLS-1:0]  inl,
  output logic [COLS-1:0]  out
);
  logic [COLS-1:0] node;   // the dynamic OUT[n] node
  logic [COLS-1:0] pull_dn;

  assign pull_dn = (xw & inr) | (~xw & inl);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    node <= '1;
    else if (pre)  node <= '1;
    else if (eval) node <= node & ~pull_dn;
  end

  assign out = out_inv ? ~node : node;
endmodule
