// Pruning unit: the paper's dynamic kernel-pruning rule in hardware.
//
// Each distance measured between two kernels i and j is presented as a
// record (rec_valid with id_a, id_b, dist_in, alpha). If dist_in > alpha the pair
// enters the candidate list, which here is kept as its effect: both kernels'
// frequency counters are incremented and list_len counts the entries. A
// prune strobe (with beta) then prunes every kernel whose frequency exceeds
// beta, setting its bit in the sticky mask, and clears the counters for the
// next round. Records that name an already pruned kernel, or the same kernel
// twice, are ignored. clr_mask restores all kernels (a new training run).
//
// The rule (distance > alpha into list, frequency > beta pruned) follows the
// paper's flowchart; counting both members of a pair, the counter widths and
// the saturating counters are this design's choices. All updates are
// registered.
module prune_unit #(
  parameter int NKERN  = cim_pkg::NKERN,
  parameter int DIST_W = cim_pkg::DIST_W,
  parameter int FREQ_W = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr_mask,
  input  logic                      rec_valid,
  input  logic [$clog2(NKERN)-1:0]  id_a,
  input  logic [$clog2(NKERN)-1:0]  id_b,
  input  logic [DIST_W-1:0]         dist_in,
  input  logic [DIST_W-1:0]         alpha,
  input  logic                      prune,
  input  logic [DIST_W-1:0]         beta,
  output logic [NKERN-1:0]          mask,
  output logic [15:0]               list_len
);
  logic [NKERN-1:0][FREQ_W-1:0] freq;
  logic take;

  assign take = rec_valid && (id_a != id_b) && !mask[id_a] && !mask[id_b] && (dist_in > alpha);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      freq     <= '0;
      mask     <= '0;
      list_len <= '0;
    end else if (clr_mask) begin
      freq     <= '0;
      mask     <= '0;
      list_len <= '0;
    end else if (prune) begin
      for (int k = 0; k < NKERN; k++)
        if (DIST_W'(freq[k]) > beta) mask[k] <= 1'b1;
      freq     <= '0;
      list_len <= '0;
    end else if (take) begin
      if (freq[id_a] != '1) freq[id_a] <= freq[id_a] + 1'b1;
      if (freq[id_b] != '1) freq[id_b] <= freq[id_b] + 1'b1;
      list_len <= list_len + 1'b1;
    end
  end
endmodule
