// Digital RRAM compute-in-memory system, top level.
//
// Two 512 x 32 RRAM blocks share the word lines (one WL driver) and the bit
// lines (one BL driver), so every pass works on the same row of both blocks
// with the same inputs X. Under each block a Rref Read comparator row turns
// the cells of the selected row into bits (X AND W), and a row of
// reconfigurable units combines them with K into NAND, AND, XOR or OR. The
// 64 outputs OUT[63:0] (Block Two on [63:32], Block One on [31:0]) feed two
// Shift & Adder groups, which rebuild element-wise products (the Hadamard
// output), and the accumulator, which sums them over rows (the VMM output).
// Weights are either INT8 (four 2-bit cells per weight, 8 per block row,
// 16-bit products) or binary (one per cell, 32 per block row, 4-bit
// products of inputs up to 4 bits); both fill the 128-bit S&A output. XOR passes measure kernel distances, which the pruning unit turns
// into a pruning mask; pruned kernels are masked in later computation.
// The top CIM controller sequences all of it from a command interface.
//
// Interface: cmd_valid/cmd_ready/cmd and resp_valid/resp as described in
// cim_controller; hadamard, vmm and prune_mask are the registered results.
// The block structure follows the paper's system diagram; the lane layout,
// command set and timing are this design's choices (see the sub-modules).
module rram_cim_top
  import cim_pkg::*;
(
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 prune_clr,   // restore all kernels
  input  logic                                 cmd_valid,
  output logic                                 cmd_ready,
  input  cim_cmd_t                             cmd,
  output logic                                 resp_valid,
  output cim_resp_t                            resp,
  output logic [NBLK-1:0][LANES*PROD_W-1:0]    hadamard,
  output logic [NBLK*COLS-1:0][ACC_W-1:0]      vmm,
  output logic [NKERN-1:0]                     prune_mask,
  output logic [15:0]                          list_len
);
  // controller <-> periphery
  logic form, prog_mode, comp_mode, set_req, reset_req, prog_blk;
  logic [COL_W-1:0] prog_col;
  logic [COLS-1:0]  x_bl, k, k_lat, inr, inl, bl;
  logic wl_start, wl_shift, wl_en, fire, pre, eval, res_valid, out_inv;
  logic_op_e op, op_lat;
  logic [2:0] vtran;
  logic [NBLK*COLS-1:0] ru_out;
  logic [ROW_W-1:0] log_row, phys_row, rep_row;
  logic rep_wr, remapped;
  logic [3:0] rep_idx;
  logic sa_clr, sa_add, sa_sub_msb, sa_neg, acc_clr, acc_add;
  logic [2:0] sa_bit;
  logic wbin;
  logic [NBLK-1:0][COLS-1:0] sa_lane_en;
  logic [NBLK*COLS-1:0] acc_lane_en;
  logic rec_valid, prune;
  logic [KID_W-1:0] rec_id_a, rec_id_b;
  logic [DIST_W-1:0] rec_dist, rec_alpha, prune_beta;
  logic [ROWS-1:0] wl;
  logic [NBLK-1:0] blk_en;
  logic set_pulse, reset_pulse;

  cim_controller u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .resp_valid, .resp,
    .form, .prog_mode, .comp_mode, .set_req, .reset_req, .prog_blk, .prog_col,
    .x_bl, .wl_start, .wl_shift, .wl_en, .fire, .k, .op, .vtran,
    .pre, .res_valid, .ru_out,
    .log_row, .phys_row, .rep_wr, .rep_idx, .rep_row,
    .sa_clr, .sa_add, .sa_bit, .sa_sub_msb, .sa_neg, .wbin, .sa_lane_en, .acc_lane_en,
    .acc_clr, .acc_add,
    .prune_mask, .rec_valid, .rec_id_a, .rec_id_b, .rec_dist, .rec_alpha,
    .prune, .prune_beta
  );

  repair_map u_repair (
    .clk, .rst_n, .wr(rep_wr), .wr_idx(rep_idx), .wr_row(rep_row),
    .log_row, .phys_row, .remapped
  );

  bsic u_bsic (
    .prog_mode, .comp_mode, .set_req, .reset_req, .blk(prog_blk), .col(prog_col),
    .x(x_bl), .bl, .blk_en, .set_pulse, .reset_pulse
  );

  wrc u_wrc (
    .clk, .rst_n, .wl_start, .wl_shift, .wl_en, .fire, .k_in(k), .op_in(op),
    .wl, .pre, .eval, .res_valid, .k_out(k_lat), .op_out(op_lat), .out_inv
  );

  input_logic u_inlogic (.op(op_lat), .k(k_lat), .inr, .inl);

  for (genvar b = 0; b < NBLK; b++) begin : g_blk
    logic [COLS-1:0][LEVEL_W-1:0] cell_level;
    logic [COLS-1:0] xw;

    rram_array u_array (
      .clk, .form, .en(blk_en[b]), .set_pulse, .reset_pulse, .wl, .bl, .cell_level
    );
    rref_read u_rr (.cell_level, .vtran, .w_bit(xw));
    reconfigurable_unit u_ru (
      .clk, .rst_n, .pre, .eval, .out_inv, .xw, .inr, .inl,
      .out(ru_out[b*COLS +: COLS])
    );
    sa_group u_sa (
      .clk, .rst_n, .wbin, .clr(sa_clr), .add(sa_add), .bit_idx(sa_bit),
      .sub_msb(sa_sub_msb), .neg(sa_neg), .lane_en(sa_lane_en[b]),
      .ru_out(ru_out[b*COLS +: COLS]), .prod(hadamard[b])
    );
  end

  accumulator u_acc (
    .clk, .rst_n, .wbin, .clr(acc_clr), .add(acc_add), .lane_en(acc_lane_en), .prod(hadamard),
    .acc(vmm)
  );

  prune_unit u_prune (
    .clk, .rst_n, .clr_mask(prune_clr), .rec_valid, .id_a(rec_id_a), .id_b(rec_id_b),
    .dist_in(rec_dist), .alpha(rec_alpha), .prune, .beta(prune_beta),
    .mask(prune_mask), .list_len
  );
endmodule
