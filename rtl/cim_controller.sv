// Top CIM controller: the digital sequencer that runs the RRAM arrays.
//
// It accepts one command at a time (cmd_valid/cmd_ready handshake, a
// cim_cmd_t) and answers with a one-clock resp_valid and a cim_resp_t.
// Every array operation is a "pass": one precharge clock and one computing
// clock of the reconfigurable units on one row of both blocks. Passes are
// fired back to back every two clocks; the result of pass p is consumed in
// the clock after its computing phase, which is also the precharge clock of
// pass p+1. Before a pass on a new row the word-line shift register is moved
// there (a start to row 0 when moving down, one shift per row when moving up),
// which stalls firing; rows go through the repair map first.
//
//  FORM   one forming pulse to both arrays.
//  PROG   write-verify: read the cell (3 passes, references 1..3, giving its
//         level as a thermometer count); if it differs from the target, one
//         set or reset pulse, then read again; gives up after MAX_ITER pulses
//         and flags err.
//  READ   the 3 read passes of PROG alone; returns the level.
//  LOGIC  one pass with the caller's X, K, operation and reference; returns
//         the 64 raw outputs.
//  MAC    for each input bit i and reference n, one AND pass; the S&A groups
//         add the outputs, so after 3*in_bits passes they hold the 16 INT8
//         products of the row (Hadamard product). With acc_en they are then
//         added to the accumulator (VMM). Lanes of pruned kernels are masked,
//         and their bit lines are not driven when both blocks' kernels of the
//         lane are pruned.
//         With wbin set (binary weights, one weight per cell) every column is
//         a lane: one pass per input bit with reference 1, input xb[c] on
//         column c, and the S&A groups build 32 4-bit products per block;
//         kernel k of the mask is then kbase + block*32 + column.
//  DIST   for each row of the kernels and each reference: a read pass of
//         kernel B, then an XOR pass of kernel A with K = kernel B's bits;
//         the ones of the XOR output are counted. The sum over the thermometer
//         bits is the L1 distance of the 2-bit levels (the Hamming distance for
//         binary weights, where wbin uses reference 1 only and one column
//         per kernel). The distance goes to the pruning unit with alpha.
//  PRUNE  the pruning unit's frequency check with beta.
//  ACCCLR clears the accumulator; REPAIR writes a repair-map entry.
//
// The paper runs this controller on an FPGA next to the chip and names only
// its role (data exchange and control signals); the command set, pass
// scheduling, write-verify loop and the mapping of kernels to lanes are this
// design's choices.
module cim_controller
  import cim_pkg::*;
#(
  parameter int MAX_ITER = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host side
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cim_cmd_t                 cmd,
  output logic                     resp_valid,
  output cim_resp_t                resp,
  // array and drivers
  output logic                     form,
  output logic                     prog_mode,
  output logic                     comp_mode,
  output logic                     set_req,
  output logic                     reset_req,
  output logic                     prog_blk,
  output logic [COL_W-1:0]         prog_col,
  output logic [COLS-1:0]          x_bl,
  output logic                     wl_start,
  output logic                     wl_shift,
  output logic                     wl_en,
  output logic                     fire,
  output logic [COLS-1:0]          k,
  output logic_op_e                op,
  output logic [2:0]               vtran,
  input  logic                     pre,
  input  logic                     res_valid,
  input  logic [NBLK*COLS-1:0]     ru_out,
  // repair map
  output logic [ROW_W-1:0]         log_row,
  input  logic [ROW_W-1:0]         phys_row,
  output logic                     rep_wr,
  output logic [3:0]               rep_idx,
  output logic [ROW_W-1:0]         rep_row,
  // S&A groups and accumulator
  output logic                     sa_clr,
  output logic                     sa_add,
  output logic [2:0]               sa_bit,
  output logic                     sa_sub_msb,
  output logic                     sa_neg,
  output logic                     wbin,
  output logic [NBLK-1:0][COLS-1:0] sa_lane_en,
  output logic [NBLK*COLS-1:0]     acc_lane_en,
  output logic                     acc_clr,
  output logic                     acc_add,
  // pruning unit
  input  logic [NKERN-1:0]         prune_mask,
  output logic                     rec_valid,
  output logic [KID_W-1:0]         rec_id_a,
  output logic [KID_W-1:0]         rec_id_b,
  output logic [DIST_W-1:0]        rec_dist,
  output logic [DIST_W-1:0]        rec_alpha,
  output logic                     prune,
  output logic [DIST_W-1:0]        prune_beta
);
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_PULSE, S_FIN, S_DONE} state_e;


  state_e            state;
  cim_cmd_t          c;
  logic [11:0]       issue_idx;   // next pass to fire
  logic [11:0]       fly_idx;     // pass in precharge/compute
  logic [11:0]       cons_idx;    // next pass whose result is consumed
  logic [11:0]       npass;
  logic [ROW_W-1:0]  wl_pos;
  logic              wl_ok;
  logic [COLS-1:0]   buf_b;       // kernel B bits from the last read pass
  logic [DIST_W-1:0] distance;
  logic [1:0]        lvl_cnt;
  logic [3:0]        iter;
  cim_resp_t         r;

  // ---------------------------------------------------------------- pass map
  typedef struct packed {
    logic [ROW_W-1:0] row;
    logic [COLS-1:0]  x;
    logic [COLS-1:0]  k;
    logic_op_e        op;
    logic [1:0]       refn;   // reference 1..3
  } pass_t;

  // Lane activity from the pruning mask: the kernel id of block b lane l is
  // kbase + b*LANES + l for INT8 weights and kbase + b*COLS + l for binary
  // weights (every column a lane). active is numbered the same way.
  logic [NBLK*COLS-1:0] active;
  always_comb begin
    active = '0;
    for (int i = 0; i < NBLK*COLS; i++)
      if (c.wbin || i < NBLK*LANES)
        active[i] = !prune_mask[KID_W'(c.kbase + KID_W'(i))];
  end

  // Columns of a lane: four for an INT8 weight, one for a binary weight.
  function automatic logic [COLS-1:0] lane_cols(input logic [COL_W-1:0] lane);
    if (c.wbin) lane_cols = COLS'(1) << lane;
    else        lane_cols = COLS'({CELLS_PER_W{1'b1}}) << (lane * CELLS_PER_W);
  endfunction

  function automatic pass_t pass_of(input logic [11:0] p);
    pass_t ps;
    ps.row  = c.row;
    ps.x    = '0;
    ps.k    = '1;
    ps.op   = OP_AND;
    ps.refn = 2'd1;
    unique case (c.op)
      CMD_LOGIC: begin
        ps.x = c.x; ps.k = c.k; ps.op = c.lop; ps.refn = c.ref_sel;
      end
      CMD_MAC:
        if (c.wbin) begin
          for (int cc = 0; cc < COLS; cc++)
            ps.x[cc] = c.xb[cc][2'(p)] & (active[cc] | active[COLS+cc]);
        end else begin
          ps.refn = 2'(p % 3) + 2'd1;
          for (int l = 0; l < LANES; l++)
            for (int cc = 0; cc < CELLS_PER_W; cc++)
              ps.x[l*CELLS_PER_W+cc] = c.xv[l][3'(p / 3)] & (active[l] | active[LANES+l]);
        end
      CMD_DIST: begin
        if (c.wbin) begin
          ps.row  = c.row + ROW_W'(p / 2);
        end else begin
          ps.row  = c.row + ROW_W'(p / 6);
          ps.refn = 2'((p % 6) / 2) + 2'd1;
        end
        if (!p[0]) begin
          ps.x = lane_cols(c.lane_b);
        end else begin
          ps.x  = lane_cols(c.lane_a);
          ps.op = OP_XOR;
        end
      end
      default: begin  // PROG / READ verify reads
        ps.x    = COLS'(1) << c.col;
        ps.refn = 2'(p) + 2'd1;
      end
    endcase
    return ps;
  endfunction

  pass_t ps_issue, ps_fly;
  assign ps_issue = pass_of(issue_idx);
  assign ps_fly   = pass_of(fly_idx);

  // Kernel B's bits moved from lane_b to lane_a's columns.
  function automatic logic [COLS-1:0] b_to_a(input logic [COLS-1:0] v);
    logic [COLS-1:0] o;
    o = '0;
    if (c.wbin)
      o[c.lane_a] = v[c.lane_b];
    else
      for (int cc = 0; cc < CELLS_PER_W; cc++)
        o[c.lane_a*CELLS_PER_W + cc] = v[c.lane_b*CELLS_PER_W + cc];
    return o;
  endfunction

  logic [COLS-1:0] out_blk_b, out_blk_a;
  assign out_blk_b = c.blk_b ? ru_out[2*COLS-1:COLS] : ru_out[COLS-1:0];
  assign out_blk_a = c.blk_a ? ru_out[2*COLS-1:COLS] : ru_out[COLS-1:0];

  logic [DIST_W-1:0] ones_a;
  always_comb begin
    ones_a = '0;
    for (int cc = 0; cc < COLS; cc++)
      if (lane_cols(c.lane_a)[cc]) ones_a = ones_a + DIST_W'(out_blk_a[cc]);
  end

  // -------------------------------------------------------------- scheduling
  logic running, want_fire, row_ok, consume;
  assign running   = (state == S_RUN);
  assign log_row   = ps_issue.row;
  assign row_ok    = wl_ok && (wl_pos == phys_row);
  assign want_fire = running && (issue_idx < npass) && !pre;
  assign fire      = want_fire && row_ok;
  assign wl_start  = want_fire && !row_ok && (!wl_ok || phys_row < wl_pos);
  assign wl_shift  = want_fire && !row_ok && wl_ok && (phys_row > wl_pos);
  assign consume   = running && res_valid;

  // Array-side signals of the pass in flight; K of an XOR pass comes from the
  // read pass that was just consumed.
  assign comp_mode = running;
  assign wl_en     = running || (state == S_PULSE);
  assign x_bl      = ps_fly.x;
  assign op        = ps_fly.op;
  assign vtran     = 3'b001 << (ps_fly.refn - 2'd1);
  always_comb begin
    k = ps_fly.k;
    if (c.op == CMD_DIST && ps_fly.op == OP_XOR)
      k = consume ? b_to_a(out_blk_b) : buf_b;
  end

  // S&A control on consumption of a MAC pass.
  logic [2:0] cons_bit;
  assign cons_bit   = c.wbin ? 3'(cons_idx) : 3'(cons_idx / 3);
  assign sa_clr     = (state == S_IDLE) && cmd_valid && cmd.op == CMD_MAC;
  assign sa_add     = consume && c.op == CMD_MAC;
  assign sa_bit     = cons_bit;
  assign sa_sub_msb = !c.wbin && (cons_idx % 3) == 1;
  assign sa_neg     = !c.wbin && c.x_signed && (4'(cons_bit) == c.in_bits - 4'd1);
  assign wbin       = c.wbin;
  assign acc_lane_en = active;
  always_comb begin
    sa_lane_en = '0;
    for (int b = 0; b < NBLK; b++)
      for (int l = 0; l < COLS; l++)
        if (c.wbin) sa_lane_en[b][l] = active[b*COLS + l];
        else if (l < LANES) sa_lane_en[b][l] = active[b*LANES + l];
  end
  assign acc_add    = (state == S_FIN) && c.op == CMD_MAC && c.acc_en;
  assign acc_clr    = (state == S_FIN) && c.op == CMD_ACCCLR;

  assign form      = (state == S_FIN) && c.op == CMD_FORM;
  assign prog_mode = (state == S_PULSE);
  assign prog_blk  = c.blk;
  assign prog_col  = c.col;
  assign set_req   = (state == S_PULSE) && (c.level > lvl_cnt);
  assign reset_req = (state == S_PULSE) && (c.level < lvl_cnt);

  assign rep_wr  = (state == S_FIN) && c.op == CMD_REPAIR;
  assign rep_idx = c.rep_idx;
  assign rep_row = c.row;

  assign rec_valid  = (state == S_FIN) && c.op == CMD_DIST;
  assign rec_id_a   = c.id_a;
  assign rec_id_b   = c.id_b;
  assign rec_dist   = distance;
  assign rec_alpha  = c.thresh;
  assign prune      = (state == S_FIN) && c.op == CMD_PRUNE;
  assign prune_beta = c.thresh;

  assign cmd_ready  = (state == S_IDLE);

  function automatic logic [11:0] passes_of(input cim_cmd_t cm);
    unique case (cm.op)
      CMD_LOGIC:          return 12'd1;
      CMD_MAC:            return cm.wbin ? 12'(cm.in_bits) : 12'(3 * cm.in_bits);
      CMD_DIST:           return cm.wbin ? 12'(2 * cm.nrows) : 12'(6 * cm.nrows);
      CMD_PROG, CMD_READ: return 12'd3;
      default:            return 12'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      c          <= '0;
      issue_idx  <= '0;
      fly_idx    <= '0;
      cons_idx   <= '0;
      npass      <= '0;
      wl_pos     <= '0;
      wl_ok      <= 1'b0;
      buf_b      <= '0;
      distance       <= '0;
      lvl_cnt    <= '0;
      iter       <= '0;
      r          <= '0;
      resp_valid <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      if (wl_start) begin wl_pos <= '0; wl_ok <= 1'b1; end
      if (wl_shift) wl_pos <= wl_pos + 1'b1;
      if (fire) begin
        fly_idx   <= issue_idx;
        issue_idx <= issue_idx + 1'b1;
      end
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c         <= cmd;
          npass     <= passes_of(cmd);
          issue_idx <= '0;
          fly_idx   <= '0;
          cons_idx  <= '0;
          distance      <= '0;
          lvl_cnt   <= '0;
          iter      <= '0;
          r         <= '0;
          state     <= (passes_of(cmd) == 0) ? S_FIN : S_RUN;
        end
        S_RUN: begin
          if (consume) begin
            cons_idx <= cons_idx + 1'b1;
            unique case (c.op)
              CMD_LOGIC: r.raw <= ru_out;
              CMD_DIST:
                if ((cons_idx % 2) == 0) buf_b <= b_to_a(out_blk_b);
                else distance <= distance + ones_a;
              CMD_PROG, CMD_READ:
                lvl_cnt <= lvl_cnt + 2'(ru_out[{c.blk, c.col}]);
              default: ;
            endcase
            if (cons_idx + 1'b1 == npass) state <= S_FIN;
          end
        end
        S_PULSE: begin
          iter      <= iter + 1'b1;
          issue_idx <= '0;
          cons_idx  <= '0;
          lvl_cnt   <= '0;
          state     <= S_RUN;
        end
        S_FIN: begin
          r.distance <= distance;
          r.level <= lvl_cnt;
          state   <= S_DONE;
          if (c.op == CMD_PROG && lvl_cnt != c.level) begin
            if (iter == 4'(MAX_ITER)) r.err <= 1'b1;
            else state <= S_PULSE;
          end
        end
        S_DONE: begin
          resp_valid <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign resp = r;

  // Handshake and sequencing rules.
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
                              resp_valid |-> state == S_IDLE);
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 fire |-> issue_idx < npass);
endmodule
