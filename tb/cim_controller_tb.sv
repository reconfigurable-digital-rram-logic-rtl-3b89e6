// Testbench for cim_controller, run against the real array periphery (BL
// driver, WL driver/RU controller, input logic, two array models with their
// Rref Read and reconfigurable-unit rows, repair map). A shadow copy of the
// cell levels in the testbench gives the expected values.
// Checks: write-verify programming reaches every target level and issues
// pulses only when needed; READ returns levels; LOGIC returns the truth-table
// result for all four operations with the latency of one pass; DIST returns
// the L1 distance of two kernels' levels (rows, lanes and blocks chosen at
// random) and hands it to the pruning interface; a repaired row is accessed
// in the backup region; S&A add strobes of a MAC come once per pass; with
// binary weights DIST gives the Hamming distance of two columns.
module cim_controller_tb;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, resp_valid;
  cim_cmd_t cmd;
  cim_resp_t resp;
  logic form, prog_mode, comp_mode, set_req, reset_req, prog_blk;
  logic [COL_W-1:0] prog_col;
  logic [COLS-1:0] x_bl, k, k_lat, inr, inl, bl;
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
  logic [NKERN-1:0] prune_mask;
  logic rec_valid, prune;
  logic [KID_W-1:0] rec_id_a, rec_id_b;
  logic [DIST_W-1:0] rec_dist, rec_alpha, prune_beta;
  logic [ROWS-1:0] wl;
  logic [NBLK-1:0] blk_en;
  logic set_pulse, reset_pulse;
  int checks = 0, failures = 0;
  int lv [NBLK][ROWS][COLS];
  int pulses = 0, sa_adds = 0, recs = 0;
  logic [DIST_W-1:0] last_rec;

  always #5 clk = ~clk;

  cim_controller dut (.*);
  repair_map u_rep (.clk, .rst_n, .wr(rep_wr), .wr_idx(rep_idx), .wr_row(rep_row),
                    .log_row, .phys_row, .remapped);
  bsic u_bsic (.prog_mode, .comp_mode, .set_req, .reset_req, .blk(prog_blk), .col(prog_col),
               .x(x_bl), .bl, .blk_en, .set_pulse, .reset_pulse);
  wrc u_wrc (.clk, .rst_n, .wl_start, .wl_shift, .wl_en, .fire, .k_in(k), .op_in(op),
             .wl, .pre, .eval, .res_valid, .k_out(k_lat), .op_out(op_lat), .out_inv);
  input_logic u_il (.op(op_lat), .k(k_lat), .inr, .inl);
  for (genvar b = 0; b < NBLK; b++) begin : g_blk
    logic [COLS-1:0][LEVEL_W-1:0] cell_level;
    logic [COLS-1:0] xw;
    rram_array u_arr (.clk, .form, .en(blk_en[b]), .set_pulse, .reset_pulse, .wl, .bl, .cell_level);
    rref_read u_rr (.cell_level, .vtran, .w_bit(xw));
    reconfigurable_unit u_ru (.clk, .rst_n, .pre, .eval, .out_inv, .xw, .inr, .inl,
                              .out(ru_out[b*COLS +: COLS]));
  end

  always @(posedge clk) begin
    if (set_pulse || reset_pulse) pulses++;
    if (sa_add) sa_adds++;
    if (rec_valid) begin recs++; last_rec = rec_dist; end
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input cim_cmd_t cm, output cim_resp_t rs, output int cycles);
    cycles = 0;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = cm; cmd_valid = 1;
    @(negedge clk) cmd_valid = 0;
    cycles = 1;
    while (!resp_valid) begin @(negedge clk); cycles++; end
    rs = resp;
  endtask

  function automatic cim_cmd_t base(input cmd_e o);
    cim_cmd_t cm;
    cm = '0; cm.op = o;
    return cm;
  endfunction

  task automatic prog(input int b, input int row, input int col, input int level);
    cim_cmd_t cm; cim_resp_t rs; int cy;
    cm = base(CMD_PROG); cm.blk = 1'(b); cm.row = ROW_W'(row); cm.col = COL_W'(col);
    cm.level = LEVEL_W'(level);
    send(cm, rs, cy);
    lv[b][row][col] = level;
    chk(!rs.err && rs.level == LEVEL_W'(level), $sformatf("prog b%0d r%0d c%0d -> %0d", b, row, col, level));
  endtask

  initial begin
    cim_cmd_t cm; cim_resp_t rs; int cy; int p0;
    cmd = '0; prune_mask = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    send(base(CMD_FORM), rs, cy);
    // program rows 3 and 4 (and 40 for the repair test) of both blocks
    for (int b = 0; b < NBLK; b++)
      foreach (lv[0][0][c]) begin
        prog(b, 3, c, $urandom_range(0, 3));
        prog(b, 4, c, $urandom_range(0, 3));
      end
    // programming a cell to the level it already holds needs no pulse
    p0 = pulses;
    prog(0, 3, 5, lv[0][3][5]);
    chk(pulses == p0, "no pulse when the cell already holds the target");
    // READ
    for (int c = 0; c < COLS; c += 3) begin
      cm = base(CMD_READ); cm.blk = 1; cm.row = 4; cm.col = COL_W'(c);
      send(cm, rs, cy);
      chk(rs.level == LEVEL_W'(lv[1][4][c]), $sformatf("read b1 r4 c%0d", c));
    end
    // LOGIC, all ops, random X/K, reference 1..3
    for (int t = 0; t < 24; t++) begin
      logic [NBLK*COLS-1:0] e;
      cm = base(CMD_LOGIC); cm.row = 3; cm.lop = logic_op_e'(t % 4);
      cm.ref_sel = 2'(1 + (t / 4) % 3); cm.x = $urandom; cm.k = $urandom;
      send(cm, rs, cy);
      for (int b = 0; b < NBLK; b++)
        for (int c = 0; c < COLS; c++) begin
          bit xw, kk;
          xw = cm.x[c] && (lv[b][3][c] >= cm.ref_sel);
          kk = cm.k[c];
          case (cm.lop)
            OP_NAND: e[b*COLS+c] = !(xw && kk);
            OP_AND:  e[b*COLS+c] = xw && kk;
            OP_XOR:  e[b*COLS+c] = xw ^ kk;
            default: e[b*COLS+c] = xw || kk;
          endcase
        end
      chk(rs.raw == e, $sformatf("logic op %0d ref %0d: %h exp %h", cm.lop, cm.ref_sel, rs.raw, e));
      // same row again: fire, precharge, compute, consume, finish, response
      if (t > 0) chk(cy == 7, $sformatf("logic latency %0d", cy));
    end
    // DIST between random lanes/blocks over rows 3..4
    for (int t = 0; t < 12; t++) begin
      int e;
      cm = base(CMD_DIST); cm.row = 3; cm.nrows = 2;
      cm.blk_a = 1'($urandom); cm.lane_a = COL_W'($urandom_range(0, 7)); cm.id_a = KID_W'(t);
      cm.blk_b = 1'($urandom); cm.lane_b = COL_W'($urandom_range(0, 7)); cm.id_b = KID_W'(t + 20);
      cm.thresh = 7;
      e = 0;
      for (int r = 3; r <= 4; r++)
        for (int c = 0; c < CELLS_PER_W; c++) begin
          int d;
          d = lv[cm.blk_a][r][cm.lane_a*4+c] - lv[cm.blk_b][r][cm.lane_b*4+c];
          e += (d < 0) ? -d : d;
        end
      p0 = recs;
      send(cm, rs, cy);
      chk(rs.distance == DIST_W'(e), $sformatf("dist %0d exp %0d", rs.distance, e));
      chk(recs == p0 + 1 && last_rec == DIST_W'(e), "distance handed to the pruning unit");
    end
    // DIST with binary weights: Hamming distance of two columns read with
    // reference 1
    for (int t = 0; t < 12; t++) begin
      int e;
      cm = base(CMD_DIST); cm.row = 3; cm.nrows = 2; cm.wbin = 1;
      cm.blk_a = 1'($urandom); cm.lane_a = COL_W'($urandom); cm.id_a = KID_W'(t);
      cm.blk_b = 1'($urandom); cm.lane_b = COL_W'($urandom); cm.id_b = KID_W'(t + 70);
      e = 0;
      for (int r = 3; r <= 4; r++)
        e += ((lv[cm.blk_a][r][cm.lane_a] >= 1) != (lv[cm.blk_b][r][cm.lane_b] >= 1));
      send(cm, rs, cy);
      chk(rs.distance == DIST_W'(e), $sformatf("binary dist %0d exp %0d", rs.distance, e));
    end
    // binary MAC: one pass per input bit
    p0 = sa_adds;
    cm = base(CMD_MAC); cm.row = 4; cm.in_bits = 3; cm.wbin = 1;
    send(cm, rs, cy);
    chk(sa_adds == p0 + 3, $sformatf("binary MAC adds %0d", sa_adds - p0));
    // MAC: one S&A add per pass
    p0 = sa_adds;
    cm = base(CMD_MAC); cm.row = 4; cm.in_bits = 5;
    send(cm, rs, cy);
    chk(sa_adds == p0 + 15, $sformatf("MAC adds %0d", sa_adds - p0));
    // repair: row 40 mapped to backup entry 2 (physical row 498)
    cm = base(CMD_REPAIR); cm.row = 40; cm.rep_idx = 2;
    send(cm, rs, cy);
    prog(0, 40, 9, 2);
    cm = base(CMD_READ); cm.blk = 0; cm.row = ROW_W'(ROWS - 16 + 2); cm.col = 9;
    send(cm, rs, cy);
    chk(rs.level == 2, "repaired row lives in the backup region");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
