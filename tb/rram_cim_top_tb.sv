// End-to-end testbench of the whole system at its default size (two 512 x 32
// blocks). It follows the paper's flow: forming (random initial weights),
// write-verify programming of INT8 weights, compute-in-memory (INT8
// Hadamard products and VMM over several rows, binary inputs, the four raw
// logic operations), search-in-memory (XOR distances between all kernel pairs
// of the programmed rows), pruning, and computation with pruned kernels
// masked. Binary weights (one per cell) are programmed and used for
// products, VMM and Hamming distances. A faulty row is repaired into the
// backup region and used.
// Expected values come from a shadow copy of the weights in the testbench.
// Every mechanism is counted and one that never occurs is a failure.
module rram_cim_top_tb;
  import cim_pkg::*;
  localparam int NK = NBLK * LANES;   // kernels (lanes) per row band
  logic clk = 0, rst_n = 0, prune_clr = 0;
  logic cmd_valid = 0, cmd_ready, resp_valid;
  cim_cmd_t cmd;
  cim_resp_t resp;
  logic [NBLK-1:0][LANES*PROD_W-1:0] hadamard;
  logic [NBLK*COLS-1:0][ACC_W-1:0] vmm;
  logic [NKERN-1:0] prune_mask;
  logic [15:0] list_len;
  int checks = 0, failures = 0;
  int w [NBLK][ROWS][LANES];          // INT8 weights of programmed rows
  bit [NKERN-1:0] exp_mask;

  // mechanism counters
  int n_form = 0, n_set = 0, n_reset = 0, n_op[4] = '{0, 0, 0, 0}, n_had = 0, n_vmm = 0;
  int n_bin = 0, n_restart = 0, n_shift = 0, n_remap = 0, n_list = 0, n_prune = 0;
  int n_masked = 0, n_gated = 0, n_wbin = 0;
  int wb [NBLK][ROWS][COLS];          // binary weights of programmed rows

  always #5 clk = ~clk;

  rram_cim_top dut (.clk, .rst_n, .prune_clr, .cmd_valid, .cmd_ready, .cmd, .resp_valid, .resp,
                    .hadamard, .vmm, .prune_mask, .list_len);

  always @(posedge clk) if (rst_n) begin
    if (dut.form) n_form++;
    if (dut.set_pulse) n_set++;
    if (dut.reset_pulse) n_reset++;
    if (dut.u_wrc.eval) n_op[dut.op_lat]++;
    if (dut.wl_start) n_restart++;
    if (dut.wl_shift) n_shift++;
    if (dut.fire && dut.remapped) n_remap++;
    if (dut.u_prune.take) n_list++;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input cim_cmd_t cm, output cim_resp_t rs, output int cycles);
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

  // Write one INT8 weight as four 2-bit cells, bits [2c+1:2c] in cell c.
  task automatic prog_weight(input int b, input int row, input int lane, input int val);
    cim_cmd_t cm; cim_resp_t rs; int cy;
    logic [7:0] u;
    u = 8'(val);
    for (int c = 0; c < CELLS_PER_W; c++) begin
      cm = base(CMD_PROG); cm.blk = 1'(b); cm.row = ROW_W'(row);
      cm.col = COL_W'(lane * CELLS_PER_W + c); cm.level = u[2*c +: 2];
      send(cm, rs, cy);
      chk(!rs.err && rs.level == u[2*c +: 2], "write-verify reached target");
    end
    w[b][row][lane] = val;
  endtask

  function automatic bit pruned(input int b, input int l);
    return prune_mask[b * LANES + l];
  endfunction

  task automatic mac(input int row, input logic [LANES-1:0][7:0] xv, input int nb, input bit sgn,
                     input bit acc, output int cycles);
    cim_cmd_t cm; cim_resp_t rs;
    cm = base(CMD_MAC); cm.row = ROW_W'(row); cm.xv = xv; cm.in_bits = 4'(nb);
    cm.x_signed = sgn; cm.acc_en = acc; cm.kbase = '0;
    send(cm, rs, cycles);
    for (int b = 0; b < NBLK; b++)
      for (int l = 0; l < LANES; l++) begin
        int xi, e;
        begin
          logic [7:0] sh;
          sh = xv[l] << (8 - nb);
          xi = sgn ? (int'($signed(sh)) >>> (8 - nb)) : int'(sh >> (8 - nb));
        end
        e = pruned(b, l) ? 0 : xi * w[b][row][l];
        if (pruned(b, l)) n_masked++;
        chk($signed(hadamard[b][l*PROD_W +: PROD_W]) == e,
            $sformatf("product row %0d b%0d l%0d: %0d exp %0d", row, b, l,
                      $signed(hadamard[b][l*PROD_W +: PROD_W]), e));
      end
  endtask

  int dmat [NK][NK];

  initial begin
    cim_cmd_t cm; cim_resp_t rs; int cy;
    logic [LANES-1:0][7:0] xv;
    longint vref [NK];
    int rows [4] = '{10, 11, 12, 13};
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // forming, then programming INT8 weights into rows 10..13
    send(base(CMD_FORM), rs, cy);
    for (int i = 0; i < 4; i++)
      for (int b = 0; b < NBLK; b++)
        for (int l = 0; l < LANES; l++)
          prog_weight(b, rows[i], l, int'($urandom_range(0, 255)) - 128);
    // lane 6 of both blocks must differ somewhere for the later pruning round
    prog_weight(0, 10, 6, 85);
    prog_weight(1, 10, 6, -86);

    // Hadamard products, signed INT8, with latency check on the same row
    for (int t = 0; t < 4; t++) begin
      foreach (xv[l]) xv[l] = 8'($urandom);
      mac(10, xv, 8, 1, 0, cy);
      if (t > 0) chk(cy == 2 * 3 * 8 + 5, $sformatf("MAC latency %0d", cy));
      n_had++;
    end
    // binary inputs (one input bit, unsigned)
    foreach (xv[l]) xv[l] = 8'($urandom_range(0, 1));
    mac(11, xv, 1, 0, 0, cy);
    chk(cy <= 2 * 3 + 5 + 2, $sformatf("binary MAC latency %0d", cy));
    n_bin++;

    // VMM over rows 10..13
    send(base(CMD_ACCCLR), rs, cy);
    foreach (vref[i]) vref[i] = 0;
    for (int i = 0; i < 4; i++) begin
      foreach (xv[l]) xv[l] = 8'($urandom);
      mac(rows[i], xv, 8, 1, 1, cy);
      for (int b = 0; b < NBLK; b++)
        for (int l = 0; l < LANES; l++)
          vref[b*LANES+l] += int'($signed(xv[l])) * w[b][rows[i]][l];
    end
    for (int k = 0; k < NK; k++)
      chk($signed(vmm[k]) == vref[k], $sformatf("VMM lane %0d: %0d exp %0d", k, $signed(vmm[k]), vref[k]));
    n_vmm++;

    // raw logic operations on row 12
    for (int o = 0; o < 4; o++) begin
      logic [NBLK*COLS-1:0] e;
      cm = base(CMD_LOGIC); cm.row = 12; cm.lop = logic_op_e'(o); cm.ref_sel = 2'(1 + o % 3);
      cm.x = $urandom; cm.k = $urandom;
      send(cm, rs, cy);
      for (int b = 0; b < NBLK; b++)
        for (int c = 0; c < COLS; c++) begin
          logic [7:0] u; bit xw, kk;
          u = 8'(w[b][12][c / 4]);
          xw = cm.x[c] && (int'(u[2*(c%4) +: 2]) >= int'(cm.ref_sel));
          kk = cm.k[c];
          case (o)
            0: e[b*COLS+c] = !(xw && kk);
            1: e[b*COLS+c] = xw && kk;
            2: e[b*COLS+c] = xw ^ kk;
            default: e[b*COLS+c] = xw || kk;
          endcase
        end
      chk(rs.raw == e, $sformatf("logic op %0d", o));
    end

    // search-in-memory: distances between all kernel pairs over rows 10..13
    for (int a = 0; a < NK; a++)
      for (int b = 0; b < NK; b++) begin
        dmat[a][b] = 0;
        for (int i = 0; i < 4; i++) begin
          logic [7:0] ua, ub;
          ua = 8'(w[a / LANES][rows[i]][a % LANES]);
          ub = 8'(w[b / LANES][rows[i]][b % LANES]);
          for (int c = 0; c < 4; c++) begin
            int d;
            d = int'(ua[2*c +: 2]) - int'(ub[2*c +: 2]);
            dmat[a][b] += (d < 0) ? -d : d;
          end
        end
      end
    begin
      int alpha, beta, freq [NK], maxf;
      int ds [$];
      for (int a = 0; a < NK; a++) for (int b = a + 1; b < NK; b++) ds.push_back(dmat[a][b]);
      ds.sort();
      alpha = ds[ds.size() * 3 / 4];
      foreach (freq[i]) freq[i] = 0;
      for (int a = 0; a < NK; a++)
        for (int b = a + 1; b < NK; b++) begin
          cm = base(CMD_DIST); cm.row = 10; cm.nrows = 4;
          cm.blk_a = 1'(a / LANES); cm.lane_a = COL_W'(a % LANES); cm.id_a = KID_W'(a);
          cm.blk_b = 1'(b / LANES); cm.lane_b = COL_W'(b % LANES); cm.id_b = KID_W'(b);
          cm.thresh = DIST_W'(alpha);
          send(cm, rs, cy);
          chk(rs.distance == DIST_W'(dmat[a][b]), $sformatf("distance %0d-%0d: %0d exp %0d", a, b, rs.distance, dmat[a][b]));
          if (dmat[a][b] > alpha) begin freq[a]++; freq[b]++; end
        end
      maxf = 0;
      foreach (freq[i]) if (freq[i] > maxf) maxf = freq[i];
      beta = maxf - 1;
      exp_mask = '0;
      foreach (freq[i]) if (freq[i] > beta) exp_mask[i] = 1'b1;
      cm = base(CMD_PRUNE); cm.thresh = DIST_W'(beta);
      send(cm, rs, cy);
      n_prune++;
      chk(prune_mask == exp_mask, $sformatf("prune mask %h exp %h", prune_mask, exp_mask));
    end

    // second round: kernels 6 and 14 (lane 6 of both blocks) listed three
    // times, pruned with beta = 2, unless already pruned
    if (!prune_mask[6] && !prune_mask[14]) begin
      for (int i = 0; i < 3; i++) begin
        cm = base(CMD_DIST); cm.row = 10; cm.nrows = 1;
        cm.blk_a = 0; cm.lane_a = 6; cm.id_a = 6; cm.blk_b = 1; cm.lane_b = 6; cm.id_b = 14;
        cm.thresh = 0;
        send(cm, rs, cy);
      end
      cm = base(CMD_PRUNE); cm.thresh = 2;
      send(cm, rs, cy);
      n_prune++;
    end
    chk(prune_mask[6] && prune_mask[14], "lane 6 pruned in both blocks");

    // computation with pruned kernels: masked products, no accumulation, and
    // lane 6's bit lines left undriven
    send(base(CMD_ACCCLR), rs, cy);
    foreach (xv[l]) xv[l] = 8'hFF;
    fork
      mac(13, xv, 8, 1, 1, cy);
      begin
        while (!dut.u_wrc.eval) @(posedge clk);
        if (dut.bl[6*4 +: 4] == 4'b0000) n_gated++;
      end
    join
    for (int k = 0; k < NK; k++)
      chk($signed(vmm[k]) == (prune_mask[k] ? 0 : -w[k / LANES][13][k % LANES]),
          $sformatf("VMM after pruning, lane %0d", k));

    // binary weights, one per cell, in rows 30..33; kernels 64..127
    begin
      int bref [NBLK*COLS];
      int brows [4] = '{30, 31, 32, 33};
      logic [COLS-1:0][BIN_W-1:0] xb;
      for (int i = 0; i < 4; i++)
        for (int b = 0; b < NBLK; b++)
          for (int c = 0; c < COLS; c++) begin
            wb[b][brows[i]][c] = $urandom_range(0, 1);
            cm = base(CMD_PROG); cm.blk = 1'(b); cm.row = ROW_W'(brows[i]); cm.col = COL_W'(c);
            cm.level = LEVEL_W'(wb[b][brows[i]][c]);
            send(cm, rs, cy);
          end
      send(base(CMD_ACCCLR), rs, cy);
      foreach (bref[i]) bref[i] = 0;
      for (int i = 0; i < 4; i++) begin
        foreach (xb[c]) xb[c] = BIN_W'($urandom_range(0, 7));
        cm = base(CMD_MAC); cm.row = ROW_W'(brows[i]); cm.wbin = 1; cm.xb = xb; cm.in_bits = 3;
        cm.acc_en = 1; cm.kbase = 64;
        send(cm, rs, cy);
        if (i > 0) chk(cy == 2 * 3 + 5 + 1, $sformatf("binary MAC latency %0d", cy));  // one WL shift
        for (int b = 0; b < NBLK; b++)
          for (int c = 0; c < COLS; c++) begin
            int e;
            e = wb[b][brows[i]][c] * int'(xb[c]);
            bref[b*COLS+c] += e;
            chk(int'(hadamard[b][c*BIN_W +: BIN_W]) == e, $sformatf("binary product b%0d c%0d", b, c));
          end
      end
      for (int k = 0; k < NBLK*COLS; k++)
        chk($signed(vmm[k]) == bref[k], $sformatf("binary VMM column %0d", k));
      // Hamming distances between columns
      for (int t = 0; t < 16; t++) begin
        int e;
        cm = base(CMD_DIST); cm.row = 30; cm.nrows = 4; cm.wbin = 1;
        cm.blk_a = 1'($urandom); cm.lane_a = COL_W'($urandom); cm.id_a = KID_W'(64 + t);
        cm.blk_b = 1'($urandom); cm.lane_b = COL_W'($urandom); cm.id_b = KID_W'(96 + t);
        cm.thresh = 16'hFFFF;
        e = 0;
        foreach (brows[i]) e += (wb[cm.blk_a][brows[i]][cm.lane_a] != wb[cm.blk_b][brows[i]][cm.lane_b]);
        send(cm, rs, cy);
        chk(rs.distance == DIST_W'(e), $sformatf("binary Hamming distance %0d exp %0d", rs.distance, e));
      end
      n_wbin++;
    end

    // row repair: logical row 20 served by the first backup row
    cm = base(CMD_REPAIR); cm.row = 20; cm.rep_idx = 0;
    send(cm, rs, cy);
    prune_clr = 1; @(negedge clk) prune_clr = 0;
    for (int b = 0; b < NBLK; b++)
      for (int l = 0; l < LANES; l++) prog_weight(b, 20, l, int'($urandom_range(0, 255)) - 128);
    foreach (xv[l]) xv[l] = 8'($urandom);
    mac(20, xv, 8, 1, 0, cy);
    begin
      logic [7:0] u;
      u = 8'(w[0][20][0]);
      chk(dut.g_blk[0].u_array.lvl_mem[ROWS-16][0] == u[1:0], "backup row holds the data");
    end

    $display("mechanisms: form=%0d set=%0d reset=%0d nand=%0d and=%0d xor=%0d or=%0d", n_form,
             n_set, n_reset, n_op[0], n_op[1], n_op[2], n_op[3]);
    $display("  hadamard=%0d vmm=%0d binary=%0d wl_restart=%0d wl_shift=%0d remap=%0d",
             n_had, n_vmm, n_bin, n_restart, n_shift, n_remap);
    $display("  list=%0d prune=%0d masked=%0d gated=%0d binary_weights=%0d", n_list, n_prune,
             n_masked, n_gated, n_wbin);
    chk(n_form > 0 && n_set > 0 && n_reset > 0, "forming and both programming pulses occurred");
    chk(n_op[0] > 0 && n_op[1] > 0 && n_op[2] > 0 && n_op[3] > 0, "all four logic operations occurred");
    chk(n_had > 0 && n_vmm > 0 && n_bin > 0 && n_wbin > 0, "Hadamard, VMM and binary modes occurred");
    chk(n_restart > 0 && n_shift > 0 && n_remap > 0, "WL restart, shift and row repair occurred");
    chk(n_list > 0 && n_prune > 0 && n_masked > 0 && n_gated > 0, "pruning and masking occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
