// Testbench for prune_unit, using the Conv3 example of the paper's kernel
// similarity matrix: among kernels 0, 1, 4, 7, 9 and 11 the marked pairs are
// (0,9), (1,7), (4,7), (7,9). Marked pairs get a distance above alpha, the
// others below. With beta = 2 only kernel 7 (in three pairs) is pruned. A
// second round checks that records naming a pruned kernel are ignored and
// that a kernel reaching the frequency threshold is pruned in addition.
module prune_unit_tb;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0, clr_mask = 0, rec_valid = 0, prune = 0;
  logic [KID_W-1:0] id_a, id_b;
  logic [DIST_W-1:0] dist_in, alpha, beta;
  logic [NKERN-1:0] mask;
  logic [15:0] list_len;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  prune_unit dut (.clk, .rst_n, .clr_mask, .rec_valid, .id_a, .id_b, .dist_in, .alpha,
                  .prune, .beta, .mask, .list_len);

  task automatic rec(input int a, input int b, input int d);
    @(negedge clk) begin
      rec_valid = 1; id_a = KID_W'(a); id_b = KID_W'(b); dist_in = DIST_W'(d); alpha = 100;
    end
    @(negedge clk) rec_valid = 0;
  endtask

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int ks [6] = '{0, 1, 4, 7, 9, 11};
    id_a = 0; id_b = 0; dist_in = 0; alpha = 0; beta = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6; i++)
      for (int j = i + 1; j < 6; j++) begin
        bit marked;
        marked = (ks[i] == 0 && ks[j] == 9) || (ks[i] == 1 && ks[j] == 7) ||
                 (ks[i] == 4 && ks[j] == 7) || (ks[i] == 7 && ks[j] == 9);
        rec(ks[i], ks[j], marked ? 150 : 40);
      end
    rec(5, 5, 500);  // same kernel twice: ignored
    chk(list_len == 4, $sformatf("list holds 4 pairs (%0d)", list_len));
    @(negedge clk) begin prune = 1; beta = 2; end
    @(negedge clk) prune = 0;
    chk(mask == (NKERN'(1) << 7), $sformatf("only kernel 7 pruned (mask %h)", mask));
    chk(list_len == 0, "list cleared after pruning");
    // round 2
    rec(7, 1, 500);   // involves a pruned kernel: ignored
    rec(9, 0, 200);
    rec(9, 4, 200);
    rec(9, 11, 200);
    rec(1, 4, 50);    // below alpha
    chk(list_len == 3, "three new candidates");
    @(negedge clk) begin prune = 1; beta = 2; end
    @(negedge clk) prune = 0;
    chk(mask == ((NKERN'(1) << 7) | (NKERN'(1) << 9)), $sformatf("kernels 7 and 9 pruned (%h)", mask));
    @(negedge clk) clr_mask = 1;
    @(negedge clk) clr_mask = 0;
    chk(mask == '0, "mask cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
