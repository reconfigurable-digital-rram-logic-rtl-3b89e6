// Testbench for bsic: programming mode decodes one bit line and forwards the
// set/reset request to the chosen block only; computing mode broadcasts X
// to all bit lines with no pulses; idle releases everything.
module bsic_tb;
  import cim_pkg::*;
  logic prog_mode, comp_mode, set_req, reset_req, set_pulse, reset_pulse;
  logic blk;
  logic [COL_W-1:0] col;
  logic [COLS-1:0] x, bl;
  logic [NBLK-1:0] blk_en;
  int checks = 0, failures = 0;

  bsic dut (.prog_mode, .comp_mode, .set_req, .reset_req, .blk, .col, .x, .bl,
            .blk_en, .set_pulse, .reset_pulse);

  task automatic chk(input logic [COLS-1:0] ebl, input logic [1:0] een,
                     input logic es, input logic er);
    checks++;
    if (bl !== ebl || blk_en !== een || set_pulse !== es || reset_pulse !== er) begin
      failures++;
      $display("FAIL bl=%h en=%b s=%b r=%b (exp %h %b %b %b)", bl, blk_en, set_pulse,
               reset_pulse, ebl, een, es, er);
    end
  endtask

  initial begin
    for (int t = 0; t < 100; t++) begin
      x = $urandom; col = COL_W'($urandom); blk = 1'($urandom);
      set_req = 1'($urandom); reset_req = !set_req;
      prog_mode = 1; comp_mode = 0; #1;
      chk(COLS'(1) << col, 2'b01 << blk, set_req, reset_req);
      prog_mode = 0; comp_mode = 1; #1;
      chk(x, 2'b00, 1'b0, 1'b0);
      prog_mode = 0; comp_mode = 0; #1;
      chk('0, 2'b00, 1'b0, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
