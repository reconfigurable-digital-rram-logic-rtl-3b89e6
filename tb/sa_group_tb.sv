// Testbench for sa_group: random signed INT8 weights (as four 2-bit cell
// levels per lane) and random inputs, signed and unsigned, of 1 to 8 bits.
// The testbench produces the bit outputs the array would give for each
// (input bit, reference) pass, feeds them in, and compares each lane with
// the plain integer product. A masked lane must stay 0. Then the same with
// binary weights: one weight per column, unsigned inputs of 1 to 4 bits.
module sa_group_tb;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0, wbin = 0, clr = 0, add = 0, sub_msb = 0, neg = 0;
  logic [2:0] bit_idx;
  logic [COLS-1:0] lane_en;
  logic [COLS-1:0] ru_out;
  logic [LANES*PROD_W-1:0] prod;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  sa_group dut (.clk, .rst_n, .clr, .add, .bit_idx, .sub_msb, .neg, .lane_en, .ru_out, .prod, .wbin);

  initial begin
    int w [LANES];
    int xin [LANES];
    bit_idx = 0; lane_en = '1; ru_out = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int nb;
      bit sgn;
      nb  = (t < 40) ? 8 : 1 + (t % 8);
      sgn = (t % 2 == 0);
      lane_en = (t % 5 == 0) ? 32'hFFFF_FFEF : '1;
      for (int l = 0; l < LANES; l++) begin
        w[l]   = int'($urandom_range(0, 255)) - 128;
        xin[l] = sgn ? int'($urandom_range(0, (1 << nb) - 1)) - (1 << (nb - 1))
                     : int'($urandom_range(0, (1 << nb) - 1));
      end
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int i = 0; i < nb; i++)
        for (int n = 1; n <= 3; n++) begin
          @(negedge clk);
          add = 1; bit_idx = 3'(i); sub_msb = (n == 2); neg = sgn && (i == nb - 1);
          for (int l = 0; l < LANES; l++) begin
            logic [7:0] wb;
            logic [7:0] xb;
            wb = 8'(w[l]); xb = 8'(xin[l]);
            for (int c = 0; c < 4; c++)
              ru_out[l*4+c] = xb[i] && (int'(wb[2*c +: 2]) >= n);
          end
        end
      @(negedge clk) add = 0;
      for (int l = 0; l < LANES; l++) begin
        int e;
        e = lane_en[l] ? w[l] * xin[l] : 0;
        checks++;
        if ($signed(prod[l*PROD_W +: PROD_W]) != e) begin
          failures++;
          $display("FAIL t=%0d lane %0d w=%0d x=%0d prod=%0d exp=%0d", t, l, w[l], xin[l],
                   $signed(prod[l*PROD_W +: PROD_W]), e);
        end
      end
    end
    // binary weights
    wbin = 1;
    for (int t = 0; t < 30; t++) begin
      int nb;
      bit [COLS-1:0] wb;
      int xc [COLS];
      nb = 1 + t % 4;
      wb = $urandom;
      lane_en = (t % 3 == 0) ? 32'h7FFF_FFFF : '1;
      foreach (xc[c]) xc[c] = $urandom_range(0, (1 << nb) - 1);
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int i = 0; i < nb; i++) begin
        @(negedge clk);
        add = 1; bit_idx = 3'(i); sub_msb = 0; neg = 0;
        for (int c = 0; c < COLS; c++) ru_out[c] = wb[c] && xc[c][i];
      end
      @(negedge clk) add = 0;
      for (int c = 0; c < COLS; c++) begin
        int e;
        e = (lane_en[c] && wb[c]) ? xc[c] : 0;
        checks++;
        if (int'(prod[c*BIN_W +: BIN_W]) != e) begin
          failures++;
          $display("FAIL binary col %0d w=%0d x=%0d prod=%0d", c, wb[c], xc[c], prod[c*BIN_W +: BIN_W]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
