// Row repair map: replaces faulty rows with rows of a backup region.
//
// The top NSPARE word lines of each block are kept as the backup region.
// Entry e, once written with a faulty logical row, redirects every access to
// that row to physical row ROWS - NSPARE + e; all other rows map to
// themselves. The lookup is combinational; writes take effect on the next
// clock. The paper states that a backup memory region replaces faulty cells;
// the row granularity, the number of entries and the placement of the region
// are this design's choices.
module repair_map #(
  parameter int ROWS   = cim_pkg::ROWS,
  parameter int NSPARE = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr,
  input  logic [$clog2(NSPARE)-1:0]  wr_idx,
  input  logic [$clog2(ROWS)-1:0]    wr_row,
  input  logic [$clog2(ROWS)-1:0]    log_row,
  output logic [$clog2(ROWS)-1:0]    phys_row,
  output logic                       remapped
);
  localparam int RW = $clog2(ROWS);

  logic [NSPARE-1:0]          valid;
  logic [NSPARE-1:0][RW-1:0]  bad_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid   <= '0;
      bad_row <= '0;
    end else if (wr) begin
      valid[wr_idx]   <= 1'b1;
      bad_row[wr_idx] <= wr_row;
    end
  end

  always_comb begin
    phys_row = log_row;
    remapped = 1'b0;
    for (int e = 0; e < NSPARE; e++)
      if (valid[e] && bad_row[e] == log_row) begin
        phys_row = RW'(ROWS - NSPARE + e);
        remapped = 1'b1;
      end
  end
endmodule
