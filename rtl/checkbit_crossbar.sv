// checkbit_crossbar: behavioural model of one (n/m) x (n/m) memristive
// check-bit crossbar. Crossbar i holds, for every block of the MEM, the parity
// of that block's diagonal i (the Check Memory has m of these for leading and
// m for counter diagonals). Cell (a, b) belongs to the block a blocks from the
// left and b blocks from the top; it is stored as row b, column a.
//
// Access is by whole lines, as through the connection unit:
//   read : rd_line = row rd_idx (LINE_ROW) or column rd_idx (LINE_COL),
//          combinational, bit x = block x along that line
//   write: on the clock edge, the same kind of line is overwritten
//   flip : cell (flip_a, flip_b) inverted (check-bit error correction)
// Reset clears all cells, which is the correct parity of an all-zero MEM.
module checkbit_crossbar
  import ecc_pkg::*;
#(
  parameter int unsigned NB = 68
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  line_dir_e              rd_dir,
  input  logic [$clog2(NB)-1:0]  rd_idx,
  output logic [NB-1:0]          rd_line,
  input  logic                   wr_en,
  input  line_dir_e              wr_dir,
  input  logic [$clog2(NB)-1:0]  wr_idx,
  input  logic [NB-1:0]          wr_line,
  input  logic                   flip_en,
  input  logic [$clog2(NB)-1:0]  flip_a,
  input  logic [$clog2(NB)-1:0]  flip_b
);

  logic [NB-1:0] cells [NB];  // cells[b][a]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NB; r++) cells[r] <= '0;
    end else begin
      if (wr_en) begin
        if (wr_dir == LINE_ROW) cells[wr_idx] <= wr_line;
        else for (int r = 0; r < NB; r++) cells[r][wr_idx] <= wr_line[r];
      end
      if (flip_en) cells[flip_b][flip_a] <= ~cells[flip_b][flip_a];
    end
  end

  always_comb begin
    if (rd_dir == LINE_ROW) rd_line = cells[rd_idx];
    else for (int r = 0; r < NB; r++) rd_line[r] = cells[r][rd_idx];
  end

endmodule
