// mem_crossbar: behavioural model of the n x n memristive data crossbar (MEM)
// operated with MAGIC stateful logic. It is a model of an analog memristor
// array, not of synthesizable logic: each memristor's resistive state is one
// stored bit (LRS = 1).
//
// One operation per clock edge, selected by op:
//   MEM_ROW_NOR   the same in-row NOR gate in every row at once:
//                 cell(r, out) <= NOR(cell(r, a), cell(r, b)) for all r
//   MEM_COL_NOR   the same in-column NOR gate in every column at once:
//                 cell(out, c) <= NOR(cell(a, c), cell(b, c)) for all c
//                 (a NOT is a NOR with a == b)
//   MEM_WRITE_ROW row out <= wdata
//   MEM_FLIP      cell(a, b) inverted (writing back a corrected value)
// Two sensing ports are always live: bitlines = row rd_row, wordlines =
// column rd_col. They stand for the transfer of a line through the shifters
// toward the Check Memory. inj_en flips cell (inj_row, inj_col) and stands for
// a soft error; if op writes the same cell on the same edge, the injection
// wins and the cell takes the inverse of its old value. Reset clears every cell.
// The model ignores MAGIC output initialisation and device timing: a NOR is
// evaluated functionally in one cycle.
module mem_crossbar
  import ecc_pkg::*;
#(
  parameter int unsigned N = 1020
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  mem_op_e               op,
  input  logic [$clog2(N)-1:0]  a,
  input  logic [$clog2(N)-1:0]  b,
  input  logic [$clog2(N)-1:0]  out,
  input  logic [N-1:0]          wdata,
  input  logic [$clog2(N)-1:0]  rd_row,
  input  logic [$clog2(N)-1:0]  rd_col,
  output logic [N-1:0]          bitlines,
  output logic [N-1:0]          wordlines,
  input  logic                  inj_en,
  input  logic [$clog2(N)-1:0]  inj_row,
  input  logic [$clog2(N)-1:0]  inj_col
);

  logic [N-1:0] cells [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++) cells[r] <= '0;
    end else begin
      case (op)
        MEM_ROW_NOR:
          for (int r = 0; r < N; r++) cells[r][out] <= ~(cells[r][a] | cells[r][b]);
        MEM_COL_NOR:   cells[out] <= ~(cells[a] | cells[b]);
        MEM_WRITE_ROW: cells[out] <= wdata;
        MEM_FLIP:      cells[a][b] <= ~cells[a][b];
        default: ;
      endcase
      if (inj_en) cells[inj_row][inj_col] <= ~cells[inj_row][inj_col];
    end
  end

  always_comb begin
    bitlines = cells[rd_row];
    for (int r = 0; r < N; r++) wordlines[r] = cells[r][rd_col];
  end

endmodule
