// m_shifter: the basic rerouting cell of the shifters, one per m-wide group of
// MEM lines (one block's worth of bitlines or wordlines).
//
// A decoder turns the shift amount into one-hot select lines s[0..m-1]; select
// line s closes the pass devices that connect input line p(d, s) to output
// diagonal d, so the cell is an m x m pass-transistor matrix, modelled here as
// an AND-OR network. Nothing is stored: the path is combinational.
//   MODE 0 (leading diagonals):               out[d] = in[(d - s) mod m]
//   MODE 1 (counter diagonals, row data):     out[d] = in[(d + s) mod m]
//   MODE 2 (counter diagonals, column data):  out[d] = in[(s - d) mod m]
// s is the MEM line index mod m. With en low every pass device is off and
// the outputs read 0. The one-hot decoding and the rerouting follow the
// described shifter; the three index formulas follow from the diagonal
// definitions of ecc_pkg (mode 2 is a reflection, not a plain rotation).
module m_shifter #(
  parameter int unsigned M    = 15,
  parameter int unsigned MODE = 0
) (
  input  logic                   en,
  input  logic [$clog2(M)-1:0]   shamt,  // 0 <= shamt < M
  input  logic [M-1:0]           in_lines,
  output logic [M-1:0]           out_diag
);

  logic [M-1:0] sel;  // decoder output, one-hot

  always_comb begin
    sel = '0;
    for (int s = 0; s < M; s++) sel[s] = en && (int'(shamt) == s);
  end

  function automatic int unsigned src_index(int unsigned d, int unsigned s);
    case (MODE)
      0:       return (d + M - s) % M;
      1:       return (d + s) % M;
      default: return (s + M - d) % M;
    endcase
  endfunction

  always_comb begin
    out_diag = '0;
    for (int d = 0; d < M; d++)
      for (int s = 0; s < M; s++)
        out_diag[d] = out_diag[d] | (sel[s] & in_lines[src_index(d, s)]);
  end

endmodule
