// syndrome_decoder: the logic function of the CMEM controller that turns one
// block's 2m-bit syndrome into an action.
//
// A single data error at local cell (i, j) flips exactly one leading parity
// (index d1 = (i + j) mod m) and one counter parity (d2 = (j - i) mod m).
// Because m is odd, 2 has an inverse mod m and the cell is unique:
//   j = (d1 + d2) * (m + 1) / 2 mod m,   i = (d1 - j) mod m.
// One set bit in total means the check-bit itself was hit. Every other
// non-zero pattern (two errors always give one) is reported uncorrectable.
// Combinational. The single-error correction by the leading/counter signature
// is described; the treatment of check-bit errors and of other patterns is
// this implementation's choice.
module syndrome_decoder
  import ecc_pkg::*;
#(
  parameter int unsigned M = 15
) (
  input  logic [M-1:0]          syn_lead,
  input  logic [M-1:0]          syn_cnt,
  output syn_kind_e             kind,
  output logic [$clog2(M)-1:0]  row_i,   // SYN_DATA: local row
  output logic [$clog2(M)-1:0]  col_j,   // SYN_DATA: local column
  output logic [$clog2(M)-1:0]  diag     // SYN_CB_*: diagonal of the bad check-bit
);

  localparam int unsigned INV2 = (M + 1) / 2;

  int unsigned n_lead, n_cnt, d1, d2, jj, ii;

  always_comb begin
    n_lead = 0; n_cnt = 0; d1 = 0; d2 = 0;
    for (int d = 0; d < M; d++) begin
      if (syn_lead[d]) begin n_lead++; d1 = d; end
      if (syn_cnt[d])  begin n_cnt++;  d2 = d; end
    end
    jj = ((d1 + d2) * INV2) % M;
    ii = (d1 + M - jj) % M;
    row_i = '0; col_j = '0; diag = '0;
    if (n_lead == 0 && n_cnt == 0) kind = SYN_NONE;
    else if (n_lead == 1 && n_cnt == 1) begin
      kind  = SYN_DATA;
      row_i = ($clog2(M))'(ii);
      col_j = ($clog2(M))'(jj);
    end else if (n_lead == 1 && n_cnt == 0) begin
      kind = SYN_CB_LEAD;
      diag = ($clog2(M))'(d1);
    end else if (n_lead == 0 && n_cnt == 1) begin
      kind = SYN_CB_CNT;
      diag = ($clog2(M))'(d2);
    end else kind = SYN_UNCORR;
  end

endmodule
