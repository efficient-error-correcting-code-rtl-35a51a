// shifters: the combined shifter structure between the MEM crossbar and the
// Check Memory.
//
// The MEM row read on the bitlines and the MEM column read on the wordlines
// are each cut into n/m groups of m lines, one group per block. Each group
// goes through m_shifters (one for leading, one for counter diagonals) that
// reroute it by the line index mod m. The outputs are regrouped by diagonal:
// vector d_i (n/m bits, one per block) holds, for every block along the
// accessed row/column of blocks, the single bit of that MEM line lying on
// diagonal i of the block. Output bus layout: bit (i * n/m + block) for
// diagonal i, for both the leading and the counter buses.
// en[1] enables the bitline (row data) side, en[0] the wordline (column data)
// side, as printed in the structure figure; a disabled side drives zeros.
// Purely combinational, no latency.
module shifters #(
  parameter int unsigned N = 1020,
  parameter int unsigned M = 15
) (
  input  logic [N-1:0]          bitlines,   // one MEM row, index = column
  input  logic [N-1:0]          wordlines,  // one MEM column, index = row
  input  logic [1:0]            en,         // [1] bitline side, [0] wordline side
  input  logic [$clog2(M)-1:0]  shamt,      // accessed line index mod M
  output logic [N-1:0]          d_b_lead,   // d_i^b, leading diagonals
  output logic [N-1:0]          d_b_cnt,    // d_i^b, counter diagonals
  output logic [N-1:0]          d_w_lead,   // d_i^w, leading diagonals
  output logic [N-1:0]          d_w_cnt     // d_i^w, counter diagonals
);

  localparam int unsigned NB = N / M;

  for (genvar g = 0; g < NB; g++) begin : g_blk
    logic [M-1:0] bl_lead, bl_cnt, wl_lead, wl_cnt;

    m_shifter #(.M(M), .MODE(0)) u_bl_lead (.en(en[1]), .shamt(shamt),
      .in_lines(bitlines[g*M +: M]),  .out_diag(bl_lead));
    m_shifter #(.M(M), .MODE(1)) u_bl_cnt  (.en(en[1]), .shamt(shamt),
      .in_lines(bitlines[g*M +: M]),  .out_diag(bl_cnt));
    m_shifter #(.M(M), .MODE(0)) u_wl_lead (.en(en[0]), .shamt(shamt),
      .in_lines(wordlines[g*M +: M]), .out_diag(wl_lead));
    m_shifter #(.M(M), .MODE(2)) u_wl_cnt  (.en(en[0]), .shamt(shamt),
      .in_lines(wordlines[g*M +: M]), .out_diag(wl_cnt));

    for (genvar d = 0; d < M; d++) begin : g_diag
      assign d_b_lead[d*NB + g] = bl_lead[d];
      assign d_b_cnt [d*NB + g] = bl_cnt[d];
      assign d_w_lead[d*NB + g] = wl_lead[d];
      assign d_w_cnt [d*NB + g] = wl_cnt[d];
    end
  end

  initial assert (N % M == 0 && M % 2 == 1)
    else $error("shifters: N must be a multiple of an odd M");

endmodule
