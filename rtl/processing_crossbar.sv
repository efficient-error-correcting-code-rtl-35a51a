// processing_crossbar: behavioural model of one 11 x W memristive processing
// crossbar of the Check Memory, where XOR3 (old data ^ new data ^ check-bits)
// is computed with MAGIC NORs so the MEM and the check-bit crossbars stay free.
//
// Rows are W-bit vectors (one memristor per column). Operations, one edge each:
//   ld_a_en / ld_b_en / ld_c_en : MAGIC NOT transfer of an incoming vector
//                                 into row A / B / C (the row stores its NOT)
//   nor_en : rows[nor_out] <= NOR(rows[nor_in1], rows[nor_in2]), in every
//            column in parallel (an in-column gate of this crossbar)
// Loads and a NOR may share an edge only on different rows. The result row X2
// is output continuously; after the eight-NOR sequence of pc_controller it
// holds NOT(a ^ b ^ c), which a NOT transfer turns back into a ^ b ^ c.
// The 11-row size is the printed one; the row map is in ecc_pkg.
module processing_crossbar
  import ecc_pkg::*;
#(
  parameter int unsigned W = 1020
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ld_a_en,
  input  logic [W-1:0]  ld_a,
  input  logic          ld_b_en,
  input  logic [W-1:0]  ld_b,
  input  logic          ld_c_en,
  input  logic [W-1:0]  ld_c,
  input  logic          nor_en,
  input  logic [3:0]    nor_in1,
  input  logic [3:0]    nor_in2,
  input  logic [3:0]    nor_out,
  output logic [W-1:0]  result   // row X2
);

  logic [W-1:0] rows [PC_ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < PC_ROWS; r++) rows[r] <= '0;
    end else begin
      if (nor_en) rows[nor_out] <= ~(rows[nor_in1] | rows[nor_in2]);
      if (ld_a_en) rows[PC_R_A] <= ~ld_a;
      if (ld_b_en) rows[PC_R_B] <= ~ld_b;
      if (ld_c_en) rows[PC_R_C] <= ~ld_c;
    end
  end

  assign result = rows[PC_R_X2];

endmodule
