// checking_crossbar: behavioural model of the memristive checking crossbar,
// one row of memristors per diagonal kind (2 x n cells) that receives the
// syndromes of a whole row or column of blocks.
//
// ld_en stores the syndrome buses (layout: bit i * n/m + block for diagonal
// i). cmp_en performs the zero test of every block syndrome, which the array
// does with MAGIC NORs: nz[block] <= OR of the block's 2m syndrome bits. The
// controller side senses one block's syndrome (sense_blk -> syn_lead,
// syn_cnt) combinationally. Reset clears everything.
module checking_crossbar #(
  parameter int unsigned N = 1020,
  parameter int unsigned M = 15,
  localparam int unsigned NB = N / M
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   ld_en,
  input  logic [N-1:0]           ld_lead,
  input  logic [N-1:0]           ld_cnt,
  input  logic                   cmp_en,
  output logic [NB-1:0]          nz,
  input  logic [$clog2(NB)-1:0]  sense_blk,
  output logic [M-1:0]           syn_lead,
  output logic [M-1:0]           syn_cnt
);

  logic [N-1:0] row_lead, row_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_lead <= '0;
      row_cnt  <= '0;
      nz       <= '0;
    end else begin
      if (ld_en) begin
        row_lead <= ld_lead;
        row_cnt  <= ld_cnt;
      end
      if (cmp_en)
        for (int b = 0; b < NB; b++) begin
          logic any;
          any = 1'b0;
          for (int d = 0; d < M; d++) any = any | row_lead[d*NB + b] | row_cnt[d*NB + b];
          nz[b] <= any;
        end
    end
  end

  always_comb
    for (int d = 0; d < M; d++) begin
      syn_lead[d] = row_lead[d*NB + int'(sense_blk)];
      syn_cnt[d]  = row_cnt[d*NB + int'(sense_blk)];
    end

endmodule
