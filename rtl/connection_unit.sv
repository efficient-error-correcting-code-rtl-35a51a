// connection_unit: the switch between the check-bit crossbars and the
// processing / checking crossbars of the Check Memory.
//
// Read path: the selected line (row or column, addressed at the crossbars)
// of every check-bit crossbar is gathered into one N-bit bus per diagonal
// kind, laid out as bit (i * n/m + block) for diagonal i, the same layout the
// shifters produce. The bus goes to every processing crossbar; only the one
// picked by rd_sel gets its load enable (a MAGIC NOT transfer into row C).
// Write path: the result row of the processing crossbar picked by xfer_sel
// is inverted (the NOT transfer that undoes the inversion of the NOR
// sequence) and split back into one n/m-bit line per check-bit crossbar; the
// same bus also feeds the checking crossbar. Combinational. That the unit
// connects these crossbars and is built like the shifters is described; the
// select/enable encoding is this implementation's choice.
module connection_unit #(
  parameter int unsigned N = 1020,
  parameter int unsigned M = 15,
  parameter int unsigned K = 3,
  localparam int unsigned NB = N / M,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1
) (
  // check-bit crossbars -> processing crossbars
  input  logic [M-1:0][NB-1:0]  cb_lead_rd,
  input  logic [M-1:0][NB-1:0]  cb_cnt_rd,
  input  logic                  rd_en,
  input  logic [KW-1:0]         rd_sel,
  output logic [K-1:0]          pc_ld_c_en,
  output logic [N-1:0]          chk_lead,
  output logic [N-1:0]          chk_cnt,
  // processing crossbars -> check-bit / checking crossbars
  input  logic [K-1:0][N-1:0]   pc_res_lead,
  input  logic [K-1:0][N-1:0]   pc_res_cnt,
  input  logic [KW-1:0]         xfer_sel,
  output logic [N-1:0]          xfer_lead,
  output logic [N-1:0]          xfer_cnt,
  output logic [M-1:0][NB-1:0]  cb_lead_wr,
  output logic [M-1:0][NB-1:0]  cb_cnt_wr
);

  always_comb begin
    for (int d = 0; d < M; d++) begin
      chk_lead[d*NB +: NB] = cb_lead_rd[d];
      chk_cnt [d*NB +: NB] = cb_cnt_rd[d];
    end
    for (int p = 0; p < K; p++) pc_ld_c_en[p] = rd_en && (int'(rd_sel) == p);
  end

  always_comb begin
    xfer_lead = '0;
    xfer_cnt  = '0;
    for (int p = 0; p < K; p++)
      if (int'(xfer_sel) == p) begin
        xfer_lead = ~pc_res_lead[p];
        xfer_cnt  = ~pc_res_cnt[p];
      end
    for (int d = 0; d < M; d++) begin
      cb_lead_wr[d] = xfer_lead[d*NB +: NB];
      cb_cnt_wr[d]  = xfer_cnt[d*NB +: NB];
    end
  end

endmodule
