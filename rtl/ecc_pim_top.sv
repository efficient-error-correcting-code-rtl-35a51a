// ecc_pim_top: one MAGIC memristive crossbar with diagonal-parity ECC.
//
// Structure (all crossbars are behavioural models of memristor arrays):
//   MEM            n x n data crossbar (mem_crossbar)
//   shifters       reroute a MEM row/column into per-diagonal vectors
//   Check Memory   2m check-bit crossbars of (n/m) x (n/m): m for leading,
//                  m for counter diagonals (checkbit_crossbar)
//                  k pairs of 11 x n processing crossbars, one pair per
//                  pc_controller, leading and counter side
//                  the connection unit, and the 2 x n checking crossbar
//   ecc_controller MEM and CMEM controllers with the syndrome decoder
// Host interface: valid/ready commands (ecc_pkg::cmd_t with cmd_wdata for row
// writes), read data one cycle after a CMD_READ_ROW is accepted, event pulses
// and the location of each corrected data error. inj_* flips one MEM cell
// (a soft error) and inj_cb_* flips one check-bit (cnt = 0 leading, 1 counter;
// diagonal, block column a, block row b); both are meant for test and must not
// be used while a check is correcting. Defaults n = 1020, m = 15, k = 3 are
// the case-study sizes; n must be a multiple of the odd m.
module ecc_pim_top
  import ecc_pkg::*;
#(
  parameter int unsigned N = DEF_N,
  parameter int unsigned M = DEF_M,
  parameter int unsigned K = DEF_K,
  localparam int unsigned NB = N / M,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned BW = $clog2(NB),
  localparam int unsigned MW = $clog2(M),
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  cmd_t          cmd,
  input  logic [N-1:0]  cmd_wdata,
  output logic          rd_valid,
  output logic [N-1:0]  rd_data,
  output ecc_ev_t       ev,
  output logic [AW-1:0] ev_row,
  output logic [AW-1:0] ev_col,
  input  logic          inj_en,
  input  logic [AW-1:0] inj_row,
  input  logic [AW-1:0] inj_col,
  input  logic          inj_cb_en,
  input  logic          inj_cb_cnt,
  input  logic [MW-1:0] inj_cb_diag,
  input  logic [BW-1:0] inj_cb_a,
  input  logic [BW-1:0] inj_cb_b
);

  // MEM
  mem_op_e       mem_op;
  logic [AW-1:0] mem_a, mem_b, mem_out, mem_rd_row, mem_rd_col;
  logic [N-1:0]  mem_wdata, bitlines, wordlines;
  // shifters
  logic [1:0]    sh_en;
  logic [MW-1:0] sh_shamt;
  logic [N-1:0]  d_b_lead, d_b_cnt, d_w_lead, d_w_cnt, d_lead, d_cnt;
  // processing crossbars
  logic [K-1:0]  pc_ld_a, pc_ld_b, pc_ld_c, pc_start, pc_chain, pc_done;
  logic [K-1:0][N-1:0] pc_res_lead, pc_res_cnt;
  // connection unit / check-bit crossbars
  logic          cu_rd_en;
  logic [KW-1:0] cu_rd_sel, cu_xfer_sel;
  line_dir_e     cb_rd_dir, cb_wr_dir;
  logic [BW-1:0] cb_rd_idx, cb_wr_idx, cb_flip_a, cb_flip_b;
  logic          cb_wr_en;
  logic [M-1:0]  cb_flip_lead, cb_flip_cnt, flip_lead, flip_cnt;
  logic [BW-1:0] flip_a, flip_b;
  logic [M-1:0][NB-1:0] cb_lead_rd, cb_cnt_rd, cb_lead_wr, cb_cnt_wr;
  logic [N-1:0]  chk_lead, chk_cnt, xfer_lead, xfer_cnt;
  // checking crossbar
  logic          ck_ld_en, ck_cmp_en;
  logic [NB-1:0] ck_nz;
  logic [BW-1:0] ck_sense_blk;
  logic [M-1:0]  ck_syn_lead, ck_syn_cnt;

  mem_crossbar #(.N(N)) u_mem (
    .clk, .rst_n, .op(mem_op), .a(mem_a), .b(mem_b), .out(mem_out),
    .wdata(mem_wdata), .rd_row(mem_rd_row), .rd_col(mem_rd_col),
    .bitlines, .wordlines, .inj_en, .inj_row, .inj_col
  );

  shifters #(.N(N), .M(M)) u_shifters (
    .bitlines, .wordlines, .en(sh_en), .shamt(sh_shamt),
    .d_b_lead, .d_b_cnt, .d_w_lead, .d_w_cnt
  );

  // The disabled shifter side drives zeros, so both sides share one bus.
  assign d_lead = d_b_lead | d_w_lead;
  assign d_cnt  = d_b_cnt  | d_w_cnt;

  // check-bit flips: correction by the controller, or test injection
  always_comb begin
    flip_lead = cb_flip_lead;
    flip_cnt  = cb_flip_cnt;
    flip_a    = cb_flip_a;
    flip_b    = cb_flip_b;
    if (inj_cb_en) begin
      if (inj_cb_cnt) flip_cnt[inj_cb_diag]  = 1'b1;
      else            flip_lead[inj_cb_diag] = 1'b1;
      flip_a = inj_cb_a;
      flip_b = inj_cb_b;
    end
  end

  for (genvar i = 0; i < M; i++) begin : g_cb
    checkbit_crossbar #(.NB(NB)) u_lead (
      .clk, .rst_n, .rd_dir(cb_rd_dir), .rd_idx(cb_rd_idx), .rd_line(cb_lead_rd[i]),
      .wr_en(cb_wr_en), .wr_dir(cb_wr_dir), .wr_idx(cb_wr_idx), .wr_line(cb_lead_wr[i]),
      .flip_en(flip_lead[i]), .flip_a(flip_a), .flip_b(flip_b)
    );
    checkbit_crossbar #(.NB(NB)) u_cnt (
      .clk, .rst_n, .rd_dir(cb_rd_dir), .rd_idx(cb_rd_idx), .rd_line(cb_cnt_rd[i]),
      .wr_en(cb_wr_en), .wr_dir(cb_wr_dir), .wr_idx(cb_wr_idx), .wr_line(cb_cnt_wr[i]),
      .flip_en(flip_cnt[i]), .flip_a(flip_a), .flip_b(flip_b)
    );
  end

  connection_unit #(.N(N), .M(M), .K(K)) u_cu (
    .cb_lead_rd, .cb_cnt_rd, .rd_en(cu_rd_en), .rd_sel(cu_rd_sel),
    .pc_ld_c_en(pc_ld_c), .chk_lead, .chk_cnt,
    .pc_res_lead, .pc_res_cnt, .xfer_sel(cu_xfer_sel),
    .xfer_lead, .xfer_cnt, .cb_lead_wr, .cb_cnt_wr
  );

  for (genvar p = 0; p < K; p++) begin : g_pc
    logic       nor_en;
    logic [3:0] nor_in1, nor_in2, nor_out;

    pc_controller u_ctl (
      .clk, .rst_n, .start(pc_start[p]), .chain(pc_chain[p]),
      .busy(), .done(pc_done[p]),
      .nor_en, .nor_in1, .nor_in2, .nor_out
    );
    processing_crossbar #(.W(N)) u_lead (
      .clk, .rst_n,
      .ld_a_en(pc_ld_a[p]), .ld_a(d_lead), .ld_b_en(pc_ld_b[p]), .ld_b(d_lead),
      .ld_c_en(pc_ld_c[p]), .ld_c(chk_lead),
      .nor_en, .nor_in1, .nor_in2, .nor_out, .result(pc_res_lead[p])
    );
    processing_crossbar #(.W(N)) u_cnt (
      .clk, .rst_n,
      .ld_a_en(pc_ld_a[p]), .ld_a(d_cnt), .ld_b_en(pc_ld_b[p]), .ld_b(d_cnt),
      .ld_c_en(pc_ld_c[p]), .ld_c(chk_cnt),
      .nor_en, .nor_in1, .nor_in2, .nor_out, .result(pc_res_cnt[p])
    );
  end

  checking_crossbar #(.N(N), .M(M)) u_ck (
    .clk, .rst_n, .ld_en(ck_ld_en), .ld_lead(xfer_lead), .ld_cnt(xfer_cnt),
    .cmp_en(ck_cmp_en), .nz(ck_nz), .sense_blk(ck_sense_blk),
    .syn_lead(ck_syn_lead), .syn_cnt(ck_syn_cnt)
  );

  ecc_controller #(.N(N), .M(M), .K(K)) u_ctl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_wdata,
    .rd_valid, .rd_data, .ev, .ev_row, .ev_col,
    .mem_op, .mem_a, .mem_b, .mem_out, .mem_wdata, .mem_rd_row, .mem_rd_col,
    .mem_bitlines(bitlines),
    .sh_en, .sh_shamt,
    .pc_ld_a, .pc_ld_b, .pc_start, .pc_chain, .pc_done,
    .cu_rd_en, .cu_rd_sel, .cu_xfer_sel,
    .cb_rd_dir, .cb_rd_idx, .cb_wr_en, .cb_wr_dir, .cb_wr_idx,
    .cb_flip_lead, .cb_flip_cnt, .cb_flip_a, .cb_flip_b,
    .ck_ld_en, .ck_cmp_en, .ck_nz, .ck_sense_blk,
    .ck_syn_lead, .ck_syn_cnt
  );

endmodule
