// tb_connection_unit: random check-bit lines and processing-crossbar results.
// Checks the gathered bus layout (diagonal i, block x at bit i*n/m + x), the
// one-hot load enable of the selected processing crossbar, and the inverted
// result of the selected crossbar split back per check-bit crossbar.
module tb_connection_unit;
  localparam int unsigned N = 15, M = 5, K = 3, NB = N / M;
  int checks = 0, failures = 0;

  logic [M-1:0][NB-1:0] cb_lead_rd, cb_cnt_rd, cb_lead_wr, cb_cnt_wr;
  logic rd_en;
  logic [1:0] rd_sel, xfer_sel;
  logic [K-1:0] pc_ld_c_en;
  logic [N-1:0] chk_lead, chk_cnt, xfer_lead, xfer_cnt;
  logic [K-1:0][N-1:0] pc_res_lead, pc_res_cnt;

  connection_unit #(.N(N), .M(M), .K(K)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 100; t++) begin
      int s, x;
      for (int d = 0; d < M; d++) begin
        cb_lead_rd[d] = NB'($urandom); cb_cnt_rd[d] = NB'($urandom);
      end
      for (int p = 0; p < K; p++) begin
        pc_res_lead[p] = N'($urandom); pc_res_cnt[p] = N'($urandom);
      end
      rd_en = $urandom_range(1);
      s = $urandom_range(K - 1); x = $urandom_range(K - 1);
      rd_sel = 2'(s); xfer_sel = 2'(x);
      #1;
      for (int d = 0; d < M; d++)
        for (int b = 0; b < NB; b++) begin
          checks++; if (chk_lead[d*NB+b] !== cb_lead_rd[d][b]) failures++;
          checks++; if (chk_cnt[d*NB+b]  !== cb_cnt_rd[d][b])  failures++;
          checks++; if (cb_lead_wr[d][b] !== !pc_res_lead[x][d*NB+b]) failures++;
          checks++; if (cb_cnt_wr[d][b]  !== !pc_res_cnt[x][d*NB+b])  failures++;
        end
      checks++; if (pc_ld_c_en !== (rd_en ? K'(1 << s) : K'(0))) failures++;
      checks++; if (xfer_lead !== ~pc_res_lead[x] || xfer_cnt !== ~pc_res_cnt[x]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
