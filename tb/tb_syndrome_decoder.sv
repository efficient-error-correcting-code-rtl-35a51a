// tb_syndrome_decoder: builds the syndrome of every single data error in an
// m x m block from the diagonal definitions and checks the decoded cell;
// also single check-bit errors, the zero syndrome and random double errors,
// which must all be reported uncorrectable.
module tb_syndrome_decoder;
  import ecc_pkg::*;
  localparam int unsigned M = 15, MW = $clog2(M);
  int checks = 0, failures = 0;

  logic [M-1:0] syn_lead, syn_cnt;
  syn_kind_e kind;
  logic [MW-1:0] row_i, col_j, diag;

  syndrome_decoder #(.M(M)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    syn_lead = '0; syn_cnt = '0; #1;
    checks++; if (kind != SYN_NONE) failures++;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < M; j++) begin
        syn_lead = '0; syn_cnt = '0;
        syn_lead[(i + j) % M] = 1'b1;
        syn_cnt[(j + M - i) % M] = 1'b1;
        #1;
        checks++;
        if (kind != SYN_DATA || int'(row_i) != i || int'(col_j) != j) failures++;
      end
    for (int d = 0; d < M; d++) begin
      syn_lead = '0; syn_cnt = '0; syn_lead[d] = 1'b1; #1;
      checks++; if (kind != SYN_CB_LEAD || int'(diag) != d) failures++;
      syn_lead = '0; syn_cnt = '0; syn_cnt[d] = 1'b1; #1;
      checks++; if (kind != SYN_CB_CNT || int'(diag) != d) failures++;
    end
    for (int t = 0; t < 300; t++) begin
      int i1, j1, i2, j2;
      i1 = $urandom_range(M - 1); j1 = $urandom_range(M - 1);
      do begin i2 = $urandom_range(M - 1); j2 = $urandom_range(M - 1); end
      while (i1 == i2 && j1 == j2);
      syn_lead = '0; syn_cnt = '0;
      syn_lead[(i1 + j1) % M] ^= 1'b1; syn_cnt[(j1 + M - i1) % M] ^= 1'b1;
      syn_lead[(i2 + j2) % M] ^= 1'b1; syn_cnt[(j2 + M - i2) % M] ^= 1'b1;
      #1;
      checks++; if (kind != SYN_UNCORR) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
