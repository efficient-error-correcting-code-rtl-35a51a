// tb_shifters: checks that the combined shifter places every bit of a MEM row
// (bitlines) or MEM column (wordlines) on the bus position of its block and
// of the leading / counter diagonal that passes through it, computed here
// from the diagonal definitions, and that a disabled side drives zeros.
module tb_shifters;
  localparam int unsigned N = 35, M = 5, NB = N / M;
  int checks = 0, failures = 0;

  logic [N-1:0] bitlines, wordlines, bl, bc, wl, wc;
  logic [1:0]   en;
  logic [$clog2(M)-1:0] shamt;

  shifters #(.N(N), .M(M)) dut (.bitlines, .wordlines, .en, .shamt,
    .d_b_lead(bl), .d_b_cnt(bc), .d_w_lead(wl), .d_w_cnt(wc));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 30; rep++) begin
      int line, i, j;
      line = $urandom_range(N - 1);
      bitlines  = {$urandom, $urandom};
      wordlines = {$urandom, $urandom};
      shamt = ($clog2(M))'(line % M);
      en = 2'b10;
      #1;
      // row 'line' of the MEM: cell column g*M+j, local row i = line mod M
      i = line % M;
      for (int g = 0; g < NB; g++)
        for (j = 0; j < M; j++) begin
          checks++; if (bl[((i + j) % M) * NB + g] !== bitlines[g*M + j]) failures++;
          checks++; if (bc[((j + M - i) % M) * NB + g] !== bitlines[g*M + j]) failures++;
        end
      checks++; if (wl != '0 || wc != '0) failures++;
      en = 2'b01;
      #1;
      // column 'line': cell row g*M+i, local column j = line mod M
      j = line % M;
      for (int g = 0; g < NB; g++)
        for (i = 0; i < M; i++) begin
          checks++; if (wl[((i + j) % M) * NB + g] !== wordlines[g*M + i]) failures++;
          checks++; if (wc[((j + M - i) % M) * NB + g] !== wordlines[g*M + i]) failures++;
        end
      checks++; if (bl != '0 || bc != '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
