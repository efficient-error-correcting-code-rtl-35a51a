// tb_m_shifter: exhaustive check of the m-wide diagonal rerouting cell for all
// three modes and every shift amount, with random line values. The expected
// values come from the inverse mapping: input line x must appear on the
// diagonal that contains it, ((x + s) mod m) for the leading mode etc.
module tb_m_shifter;
  localparam int unsigned M = 15;
  int checks = 0, failures = 0;

  logic                 en;
  logic [$clog2(M)-1:0] shamt;
  logic [M-1:0]         in_lines;
  logic [M-1:0]         out0, out1, out2;

  m_shifter #(.M(M), .MODE(0)) u0 (.en, .shamt, .in_lines, .out_diag(out0));
  m_shifter #(.M(M), .MODE(1)) u1 (.en, .shamt, .in_lines, .out_diag(out1));
  m_shifter #(.M(M), .MODE(2)) u2 (.en, .shamt, .in_lines, .out_diag(out2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 20; rep++)
      for (int s = 0; s < M; s++) begin
        en = 1'b1;
        shamt = ($clog2(M))'(s);
        in_lines = M'($urandom);
        #1;
        for (int x = 0; x < M; x++) begin
          // leading: row/col index s plus local index x lies on diagonal (x+s) mod m
          checks++; if (out0[(x + s) % M] !== in_lines[x]) failures++;
          // counter, row data: local column x in row s -> diagonal (x - s) mod m
          checks++; if (out1[(x + M - s) % M] !== in_lines[x]) failures++;
          // counter, column data: local row x in column s -> diagonal (s - x) mod m
          checks++; if (out2[(s + M - x) % M] !== in_lines[x]) failures++;
        end
      end
    en = 1'b0; in_lines = '1; #1;
    checks++; if (out0 != '0 || out1 != '0 || out2 != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
