// tb_mem_crossbar: random MAGIC operations on a small data crossbar compared
// with a bit-array model: row writes, in-row NOR on all rows, in-column NOR on
// all columns, cell flips and soft-error injection, read back on both the
// bitline and the wordline sensing ports.
module tb_mem_crossbar;
  import ecc_pkg::*;
  localparam int unsigned N = 16, AW = $clog2(N);
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  mem_op_e op;
  logic [AW-1:0] a, b, out, rd_row, rd_col, inj_row, inj_col;
  logic [N-1:0] wdata, bitlines, wordlines;
  logic inj_en;
  bit model [N][N];

  mem_crossbar #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    for (int r = 0; r < N; r++) begin
      rd_row = AW'(r); rd_col = AW'(r);
      #1;
      for (int c = 0; c < N; c++) begin
        checks++; if (bitlines[c] !== model[r][c]) failures++;
        checks++; if (wordlines[c] !== model[c][r]) failures++;
      end
    end
  endtask

  initial begin
    op = MEM_IDLE; a = 0; b = 0; out = 0; wdata = 0; rd_row = 0; rd_col = 0;
    inj_en = 0; inj_row = 0; inj_col = 0;
    foreach (model[r, c]) model[r][c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    compare_all();
    for (int t = 0; t < 300; t++) begin
      bit nm [N][N];
      @(negedge clk);
      op = mem_op_e'($urandom_range(4));
      a = AW'($urandom_range(N - 1)); b = AW'($urandom_range(N - 1));
      out = AW'($urandom_range(N - 1));
      wdata = N'($urandom);
      inj_en = ($urandom_range(3) == 0);
      inj_row = AW'($urandom_range(N - 1)); inj_col = AW'($urandom_range(N - 1));
      nm = model;
      case (op)
        MEM_ROW_NOR:   for (int r = 0; r < N; r++) nm[r][out] = !(model[r][a] || model[r][b]);
        MEM_COL_NOR:   for (int c = 0; c < N; c++) nm[out][c] = !(model[a][c] || model[b][c]);
        MEM_WRITE_ROW: for (int c = 0; c < N; c++) nm[out][c] = wdata[c];
        MEM_FLIP:      nm[a][b] = !model[a][b];
        default: ;
      endcase
      if (inj_en) nm[inj_row][inj_col] = !model[inj_row][inj_col];
      @(posedge clk);
      model = nm;
      #1 op = MEM_IDLE; inj_en = 0;
      if (t % 10 == 0) compare_all();
    end
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
