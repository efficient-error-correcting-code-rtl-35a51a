// tb_checkbit_crossbar: random row and column line writes and cell flips on a
// small check-bit crossbar, compared with a bit-array model through row and
// column line reads (cell (a, b) = column a, row b).
module tb_checkbit_crossbar;
  import ecc_pkg::*;
  localparam int unsigned NB = 6, BW = $clog2(NB);
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  line_dir_e rd_dir, wr_dir;
  logic [BW-1:0] rd_idx, wr_idx, flip_a, flip_b;
  logic [NB-1:0] rd_line, wr_line;
  logic wr_en, flip_en;
  bit model [NB][NB];  // [b][a]

  checkbit_crossbar #(.NB(NB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    for (int x = 0; x < NB; x++) begin
      rd_idx = BW'(x);
      rd_dir = LINE_ROW; #1;
      for (int y = 0; y < NB; y++) begin checks++; if (rd_line[y] !== model[x][y]) failures++; end
      rd_dir = LINE_COL; #1;
      for (int y = 0; y < NB; y++) begin checks++; if (rd_line[y] !== model[y][x]) failures++; end
    end
  endtask

  initial begin
    wr_en = 0; flip_en = 0; wr_dir = LINE_ROW; rd_dir = LINE_ROW;
    rd_idx = 0; wr_idx = 0; wr_line = 0; flip_a = 0; flip_b = 0;
    foreach (model[i, j]) model[i][j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    compare_all();
    for (int t = 0; t < 200; t++) begin
      bit nm [NB][NB];
      @(negedge clk);
      wr_en = $urandom_range(1); flip_en = ($urandom_range(2) == 0);
      wr_dir = line_dir_e'($urandom_range(1));
      wr_idx = BW'($urandom_range(NB - 1)); wr_line = NB'($urandom);
      flip_a = BW'($urandom_range(NB - 1)); flip_b = BW'($urandom_range(NB - 1));
      nm = model;
      if (wr_en)
        for (int y = 0; y < NB; y++)
          if (wr_dir == LINE_ROW) nm[wr_idx][y] = wr_line[y];
          else                    nm[y][wr_idx] = wr_line[y];
      if (flip_en) nm[flip_b][flip_a] = !model[flip_b][flip_a];
      @(posedge clk);
      model = nm;
      #1 wr_en = 0; flip_en = 0;
      compare_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
