// tb_processing_crossbar: loads three random vectors (stored inverted) and
// applies the eight NOR steps of the XOR3 sequence from the testbench; the
// result row must equal NOT(a ^ b ^ c). A second pass re-uses the result row
// as the third operand (chained accumulation).
module tb_processing_crossbar;
  localparam int unsigned W = 40;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic ld_a_en, ld_b_en, ld_c_en, nor_en;
  logic [W-1:0] ld_a, ld_b, ld_c, result;
  logic [3:0] nor_in1, nor_in2, nor_out;

  processing_crossbar #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic nor_step(int i1, int i2, int o);
    @(negedge clk);
    nor_en = 1; nor_in1 = 4'(i1); nor_in2 = 4'(i2); nor_out = 4'(o);
    @(posedge clk); #1 nor_en = 0;
  endtask

  task automatic xor3_seq(int c_row);
    nor_step(0, 1, 3); nor_step(0, 3, 4); nor_step(1, 3, 5); nor_step(4, 5, 6);
    nor_step(6, c_row, 7); nor_step(6, 7, 8); nor_step(c_row, 7, 9); nor_step(8, 9, 10);
  endtask

  initial begin
    logic [W-1:0] a, b, c, acc;
    ld_a_en = 0; ld_b_en = 0; ld_c_en = 0; nor_en = 0;
    ld_a = 0; ld_b = 0; ld_c = 0; nor_in1 = 0; nor_in2 = 0; nor_out = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom};
      @(negedge clk);
      ld_a_en = 1; ld_b_en = 1; ld_c_en = 1; ld_a = a; ld_b = b; ld_c = c;
      @(posedge clk); #1 ld_a_en = 0; ld_b_en = 0; ld_c_en = 0;
      xor3_seq(2);
      #1; checks++; if (result !== ~(a ^ b ^ c)) failures++;
      acc = a ^ b ^ c;
      // chained pass: third operand is the previous result row
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      @(negedge clk);
      ld_a_en = 1; ld_b_en = 1; ld_a = a; ld_b = b;
      @(posedge clk); #1 ld_a_en = 0; ld_b_en = 0;
      xor3_seq(10);
      #1; checks++; if (result !== ~(a ^ b ^ acc)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
