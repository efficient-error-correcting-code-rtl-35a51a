// tb_pc_controller: the XOR3 state machine driving a processing crossbar.
// Checks the result NOT(a ^ b ^ c) and that done comes exactly nine cycles
// after start (eight NOR cycles), with busy high in between; then a chained
// run that uses the previous result as third operand.
module tb_pc_controller;
  localparam int unsigned W = 32;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic start, chain, busy, done, nor_en;
  logic [3:0] nor_in1, nor_in2, nor_out;
  logic ld_a_en, ld_b_en, ld_c_en;
  logic [W-1:0] ld_a, ld_b, ld_c, result;

  pc_controller u_ctl (.*);
  processing_crossbar #(.W(W)) u_pc (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [W-1:0] a, logic [W-1:0] b, logic [W-1:0] c, bit use_chain, bit load_c);
    int cyc;
    @(negedge clk);
    ld_a = a; ld_b = b; ld_c = c; ld_a_en = 1; ld_b_en = 1; ld_c_en = load_c;
    @(posedge clk); #1 ld_a_en = 0; ld_b_en = 0; ld_c_en = 0;
    @(negedge clk); start = 1; chain = use_chain;
    @(posedge clk); #1 start = 0; chain = 0;
    cyc = 1;
    while (!done && cyc < 50) begin
      checks++; if (!busy) failures++;
      @(posedge clk); #1 cyc++;
    end
    checks++; if (cyc != 9) failures++;
    checks++; if (!busy) failures++;
  endtask

  initial begin
    logic [W-1:0] a, b, c, acc;
    start = 0; chain = 0; ld_a_en = 0; ld_b_en = 0; ld_c_en = 0; ld_a = 0; ld_b = 0; ld_c = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    checks++; if (busy || done || nor_en) failures++;
    for (int t = 0; t < 10; t++) begin
      a = $urandom; b = $urandom; c = $urandom;
      run(a, b, c, 0, 1);
      checks++; if (result !== ~(a ^ b ^ c)) failures++;
      acc = a ^ b ^ c;
      a = $urandom; b = $urandom;
      run(a, b, '0, 1, 0);
      checks++; if (result !== ~(a ^ b ^ acc)) failures++;
      @(posedge clk); #1;
      checks++; if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
