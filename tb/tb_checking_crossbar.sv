// tb_checking_crossbar: loads random sparse syndrome rows, runs the zero test
// and compares each block's flag and sensed 2m-bit syndrome with values
// extracted from the loaded rows by the bus layout.
module tb_checking_crossbar;
  localparam int unsigned N = 35, M = 5, NB = N / M;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic ld_en, cmp_en;
  logic [N-1:0] ld_lead, ld_cnt;
  logic [NB-1:0] nz;
  logic [$clog2(NB)-1:0] sense_blk;
  logic [M-1:0] syn_lead, syn_cnt;

  checking_crossbar #(.N(N), .M(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_en = 0; cmp_en = 0; ld_lead = 0; ld_cnt = 0; sense_blk = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      ld_lead = '0; ld_cnt = '0;
      for (int k = 0; k < 3; k++) begin
        ld_lead[$urandom_range(N - 1)] = 1'b1;
        ld_cnt[$urandom_range(N - 1)]  = ($urandom_range(1) == 1);
      end
      ld_en = 1;
      @(posedge clk); #1 ld_en = 0;
      @(negedge clk); cmp_en = 1;
      @(posedge clk); #1 cmp_en = 0;
      for (int b = 0; b < NB; b++) begin
        logic [M-1:0] el, ec;
        for (int d = 0; d < M; d++) begin el[d] = ld_lead[d*NB+b]; ec[d] = ld_cnt[d*NB+b]; end
        sense_blk = ($clog2(NB))'(b);
        #1;
        checks++; if (syn_lead !== el || syn_cnt !== ec) failures++;
        checks++; if (nz[b] !== ((el | ec) != 0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
