// tb_ecc_controller: cycle timing of the MEM/CMEM controller, run through the
// full datapath at a tiny size (n = 15, m = 5, k = 2 processing crossbars).
//   - a critical gate holds the command port three cycles (cancel, perform,
//     add) and its check-bits are written back 11 cycles after acceptance;
//   - non-critical gates and reads are accepted on consecutive cycles;
//   - with both processing crossbars busy a third critical gate waits until
//     the first write-back (cycle +12), and is reported as a stall;
//   - a critical gate in the other direction waits for the in-flight update
//     (hazard) and a check waits for all write-backs (drain);
//   - a check without errors finishes 11 * ceil(m/2) + 4 cycles after
//     acceptance, which also shows the updated check-bits are consistent;
//   - a read issued behind a check runs once the last line is copied,
//     11 * ceil(m/2) - 8 cycles after the check, and a critical gate waits
//     for the end of the check.
module tb_ecc_controller;
  import ecc_pkg::*;
  localparam int unsigned N = 15, M = 5, K = 2, NB = N / M;
  localparam int unsigned AW = $clog2(N), BW = $clog2(NB), MW = $clog2(M);
  localparam int CHECK_LAT = 11 * ((M + 1) / 2) + 4;

  int checks = 0, failures = 0, cyc = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, rd_valid;
  cmd_t cmd;
  logic [N-1:0] cmd_wdata, rd_data;
  ecc_ev_t ev;
  logic [AW-1:0] ev_row, ev_col;

  ecc_pim_top #(.N(N), .M(M), .K(K)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_wdata, .rd_valid, .rd_data,
    .ev, .ev_row, .ev_col, .inj_en(1'b0), .inj_row('0), .inj_col('0),
    .inj_cb_en(1'b0), .inj_cb_cnt(1'b0), .inj_cb_diag('0), .inj_cb_a('0), .inj_cb_b('0)
  );
  always #5 clk = ~clk;

  int n_stall_pc = 0, n_stall_haz = 0, n_stall_drain = 0, done_cyc = -1;
  int wb_cyc [$];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (ev.stall_pc) n_stall_pc++;
    if (ev.stall_hazard) n_stall_haz++;
    if (ev.stall_drain) n_stall_drain++;
    if (ev.wb) wb_cyc.push_back(cyc);
    if (ev.check_done) done_cyc = cyc;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(cmd_op_e op, bit crit, line_dir_e dir, int a, int b, int o, output int t_acc);
    @(negedge clk);
    cmd_valid = 1; cmd = '0; cmd.op = op; cmd.critical = crit; cmd.dir = dir;
    cmd.a = 10'(a); cmd.b = 10'(b); cmd.out = 10'(o);
    cmd_wdata = N'($urandom);
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    t_acc = cyc;
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic check_all();
    int t;
    for (int x = 0; x < NB; x++) begin
      done_cyc = -1;
      send(CMD_CHECK, 0, LINE_ROW, 0, 0, x, t);
      while (done_cyc < 0) @(posedge clk);
      expect_eq(done_cyc - t, CHECK_LAT, "row check latency");
      done_cyc = -1;
      send(CMD_CHECK, 0, LINE_COL, 0, 0, x, t);
      while (done_cyc < 0) @(posedge clk);
      expect_eq(done_cyc - t, CHECK_LAT, "column check latency");
    end
  endtask

  initial begin
    int t0, t1, t2, t3;
    cmd_valid = 0; cmd = '0; cmd_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // fill some rows (critical writes), then an isolated critical gate
    for (int r = 0; r < N; r += 2) send(CMD_WRITE_ROW, 1, LINE_ROW, 0, 0, r, t0);
    repeat (15) @(posedge clk);
    wb_cyc.delete();
    send(CMD_ROW_NOR, 1, LINE_ROW, 1, 2, 4, t0);
    send(CMD_READ_ROW, 0, LINE_ROW, 3, 0, 0, t1);
    expect_eq(t1 - t0, 3, "critical gate occupancy");
    repeat (15) @(posedge clk);
    expect_eq(wb_cyc.size(), 1, "write-back count");
    if (wb_cyc.size() > 0) expect_eq(wb_cyc[0] - t0, 11, "write-back latency");
    check_all();

    // processing-crossbar exhaustion: three updates on different block rows
    send(CMD_COL_NOR, 1, LINE_ROW, 0, 1, 0, t0);
    send(CMD_COL_NOR, 1, LINE_ROW, 2, 3, 5, t1);
    send(CMD_COL_NOR, 1, LINE_ROW, 4, 6, 10, t2);
    expect_eq(t1 - t0, 3, "second update start");
    expect_eq(t2 - t0, 12, "third update waits for a free processing crossbar");
    checks++; if (n_stall_pc == 0) failures++;
    repeat (20) @(posedge clk);

    // hazard: other direction waits for the in-flight write-back
    send(CMD_COL_NOR, 1, LINE_ROW, 0, 1, 7, t0);
    send(CMD_ROW_NOR, 1, LINE_ROW, 0, 1, 7, t1);
    expect_eq(t1 - t0, 12, "hazard stall");
    checks++; if (n_stall_haz == 0) failures++;
    // same direction, same block row: also waits
    send(CMD_COL_NOR, 1, LINE_ROW, 0, 1, 8, t0);
    send(CMD_COL_NOR, 1, LINE_ROW, 2, 3, 9, t1);
    expect_eq(t1 - t0, 12, "same-line hazard stall");
    // drain: a check right after an update
    send(CMD_CHECK, 0, LINE_ROW, 0, 0, 1, t2);
    expect_eq(t2 - t1, 12, "check waits for write-back");
    checks++; if (n_stall_drain == 0) failures++;
    repeat (60) @(posedge clk);
    check_all();
    // once the last line of a check is copied the MEM takes reads and
    // non-critical gates; a critical gate waits for the end of the check
    send(CMD_CHECK, 0, LINE_COL, 0, 0, 1, t0);
    send(CMD_READ_ROW, 0, LINE_ROW, 3, 0, 0, t1);
    expect_eq(t1 - t0, 11 * ((M + 1) / 2) - 8, "read during a check");
    send(CMD_COL_NOR, 1, LINE_ROW, 0, 1, 2, t2);
    expect_eq(t2 - t0, CHECK_LAT + 1, "critical gate waits for the check");
    // non-critical gates (outputs are intermediates, not re-encoded)
    send(CMD_COL_NOR, 0, LINE_ROW, 1, 2, 14, t2);
    send(CMD_ROW_NOR, 0, LINE_ROW, 1, 2, 14, t3);
    expect_eq(t3 - t2, 1, "non-critical back to back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
