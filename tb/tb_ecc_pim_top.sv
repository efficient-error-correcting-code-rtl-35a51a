// tb_ecc_pim_top: end-to-end test of the diagonal-ECC crossbar at a reduced
// size (n = 45, m = 15: a 3 x 3 grid of 15 x 15 blocks, k = 3).
// A reference model holds the data and the leading/counter check-bits as the
// ECC defines them, updated from old and new values of each critical gate.
// The test fills rows with critical writes, runs random critical in-row and
// in-column NORs back to back (provoking processing-crossbar and hazard
// stalls), reads rows back, checks rows and columns of blocks, corrects
// injected single data and check-bit errors, detects a double error, and runs
// non-critical gates, also while a check is in progress, when the MEM is
// free. Every check-bit write-back must come 11 cycles after
// its update was accepted, every check must end after 11 * ceil(m/2) + 4
// cycles plus one per flagged block, and each mechanism must occur.
module tb_ecc_pim_top;
  import ecc_pkg::*;
  localparam int unsigned N = 45, M = 15, K = 3;
  localparam int NWRITES = 40, NOPS = 60, NREADS = 20, NCHECKS = 4, WATCHDOG = 200000;

  localparam int unsigned NB = N / M;
  localparam int unsigned AW = $clog2(N), BW = $clog2(NB), MW = $clog2(M);
  localparam int unsigned PASSES = (M + 1) / 2;
  localparam int CHECK_LAT = 11 * PASSES + 4;  // accept -> check_done, no flagged block
  localparam int WB_LAT    = 11;               // accept -> check-bit write-back

  int checks = 0, failures = 0;
  int cyc = 0;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, rd_valid;
  cmd_t cmd;
  logic [N-1:0] cmd_wdata, rd_data;
  ecc_ev_t ev;
  logic [AW-1:0] ev_row, ev_col, inj_row, inj_col;
  logic inj_en, inj_cb_en, inj_cb_cnt;
  logic [MW-1:0] inj_cb_diag;
  logic [BW-1:0] inj_cb_a, inj_cb_b;

  ecc_pim_top #(.N(N), .M(M), .K(K)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_wdata, .rd_valid, .rd_data,
    .ev, .ev_row, .ev_col, .inj_en, .inj_row, .inj_col,
    .inj_cb_en, .inj_cb_cnt, .inj_cb_diag, .inj_cb_a, .inj_cb_b
  );

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- model
  bit D [N][N];          // MEM contents
  bit PL [M][NB][NB];    // leading check-bits  [diag][block row][block col]
  bit PC [M][NB][NB];    // counter check-bits

  function automatic int dl(int r, int c); return ((r % M) + (c % M)) % M; endfunction
  function automatic int dc(int r, int c); return ((c % M) + M - (r % M)) % M; endfunction

  function automatic void set_cell(int r, int c, bit v, bit critical);
    if (D[r][c] != v && critical) begin
      PL[dl(r, c)][r / M][c / M] ^= 1'b1;
      PC[dc(r, c)][r / M][c / M] ^= 1'b1;
    end
    D[r][c] = v;
  endfunction

  // ------------------------------------------------------------- monitors
  int n_upd, n_noncrit, n_read, n_stall_pc, n_stall_haz, n_stall_drain, n_wb;
  int n_check, n_fix_data, n_fix_cb, n_uncorr;
  int upd_t [$];
  int fix_r [$], fix_c [$];
  int chk_cb, chk_unc, check_done_cyc;
  int n_overlap;   // non-critical gates and reads run while a check is in progress
  bit in_check;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (ev.upd) begin n_upd++; upd_t.push_back(cyc); end
    if (ev.noncrit) n_noncrit++;
    if (ev.read) n_read++;
    if (ev.stall_pc) n_stall_pc++;
    if (ev.stall_hazard) n_stall_haz++;
    if (ev.stall_drain) n_stall_drain++;
    if (ev.wb) begin
      n_wb++;
      checks++;
      if (upd_t.size() == 0) failures++;
      else if (cyc - upd_t.pop_front() != WB_LAT) failures++;
    end
    if (cmd_valid && cmd_ready && cmd.op == CMD_CHECK) in_check <= 1'b1;
    if (in_check && (ev.noncrit || ev.read)) n_overlap++;
    if (ev.check_done) begin n_check++; check_done_cyc = cyc; in_check <= 1'b0; end
    if (ev.fix_data) begin n_fix_data++; fix_r.push_back(int'(ev_row)); fix_c.push_back(int'(ev_col)); end
    if (ev.fix_cb) begin n_fix_cb++; chk_cb++; end
    if (ev.uncorr) begin n_uncorr++; chk_unc++; end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- commands
  // Presents one command and waits for its acceptance; the model is updated
  // in the accepting cycle. Returns the accepting cycle number.
  task automatic send(cmd_t c, logic [N-1:0] wd, output int t_acc);
    @(negedge clk);
    cmd_valid = 1'b1; cmd = c; cmd_wdata = wd;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    t_acc = cyc;
    case (c.op)
      CMD_WRITE_ROW: for (int x = 0; x < N; x++) set_cell(int'(c.out), x, wd[x], c.critical);
      CMD_COL_NOR: begin
        bit nv [N];
        for (int x = 0; x < N; x++) nv[x] = !(D[c.a][x] || D[c.b][x]);
        for (int x = 0; x < N; x++) set_cell(int'(c.out), x, nv[x], c.critical);
      end
      CMD_ROW_NOR: begin
        bit nv [N];
        for (int x = 0; x < N; x++) nv[x] = !(D[x][c.a] || D[x][c.b]);
        for (int x = 0; x < N; x++) set_cell(x, int'(c.out), nv[x], c.critical);
      end
      default: ;
    endcase
    @(posedge clk); #1;
    cmd_valid = 1'b0;
  endtask

  function automatic cmd_t mk(cmd_op_e op, bit crit, int a, int b, int o);
    cmd_t c;
    c = '0; c.op = op; c.critical = crit; c.a = 10'(a); c.b = 10'(b); c.out = 10'(o);
    return c;
  endfunction

  task automatic read_row(int r);
    int t;
    send(mk(CMD_READ_ROW, 0, r, 0, 0), '0, t);
    checks++;
    if (!rd_valid) failures++;
    for (int x = 0; x < N; x++) if (rd_data[x] !== D[r][x]) begin failures++; break; end
  endtask

  // Checks one row (dir LINE_ROW) or column (LINE_COL) of blocks. Expected
  // corrections come from the model: per block, syndrome = stored check-bits
  // ^ parity of the model data; the erroneous cell is found by search.
  task automatic check_line(line_dir_e dir, int idx, bit overlap = 1'b0);
    int exp_r [$], exp_c [$];
    int e_cb = 0, e_unc = 0, nflag = 0, t;
    cmd_t c;
    for (int blk = 0; blk < NB; blk++) begin
      int R, C, nl, nc;
      bit sl [M], sc [M];
      R = (dir == LINE_ROW) ? idx : blk;
      C = (dir == LINE_ROW) ? blk : idx;
      for (int d = 0; d < M; d++) begin sl[d] = PL[d][R][C]; sc[d] = PC[d][R][C]; end
      for (int i = 0; i < M; i++)
        for (int j = 0; j < M; j++)
          if (D[R*M+i][C*M+j]) begin sl[(i + j) % M] ^= 1'b1; sc[(j + M - i) % M] ^= 1'b1; end
      nl = 0; nc = 0;
      for (int d = 0; d < M; d++) begin nl += sl[d]; nc += sc[d]; end
      if (nl + nc == 0) continue;
      nflag++;
      if (nl == 1 && nc == 1) begin
        for (int i = 0; i < M; i++)
          for (int j = 0; j < M; j++)
            if (sl[(i + j) % M] && sc[(j + M - i) % M]) begin
              exp_r.push_back(R*M+i); exp_c.push_back(C*M+j);
              D[R*M+i][C*M+j] ^= 1'b1;
            end
      end else if (nl + nc == 1) begin
        e_cb++;
        for (int d = 0; d < M; d++) begin
          if (sl[d]) PL[d][R][C] ^= 1'b1;
          if (sc[d]) PC[d][R][C] ^= 1'b1;
        end
      end else e_unc++;
    end
    fix_r.delete(); fix_c.delete(); chk_cb = 0; chk_unc = 0; check_done_cyc = -1;
    c = mk(CMD_CHECK, 0, 0, 0, idx); c.dir = dir;
    send(c, '0, t);
    if (overlap) begin
      // a non-critical gate on the last row and a read, issued right behind
      // the check: both must run before the check ends
      int t2;
      send(mk(CMD_COL_NOR, 0, 7, 8, N - 1), '0, t2);
      checks++; if (check_done_cyc >= 0) failures++;
      read_row(N - 1);
      checks++; if (check_done_cyc >= 0) failures++;
    end
    while (check_done_cyc < 0) @(posedge clk);
    #1;
    checks++; if (check_done_cyc - t != CHECK_LAT + nflag) failures++;
    checks++; if (fix_r.size() != exp_r.size()) failures++;
    else for (int k = 0; k < exp_r.size(); k++) begin
      checks++; if (fix_r[k] != exp_r[k] || fix_c[k] != exp_c[k]) failures++;
    end
    checks++; if (chk_cb != e_cb || chk_unc != e_unc) failures++;
  endtask

  task automatic inject(int r, int c);
    @(negedge clk);
    inj_en = 1; inj_row = AW'(r); inj_col = AW'(c);
    @(posedge clk); #1 inj_en = 0;
    D[r][c] ^= 1'b1;
  endtask

  task automatic inject_cb(bit cnt, int d, int a, int b);
    @(negedge clk);
    inj_cb_en = 1; inj_cb_cnt = cnt; inj_cb_diag = MW'(d); inj_cb_a = BW'(a); inj_cb_b = BW'(b);
    @(posedge clk); #1 inj_cb_en = 0;
    if (cnt) PC[d][b][a] ^= 1'b1; else PL[d][b][a] ^= 1'b1;
  endtask

  // ------------------------------------------------------------- stimulus
  initial begin
    int t;
    cmd_valid = 0; cmd = '0; cmd_wdata = '0;
    inj_en = 0; inj_row = 0; inj_col = 0;
    inj_cb_en = 0; inj_cb_cnt = 0; inj_cb_diag = 0; inj_cb_a = 0; inj_cb_b = 0;
    foreach (D[r, c]) D[r][c] = 0;
    foreach (PL[d, b, a]) begin PL[d][b][a] = 0; PC[d][b][a] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. fill rows with critical writes, back to back
    for (int k = 0; k < NWRITES; k++) begin
      logic [N-1:0] wd;
      for (int x = 0; x < N; x += 32) wd[x +: 32] = $urandom;
      send(mk(CMD_WRITE_ROW, 1, 0, 0, $urandom_range(N - 1)), wd, t);
    end
    // 2. random critical gates in both directions
    for (int k = 0; k < NOPS; k++) begin
      cmd_op_e op;
      op = ($urandom_range(1) == 0) ? CMD_ROW_NOR : CMD_COL_NOR;
      send(mk(op, 1, $urandom_range(N - 1), $urandom_range(N - 1), $urandom_range(N - 1)), '0, t);
    end
    // 3. read back and check every sampled row/column of blocks (no errors)
    for (int k = 0; k < NREADS; k++) read_row($urandom_range(N - 1));
    for (int k = 0; k < NCHECKS; k++) begin
      check_line(LINE_ROW, k % NB);
      check_line(LINE_COL, (k * 7) % NB);
    end
    // 4. single soft errors, corrected through a row and a column of blocks
    for (int k = 0; k < NCHECKS; k++) begin
      int r, c;
      r = $urandom_range(N - 1); c = $urandom_range(N - 1);
      inject(r, c);
      if (k % 2 == 0) check_line(LINE_ROW, r / M); else check_line(LINE_COL, c / M);
      read_row(r);
    end
    // 5. a critical update right after a check (in flight) then a check: drain stall
    send(mk(CMD_ROW_NOR, 1, 1, 2, 3), '0, t);
    check_line(LINE_COL, 0);
    // 6. check-bit soft errors
    inject_cb(0, 3 % M, 1 % NB, 0);
    check_line(LINE_ROW, 0);
    inject_cb(1, 5 % M, NB - 1, 1 % NB);
    check_line(LINE_COL, NB - 1);
    // 7. two errors in one block: detected, not correctable
    inject(M + 1, 2);
    inject(M + 4, 7 % M);
    check_line(LINE_ROW, 1);
    // 8. a non-critical gate (output is an intermediate), then read back
    send(mk(CMD_COL_NOR, 0, 5, 6, N - 1), '0, t);
    read_row(N - 1);
    for (int k = 0; k < NREADS; k++) read_row($urandom_range(N - 1));
    // 9. the MEM runs non-critical work while a check is computed
    check_line(LINE_ROW, 0, 1'b1);

    // every mechanism must have happened at least once
    checks++; if (n_upd == 0)        begin failures++; $display("no critical update"); end
    checks++; if (n_wb != n_upd)     begin failures++; $display("write-backs %0d != updates %0d", n_wb, n_upd); end
    checks++; if (n_noncrit == 0)    begin failures++; $display("no non-critical gate"); end
    checks++; if (n_read == 0)       begin failures++; $display("no read"); end
    checks++; if (n_overlap < 2)     begin failures++; $display("no MEM work during a check"); end
    checks++; if (n_stall_pc == 0)   begin failures++; $display("no processing-crossbar stall"); end
    checks++; if (n_stall_haz == 0)  begin failures++; $display("no hazard stall"); end
    checks++; if (n_stall_drain == 0) begin failures++; $display("no drain stall"); end
    checks++; if (n_check == 0)      begin failures++; $display("no check"); end
    checks++; if (n_fix_data == 0)   begin failures++; $display("no data correction"); end
    checks++; if (n_fix_cb == 0)     begin failures++; $display("no check-bit correction"); end
    checks++; if (n_uncorr == 0)     begin failures++; $display("no uncorrectable detection"); end
    $display("updates=%0d write-backs=%0d noncritical=%0d reads=%0d stall_pc=%0d stall_hazard=%0d stall_drain=%0d checks_run=%0d fix_data=%0d fix_cb=%0d uncorrectable=%0d",
             n_upd, n_wb, n_noncrit, n_read, n_stall_pc, n_stall_haz, n_stall_drain, n_check, n_fix_data, n_fix_cb, n_uncorr);
    $display("MEM operations during checks=%0d", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
