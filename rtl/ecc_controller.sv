// ecc_controller: the MEM controller and the CMEM controller of the
// diagonal-ECC crossbar, kept in one state machine because every step of the
// ECC needs both of them in the same cycle.
//
// Host side: a valid/ready command port (ecc_pkg::cmd_t). A non-critical gate
// (its output holds only intermediates) and a row read take one cycle.
// A critical gate (its output is covered by the ECC) takes three cycles:
//   cycle 1 (cancel) the old output line goes through the shifters into a
//           free processing crossbar (row A), and the matching line of
//           check-bits through the connection unit (row C);
//   cycle 2 (perform) the gate is applied to the MEM;
//   cycle 3 (add)   the new output line goes to row B and the processing
//           crossbar starts its eight-NOR XOR3.
// Nine cycles later the processing crossbar's result is written back into the
// check-bit crossbars, while further commands proceed. A critical gate waits
// (stall) while no processing crossbar is free, or while an in-flight update
// touches overlapping check-bits: any update in the other direction, or one
// in the same direction on the same row/column of blocks.
// CMD_CHECK checks one row (dir = LINE_ROW) or column (LINE_COL) of blocks
// (index cmd.out). It waits until all updates are written back, then streams
// the m MEM lines of the block row/column two at a time into processing
// crossbar 0, accumulating stored check-bits ^ line 0 ^ ... ^ line m-1 with
// chained XOR3s (ceil(m/2) passes of 11 cycles). From the last copy until the
// corrections start, non-critical gates and reads are accepted and run in
// the MEM alongside the check; critical gates wait. The syndrome goes to the
// checking crossbar, is zero-tested, and each block with a non-zero syndrome
// is sensed and decoded, one per cycle: a single data error is corrected by
// inverting the MEM cell, a single check-bit error by inverting that
// check-bit, anything else is reported uncorrectable.
// The three update steps, XOR3 in processing crossbars, the m line copies of
// a check and the correction by the controller follow the described design;
// the exact cycle schedule, the stall rules and the single-crossbar chained
// check are this implementation's choices.
module ecc_controller
  import ecc_pkg::*;
#(
  parameter int unsigned N = 1020,
  parameter int unsigned M = 15,
  parameter int unsigned K = 3,
  localparam int unsigned NB = N / M,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned BW = $clog2(NB),
  localparam int unsigned MW = $clog2(M),
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // host
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  cmd_t             cmd,
  input  logic [N-1:0]     cmd_wdata,
  output logic             rd_valid,
  output logic [N-1:0]     rd_data,
  output ecc_ev_t          ev,
  output logic [AW-1:0]    ev_row,      // fix_data: corrected cell
  output logic [AW-1:0]    ev_col,
  // MEM
  output mem_op_e          mem_op,
  output logic [AW-1:0]    mem_a,
  output logic [AW-1:0]    mem_b,
  output logic [AW-1:0]    mem_out,
  output logic [N-1:0]     mem_wdata,
  output logic [AW-1:0]    mem_rd_row,
  output logic [AW-1:0]    mem_rd_col,
  input  logic [N-1:0]     mem_bitlines,
  // shifters
  output logic [1:0]       sh_en,
  output logic [MW-1:0]    sh_shamt,
  // processing crossbars and their controllers
  output logic [K-1:0]     pc_ld_a,
  output logic [K-1:0]     pc_ld_b,
  output logic [K-1:0]     pc_start,
  output logic [K-1:0]     pc_chain,
  input  logic [K-1:0]     pc_done,
  // connection unit and check-bit crossbars
  output logic             cu_rd_en,
  output logic [KW-1:0]    cu_rd_sel,
  output logic [KW-1:0]    cu_xfer_sel,
  output line_dir_e        cb_rd_dir,
  output logic [BW-1:0]    cb_rd_idx,
  output logic             cb_wr_en,
  output line_dir_e        cb_wr_dir,
  output logic [BW-1:0]    cb_wr_idx,
  output logic [M-1:0]     cb_flip_lead,
  output logic [M-1:0]     cb_flip_cnt,
  output logic [BW-1:0]    cb_flip_a,
  output logic [BW-1:0]    cb_flip_b,
  // checking crossbar
  output logic             ck_ld_en,
  output logic             ck_cmp_en,
  input  logic [NB-1:0]    ck_nz,
  output logic [BW-1:0]    ck_sense_blk,
  input  logic [M-1:0]     ck_syn_lead,
  input  logic [M-1:0]     ck_syn_cnt
);

  localparam int unsigned PASSES = (M + 1) / 2;

  typedef enum logic [3:0] {
    S_IDLE, S_U_OP, S_U_ADD,
    S_C_A, S_C_B, S_C_WAIT, S_C_XFER, S_C_CMP, S_C_FLAGS, S_C_FIX
  } state_e;

  state_e            state;
  cmd_t              cur;
  logic [N-1:0]      wdata_q;
  logic [KW-1:0]     cur_pc;
  logic [$clog2(PASSES+1)-1:0] pass;
  logic [NB-1:0]     pending;

  // in-flight update bookkeeping, one entry per processing crossbar
  logic [K-1:0]      pc_alloc;
  line_dir_e         pc_dir [K];
  logic [BW-1:0]     pc_idx [K];

  // ---------------------------------------------------------------- decode
  line_dir_e   new_dir;
  logic [BW-1:0] new_idx;
  logic [MW-1:0] new_shamt;
  logic        any_free, hazard;
  logic [KW-1:0] free_pc;

  always_comb begin
    new_dir   = (cmd.op == CMD_ROW_NOR) ? LINE_COL : LINE_ROW;
    new_idx   = BW'(AW'(cmd.out) / AW'(M));
    new_shamt = MW'(AW'(cmd.out) % AW'(M));
    any_free  = 1'b0;
    free_pc   = '0;
    hazard    = 1'b0;
    for (int p = K - 1; p >= 0; p--)
      if (!pc_alloc[p]) begin any_free = 1'b1; free_pc = KW'(p); end
    for (int p = 0; p < K; p++)
      if (pc_alloc[p] && (pc_dir[p] != new_dir || pc_idx[p] == new_idx)) hazard = 1'b1;
  end

  function automatic mem_op_e gate_op(cmd_op_e op);
    case (op)
      CMD_ROW_NOR:   return MEM_ROW_NOR;
      CMD_COL_NOR:   return MEM_COL_NOR;
      CMD_WRITE_ROW: return MEM_WRITE_ROW;
      default:       return MEM_IDLE;
    endcase
  endfunction

  logic is_gate;
  assign is_gate = cmd.op inside {CMD_ROW_NOR, CMD_COL_NOR, CMD_WRITE_ROW};

  // syndrome decoding of the sensed block
  syn_kind_e     syn_kind;
  logic [MW-1:0] syn_i, syn_j, syn_d;
  logic [BW-1:0] fix_blk;

  syndrome_decoder #(.M(M)) u_dec (
    .syn_lead(ck_syn_lead), .syn_cnt(ck_syn_cnt),
    .kind(syn_kind), .row_i(syn_i), .col_j(syn_j), .diag(syn_d)
  );

  always_comb begin
    fix_blk = '0;
    for (int b = NB - 1; b >= 0; b--) if (pending[b]) fix_blk = BW'(b);
  end

  // line of the MEM read during a check pass
  logic [AW-1:0] chk_line_a, chk_line_b, cur_base;
  logic          chk_b_valid;
  always_comb begin
    cur_base    = AW'(AW'(cur.out) * AW'(M));
    chk_line_a  = cur_base + AW'(2 * pass);
    chk_line_b  = cur_base + AW'(2 * pass + 1);
    chk_b_valid = (2 * pass + 1) < M;
  end

  logic chk_mem_free;
  assign chk_mem_free = (state == S_C_WAIT && pass == ($bits(pass))'(PASSES - 1))
                     || state inside {S_C_XFER, S_C_CMP, S_C_FLAGS};

  // --------------------------------------------------------- control outputs
  always_comb begin
    cmd_ready   = 1'b0;
    ev          = '0;
    mem_op      = MEM_IDLE;
    mem_a       = AW'(cmd.a);
    mem_b       = AW'(cmd.b);
    mem_out     = AW'(cmd.out);
    mem_wdata   = cmd_wdata;
    mem_rd_row  = AW'(cmd.a);
    mem_rd_col  = AW'(cmd.out);
    sh_en       = 2'b00;
    sh_shamt    = new_shamt;
    pc_ld_a     = '0;
    pc_ld_b     = '0;
    pc_start    = '0;
    pc_chain    = '0;
    cu_rd_en    = 1'b0;
    cu_rd_sel   = free_pc;
    cu_xfer_sel = '0;
    cb_rd_dir   = new_dir;
    cb_rd_idx   = new_idx;
    cb_wr_en    = 1'b0;
    cb_wr_dir   = LINE_ROW;
    cb_wr_idx   = '0;
    cb_flip_lead = '0;
    cb_flip_cnt  = '0;
    cb_flip_a   = '0;
    cb_flip_b   = '0;
    ck_ld_en    = 1'b0;
    ck_cmp_en   = 1'b0;
    ck_sense_blk = fix_blk;
    ev_row      = '0;
    ev_col      = '0;

    case (state)
      S_IDLE: if (cmd_valid) begin
        if (cmd.op == CMD_NOP) cmd_ready = 1'b1;
        else if (cmd.op == CMD_READ_ROW) begin
          cmd_ready = 1'b1;
          ev.read   = 1'b1;
        end else if (is_gate && !cmd.critical) begin
          cmd_ready  = 1'b1;
          ev.noncrit = 1'b1;
          mem_op     = gate_op(cmd.op);
        end else if (is_gate) begin
          if (!any_free)   ev.stall_pc = 1'b1;
          else if (hazard) ev.stall_hazard = 1'b1;
          else begin
            // step 1: cancel - old output line and stored check-bits
            cmd_ready  = 1'b1;
            ev.upd     = 1'b1;
            mem_rd_row = AW'(cmd.out);
            mem_rd_col = AW'(cmd.out);
            sh_en      = (new_dir == LINE_ROW) ? 2'b10 : 2'b01;
            pc_ld_a[free_pc] = 1'b1;
            cu_rd_en   = 1'b1;
          end
        end else if (cmd.op == CMD_CHECK) begin
          if (pc_alloc != '0) ev.stall_drain = 1'b1;
          else cmd_ready = 1'b1;
        end else cmd_ready = 1'b1;  // unused opcodes are dropped
      end

      S_U_OP: begin  // step 2: perform the gate
        mem_op    = gate_op(cur.op);
        mem_a     = AW'(cur.a);
        mem_b     = AW'(cur.b);
        mem_out   = AW'(cur.out);
        mem_wdata = wdata_q;
      end

      S_U_ADD: begin  // step 3: add - new output line, start XOR3
        mem_rd_row = AW'(cur.out);
        mem_rd_col = AW'(cur.out);
        sh_en      = (cur.op == CMD_ROW_NOR) ? 2'b01 : 2'b10;
        sh_shamt   = MW'(AW'(cur.out) % AW'(M));
        pc_ld_b[cur_pc]  = 1'b1;
        pc_start[cur_pc] = 1'b1;
      end

      S_C_A: begin
        mem_rd_row = chk_line_a;
        mem_rd_col = chk_line_a;
        sh_en      = (cur.dir == LINE_ROW) ? 2'b10 : 2'b01;
        sh_shamt   = MW'(2 * pass);
        pc_ld_a[0] = 1'b1;
        if (pass == 0) begin
          cu_rd_en  = 1'b1;
          cu_rd_sel = '0;
          cb_rd_dir = cur.dir;
          cb_rd_idx = BW'(cur.out);
        end
      end

      S_C_B: begin
        mem_rd_row  = chk_line_b;
        mem_rd_col  = chk_line_b;
        sh_en       = !chk_b_valid ? 2'b00 : (cur.dir == LINE_ROW) ? 2'b10 : 2'b01;
        sh_shamt    = MW'(2 * pass + 1);
        pc_ld_b[0]  = 1'b1;
        pc_start[0] = 1'b1;
        pc_chain[0] = (pass != 0);
      end

      S_C_XFER: begin
        cu_xfer_sel = '0;
        ck_ld_en    = 1'b1;
      end

      S_C_CMP: ck_cmp_en = 1'b1;

      S_C_FIX: begin
        if (pending == '0) ev.check_done = 1'b1;
        else begin
          case (syn_kind)
            SYN_DATA: begin
              ev.fix_data = 1'b1;
              mem_op = MEM_FLIP;
              if (cur.dir == LINE_ROW) begin
                mem_a = AW'(AW'(cur.out) * AW'(M) + AW'(syn_i));
                mem_b = AW'(AW'(fix_blk) * AW'(M) + AW'(syn_j));
              end else begin
                mem_a = AW'(AW'(fix_blk) * AW'(M) + AW'(syn_i));
                mem_b = AW'(AW'(cur.out) * AW'(M) + AW'(syn_j));
              end
              ev_row = mem_a;
              ev_col = mem_b;
            end
            SYN_CB_LEAD, SYN_CB_CNT: begin
              ev.fix_cb = 1'b1;
              if (syn_kind == SYN_CB_LEAD) cb_flip_lead[syn_d] = 1'b1;
              else                         cb_flip_cnt[syn_d]  = 1'b1;
              cb_flip_a = (cur.dir == LINE_ROW) ? fix_blk : BW'(cur.out);
              cb_flip_b = (cur.dir == LINE_ROW) ? BW'(cur.out) : fix_blk;
            end
            SYN_UNCORR: ev.uncorr = 1'b1;
            default: ;
          endcase
        end
      end

      default: ;
    endcase

    // once every line of the checked blocks has been copied, the MEM is free
    // for non-critical gates and reads until the corrections start
    if (chk_mem_free && cmd_valid) begin
      if (cmd.op == CMD_READ_ROW) begin
        cmd_ready = 1'b1;
        ev.read   = 1'b1;
      end else if (is_gate && !cmd.critical) begin
        cmd_ready  = 1'b1;
        ev.noncrit = 1'b1;
        mem_op     = gate_op(cmd.op);
      end
    end

    // write-back of a finished update, concurrent with everything above
    for (int p = 0; p < K; p++)
      if (pc_done[p] && pc_alloc[p]) begin
        cu_xfer_sel = KW'(p);
        cb_wr_en    = 1'b1;
        cb_wr_dir   = pc_dir[p];
        cb_wr_idx   = pc_idx[p];
        ev.wb       = 1'b1;
      end
  end

  // --------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      wdata_q  <= '0;
      cur_pc   <= '0;
      pass     <= '0;
      pending  <= '0;
      pc_alloc <= '0;
      rd_valid <= 1'b0;
      rd_data  <= '0;
      for (int p = 0; p < K; p++) begin
        pc_dir[p] <= LINE_ROW;
        pc_idx[p] <= '0;
      end
    end else begin
      rd_valid <= ev.read;
      if (ev.read) rd_data <= mem_bitlines;

      for (int p = 0; p < K; p++)
        if (pc_done[p] && pc_alloc[p]) pc_alloc[p] <= 1'b0;

      case (state)
        S_IDLE: if (cmd_valid && cmd_ready) begin
          cur     <= cmd;
          wdata_q <= cmd_wdata;
          if (ev.upd) begin
            cur_pc            <= free_pc;
            pc_alloc[free_pc] <= 1'b1;
            pc_dir[free_pc]   <= new_dir;
            pc_idx[free_pc]   <= new_idx;
            state             <= S_U_OP;
          end else if (cmd.op == CMD_CHECK) begin
            pass  <= '0;
            state <= S_C_A;
          end
        end
        S_U_OP:   state <= S_U_ADD;
        S_U_ADD:  state <= S_IDLE;
        S_C_A:    state <= S_C_B;
        S_C_B:    state <= S_C_WAIT;
        S_C_WAIT: if (pc_done[0]) begin
          if (pass == ($bits(pass))'(PASSES - 1)) state <= S_C_XFER;
          else begin
            pass  <= pass + 1'b1;
            state <= S_C_A;
          end
        end
        S_C_XFER: state <= S_C_CMP;
        S_C_CMP:  state <= S_C_FLAGS;
        S_C_FLAGS: begin
          pending <= ck_nz;
          state   <= S_C_FIX;
        end
        S_C_FIX: begin
          if (pending == '0) state <= S_IDLE;
          else pending[fix_blk] <= 1'b0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // at most one update finishes per cycle (starts are three cycles apart)
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pc_done & pc_alloc))
    else $error("ecc_controller: two write-backs in one cycle");

endmodule
