// pc_controller: the small state machine that runs the fixed XOR3 sequence
// in one processing crossbar (one controller drives the leading and the
// counter crossbar of a pair with the same signals).
//
// With rows A, B, C holding the NOTs of the three operands, eight NORs give
//   t1 = NOR(A,B)  t2 = NOR(A,t1)  t3 = NOR(B,t1)  x1 = NOR(t2,t3)  (= XNOR(A,B))
//   t4 = NOR(x1,C) t5 = NOR(x1,t4) t6 = NOR(C,t4)  x2 = NOR(t5,t6)  (= XNOR(x1,C))
// so x2 = NOT(a ^ b ^ c). With chain set, operand C is taken from row X2
// itself (the previous result): X2 is read in steps 5 and 7 and written only in
// step 8, so a running XOR can be accumulated in place during an ECC check.
// Timing: start in cycle 0; NOR steps in cycles 1..8; done is high in cycle 9
// and result is valid from then on. busy is high from cycle 1 to cycle 9.
// The eight-NOR count is the stated XOR3 cost; the NOR decomposition and row
// map are this implementation's choice.
module pc_controller
  import ecc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        chain,
  output logic        busy,
  output logic        done,
  output logic        nor_en,
  output logic [3:0]  nor_in1,
  output logic [3:0]  nor_in2,
  output logic [3:0]  nor_out
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e     state;
  logic [2:0] step;
  logic       chain_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      step    <= '0;
      chain_q <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          step    <= '0;
          chain_q <= chain;
        end
        S_RUN: begin
          step <= step + 3'd1;
          if (step == 3'(XOR3_NORS - 1)) state <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic [3:0] c_row;
  assign c_row = chain_q ? 4'(PC_R_X2) : 4'(PC_R_C);

  always_comb begin
    nor_en  = (state == S_RUN);
    nor_in1 = 4'd0;
    nor_in2 = 4'd1;
    nor_out = 4'd3;
    case (step)
      3'd0: begin nor_in1 = 4'd0;  nor_in2 = 4'd1;  nor_out = 4'd3;  end  // t1
      3'd1: begin nor_in1 = 4'd0;  nor_in2 = 4'd3;  nor_out = 4'd4;  end  // t2
      3'd2: begin nor_in1 = 4'd1;  nor_in2 = 4'd3;  nor_out = 4'd5;  end  // t3
      3'd3: begin nor_in1 = 4'd4;  nor_in2 = 4'd5;  nor_out = 4'd6;  end  // x1
      3'd4: begin nor_in1 = 4'd6;  nor_in2 = c_row; nor_out = 4'd7;  end  // t4
      3'd5: begin nor_in1 = 4'd6;  nor_in2 = 4'd7;  nor_out = 4'd8;  end  // t5
      3'd6: begin nor_in1 = c_row; nor_in2 = 4'd7;  nor_out = 4'd9;  end  // t6
      default: begin nor_in1 = 4'd8; nor_in2 = 4'd9; nor_out = 4'd10; end // x2
    endcase
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("pc_controller: start while busy");

endmodule
