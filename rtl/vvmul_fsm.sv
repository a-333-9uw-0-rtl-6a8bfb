// vvmul_fsm: control FSM of the vector-vector multiplier.
// States Idle, Load A, Load B, Eval Mul and Interp.  For each of the L
// polynomial pairs it loads and evaluates A_n, loads and evaluates B_n and
// runs the seven point multiplications (accumulating into the cache after
// the first pair); only after the last pair does it interpolate, once
// (lazy interpolation).  `go` is high in the cycle before a state other
// than Idle is entered, so that the data path of that state starts working
// in the state's first cycle; a state ends with its data path's done
// pulse.  `n` is the index of the current pair.
module vvmul_fsm
  import saber_pkg::*;
#(
  parameter int unsigned L = 3
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       a_done,
  input  logic       b_done,
  input  logic       m_done,
  input  logic       i_done,
  output vv_state_e  state,
  output logic       go,
  output logic [1:0] n,
  output logic       done
);
  vv_state_e nxt;

  always_comb begin
    nxt  = state;
    done = 1'b0;
    unique case (state)
      VV_IDLE:     if (start)  nxt = VV_LOAD_A;
      VV_LOAD_A:   if (a_done) nxt = VV_LOAD_B;
      VV_LOAD_B:   if (b_done) nxt = VV_EVAL_MUL;
      VV_EVAL_MUL: if (m_done) nxt = (n == 2'(L - 1)) ? VV_INTERP : VV_LOAD_A;
      VV_INTERP:   if (i_done) begin nxt = VV_IDLE; done = 1'b1; end
      default:     nxt = VV_IDLE;
    endcase
    go = (nxt != state) && (nxt != VV_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= VV_IDLE; n <= '0;
    end else begin
      state   <= nxt;
      if (state == VV_IDLE && start) n <= '0;
      else if (state == VV_EVAL_MUL && m_done) n <= n + 1'b1;
    end
  end
endmodule
