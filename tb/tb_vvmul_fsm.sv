// tb_vvmul_fsm: drives the control FSM with done pulses after random
// delays and checks the state sequence (Load A, Load B, Eval Mul) x L then
// Interp and Idle, the pair index, the `go` pulses and the final done.
module tb_vvmul_fsm;
  import saber_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, a_done = 0, b_done = 0, m_done = 0, i_done = 0;
  vv_state_e state;
  logic go, done;
  logic [1:0] n;
  int checks = 0, failures = 0, gos = 0;
  always #5 clk = ~clk;
  vvmul_fsm #(.L(3)) dut (.*);
  always @(posedge clk) if (go) gos++;

  task automatic chk(input logic ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s (state %s n %0d)", s, state.name(), n); end
  endtask
  task automatic finish_state(ref logic d);
    repeat ($urandom_range(5)) @(negedge clk);
    d = 1; @(negedge clk); d = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(state == VV_IDLE, "idle after reset");
    start = 1; @(negedge clk); start = 0;
    for (int l = 0; l < 3; l++) begin
      chk(state == VV_LOAD_A && n == 2'(l), "load A");
      finish_state(a_done);
      chk(state == VV_LOAD_B, "load B");
      finish_state(b_done);
      chk(state == VV_EVAL_MUL && n == 2'(l), "eval mul");
      finish_state(m_done);
    end
    chk(state == VV_INTERP, "interp");
    repeat (3) @(negedge clk);
    i_done = 1;
    #1 chk(done == 1, "done with last interp cycle");
    @(negedge clk); i_done = 0;
    chk(state == VV_IDLE, "back to idle");
    chk(gos == 10, $sformatf("go pulses %0d", gos));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
