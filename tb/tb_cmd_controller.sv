// tb_cmd_controller: issues every opcode to the controller with a data
// SRAM attached and fake units that answer `done` after a few cycles.
// Checks decoding of Op/Offset1/Offset2, the start pulse of the right unit,
// the bus owner, busy, Mem Wr / Mem Rd through the SRAM, that an
// instruction sent while busy is dropped and that 1100 finishes at once.
module tb_cmd_controller;
  import saber_pkg::*;
  logic clk = 0, rst_n = 0, instr_valid = 0;
  instr_t instr = '0;
  logic [DW-1:0] wdata = '0, rdata, a_rdata, b_rdata;
  logic busy;
  unit_e sel;
  logic [AW-1:0] off1, off2;
  logic [NUNIT-1:0] start, done = '0;
  logic pmode;
  mem_req_t a_req;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cmd_controller dut (.*);
  data_sram u_mem (.clk, .a_req, .a_rdata, .b_req(MEM_IDLE), .b_rdata);

  task automatic chk(input logic ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  task automatic issue(input logic [3:0] op, input int o1, input int o2, input logic [63:0] d = '0);
    @(negedge clk);
    instr = '{off2: AW'(o2), off1: AW'(o1), op: op}; wdata = d; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
  endtask

  initial begin
    logic [3:0] ops [10] = '{OP_SHA, OP_SAMPLER, OP_ADDPACK, OP_ADDROUND, OP_UNPACK, OP_VVMUL, OP_VVMUL_P, OP_VERIFY, OP_COPY, OP_CMOV};
    unit_e      uns [10] = '{U_SHA, U_SMP, U_APK, U_ARD, U_UNP, U_VVM, U_VVM, U_VER, U_CPY, U_CMV};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Mem Wr then Mem Rd
    issue(OP_MEM_WR, 77, 0, 64'h0123456789ABCDEF);
    chk(u_mem.mem[77] == 64'h0123456789ABCDEF, "mem write");
    issue(OP_MEM_RD, 77, 0);
    @(negedge clk);
    chk(rdata == 64'h0123456789ABCDEF && !busy, "mem read");
    for (int k = 0; k < 10; k++) begin
      int o1, o2;
      o1 = $urandom_range(1023); o2 = $urandom_range(1023);
      issue(ops[k], o1, o2);
      chk(start == (NUNIT'(1) << uns[k]), $sformatf("start pulse op %b", ops[k]));
      chk(sel == uns[k] && busy, "owner and busy");
      chk(off1 == AW'(o1) && off2 == AW'(o2), "offsets");
      chk(pmode == (ops[k] == OP_VVMUL_P), "operand mode");
      @(negedge clk);
      chk(start == '0, "start is one pulse");
      issue(OP_COPY, 1, 2);                       // dropped: busy
      chk(sel == uns[k] && start == '0, "instruction dropped while busy");
      done[uns[k]] = 1; @(negedge clk); done = '0;
      chk(!busy && sel == U_CTRL, "released after done");
    end
    issue(OP_SHAKE_EXT, 3, 4);
    chk(!busy && start == '0, "1100 finishes at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
