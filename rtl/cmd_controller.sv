// cmd_controller: instruction decoder and sequencer of the co-processor.
// An instruction is 24 bits: opcode [3:0], Offset1 [13:4], Offset2 [23:14]
// (SRAM word addresses).  Mem Wr writes the accompanying 64-bit word to
// Offset1 and Mem Rd fetches the word at Offset1 into `rdata`; both use the
// controller's own bus slot.  Every other opcode starts one functional
// unit: the controller grants that unit the SRAM bus (`sel`), sends it a
// one-cycle start with the two offsets, and stays busy until the unit's
// done pulse.  Opcodes 0111 and 1000 (vector-vector multiplication with
// 13-bit and with 10-bit packed public operands; `pmode` tells the
// multiplier which) are this design's choice; 1100 (SHAKE with outside input) and unused codes finish at once
// without effect.  Instructions arriving while busy are dropped.
module cmd_controller
  import saber_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             instr_valid,
  input  instr_t           instr,
  input  logic [DW-1:0]    wdata,
  output logic [DW-1:0]    rdata,
  output logic             busy,
  output unit_e            sel,
  output logic [AW-1:0]    off1,
  output logic [AW-1:0]    off2,
  output logic [NUNIT-1:0] start,
  output logic             pmode,
  input  logic [NUNIT-1:0] done,
  output mem_req_t         a_req,
  input  logic [DW-1:0]    a_rdata
);
  typedef enum logic [1:0] { C_IDLE, C_RUN, C_RD } cst_e;
  cst_e st;

  function automatic unit_e unit_of(input logic [3:0] op);
    unique case (op)
      OP_SHA:      return U_SHA;
      OP_SAMPLER:  return U_SMP;
      OP_ADDPACK:  return U_APK;
      OP_ADDROUND: return U_ARD;
      OP_UNPACK:   return U_UNP;
      OP_VVMUL:    return U_VVM;
      OP_VVMUL_P:  return U_VVM;
      OP_VERIFY:   return U_VER;
      OP_COPY:     return U_CPY;
      OP_CMOV:     return U_CMV;
      default:     return U_CTRL;
    endcase
  endfunction

  wire accept = instr_valid && st == C_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; sel <= U_CTRL; off1 <= '0; off2 <= '0; start <= '0; rdata <= '0;
      pmode <= 1'b0;
    end else begin
      start <= '0;
      unique case (st)
        C_IDLE: if (accept) begin
          off1 <= instr.off1;
          off2 <= instr.off2;
          pmode <= instr.op == OP_VVMUL_P;
          if (instr.op == OP_MEM_RD) st <= C_RD;
          else if (unit_of(instr.op) != U_CTRL) begin
            sel <= unit_of(instr.op);
            start[unit_of(instr.op)] <= 1'b1;
            st <= C_RUN;
          end
        end
        C_RUN: if (done[sel]) begin st <= C_IDLE; sel <= U_CTRL; end
        C_RD: begin rdata <= a_rdata; st <= C_IDLE; end
        default: st <= C_IDLE;
      endcase
    end
  end

  always_comb begin
    busy  = st != C_IDLE;
    a_req = MEM_IDLE;
    if (accept && (instr.op == OP_MEM_WR || instr.op == OP_MEM_RD)) begin
      a_req.en    = 1'b1;
      a_req.we    = instr.op == OP_MEM_WR;
      a_req.addr  = instr.off1;
      a_req.wdata = wdata;
    end
  end

  // a unit may only finish while it owns the bus
  a_done_owner: assert property (@(posedge clk) disable iff (!rst_n)
                                 (done & ~(NUNIT'(1) << sel) & ~NUNIT'(1)) == '0);
endmodule
