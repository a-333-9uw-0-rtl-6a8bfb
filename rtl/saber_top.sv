// saber_top: the Saber co-processor.  A host drives it through a 207-bit
// scan-chain interface: each frame carries one 24-bit instruction and,
// for Mem Wr, a 64-bit word; status and Mem Rd data come back in the next
// frame.  The command controller decodes the instruction and hands the
// dual-port 8 KB data SRAM, through the bus, to one functional unit at a
// time: SHA3/SHAKE, binomial sampler, AddPack, AddRound, Unpack, the
// vector-vector multiplier (with its own cache), Verify, CMOV and
// CopyWords.  Key generation, encapsulation and decapsulation are
// sequences of these instructions issued by the host.  One clock domain,
// active-low asynchronous reset.
module saber_top
  import saber_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic scan_en,
  input  logic scan_in,
  output logic scan_out,
  input  logic scan_capture,
  input  logic scan_update,
  output logic busy
);
  instr_t        instr;
  logic [DW-1:0] wdata, rdata;
  logic          instr_valid, flag;
  unit_e         sel;
  logic [AW-1:0] off1, off2;
  logic [NUNIT-1:0] start, done;
  mem_req_t [NUNIT-1:0] req_a, req_b;
  mem_req_t      a_req, b_req;
  logic [DW-1:0] a_rdata, b_rdata;
  vv_state_e     vv_state;

  serial_if u_if (
    .clk, .rst_n, .scan_en, .scan_in, .scan_out, .capture(scan_capture),
    .update(scan_update), .instr, .wdata, .instr_valid, .rdata, .busy, .flag
  );

  logic pmode;
  cmd_controller u_ctrl (
    .clk, .rst_n, .instr_valid, .instr, .wdata, .rdata, .busy, .sel, .off1, .off2,
    .start, .pmode, .done, .a_req(req_a[U_CTRL]), .a_rdata
  );
  assign req_b[U_CTRL] = MEM_IDLE;
  assign done[U_CTRL]  = 1'b0;

  mem_bus u_bus (.sel, .req_a, .req_b, .a_req, .b_req);

  data_sram u_sram (.clk, .a_req, .a_rdata, .b_req, .b_rdata);

  sha3_shake u_sha (.clk, .rst_n, .start(start[U_SHA]), .off1, .off2,
    .a_req(req_a[U_SHA]), .a_rdata, .b_req(req_b[U_SHA]), .b_rdata, .done(done[U_SHA]));
  binomial_sampler u_smp (.clk, .rst_n, .start(start[U_SMP]), .off1, .off2,
    .a_req(req_a[U_SMP]), .a_rdata, .b_req(req_b[U_SMP]), .b_rdata, .done(done[U_SMP]));
  add_pack u_apk (.clk, .rst_n, .start(start[U_APK]), .off1, .off2,
    .a_req(req_a[U_APK]), .a_rdata, .b_req(req_b[U_APK]), .b_rdata, .done(done[U_APK]));
  add_round u_ard (.clk, .rst_n, .start(start[U_ARD]), .off1, .off2,
    .a_req(req_a[U_ARD]), .a_rdata, .b_req(req_b[U_ARD]), .b_rdata, .done(done[U_ARD]));
  unpack u_unp (.clk, .rst_n, .start(start[U_UNP]), .off1, .off2,
    .a_req(req_a[U_UNP]), .a_rdata, .b_req(req_b[U_UNP]), .b_rdata, .done(done[U_UNP]));
  verify u_ver (.clk, .rst_n, .start(start[U_VER]), .off1, .off2,
    .a_req(req_a[U_VER]), .a_rdata, .b_req(req_b[U_VER]), .b_rdata, .flag, .done(done[U_VER]));
  copy_words u_cpy (.clk, .rst_n, .start(start[U_CPY]), .off1, .off2,
    .a_req(req_a[U_CPY]), .a_rdata, .b_req(req_b[U_CPY]), .b_rdata, .done(done[U_CPY]));
  cmov u_cmv (.clk, .rst_n, .start(start[U_CMV]), .off1, .off2,
    .a_req(req_a[U_CMV]), .a_rdata, .b_req(req_b[U_CMV]), .b_rdata, .flag, .done(done[U_CMV]));
  vvectormul u_vvm (.clk, .rst_n, .start(start[U_VVM]), .pmode, .off1, .off2,
    .a_req(req_a[U_VVM]), .a_rdata, .b_req(req_b[U_VVM]), .b_rdata, .state(vv_state),
    .done(done[U_VVM]));
endmodule
