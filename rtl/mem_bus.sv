// mem_bus: the shared bus between the functional units and the two ports
// of the data SRAM.  The controller names one owner (`sel`); that owner's
// port A and port B requests reach the SRAM, all others are ignored.  Read
// data go back to every unit unchanged.  Purely combinational.
module mem_bus
  import saber_pkg::*;
(
  input  unit_e                     sel,
  input  mem_req_t [NUNIT-1:0]      req_a,
  input  mem_req_t [NUNIT-1:0]      req_b,
  output mem_req_t                  a_req,
  output mem_req_t                  b_req
);
  always_comb begin
    a_req = req_a[sel];
    b_req = req_b[sel];
  end
endmodule
