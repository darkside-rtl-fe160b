// Level 1 of the HCI: static multiplexer that hands the single 288-bit HWPE
// data port to the TPE or to the DWE.
//
// sel_i comes from the HWPE SEL register and changes only between jobs (the
// paper's computing model never runs the two engines at the same time). The
// unselected engine sees no grant and no response. The DWE's 128-bit
// streams use the low words of the same port. Purely combinational.
module hci_static_mux
  import darkside_pkg::*;
(
  input  logic      sel_i,        // 0: TPE, 1: DWE
  input  hwpe_req_t tpe_req_i,
  output logic      tpe_gnt_o,
  output hwpe_rsp_t tpe_rsp_o,
  input  hwpe_req_t dwe_req_i,
  output logic      dwe_gnt_o,
  output hwpe_rsp_t dwe_rsp_o,
  output hwpe_req_t out_req_o,
  input  logic      out_gnt_i,
  input  hwpe_rsp_t out_rsp_i
);
  assign out_req_o = sel_i ? dwe_req_i : tpe_req_i;
  assign tpe_gnt_o = !sel_i && out_gnt_i;
  assign dwe_gnt_o =  sel_i && out_gnt_i;
  always_comb begin
    tpe_rsp_o = out_rsp_i;
    dwe_rsp_o = out_rsp_i;
    tpe_rsp_o.r_valid = out_rsp_i.r_valid && !sel_i;
    dwe_rsp_o.r_valid = out_rsp_i.r_valid &&  sel_i;
  end
endmodule
