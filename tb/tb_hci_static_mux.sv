// Testbench of hci_static_mux: with either selection, the chosen engine's
// request reaches the port, only it sees grant and response valid.
module tb_hci_static_mux;
  import darkside_pkg::*;
  int checks = 0, failures = 0;
  logic sel, tg, dg, og;
  hwpe_req_t tr, dr, orq;
  hwpe_rsp_t trs, drs, ors;

  hci_static_mux dut (.sel_i(sel), .tpe_req_i(tr), .tpe_gnt_o(tg), .tpe_rsp_o(trs),
                      .dwe_req_i(dr), .dwe_gnt_o(dg), .dwe_rsp_o(drs),
                      .out_req_o(orq), .out_gnt_i(og), .out_rsp_i(ors));

  task automatic chk(input logic c);
    checks++;
    if (!c) failures++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      sel = 1'($urandom);
      tr = '0; dr = '0;
      tr.req = 1'($urandom); tr.addr = $urandom; tr.wdata[31:0] = $urandom;
      dr.req = 1'($urandom); dr.addr = $urandom; dr.wdata[31:0] = $urandom;
      og = 1'($urandom);
      ors = '0; ors.r_valid = 1'($urandom); ors.r_data[63:0] = {$urandom, $urandom};
      #1;
      chk(orq == (sel ? dr : tr));
      chk(tg == (og && !sel));
      chk(dg == (og && sel));
      chk(trs.r_valid == (ors.r_valid && !sel));
      chk(drs.r_valid == (ors.r_valid && sel));
      chk((sel ? drs.r_data : trs.r_data) == ors.r_data);
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
