// Cluster control block on the peripheral side: register file of the
// interconnect and HWPE subsystem settings, and demultiplexer of the cores'
// control accesses toward the accelerators.
//
// Address bits [15:12] of a control access select the target: 0 the HWPE
// slot (TPE or DWE, whichever HWPE SEL names), 1 the DataMover, 2 this
// block's registers:
//   0x000 HCI_PRIO     bit0: 1 = shallow branch has priority (reset 1)
//   0x004 HCI_MAXSTALL stalls the other branch tolerates (reset 10)
//   0x008 HWPE_SEL     0 = TPE, 1 = DWE own the shared 288-bit port
//   0x00C CLK_EN       bit0 TPE, bit1 DWE, bit2 DataMover engine enables
// Targets see the low 12 address bits. Responses come back one cycle after
// the access, from the target that was addressed. The paper says the HCI
// priority and maximum stall are memory-mapped registers and shows the
// HWPE SEL block; the addresses, reset values and the engine enables (which
// stand in for the clock-gating cells) are this design's choice. Writing
// HWPE_SEL while an engine is busy is not checked.
module cluster_ctrl
  import darkside_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  periph_req_t periph_req_i,
  output periph_rsp_t periph_rsp_o,
  output periph_req_t tpe_cfg_o,
  output periph_req_t dwe_cfg_o,
  input  periph_rsp_t tpe_rsp_i,
  input  periph_rsp_t dwe_rsp_i,
  output periph_req_t dmov_cfg_o,
  input  periph_rsp_t dmov_rsp_i,
  output logic        prio_shallow_o,
  output logic [7:0]  max_stall_o,
  output logic        hwpe_sel_o,
  output logic [2:0]  clk_en_o
);
  logic [3:0] tgt, tgt_q;
  periph_req_t local_req;
  periph_rsp_t local_rsp;
  periph_req_t hwpe_cfg;            // the shared HWPE slot, before HWPE_SEL
  assign tgt = periph_req_i.addr[15:12];

  always_comb begin
    local_req = periph_req_i;
    local_req.addr = {4'h0, periph_req_i.addr[11:0]};
    hwpe_cfg = '0; dmov_cfg_o = '0;
    if (tgt == 4'd0) hwpe_cfg = local_req;
    if (tgt == 4'd1) dmov_cfg_o = local_req;
    // HWPE SEL: route the HWPE slot to the selected engine
    tpe_cfg_o = hwpe_sel_o ? '0 : hwpe_cfg;
    dwe_cfg_o = hwpe_sel_o ? hwpe_cfg : '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prio_shallow_o <= 1'b1;
      max_stall_o    <= 8'd10;
      hwpe_sel_o     <= 1'b0;
      clk_en_o       <= 3'b111;
      local_rsp      <= '0;
      tgt_q          <= '0;
    end else begin
      tgt_q <= tgt;
      local_rsp.r_valid <= periph_req_i.req && tgt == 4'd2;
      if (periph_req_i.req && tgt == 4'd2) begin
        if (periph_req_i.we) begin
          case (local_req.addr[11:0])
            12'h000: prio_shallow_o <= periph_req_i.wdata[0];
            12'h004: max_stall_o    <= periph_req_i.wdata[7:0];
            12'h008: hwpe_sel_o     <= periph_req_i.wdata[0];
            12'h00c: clk_en_o       <= periph_req_i.wdata[2:0];
            default: ;
          endcase
        end else begin
          case (local_req.addr[11:0])
            12'h000: local_rsp.r_data <= {31'b0, prio_shallow_o};
            12'h004: local_rsp.r_data <= {24'b0, max_stall_o};
            12'h008: local_rsp.r_data <= {31'b0, hwpe_sel_o};
            12'h00c: local_rsp.r_data <= {29'b0, clk_en_o};
            default: local_rsp.r_data <= 32'h0;
          endcase
        end
      end
    end
  end

  always_comb begin
    case (tgt_q)
      4'd0:    periph_rsp_o = tpe_rsp_i.r_valid ? tpe_rsp_i : dwe_rsp_i;
      4'd1:    periph_rsp_o = dmov_rsp_i;
      default: periph_rsp_o = local_rsp;
    endcase
  end
endmodule
