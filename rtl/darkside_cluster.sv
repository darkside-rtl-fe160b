// Darkside heterogeneous cluster: shared-L1 memory system with the three
// accelerators and the cores' M&L extension units.
//
// Structure (Fig. 1 of the paper):
//  * 32 TCDM banks of 4 kB (128 kB), word interleaved.
//  * HCI level 1: static mux giving the single 288-bit HWPE port to the TPE
//    or the DWE (HWPE_SEL register).
//  * HCI level 2: logarithmic branch with 10 32-bit ports (cores 0-7 on
//    PORT0-7, DataMover on PORT8, DMA on PORT9) and the shallow branch
//    routing the 288-bit port to 9 adjacent banks.
//  * HCI level 3: per-bank multiplexers with software-set priority and
//    maximum-stall rotation.
//  * TPE, DWE, DataMover, each with a memory-mapped control port reached
//    through cluster_ctrl, and a completion event.
//  * One rvnn_ml_unit per core: CSR, MPC, NN-RF and dot-product unit.
// The cores' RI5CY base pipelines, the DMA, the instruction cache, the
// synchronisation unit and the AXI/Fabric side are not part of this RTL:
// their connections are the ports of this module (core and DMA TCDM
// ports, the control port, the events and the decoded M&L operations of
// each core). All blocks run on one clock; accelerator clock gating is
// modelled by the engines' enables (CLK_EN register).
module darkside_cluster
  import darkside_pkg::*;
(
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // core data ports (logarithmic branch PORT0..7)
  input  tcdm_req_t [N_CORES-1:0]       core_req_i,
  output logic      [N_CORES-1:0]       core_gnt_o,
  output tcdm_rsp_t [N_CORES-1:0]       core_rsp_o,
  // cluster DMA port (PORT9)
  input  tcdm_req_t                     dma_req_i,
  output logic                          dma_gnt_o,
  output tcdm_rsp_t                     dma_rsp_o,
  // control accesses from the cores (peripheral interconnect)
  input  periph_req_t                   periph_req_i,
  output periph_rsp_t                   periph_rsp_o,
  // completion events toward the synchronisation unit: TPE, DWE, DataMover
  output logic [2:0]                    evt_o,
  output logic [2:0]                    busy_o,
  // M&L extension interface of each core (decoded by the core pipeline)
  input  logic [N_CORES-1:0]            ml_csr_we_i,
  input  logic [N_CORES-1:0][31:0]      ml_csr_wdata_i,
  output logic [N_CORES-1:0][31:0]      ml_csr_rdata_o,
  input  logic [N_CORES-1:0]            ml_valid_i,
  input  logic [N_CORES-1:0]            ml_is_ml_i,
  input  logic [N_CORES-1:0][31:0]      ml_rs1_i,
  input  logic [N_CORES-1:0][31:0]      ml_rs2_i,
  input  logic [N_CORES-1:0][31:0]      ml_acc_i,
  input  logic [N_CORES-1:0]            ml_act_sel_i,
  input  logic [N_CORES-1:0][1:0]       ml_wgt_sel_i,
  input  logic [N_CORES-1:0]            ml_lsu_we_i,
  input  logic [N_CORES-1:0][2:0]       ml_lsu_idx_i,
  input  logic [N_CORES-1:0][31:0]      ml_lsu_wdata_i,
  output logic [N_CORES-1:0]            ml_res_valid_o,
  output logic [N_CORES-1:0][31:0]      ml_result_o,
  // observation of interconnect collisions
  output logic                          hci_collision_o
);
  // ---------------- control
  periph_req_t tpe_cfg, dwe_cfg, dmov_cfg;
  periph_rsp_t tpe_cfg_rsp, dwe_cfg_rsp, dmov_cfg_rsp;
  logic        prio_shallow, hwpe_sel;
  logic [7:0]  max_stall;
  logic [2:0]  clk_en;

  cluster_ctrl u_ctrl (
    .clk_i, .rst_ni, .periph_req_i, .periph_rsp_o,
    .tpe_cfg_o(tpe_cfg), .dwe_cfg_o(dwe_cfg),
    .tpe_rsp_i(tpe_cfg_rsp), .dwe_rsp_i(dwe_cfg_rsp),
    .dmov_cfg_o(dmov_cfg), .dmov_rsp_i(dmov_cfg_rsp),
    .prio_shallow_o(prio_shallow), .max_stall_o(max_stall),
    .hwpe_sel_o(hwpe_sel), .clk_en_o(clk_en)
  );

  // ---------------- accelerators
  hwpe_req_t tpe_req, dwe_req, sh_req;
  hwpe_rsp_t tpe_rsp, dwe_rsp, sh_rsp;
  logic      tpe_gnt, dwe_gnt, sh_gnt_port;
  tcdm_req_t dmov_req;
  logic      dmov_gnt;
  tcdm_rsp_t dmov_rsp;
  logic      tpe_stall;

  tpe u_tpe (
    .clk_i, .rst_ni, .clk_en_i(clk_en[0]),
    .cfg_req_i(tpe_cfg), .cfg_rsp_o(tpe_cfg_rsp), .evt_o(evt_o[0]),
    .data_req_o(tpe_req), .data_gnt_i(tpe_gnt), .data_rsp_i(tpe_rsp),
    .busy_o(busy_o[0]), .stall_o(tpe_stall)
  );

  dwe u_dwe (
    .clk_i, .rst_ni, .clk_en_i(clk_en[1]),
    .cfg_req_i(dwe_cfg), .cfg_rsp_o(dwe_cfg_rsp), .evt_o(evt_o[1]),
    .data_req_o(dwe_req), .data_gnt_i(dwe_gnt), .data_rsp_i(dwe_rsp),
    .busy_o(busy_o[1])
  );

  datamover u_dmov (
    .clk_i, .rst_ni, .clk_en_i(clk_en[2]),
    .cfg_req_i(dmov_cfg), .cfg_rsp_o(dmov_cfg_rsp), .evt_o(evt_o[2]),
    .tcdm_req_o(dmov_req), .tcdm_gnt_i(dmov_gnt), .tcdm_rsp_i(dmov_rsp),
    .busy_o(busy_o[2])
  );

  // ---------------- HCI level 1
  hci_static_mux u_l1 (
    .sel_i(hwpe_sel),
    .tpe_req_i(tpe_req), .tpe_gnt_o(tpe_gnt), .tpe_rsp_o(tpe_rsp),
    .dwe_req_i(dwe_req), .dwe_gnt_o(dwe_gnt), .dwe_rsp_o(dwe_rsp),
    .out_req_o(sh_req), .out_gnt_i(sh_gnt_port), .out_rsp_i(sh_rsp)
  );

  // ---------------- HCI level 2
  tcdm_req_t [N_LOG_PORTS-1:0] log_in_req;
  logic      [N_LOG_PORTS-1:0] log_in_gnt;
  tcdm_rsp_t [N_LOG_PORTS-1:0] log_in_rsp;
  bank_req_t [N_BANKS-1:0]     log_bank_req, sh_bank_req;
  logic      [N_BANKS-1:0]     log_bank_gnt, sel_sh;
  logic                        sh_bank_gnt;
  logic [N_BANKS-1:0][31:0]    bank_rdata;

  always_comb begin
    for (int i = 0; i < N_CORES; i++) log_in_req[i] = core_req_i[i];
    log_in_req[PORT_DMOV] = dmov_req;
    log_in_req[PORT_DMA]  = dma_req_i;
  end
  assign core_gnt_o = log_in_gnt[N_CORES-1:0];
  assign dmov_gnt   = log_in_gnt[PORT_DMOV];
  assign dma_gnt_o  = log_in_gnt[PORT_DMA];
  always_comb begin
    for (int i = 0; i < N_CORES; i++) core_rsp_o[i] = log_in_rsp[i];
  end
  assign dmov_rsp  = log_in_rsp[PORT_DMOV];
  assign dma_rsp_o = log_in_rsp[PORT_DMA];

  hci_log_branch u_log (
    .clk_i, .rst_ni,
    .in_req_i(log_in_req), .in_gnt_o(log_in_gnt), .in_rsp_o(log_in_rsp),
    .bank_req_o(log_bank_req), .bank_gnt_i(log_bank_gnt), .bank_rdata_i(bank_rdata)
  );

  hci_shallow_branch u_shallow (
    .clk_i, .rst_ni,
    .hwpe_req_i(sh_req), .hwpe_gnt_o(sh_gnt_port), .hwpe_rsp_o(sh_rsp),
    .bank_req_o(sh_bank_req), .bank_gnt_i(sh_bank_gnt), .bank_rdata_i(bank_rdata)
  );

  // ---------------- HCI level 3
  logic [N_BANKS-1:0] log_bank_want, sh_bank_want;
  always_comb begin
    for (int b = 0; b < N_BANKS; b++) begin
      log_bank_want[b] = log_bank_req[b].req;
      sh_bank_want[b]  = sh_bank_req[b].req;
    end
  end

  hci_bank_mux #(.NB(N_BANKS), .STALL_W(8)) u_l3 (
    .clk_i, .rst_ni,
    .log_req_i(log_bank_want), .sh_req_i(sh_bank_want),
    .prio_shallow_i(prio_shallow), .max_stall_i(max_stall),
    .log_gnt_o(log_bank_gnt), .sh_gnt_o(sh_bank_gnt), .sel_sh_o(sel_sh),
    .collision_o(hci_collision_o)
  );

  // ---------------- TCDM banks
  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    bank_req_t br;
    always_comb begin
      if (sel_sh[b])             br = sh_bank_req[b];
      else if (log_bank_gnt[b])  br = log_bank_req[b];
      else                       br = '0;
    end
    tcdm_bank #(.WORDS(BANK_WORDS)) u_bank (
      .clk_i, .req_i(br.req), .we_i(br.we), .addr_i(br.addr),
      .be_i(br.be), .wdata_i(br.wdata), .rdata_o(bank_rdata[b])
    );
  end

  // ---------------- RVNN M&L extension units
  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    rvnn_ml_unit u_ml (
      .clk_i, .rst_ni,
      .csr_we_i(ml_csr_we_i[c]), .csr_wdata_i(ml_csr_wdata_i[c]), .csr_rdata_o(ml_csr_rdata_o[c]),
      .valid_i(ml_valid_i[c]), .is_ml_i(ml_is_ml_i[c]),
      .rs1_i(ml_rs1_i[c]), .rs2_i(ml_rs2_i[c]), .acc_i(ml_acc_i[c]),
      .act_sel_i(ml_act_sel_i[c]), .wgt_sel_i(ml_wgt_sel_i[c]),
      .lsu_we_i(ml_lsu_we_i[c]), .lsu_idx_i(ml_lsu_idx_i[c]), .lsu_wdata_i(ml_lsu_wdata_i[c]),
      .res_valid_o(ml_res_valid_o[c]), .result_o(ml_result_o[c])
    );
  end

  // the TPE stall indication is only observed in simulation
  logic unused_tpe_stall;
  assign unused_tpe_stall = tpe_stall;
endmodule
