// Memory-mapped control port shared by the three HWPE accelerators.
//
// The cores program a job through the peripheral port: job registers at
// 0x08 + 4*i, then a write to TRIGGER (0x00) starts the job (start_o pulses
// for one cycle, ignored while busy). STATUS (0x04) reads 1 while the engine
// is busy. When the engine signals done_i, evt_o pulses for one cycle: this
// is the event the cores can sleep on (non-blocking, event-based execution as
// in the paper). Accesses are always granted; read data returns with r_valid
// one cycle later. The register map is this design's choice: the paper only
// says the HWPEs are programmed through memory-mapped registers.
module hwpe_ctrl_regs
  import darkside_pkg::*;
#(
  parameter int unsigned N_REGS = darkside_pkg::HWPE_N_JOB_REGS
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  periph_req_t             cfg_req_i,
  output periph_rsp_t             cfg_rsp_o,
  output logic [N_REGS-1:0][31:0] regs_o,
  output logic                    start_o,
  input  logic                    busy_i,
  input  logic                    done_i,
  output logic                    evt_o
);
  localparam int unsigned IW = $clog2(N_REGS);
  logic [IW-1:0] ridx;
  logic          is_job;
  assign ridx   = IW'((cfg_req_i.addr - HWPE_REG_JOB0) >> 2);
  assign is_job = cfg_req_i.addr >= HWPE_REG_JOB0 &&
                  cfg_req_i.addr < HWPE_REG_JOB0 + 16'(4 * N_REGS);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      regs_o    <= '0;
      start_o   <= 1'b0;
      evt_o     <= 1'b0;
      cfg_rsp_o <= '0;
    end else begin
      start_o <= cfg_req_i.req && cfg_req_i.we &&
                 cfg_req_i.addr == HWPE_REG_TRIGGER && !busy_i;
      evt_o   <= done_i;
      cfg_rsp_o.r_valid <= cfg_req_i.req;
      if (cfg_req_i.req && cfg_req_i.we && is_job && !busy_i)
        regs_o[ridx] <= cfg_req_i.wdata;
      if (cfg_req_i.req && !cfg_req_i.we)
        cfg_rsp_o.r_data <= (cfg_req_i.addr == HWPE_REG_STATUS) ? {31'b0, busy_i} :
                            is_job ? regs_o[ridx] : 32'h0;
    end
  end
endmodule
