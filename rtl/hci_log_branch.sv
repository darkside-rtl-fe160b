// Logarithmic branch of the Heterogeneous Cluster Interconnect (HCI).
//
// Every 32-bit initiator (the 8 cores, the DataMover and the DMA) can reach
// every word-interleaved TCDM bank in one cycle. Bank = byte address [6:2].
// When several initiators address the same bank, one is chosen by a per-bank
// round-robin pointer; the chosen request is offered to the level-3 bank
// multiplexer, and the initiator's grant is high only if that multiplexer
// also grants the logarithmic side for the bank (it may lose to the shallow
// branch). Read data returns one cycle after the grant, with r_valid.
// Round-robin per bank and the all-to-all one-cycle routing follow the paper;
// the pointer update rule (move past the last winner when granted) is this
// design's choice.
module hci_log_branch
  import darkside_pkg::*;
#(
  parameter int unsigned N_PORTS = darkside_pkg::N_LOG_PORTS,
  parameter int unsigned NB      = darkside_pkg::N_BANKS
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  tcdm_req_t [N_PORTS-1:0] in_req_i,
  output logic      [N_PORTS-1:0] in_gnt_o,
  output tcdm_rsp_t [N_PORTS-1:0] in_rsp_o,
  output bank_req_t [NB-1:0]      bank_req_o,
  input  logic      [NB-1:0]      bank_gnt_i,   // level 3 grants the log side
  input  logic [NB-1:0][31:0]     bank_rdata_i
);
  localparam int unsigned PW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1;
  localparam int unsigned BW = $clog2(NB);

  logic [NB-1:0][PW-1:0] rr_q;         // highest-priority port per bank
  logic [NB-1:0][PW-1:0] win;
  logic [NB-1:0]         any;
  logic [N_PORTS-1:0][BW-1:0] bank_of;

  always_comb begin
    for (int p = 0; p < N_PORTS; p++) bank_of[p] = in_req_i[p].addr[2 +: BW];
  end

  // per-bank round-robin choice
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      win[b] = '0;
      any[b] = 1'b0;
      for (int k = N_PORTS - 1; k >= 0; k--) begin
        int unsigned p;
        p = (int'(rr_q[b]) + k) % N_PORTS;
        if (in_req_i[p].req && bank_of[p] == BW'(b)) begin
          win[b] = PW'(p);
          any[b] = 1'b1;
        end
      end
      bank_req_o[b].req   = any[b];
      bank_req_o[b].we    = in_req_i[win[b]].we;
      bank_req_o[b].addr  = in_req_i[win[b]].addr[2 + BW +: BANK_AW];
      bank_req_o[b].be    = in_req_i[win[b]].be;
      bank_req_o[b].wdata = in_req_i[win[b]].wdata;
    end
  end

  always_comb begin
    for (int p = 0; p < N_PORTS; p++)
      in_gnt_o[p] = in_req_i[p].req && any[bank_of[p]] &&
                    win[bank_of[p]] == PW'(p) && bank_gnt_i[bank_of[p]];
  end

  // response: remember which bank each granted port used
  logic [N_PORTS-1:0]         rv_q;
  logic [N_PORTS-1:0][BW-1:0] rbank_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rv_q    <= '0;
      rbank_q <= '0;
      rr_q    <= '0;
    end else begin
      rv_q <= in_gnt_o;
      for (int p = 0; p < N_PORTS; p++)
        if (in_gnt_o[p]) rbank_q[p] <= bank_of[p];
      for (int b = 0; b < NB; b++)
        if (any[b] && bank_gnt_i[b])
          rr_q[b] <= (int'(win[b]) == N_PORTS - 1) ? '0 : PW'(win[b] + 1'b1);
    end
  end

  always_comb begin
    for (int p = 0; p < N_PORTS; p++) begin
      in_rsp_o[p].r_valid = rv_q[p];
      in_rsp_o[p].r_data  = bank_rdata_i[rbank_q[p]];
    end
  end
endmodule
