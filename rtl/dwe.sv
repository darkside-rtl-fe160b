// Depth-Wise Convolution Engine (DWE): 3x3 depth-wise convolution of 8-bit
// signed HWC tensors, 16 channels at a time, with on-the-fly requantisation.
//
// Data flow (weight stationary): the 16 3x3 filters of a channel group are
// loaded into the weights buffer (4 wide loads of 36 bytes, 4 channels x 9
// taps each). For each output column the window buffer (4 rows x 3 pixels x
// 16 channels) is filled with input rows; one output pixel (16 channels) is
// computed in a 4-cycle loop by 36 MAC units (9 taps x 4 channels per
// cycle) into 16 32-bit accumulators. In the last cycle the 16 results go
// through ReLU (optional), arithmetic right shift and clipping to int8 into
// the output buffer, which is written back as one 128-bit store. While a
// pixel is computed, the streamer fills the fourth window row (3 pixel
// loads) and writes the previous output (1 store): 4 accesses per 4-cycle
// loop, so the datapath can stay busy. The window then slides down by one
// row.
// The buffer sizes, the 36 MACs, the 4-cycle loop, the 16x32-bit
// accumulators, ReLU + shift & clip and the vertical slide follow the paper
// (Sec. II-D, Fig. 7). This design's choices: stride 1, no padding (output
// (H-2) x (W-2)), weights laid out per channel group as [channel][ky][kx],
// a column-by-column scan, and the register map:
// 0 IN, 1 WEIGHTS, 2 OUT, 3 H, 4 W, 5 C (multiple of 16), 6 shift,
// 7 bit0 ReLU enable. IN/OUT/WEIGHTS must be word aligned.
module dwe
  import darkside_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        clk_en_i,
  input  periph_req_t cfg_req_i,
  output periph_rsp_t cfg_rsp_o,
  output logic        evt_o,
  output hwpe_req_t   data_req_o,
  input  logic        data_gnt_i,
  input  hwpe_rsp_t   data_rsp_i,
  output logic        busy_o
);
  localparam int unsigned CH = 16;

  logic [HWPE_N_JOB_REGS-1:0][31:0] regs;
  logic start, done;
  hwpe_ctrl_regs u_regs (
    .clk_i, .rst_ni, .cfg_req_i, .cfg_rsp_o, .regs_o(regs),
    .start_o(start), .busy_i(busy_o), .done_i(done), .evt_o
  );

  // job
  logic [31:0] in_q, w_q, out_q, h_q, wd_q, c_q, ho_q, wo_q, ngrp_q;
  logic [4:0]  shift_q;
  logic        relu_q;

  // buffers
  logic signed [7:0]  wbuf_q [CH][9];
  logic signed [7:0]  win_q  [4][3][CH];
  logic signed [31:0] acc_q  [CH];
  logic [CH-1:0][7:0] obuf_q;
  logic               obuf_full_q;
  logic [31:0]        obuf_addr_q;

  // compute position and loader position
  logic        run_q;
  logic [31:0] cg_q, cx_q, cy_q;
  logic [1:0]  ph_q;
  logic [2:0]  wiss_q, wrcv_q;              // weight loads issued/received
  logic [31:0] lrow_q, rrow_q;              // pixel rows issued / received
  logic [1:0]  lpx_q, rpx_q;                // pixel in row issued / received

  typedef enum logic [1:0] {R_NONE, R_WGT, R_PIX} rtype_e;
  rtype_e rtype_q;

  // ------------------------------------------------------------------
  // streamer: one wide access per cycle, store > weights > pixels
  logic want_st, want_w, want_px;
  assign want_st = obuf_full_q;
  assign want_w  = run_q && wiss_q < 4;
  assign want_px = run_q && lrow_q < h_q && lrow_q < cy_q + 4;

  logic [31:0] px_addr;
  assign px_addr = in_q + ((lrow_q * wd_q + cx_q + 32'(lpx_q)) * c_q + cg_q * CH);

  always_comb begin
    data_req_o = '0;
    if (want_st) begin
      data_req_o.req   = 1'b1;
      data_req_o.we    = 1'b1;
      data_req_o.addr  = obuf_addr_q;
      data_req_o.be    = 36'h0_0000_ffff;
      data_req_o.wdata = HWPE_DW'(obuf_q);
    end else if (want_w) begin
      data_req_o.req  = 1'b1;
      data_req_o.addr = w_q + cg_q * 144 + 32'(wiss_q) * 36;
      data_req_o.be   = '1;
    end else if (want_px) begin
      data_req_o.req  = 1'b1;
      data_req_o.addr = px_addr;
      data_req_o.be   = 36'h0_0000_ffff;
    end
    data_req_o.req = data_req_o.req && clk_en_i;
  end

  logic gnt;
  assign gnt = data_req_o.req && data_gnt_i;

  // ------------------------------------------------------------------
  // datapath: 36 MACs on channels 4*ph .. 4*ph+3
  logic signed [31:0] sum4 [4];
  always_comb begin
    for (int k = 0; k < 4; k++) begin
      int unsigned c;
      c = 4 * int'(ph_q) + k;
      sum4[k] = '0;
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++)
          sum4[k] += 32'(win_q[2'(cy_q + 32'(ky))][kx][c] * wbuf_q[c][3*ky + kx]);
    end
  end

  // requantisation of all 16 channels in the last loop cycle
  logic [CH-1:0][7:0] rq;
  always_comb begin
    for (int c = 0; c < CH; c++) begin
      logic signed [31:0] v;
      v = (c >= 12) ? sum4[c - 12] : acc_q[c];
      if (relu_q && v < 0) v = 0;
      v = v >>> shift_q;
      if (v > 127)       rq[c] = 8'd127;
      else if (v < -128) rq[c] = 8'h80;
      else               rq[c] = v[7:0];
    end
  end

  logic rows_ready, can_finish, fire;
  assign rows_ready = run_q && wrcv_q == 4 && rrow_q >= cy_q + 3;
  assign can_finish = !obuf_full_q || (want_st && gnt);
  assign fire       = rows_ready && (ph_q != 2'd3 || can_finish);

  logic last_pix;
  assign last_pix = cy_q + 1 == ho_q && cx_q + 1 == wo_q && cg_q + 1 == ngrp_q;
  assign done     = clk_en_i && !run_q && busy_o && obuf_full_q && gnt && want_st;
  logic finishing_q;
  assign busy_o   = run_q || obuf_full_q || finishing_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      run_q <= 1'b0; finishing_q <= 1'b0;
      {in_q, w_q, out_q, h_q, wd_q, c_q, ho_q, wo_q, ngrp_q} <= '0;
      shift_q <= '0; relu_q <= 1'b0;
      {cg_q, cx_q, cy_q, lrow_q, rrow_q} <= '0;
      {ph_q, wiss_q, wrcv_q, lpx_q, rpx_q} <= '0;
      obuf_full_q <= 1'b0; obuf_addr_q <= '0; obuf_q <= '0;
      rtype_q <= R_NONE;
      for (int c = 0; c < CH; c++) begin
        acc_q[c] <= '0;
        for (int t = 0; t < 9; t++) wbuf_q[c][t] <= '0;
        for (int r = 0; r < 4; r++)
          for (int x = 0; x < 3; x++) win_q[r][x][c] <= '0;
      end
    end else if (clk_en_i) begin
      if (done) finishing_q <= 1'b0;
      // ---- job start
      if (start && !busy_o) begin
        in_q <= regs[0]; w_q <= regs[1]; out_q <= regs[2];
        h_q <= regs[3]; wd_q <= regs[4]; c_q <= regs[5];
        ho_q <= regs[3] - 2; wo_q <= regs[4] - 2; ngrp_q <= regs[5] >> 4;
        shift_q <= regs[6][4:0]; relu_q <= regs[7][0];
        {cg_q, cx_q, cy_q, lrow_q, rrow_q} <= '0;
        {ph_q, wiss_q, wrcv_q, lpx_q, rpx_q} <= '0;
        run_q <= 1'b1; finishing_q <= 1'b1;
      end
      // ---- streamer bookkeeping
      rtype_q <= R_NONE;
      if (gnt) begin
        if (want_st) obuf_full_q <= 1'b0;
        else if (want_w) begin
          wiss_q  <= wiss_q + 1'b1;
          rtype_q <= R_WGT;
        end else begin
          rtype_q <= R_PIX;
          if (lpx_q == 2) begin lpx_q <= '0; lrow_q <= lrow_q + 1; end
          else lpx_q <= lpx_q + 1'b1;
        end
      end
      if (data_rsp_i.r_valid && rtype_q == R_WGT) begin
        for (int k = 0; k < 36; k++)
          wbuf_q[4*wrcv_q + 3'(k / 9)][k % 9] <= data_rsp_i.r_data[8*k +: 8];
        wrcv_q <= wrcv_q + 1'b1;
      end
      if (data_rsp_i.r_valid && rtype_q == R_PIX) begin
        for (int c = 0; c < CH; c++)
          win_q[rrow_q[1:0]][rpx_q][c] <= data_rsp_i.r_data[8*c +: 8];
        if (rpx_q == 2) begin rpx_q <= '0; rrow_q <= rrow_q + 1; end
        else rpx_q <= rpx_q + 1'b1;
      end
      // ---- compute loop
      if (fire) begin
        for (int k = 0; k < 4; k++) acc_q[4*ph_q + 2'(k)] <= sum4[k];
        ph_q <= ph_q + 1'b1;
        if (ph_q == 2'd3) begin
          obuf_q      <= rq;
          obuf_full_q <= 1'b1;
          obuf_addr_q <= out_q + ((cy_q * wo_q + cx_q) * c_q + cg_q * CH);
          if (cy_q + 1 == ho_q) begin
            cy_q <= '0; lrow_q <= '0; rrow_q <= '0;
            if (cx_q + 1 == wo_q) begin
              cx_q <= '0;
              cg_q <= cg_q + 1;
              wiss_q <= '0; wrcv_q <= '0;
            end else cx_q <= cx_q + 1;
          end else cy_q <= cy_q + 1;
          if (last_pix) run_q <= 1'b0;
        end
      end
    end
  end
endmodule
