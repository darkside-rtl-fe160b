// DataMover: on-the-fly transposition of tensors of d-bit elements in L1.
//
// A job transposes a stack of DEPTH matrices of ROWS x COLS elements of d
// bits (d = 1, 2, 4, 8, 16 or 32) from row-major at SRC to row-major
// COLS x ROWS at DST; with ROWS = H*W and COLS = C this turns an HWC tensor
// into CHW. The work is done in blocks of E x E elements, E = 32/d: E words
// are read from E consecutive rows; the splitter cuts each word into E
// chunks of d bits and writes chunk j of input word i into row j, column i
// of the shuffle buffer (32 registers of 32 bits, of which E are used);
// then the E buffer rows are written out as the transposed words. Chunk 0 is
// the most significant one, so input words DEADBEEF, 01020304, ABBAABBA,
// 0BADF00D with d = 8 leave as DE01AB0B, AD02BAAD, BE03ABF0, EF04BA0D.
// Reads are pipelined on the 32-bit logarithmic HCI port (one per cycle when
// granted); the E writes follow. ROWS and COLS must be multiples of E and
// SRC/DST word aligned.
// Shuffle buffer size, the splitter/merger structure, the chunk order of the
// example and the 32/d-transaction rhythm follow the paper (Fig. 8); the
// job registers and the read-then-write sequencing are this design's.
// Job registers: 0 SRC, 1 DST, 2 ROWS, 3 COLS, 4 log2(d), 5 DEPTH.
module datamover
  import darkside_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        clk_en_i,     // engine clock enable (idle gating)
  input  periph_req_t cfg_req_i,
  output periph_rsp_t cfg_rsp_o,
  output logic        evt_o,
  output tcdm_req_t   tcdm_req_o,
  input  logic        tcdm_gnt_i,
  input  tcdm_rsp_t   tcdm_rsp_i,
  output logic        busy_o
);
  logic [HWPE_N_JOB_REGS-1:0][31:0] regs;
  logic start, done;

  hwpe_ctrl_regs u_regs (
    .clk_i, .rst_ni, .cfg_req_i, .cfg_rsp_o, .regs_o(regs),
    .start_o(start), .busy_i(busy_o), .done_i(done), .evt_o
  );

  typedef enum logic [1:0] {IDLE, READ, WRITE} state_e;
  state_e state_q;

  logic [2:0]  lg_q;          // log2(d)
  logic [5:0]  e_q;           // E = 32/d
  logic [31:0] src_q, dst_q;
  logic [31:0] rw_q, cw_q;    // words per source row / per destination row
  logic [31:0] depth_q;
  logic [31:0] bi_q, bj_q, dz_q;
  logic [5:0]  iss_q, rcv_q, wr_q;
  logic [31:0][31:0] sbuf_q;   // shuffle buffer
  logic        rd_pend_q;     // a read was granted last cycle

  // address of the word being read / written (word units)
  logic [31:0] plane_w, rd_addr_w, wr_addr_w;
  assign plane_w   = dz_q * rw_q * (e_q * cw_q);      // words per matrix
  assign rd_addr_w = (src_q >> 2) + plane_w + (bi_q * e_q + 32'(iss_q)) * cw_q + bj_q;
  assign wr_addr_w = (dst_q >> 2) + plane_w + (bj_q * e_q + 32'(wr_q)) * rw_q + bi_q;

  always_comb begin
    tcdm_req_o       = '0;
    tcdm_req_o.be    = 4'hf;
    if (state_q == READ && iss_q < e_q) begin
      tcdm_req_o.req  = 1'b1;
      tcdm_req_o.addr = {rd_addr_w[29:0], 2'b00};
    end else if (state_q == WRITE) begin
      tcdm_req_o.req   = 1'b1;
      tcdm_req_o.we    = 1'b1;
      tcdm_req_o.addr  = {wr_addr_w[29:0], 2'b00};
      tcdm_req_o.wdata = sbuf_q[wr_q[4:0]];
    end
    tcdm_req_o.req = tcdm_req_o.req && clk_en_i;
  end

  // splitter: input word rcv_q, chunk j -> row j, column rcv_q
  logic [31:0][31:0] sbuf_d;
  always_comb begin
    sbuf_d = sbuf_q;
    for (int j = 0; j < 32; j++) begin
      for (int b = 0; b < 32; b++) begin
        int unsigned q, col, w, srcb;
        q   = 31 - b;
        col = q >> lg_q;
        w   = q & ((1 << lg_q) - 1);
        srcb = 31 - ((j << lg_q) + w);
        if (j < int'(e_q) && col == int'(rcv_q))
          sbuf_d[j][b] = tcdm_rsp_i.r_data[srcb[4:0]];
      end
    end
  end

  logic last_block;
  assign last_block = (bj_q + 1 == cw_q) && (bi_q + 1 == rw_q) && (dz_q + 1 == depth_q);
  assign done = clk_en_i && state_q == WRITE && tcdm_gnt_i && wr_q + 1 == e_q && last_block;
  assign busy_o = state_q != IDLE;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      {lg_q, e_q, src_q, dst_q, rw_q, cw_q, depth_q} <= '0;
      {bi_q, bj_q, dz_q, iss_q, rcv_q, wr_q} <= '0;
      sbuf_q <= '0;
      rd_pend_q <= 1'b0;
    end else if (clk_en_i) begin
      rd_pend_q <= state_q == READ && tcdm_req_o.req && tcdm_gnt_i;
      case (state_q)
        IDLE: if (start) begin
          src_q   <= regs[0];
          dst_q   <= regs[1];
          lg_q    <= regs[4][2:0];
          e_q     <= 6'(32 >> regs[4][2:0]);
          rw_q    <= regs[2] >> (5 - regs[4][2:0]);   // ROWS / E
          cw_q    <= regs[3] >> (5 - regs[4][2:0]);   // COLS / E
          depth_q <= (regs[5] == 0) ? 32'd1 : regs[5];
          {bi_q, bj_q, dz_q, iss_q, rcv_q, wr_q} <= '0;
          state_q <= READ;
        end
        READ: begin
          if (tcdm_req_o.req && tcdm_gnt_i) iss_q <= iss_q + 1'b1;
          if (tcdm_rsp_i.r_valid && rd_pend_q) begin
            sbuf_q <= sbuf_d;
            rcv_q  <= rcv_q + 1'b1;
            if (rcv_q + 1 == e_q) begin
              state_q <= WRITE;
              wr_q    <= '0;
            end
          end
        end
        WRITE: if (tcdm_gnt_i) begin
          wr_q <= wr_q + 1'b1;
          if (wr_q + 1 == e_q) begin
            iss_q <= '0;
            rcv_q <= '0;
            if (last_block) state_q <= IDLE;
            else begin
              state_q <= READ;
              if (bj_q + 1 == cw_q) begin
                bj_q <= '0;
                if (bi_q + 1 == rw_q) begin
                  bi_q <= '0;
                  dz_q <= dz_q + 1;
                end else bi_q <= bi_q + 1;
              end else bj_q <= bj_q + 1;
            end
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
