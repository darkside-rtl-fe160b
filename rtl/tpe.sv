// Tensor Product Engine (TPE): FP16 matrix multiplication Z = X * W on an
// array of ROWS x COLS fused multiply-add units.
//
// Datapath (the paper's Fig. 6): FMA (r,c) multiplies an X element, held
// steady for a whole 16-cycle loop, by a W element broadcast to every FMA of
// column c, and adds the partial sum coming from its left neighbour. The
// FMAs of a row are cascaded and the right-most one feeds back into the
// left-most one, so a row keeps 16 partial sums in flight (4 FMAs x 4
// pipeline stages) and never stores intermediate results. Column c sees its
// W stream delayed by 4*c cycles, which lines every operand up with the
// partial sum travelling along the row. A Z tile of ROWS x 16 outputs is
// computed in ceil(K/4) loops of 16 cycles; in loop kb, FMA (r,c) holds
// X[r][4kb+c] and column c streams W[4kb+c][0..15]. The "accumulate/0"
// multiplexer feeds zero instead of the feedback in the first loop of a
// tile; after the last loop the right-most FMA outputs are captured
// ("store") into the output buffer.
// Streamer: on the 288-bit HWPE port it loads, per loop, 8 X quadruples (64
// bits each) and 4 W rows of 16 elements (256 bits each) into a
// double-buffered operand store, one loop ahead of the datapath, and writes
// each finished Z tile as 8 row stores of 256 bits with byte enables. When
// operands are late or the output buffer is still busy the whole datapath
// freezes (all pipelines share one enable), so results stay aligned.
// From the paper: 8x4 FMA array, row cascade with feedback, X stationary,
// W broadcast per column, 4-cycle column offsets, accumulate/0 and store
// muxes, results stored only at the end. This design's choices: tile shape
// 8 x 16, load order and double buffering, freeze-on-stall, the register map
// 0 X, 1 W, 2 Z (byte addresses), 3 M, 4 N, 5 K (row-major matrices,
// N and K even), and zero padding of partial tiles.
module tpe
  import darkside_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 4,
  parameter int unsigned PIPE = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        clk_en_i,
  input  periph_req_t cfg_req_i,
  output periph_rsp_t cfg_rsp_o,
  output logic        evt_o,
  output hwpe_req_t   data_req_o,
  input  logic        data_gnt_i,
  input  hwpe_rsp_t   data_rsp_i,
  output logic        busy_o,
  output logic        stall_o      // datapath frozen while a job runs
);
  localparam int unsigned NT   = COLS * PIPE;   // outputs per row in flight (16)
  localparam int unsigned NLD  = ROWS + COLS;   // loads per loop
  localparam int unsigned LW   = $clog2(NLD + 1);
  localparam int unsigned NW   = $clog2(NT);

  logic [HWPE_N_JOB_REGS-1:0][31:0] regs;
  logic start, done;
  hwpe_ctrl_regs u_regs (
    .clk_i, .rst_ni, .cfg_req_i, .cfg_rsp_o, .regs_o(regs),
    .start_o(start), .busy_i(busy_o), .done_i(done), .evt_o
  );

  logic [31:0] xp_q, wp_q, zp_q, m_q, n_q, k_q, kb_n_q, mt_n_q, nt_n_q;
  logic        job_q;

  // ---------------- operand double buffer
  logic [15:0] xbuf_q [2][ROWS][COLS];
  logic [15:0] wbuf_q [2][COLS][NT];
  logic [1:0]  full_q;

  // loader position
  logic        lsel_q, ldone_q;
  logic [LW-1:0] liss_q, lrcv_q;
  logic [31:0] lkb_q, lmt_q, lnt_q;
  logic [LW-1:0] rtag_q;
  logic          rpend_q;

  // feeder position
  logic        csel_q, fdone_q;
  logic [NW-1:0] fn_q;
  logic [31:0] fkb_q, fmt_q, fnt_q;

  // ---------------- output buffer
  logic [15:0] zbuf_q [ROWS][NT];
  logic        zfull_q;
  logic [3:0]  zst_q;                  // stores done
  logic [31:0] zmt_q, znt_q;
  logic [31:0] zmt_next, znt_next, ocnt_mt_q, ocnt_nt_q;

  // ---------------- streamer
  logic want_st, want_ld;
  logic [31:0] st_row, ld_addr, st_addr;
  logic [35:0] st_be;
  assign st_row  = zmt_q * ROWS + 32'(zst_q);
  assign want_st = zfull_q && zst_q < ROWS;
  assign want_ld = job_q && !ldone_q && !full_q[lsel_q] && liss_q < NLD;

  always_comb begin
    if (liss_q < ROWS)   // X[row][4kb .. 4kb+3]
      ld_addr = xp_q + (((lmt_q * ROWS + 32'(liss_q)) * k_q) + lkb_q * COLS) * 2;
    else                 // W[4kb+c][16nt .. 16nt+15]
      ld_addr = wp_q + (((lkb_q * COLS + 32'(liss_q) - ROWS) * n_q) + lnt_q * NT) * 2;
    st_addr = zp_q + ((st_row * n_q) + znt_q * NT) * 2;
    st_be = '0;
    for (int e = 0; e < NT; e++)
      if (znt_q * NT + 32'(e) < n_q) st_be[2*e +: 2] = 2'b11;
  end

  always_comb begin
    data_req_o = '0;
    if (want_st) begin
      data_req_o.req  = st_row < m_q;
      data_req_o.we   = 1'b1;
      data_req_o.addr = st_addr;
      data_req_o.be   = st_be;
      for (int e = 0; e < NT; e++)
        data_req_o.wdata[16*e +: 16] = zbuf_q[zst_q[$clog2(ROWS)-1:0]][e];
    end else if (want_ld) begin
      data_req_o.req  = 1'b1;
      data_req_o.addr = ld_addr;
      data_req_o.be   = '1;
    end
    data_req_o.req = data_req_o.req && clk_en_i;
  end
  logic gnt;
  assign gnt = data_req_o.req && data_gnt_i;

  // ---------------- feeder tokens and column delay lines
  typedef struct packed {
    logic                  first;
    logic [ROWS-1:0][15:0] x;
    logic [15:0]           w;
  } tok_t;
  typedef struct packed {
    logic          valid;
    logic          last;
    logic [NW-1:0] n;
  } tag_t;

  logic feed_ok, adv, inflight, out_ok;
  tok_t feed [COLS];
  tag_t tag_in, tag_out;
  tag_t tag_q [NT];

  assign feed_ok = job_q && !fdone_q && full_q[csel_q];
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      feed[c].first = fkb_q == 0;
      for (int r = 0; r < ROWS; r++) feed[c].x[r] = feed_ok ? xbuf_q[csel_q][r][c] : 16'h0;
      feed[c].w = feed_ok ? wbuf_q[csel_q][c][fn_q] : 16'h0;
    end
    tag_in.valid = feed_ok;
    tag_in.last  = fkb_q + 1 == kb_n_q;
    tag_in.n     = fn_q;
  end

  always_comb begin
    inflight = 1'b0;
    for (int i = 0; i < NT; i++) inflight |= tag_q[i].valid;
  end
  assign tag_out = tag_q[NT-1];
  assign out_ok  = !(tag_out.valid && tag_out.last && zfull_q);
  assign adv     = clk_en_i && out_ok && (feed_ok || (fdone_q && inflight));
  assign stall_o = job_q && !adv;

  // ---------------- FMA array
  logic [15:0] fma_out [ROWS][COLS];
  tok_t col_tok [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    if (c == 0) begin : g_nodelay
      assign col_tok[c] = feed[c];
    end else begin : g_delay
      tok_t dl_q [PIPE*c];
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          for (int i = 0; i < PIPE*c; i++) dl_q[i] <= '0;
        end else if (adv) begin
          dl_q[0] <= feed[c];
          for (int i = 1; i < PIPE*c; i++) dl_q[i] <= dl_q[i-1];
        end
      end
      assign col_tok[c] = dl_q[PIPE*c-1];
    end
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      logic [15:0] acc_in;
      if (c == 0) begin : g_fb
        // accumulate / 0 multiplexer closing the row loop
        assign acc_in = col_tok[0].first ? 16'h0000 : fma_out[r][COLS-1];
      end else begin : g_casc
        assign acc_in = fma_out[r][c-1];
      end
      fma_fp16 #(.PIPE(PIPE)) u_fma (
        .clk_i, .rst_ni, .en_i(adv),
        .a_i(col_tok[c].x[r]), .b_i(col_tok[c].w), .c_i(acc_in),
        .z_o(fma_out[r][c])
      );
    end
  end

  // ---------------- sequencing
  logic capture;
  assign capture = adv && tag_out.valid && tag_out.last;
  assign busy_o  = job_q;
  assign done    = job_q && fdone_q && ldone_q && !inflight && !zfull_q && clk_en_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      {xp_q, wp_q, zp_q, m_q, n_q, k_q, kb_n_q, mt_n_q, nt_n_q} <= '0;
      job_q <= 1'b0;
      full_q <= '0;
      {lsel_q, ldone_q, liss_q, lrcv_q, lkb_q, lmt_q, lnt_q, rtag_q, rpend_q} <= '0;
      {csel_q, fdone_q, fn_q, fkb_q, fmt_q, fnt_q} <= '0;
      {zfull_q, zst_q, zmt_q, znt_q} <= '0;
      for (int i = 0; i < NT; i++) tag_q[i] <= '0;
      for (int b = 0; b < 2; b++) begin
        for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) xbuf_q[b][r][c] <= '0;
        for (int c = 0; c < COLS; c++) for (int e = 0; e < NT; e++) wbuf_q[b][c][e] <= '0;
      end
      for (int r = 0; r < ROWS; r++) for (int e = 0; e < NT; e++) zbuf_q[r][e] <= '0;
    end else if (clk_en_i) begin
      // job start
      if (start && !job_q) begin
        xp_q <= regs[0]; wp_q <= regs[1]; zp_q <= regs[2];
        m_q <= regs[3]; n_q <= regs[4]; k_q <= regs[5];
        kb_n_q <= (regs[5] + COLS - 1) / COLS;
        mt_n_q <= (regs[3] + ROWS - 1) / ROWS;
        nt_n_q <= (regs[4] + NT - 1) / NT;
        job_q <= 1'b1;
        full_q <= '0;
        {lsel_q, ldone_q, liss_q, lrcv_q, lkb_q, lmt_q, lnt_q, rpend_q} <= '0;
        {csel_q, fdone_q, fn_q, fkb_q, fmt_q, fnt_q} <= '0;
      end
      if (done) job_q <= 1'b0;

      // -------- loads
      rpend_q <= 1'b0;
      if (gnt && !want_st) begin
        liss_q  <= liss_q + 1'b1;
        rtag_q  <= liss_q;
        rpend_q <= 1'b1;
      end
      if (rpend_q && data_rsp_i.r_valid) begin
        if (rtag_q < ROWS) begin
          for (int c = 0; c < COLS; c++)
            xbuf_q[lsel_q][rtag_q[$clog2(ROWS)-1:0]][c] <=
              (lmt_q * ROWS + 32'(rtag_q) < m_q && lkb_q * COLS + 32'(c) < k_q)
                ? data_rsp_i.r_data[16*c +: 16] : 16'h0;
        end else begin
          for (int e = 0; e < NT; e++)
            wbuf_q[lsel_q][rtag_q - ROWS][e] <=
              (lkb_q * COLS + 32'(rtag_q) - ROWS < k_q && lnt_q * NT + 32'(e) < n_q)
                ? data_rsp_i.r_data[16*e +: 16] : 16'h0;
        end
        lrcv_q <= lrcv_q + 1'b1;
        if (lrcv_q + 1 == NLD) begin
          full_q[lsel_q] <= 1'b1;
          lsel_q <= ~lsel_q;
          liss_q <= '0;
          lrcv_q <= '0;
          if (lkb_q + 1 == kb_n_q) begin
            lkb_q <= '0;
            if (lnt_q + 1 == nt_n_q) begin
              lnt_q <= '0;
              if (lmt_q + 1 == mt_n_q) ldone_q <= 1'b1;
              else lmt_q <= lmt_q + 1;
            end else lnt_q <= lnt_q + 1;
          end else lkb_q <= lkb_q + 1;
        end
      end

      // -------- stores
      if (gnt && want_st) zst_q <= zst_q + 1'b1;
      else if (want_st && st_row >= m_q) zst_q <= zst_q + 1'b1;   // padded row
      if (zfull_q && zst_q == ROWS) begin
        zfull_q <= 1'b0;
        zst_q   <= '0;
      end

      // -------- datapath advance
      if (adv) begin
        tag_q[0] <= tag_in;
        for (int i = 1; i < NT; i++) tag_q[i] <= tag_q[i-1];
        if (feed_ok) begin
          fn_q <= fn_q + 1'b1;
          if (fn_q == NW'(NT - 1)) begin
            full_q[csel_q] <= 1'b0;
            csel_q <= ~csel_q;
            if (fkb_q + 1 == kb_n_q) begin
              fkb_q <= '0;
              if (fnt_q + 1 == nt_n_q) begin
                fnt_q <= '0;
                if (fmt_q + 1 == mt_n_q) fdone_q <= 1'b1;
                else fmt_q <= fmt_q + 1;
              end else fnt_q <= fnt_q + 1;
            end else fkb_q <= fkb_q + 1;
          end
        end
        if (capture) begin
          for (int r = 0; r < ROWS; r++) zbuf_q[r][tag_out.n] <= fma_out[r][COLS-1];
          if (tag_out.n == NW'(NT - 1)) begin
            zfull_q <= 1'b1;
            zst_q   <= '0;
            // tile that just finished: the feeder is at most one tile ahead
            zmt_q <= zmt_next;
            znt_q <= znt_next;
          end
        end
      end
    end
  end

  // tile coordinates of the results leaving the array, counted on capture
  assign zmt_next = ocnt_mt_q;
  assign znt_next = ocnt_nt_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ocnt_mt_q <= '0; ocnt_nt_q <= '0;
    end else if (clk_en_i) begin
      if (start && !job_q) begin
        ocnt_mt_q <= '0; ocnt_nt_q <= '0;
      end else if (capture && tag_out.n == NW'(NT - 1)) begin
        if (ocnt_nt_q + 1 == nt_n_q) begin
          ocnt_nt_q <= '0;
          ocnt_mt_q <= ocnt_mt_q + 1;
        end else ocnt_nt_q <= ocnt_nt_q + 1;
      end
    end
  end
endmodule
