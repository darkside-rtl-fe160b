// IEEE 754 binary16 fused multiply-add, z = a * b + c, with a fixed latency.
//
// The product and the addend are placed exactly on one 84-bit fixed-point
// grid (LSB weight 2^-50), added, normalised and rounded once
// (round-to-nearest-even), so the result is a true fused operation.
// Subnormal inputs are read as zero and results below the normal range are
// flushed to zero; overflow gives infinity; NaN inputs, inf*0 and inf-inf
// give the quiet NaN 0x7E00.
// Timing: the arithmetic is one combinational block followed by PIPE
// register stages that advance when en_i is high, so z_o appears PIPE
// enabled cycles after the operands (a synthesis flow is expected to retime
// the registers into the logic). The paper gives three internal pipeline
// registers per FMA plus the register drawn at each FMA output in the TPE
// figure, 4 stages in all; the flushing of subnormals is this design's
// choice (the paper does not discuss it).
module fma_fp16 #(
  parameter int unsigned PIPE = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic [15:0] a_i,
  input  logic [15:0] b_i,
  input  logic [15:0] c_i,
  output logic [15:0] z_o
);
  localparam int unsigned SW = 84;

  logic [15:0] z_comb;

  always_comb begin
    logic        sa, sb, sc, sp;
    logic [4:0]  ea, eb, ec;
    logic [10:0] ma, mb, mc;
    logic        za, zb, zc, ia, ib, ic, na, nb, nc;
    logic [21:0] pm;
    logic signed [SW-1:0] p, q, s;
    logic [SW-1:0] mag;
    int          lead;
    int          e;
    logic [10:0] man;
    logic        g, st;
    logic [11:0] rnd;

    sa = a_i[15]; ea = a_i[14:10];
    sb = b_i[15]; eb = b_i[14:10];
    sc = c_i[15]; ec = c_i[14:10];
    za = ea == 0; zb = eb == 0; zc = ec == 0;
    ia = ea == 5'h1f && a_i[9:0] == 0; na = ea == 5'h1f && a_i[9:0] != 0;
    ib = eb == 5'h1f && b_i[9:0] == 0; nb = eb == 5'h1f && b_i[9:0] != 0;
    ic = ec == 5'h1f && c_i[9:0] == 0; nc = ec == 5'h1f && c_i[9:0] != 0;
    ma = za ? 11'd0 : {1'b1, a_i[9:0]};
    mb = zb ? 11'd0 : {1'b1, b_i[9:0]};
    mc = zc ? 11'd0 : {1'b1, c_i[9:0]};
    sp = sa ^ sb;
    pm = ma * mb;
    // value(p) = pm * 2^(ea+eb-50) ; value(q) = mc * 2^(ec-25)
    p = SW'(pm) << (7'(ea) + 7'(eb));
    q = SW'(mc) << (7'(ec) + 7'd25);
    s = (sp ? -p : p) + (sc ? -q : q);
    mag = s[SW-1] ? -s : s;

    lead = 0;
    for (int i = 0; i < SW; i++) if (mag[i]) lead = i;

    // mantissa = bits [lead : lead-10], guard = bit lead-11, sticky below
    man = '0; g = 1'b0; st = 1'b0;
    for (int k = 0; k <= 10; k++)
      if (lead - k >= 0) man[10 - k] = mag[lead - k];
    if (lead - 11 >= 0) g = mag[lead - 11];
    for (int i = 0; i < SW; i++) if (i < lead - 11 && mag[i]) st = 1'b1;
    rnd = {1'b0, man} + 12'(g && (st || man[0]));
    e = lead - 50 + 15;
    if (rnd[11]) begin
      e = e + 1;
      rnd = rnd >> 1;
    end

    if (na || nb || nc || ((ia || ib) && (za || zb)) ||
        ((ia || ib) && ic && (sp != sc)))
      z_comb = 16'h7e00;
    else if (ia || ib)
      z_comb = {sp, 5'h1f, 10'h0};
    else if (ic)
      z_comb = {sc, 5'h1f, 10'h0};
    else if (mag == 0)
      z_comb = (sp && sc && (za || zb || ma == 0)) ? 16'h8000 : 16'h0000;
    else if (e >= 31)
      z_comb = {s[SW-1], 5'h1f, 10'h0};
    else if (e <= 0)
      z_comb = {s[SW-1], 15'h0};
    else
      z_comb = {s[SW-1], 5'(e), rnd[9:0]};
  end

  logic [15:0] pipe_q [PIPE];
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < PIPE; i++) pipe_q[i] <= '0;
    end else if (en_i) begin
      pipe_q[0] <= z_comb;
      for (int i = 1; i < PIPE; i++) pipe_q[i] <= pipe_q[i-1];
    end
  end
  assign z_o = pipe_q[PIPE-1];
endmodule
