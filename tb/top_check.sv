// top_check -- end-to-end harness around flims_top, used by tb_flims_top.
//
// Writes two descending lists (random keys in 1..KEYMAX, payload {source,
// index} below the key when KEY_W < DATA_W) row by row into the A and B
// queues, followed by three rows of zero sentinels, reads merged rows from
// queue O and compares the first NA+NB elements with a two-pointer reference
// merge (ties to A): keys in order always, elements exactly for the stable
// variant or full-width keys, otherwise as a permutation.  With ASCENDING=1
// the lists, the reference and the expected output are ascending instead and
// the sentinels carry the largest key.  With STALL=1 the
// writers pause and the reader drops o_rd_ready at random.
//
// It also counts how often each mechanism of the design occurred:
//   ev[0] selector firings           ev[1] firings mixing A and B
//   ev[2] stalls for missing heads   ev[3] output backpressure cycles
//   ev[4] row writes refused (full)  ev[5] equal keys met by a MAX unit
//   ev[6] A-row fetches (FLiMSj)     ev[7] B-row fetches (FLiMSj)
module top_check
  import flims_pkg::*;
#(
  parameter int unsigned W       = 4,
  parameter int unsigned DATA_W  = 64,
  parameter int unsigned KEY_W   = DATA_W,
  parameter variant_e    VARIANT = FLIMS_BASIC,
  parameter bit          ROW_DEQ = 1'b0,
  parameter bit          ASCENDING = 1'b0,
  parameter int unsigned NA      = 100,
  parameter int unsigned NB      = 100,
  parameter int unsigned KEYMAX  = 1000,
  parameter bit          STALL   = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   ev [8],
  output bit   done
);
  localparam int unsigned NT  = NA + NB;
  localparam int unsigned PLW = DATA_W - KEY_W;
  localparam int unsigned RA  = (NA + W - 1) / W + 3;
  localparam int unsigned RB  = (NB + W - 1) / W + 3;
  typedef logic [DATA_W-1:0] elem_t;

  elem_t la [RA*W];
  elem_t lb [RB*W];
  elem_t ref_q [$];
  elem_t got_q [$];
  int    ra_i, rb_i;

  logic  a_wr_valid, a_wr_ready, b_wr_valid, b_wr_ready, o_rd_valid, o_rd_ready;
  elem_t a_wr_data [W], b_wr_data [W], o_rd_data [W];
  logic  a_gap, b_gap;

  function automatic logic [KEY_W-1:0] key(elem_t e);
    return e[DATA_W-1 -: KEY_W];
  endfunction

  function automatic elem_t mk(int unsigned k, bit src, int unsigned idx);
    elem_t e;
    e = elem_t'(k) << PLW;
    if (PLW > 1) e = e | elem_t'(src) << (PLW - 1) | (elem_t'(idx) & elem_t'((1 << (PLW - 1)) - 1));
    return e;
  endfunction

  initial begin
    automatic int unsigned ka [NA];
    automatic int unsigned kb [NB];
    int ia, ib;
    foreach (ka[k]) ka[k] = 1 + ($urandom % KEYMAX);
    foreach (kb[k]) kb[k] = 1 + ($urandom % KEYMAX);
    if (ASCENDING) begin ka.sort(); kb.sort(); end
    else begin ka.rsort(); kb.rsort(); end
    foreach (la[k]) la[k] = (k < NA) ? mk(ka[k], 1'b1, k) : (ASCENDING ? '1 : '0);
    foreach (lb[k]) lb[k] = (k < NB) ? mk(kb[k], 1'b0, k) : (ASCENDING ? '1 : '0);
    ia = 0; ib = 0;
    while (ia < NA || ib < NB) begin
      if (ib >= NB || (ia < NA && (ASCENDING ? key(la[ia]) <= key(lb[ib]) : key(la[ia]) >= key(lb[ib])))) begin ref_q.push_back(la[ia]); ia++; end
      else begin ref_q.push_back(lb[ib]); ib++; end
    end
    checks = 0; failures = 0; done = 0;
    foreach (ev[k]) ev[k] = 0;
  end

  flims_top #(.W(W), .DATA_W(DATA_W), .KEY_W(KEY_W), .VARIANT(VARIANT), .ROW_DEQ(ROW_DEQ), .ASCENDING(ASCENDING)) u_dut (
    .clk(clk), .rst_n(rst_n),
    .a_wr_valid(a_wr_valid), .a_wr_ready(a_wr_ready), .a_wr_data(a_wr_data),
    .b_wr_valid(b_wr_valid), .b_wr_ready(b_wr_ready), .b_wr_data(b_wr_data),
    .o_rd_valid(o_rd_valid), .o_rd_ready(o_rd_ready), .o_rd_data(o_rd_data));

  assign a_wr_valid = rst_n && (ra_i < RA) && !a_gap;
  assign b_wr_valid = rst_n && (rb_i < RB) && !b_gap;
  always_comb begin
    for (int j = 0; j < W; j++) begin
      a_wr_data[j] = la[(ra_i < RA ? ra_i : 0) * W + j];
      b_wr_data[j] = lb[(rb_i < RB ? rb_i : 0) * W + j];
    end
  end

  // ----------------------------------------------------------- event probes
  logic          fire, m_ready;
  logic [W-1:0]  took_a, tie;
  if (ROW_DEQ) begin : g_pj
    assign fire    = u_dut.g_flimsj.u_merger.fire;
    assign m_ready = u_dut.g_flimsj.u_merger.out_ready;
    for (genvar i = 0; i < W; i++) begin : g_u
      assign took_a[i] = !u_dut.g_flimsj.u_merger.g_max[i].u_max.dir;
      assign tie[i]    = u_dut.g_flimsj.u_merger.g_max[i].u_max.a_side ==
                         u_dut.g_flimsj.u_merger.g_max[i].u_max.b_side;
    end
  end else begin : g_pf
    assign fire    = u_dut.g_flims.u_merger.fire;
    assign m_ready = u_dut.g_flims.u_merger.out_ready;
    for (genvar i = 0; i < W; i++) begin : g_u
      assign took_a[i] = u_dut.g_flims.u_merger.g_max[i].u_max.take_a;
      assign tie[i]    = u_dut.g_flims.u_merger.g_max[i].u_max.ka ==
                         u_dut.g_flims.u_merger.g_max[i].u_max.kb;
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      ra_i = 0; rb_i = 0;
      a_gap <= 0; b_gap <= 0; o_rd_ready <= 1;
    end else if (!done) begin
      if (a_wr_valid && a_wr_ready) ra_i++;
      if (b_wr_valid && b_wr_ready) rb_i++;
      if ((a_wr_valid && !a_wr_ready) || (b_wr_valid && !b_wr_ready)) ev[4]++;
      if (o_rd_valid && o_rd_ready) for (int j = 0; j < W; j++) got_q.push_back(o_rd_data[j]);
      if (o_rd_valid && !o_rd_ready) ev[3]++;
      if (fire) begin
        ev[0]++;
        if (took_a != '0 && took_a != '1) ev[1]++;
        if ((tie != '0) && got_q.size() + 4 * W < NT) ev[5]++;
        if (ROW_DEQ) begin
          if (took_a[0]) ev[6]++; else ev[7]++;
        end
      end else if (m_ready) ev[2]++;
      if (STALL) begin
        a_gap <= ($urandom % 4) == 0;
        b_gap <= ($urandom % 4) == 0;
        o_rd_ready <= ($urandom % 4) != 0;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && !done && got_q.size() >= NT) begin
      elem_t g [$];
      elem_t r [$];
      int bad;
      bad = 0;
      for (int k = 0; k < NT; k++) if (key(got_q[k]) != key(ref_q[k])) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("top_check: %0d keys out of order", bad); end
      for (int k = 0; k < NT; k++) begin g.push_back(got_q[k]); r.push_back(ref_q[k]); end
      if (VARIANT != FLIMS_STABLE && KEY_W != DATA_W) begin g.sort(); r.sort(); end
      bad = 0;
      for (int k = 0; k < NT; k++) if (g[k] != r[k]) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("top_check: %0d elements differ", bad); end
      done <= 1'b1;
    end
  end
endmodule
