// merger_check -- self-checking harness around one merger (flims_merger, or
// flimsj_merger when ROW_DEQ=1), used by the merger testbenches.
//
// It builds two descending lists of NA and NB elements (random keys in
// 1..KEYMAX, or the w=4 example lists A/B from the FLiMS worked example when
// DIRECTED=1), stores them bank by bank (element k in bank k mod W) and
// appends 3W zero sentinels to each list.  When KEY_W < DATA_W the payload
// below the key records {source, index} so that a stable result can be
// checked exactly.  The reference is an ordinary two-pointer merge with ties
// going to A.
//   * key sequence of the output must equal the reference key sequence;
//   * STABLE variant or full-width keys: the output must equal it exactly;
//     otherwise the output must be a permutation of it (no element lost).
// With STALL=1 the banks randomly hide their heads and the sink randomly
// drops out_ready.  The latency from a firing of the selector to the chunk
// leaving is checked against log2(W)+1 (+1 for FLiMSj), counted in cycles
// with out_ready high; with STALL=0 the rate must be one chunk per cycle.
module merger_check
  import flims_pkg::*;
#(
  parameter int unsigned W        = 4,
  parameter int unsigned DATA_W   = 32,
  parameter int unsigned KEY_W    = DATA_W,
  parameter variant_e    VARIANT  = FLIMS_BASIC,
  parameter bit          ROW_DEQ  = 1'b0,
  parameter int unsigned NA       = 64,
  parameter int unsigned NB       = 64,
  parameter int unsigned KEYMAX   = 1000,
  parameter bit          STALL    = 1'b0,
  parameter bit          DIRECTED = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done
);
  localparam int unsigned LOGW = $clog2(W);
  localparam int unsigned LAT  = LOGW + 1 + (ROW_DEQ ? 1 : 0);
  localparam int unsigned NT   = NA + NB;
  localparam int unsigned PLW  = DATA_W - KEY_W;

  typedef logic [DATA_W-1:0] elem_t;

  elem_t       la [NA];
  elem_t       lb [NB];
  elem_t       ref_q [$];
  elem_t       got_q [$];
  elem_t       qa [W][$];
  elem_t       qb [W][$];
  int unsigned fire_t [$];
  int unsigned en_cnt;
  int          first_out, last_out, n_chunks;

  elem_t        a_head [W], b_head [W], out_data [W];
  logic [W-1:0] a_avail, b_avail, a_deq, b_deq, hide_a, hide_b;
  logic         out_ready, out_valid, fire;

  function automatic logic [KEY_W-1:0] key(elem_t e);
    return e[DATA_W-1 -: KEY_W];
  endfunction

  function automatic elem_t mk(int unsigned k, bit src, int unsigned idx);
    elem_t e;
    e = elem_t'(k) << PLW;
    if (PLW > 1) e = e | elem_t'(src) << (PLW - 1) | elem_t'(idx & ((1 << (PLW - 1)) - 1));
    return e;
  endfunction

  // ---------------------------------------------------------------- data
  initial begin
    automatic int unsigned ka [NA];
    automatic int unsigned kb [NB];
    int ia, ib;
    if (DIRECTED) begin
      automatic int unsigned ta [10] = '{29, 26, 26, 17, 16, 11, 5, 4, 3, 3};
      automatic int unsigned tb [10] = '{22, 21, 19, 18, 15, 12, 9, 8, 7, 0};
      for (int k = 0; k < NA; k++) ka[k] = ta[k % 10];
      for (int k = 0; k < NB; k++) kb[k] = tb[k % 10];
    end else begin
      for (int k = 0; k < NA; k++) ka[k] = 1 + ($urandom % KEYMAX);
      for (int k = 0; k < NB; k++) kb[k] = 1 + ($urandom % KEYMAX);
      ka.rsort();
      kb.rsort();
    end
    for (int k = 0; k < NA; k++) la[k] = mk(ka[k], 1'b1, k);
    for (int k = 0; k < NB; k++) lb[k] = mk(kb[k], 1'b0, k);
    ia = 0; ib = 0;
    while (ia < NA || ib < NB) begin
      if (ib >= NB || (ia < NA && key(la[ia]) >= key(lb[ib]))) begin ref_q.push_back(la[ia]); ia++; end
      else begin ref_q.push_back(lb[ib]); ib++; end
    end
    for (int k = 0; k < NA + 3 * W; k++) qa[k % W].push_back(k < NA ? la[k] : '0);
    for (int k = 0; k < NB + 3 * W; k++) qb[k % W].push_back(k < NB ? lb[k] : '0);
  end

  // ---------------------------------------------------------------- DUT
  if (ROW_DEQ) begin : g_dut
    logic ad, bd;
    flimsj_merger #(.W(W), .DATA_W(DATA_W), .KEY_W(KEY_W)) u_dut (
      .clk(clk), .rst_n(rst_n),
      .a_row(a_head), .a_valid(&a_avail), .a_deq(ad),
      .b_row(b_head), .b_valid(&b_avail), .b_deq(bd),
      .out_ready(out_ready), .out_valid(out_valid), .out_data(out_data));
    assign a_deq = {W{ad}};
    assign b_deq = {W{bd}};
    assign fire  = u_dut.fire;
  end else begin : g_dut
    flims_merger #(.W(W), .DATA_W(DATA_W), .KEY_W(KEY_W), .VARIANT(VARIANT)) u_dut (
      .clk(clk), .rst_n(rst_n),
      .a_head(a_head), .a_avail(a_avail), .a_deq(a_deq),
      .b_head(b_head), .b_avail(b_avail), .b_deq(b_deq),
      .out_ready(out_ready), .out_valid(out_valid), .out_data(out_data));
    assign fire = u_dut.fire;
  end

  always_comb begin
    for (int j = 0; j < W; j++) begin
      a_avail[j] = (qa[j].size() > 0) && !hide_a[j];
      b_avail[j] = (qb[j].size() > 0) && !hide_b[j];
      a_head[j]  = (qa[j].size() > 0) ? qa[j][0] : '0;
      b_head[j]  = (qb[j].size() > 0) ? qb[j][0] : '0;
    end
  end

  // ------------------------------------------------------- drive and check
  always @(posedge clk) begin
    if (!rst_n) begin
      hide_a    <= '0;
      hide_b    <= '0;
      out_ready <= 1'b1;
      en_cnt    = 0;
      first_out = -1;
      n_chunks  = 0;
    end else if (!done) begin
      for (int j = 0; j < W; j++) begin
        if (a_deq[j]) begin
          if (!a_avail[j]) begin failures++; $display("merger_check: dequeue of empty bank A%0d", j); end
          else void'(qa[j].pop_front());
        end
        if (b_deq[j]) begin
          if (!b_avail[j]) begin failures++; $display("merger_check: dequeue of empty bank B%0d", j); end
          else void'(qb[j].pop_front());
        end
      end
      if (fire) fire_t.push_back(en_cnt);
      if (out_valid && out_ready) begin
        int unsigned t0;
        t0 = fire_t.pop_front();
        checks++;
        if (en_cnt - t0 != LAT) begin
          failures++;
          $display("merger_check: latency %0d, expected %0d", en_cnt - t0, LAT);
        end
        if (first_out < 0) first_out = en_cnt;
        last_out = en_cnt;
        n_chunks++;
        for (int j = 0; j < W; j++) got_q.push_back(out_data[j]);
      end
      if (out_ready) en_cnt++;
      if (STALL) begin
        for (int j = 0; j < W; j++) begin
          hide_a[j] <= ($urandom % 8) == 0;
          hide_b[j] <= ($urandom % 8) == 0;
        end
        out_ready <= ($urandom % 5) != 0;
      end
    end
  end

  // ---------------------------------------------------------- final compare
  always @(posedge clk) begin
    if (rst_n && !done && got_q.size() >= NT) begin
      elem_t g [$];
      elem_t r [$];
      int bad;
      bad = 0;
      for (int k = 0; k < NT; k++) if (key(got_q[k]) != key(ref_q[k])) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("merger_check: %0d keys out of order", bad); end
      for (int k = 0; k < NT; k++) begin g.push_back(got_q[k]); r.push_back(ref_q[k]); end
      if (VARIANT != FLIMS_STABLE && KEY_W != DATA_W) begin g.sort(); r.sort(); end
      bad = 0;
      for (int k = 0; k < NT; k++) if (g[k] != r[k]) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("merger_check: %0d elements differ from the reference", bad); end
      if (DIRECTED) begin
        checks++;
        if (W == 4 && NA == 10 && NB == 10 &&
            !(key(got_q[0]) == 29 && key(got_q[3]) == 22 && key(got_q[4]) == 21 && key(got_q[19]) == 0)) begin
          failures++; $display("merger_check: worked example chunks wrong");
        end
      end
      if (!STALL) begin
        checks++;
        if (last_out - first_out + 1 != n_chunks) begin
          failures++;
          $display("merger_check: %0d chunks over %0d cycles, expected one per cycle", n_chunks, last_out - first_out + 1);
        end
      end
      done <= 1'b1;
    end
  end

  initial begin
    checks   = 0;
    failures = 0;
    done     = 1'b0;
  end

endmodule
