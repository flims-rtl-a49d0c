// tb_flims_top_full -- flims_top at its default parameters (w=4, 64-bit
// elements, basic FLiMS, queues of depth 2), end to end.
//
// Run 1 merges the two w=4 example lists
//   A = 29 26 26 17 16 11 5 4 3 3     B = 22 21 19 18 15 12 9 8 7 0
// and must return the rows 29 26 26 22 / 21 19 18 17 / 16 15 12 11 /
// 9 8 7 5 / 4 3 3 0 on consecutive cycles.  Run 2 merges two random lists of
// 64-bit values (2000 and 1500 elements) with writer and reader always
// ready; the merged list must match a reference merge, and once the first row
// has come out one row must follow every cycle until the lists are done.
module tb_flims_top_full;
  localparam int W = 4;
  typedef logic [63:0] elem_t;
  logic clk = 1'b0, rst_n = 1'b0;
  logic a_wr_valid = 0, a_wr_ready, b_wr_valid = 0, b_wr_ready, o_rd_valid, o_rd_ready = 1;
  elem_t a_wr_data [W], b_wr_data [W], o_rd_data [W];
  int checks = 0, failures = 0;

  elem_t la [$];
  elem_t lb [$];
  elem_t ref_q [$];
  elem_t got_q [$];
  int ra_i, rb_i, cyc, first_cyc, last_cyc, nrows;
  bit running = 0;

  always #5 clk = ~clk;

  flims_top u_dut (
    .clk(clk), .rst_n(rst_n),
    .a_wr_valid(a_wr_valid), .a_wr_ready(a_wr_ready), .a_wr_data(a_wr_data),
    .b_wr_valid(b_wr_valid), .b_wr_ready(b_wr_ready), .b_wr_data(b_wr_data),
    .o_rd_valid(o_rd_valid), .o_rd_ready(o_rd_ready), .o_rd_data(o_rd_data));

  always_comb begin
    for (int j = 0; j < W; j++) begin
      a_wr_data[j] = (ra_i * W + j < la.size()) ? la[ra_i * W + j] : '0;
      b_wr_data[j] = (rb_i * W + j < lb.size()) ? lb[rb_i * W + j] : '0;
    end
    a_wr_valid = running && (ra_i * W < la.size());
    b_wr_valid = running && (rb_i * W < lb.size());
  end

  always @(posedge clk) begin
    if (running) begin
      cyc++;
      if (a_wr_valid && a_wr_ready) ra_i++;
      if (b_wr_valid && b_wr_ready) rb_i++;
      if (o_rd_valid && o_rd_ready) begin
        if (first_cyc < 0) first_cyc = cyc;
        if (got_q.size() < ref_q.size()) begin last_cyc = cyc; nrows++; end
        for (int j = 0; j < W; j++) got_q.push_back(o_rd_data[j]);
      end
    end
  end

  // Lists padded to whole rows with zeros, plus three rows of zero sentinels.
  task automatic run(int n_a, int n_b);
    int ia, ib;
    ref_q.delete(); got_q.delete();
    ia = 0; ib = 0;
    while (ia < n_a || ib < n_b) begin
      if (ib >= n_b || (ia < n_a && la[ia] >= lb[ib])) begin ref_q.push_back(la[ia]); ia++; end
      else begin ref_q.push_back(lb[ib]); ib++; end
    end
    while (la.size() % W != 0) la.push_back('0);
    while (lb.size() % W != 0) lb.push_back('0);
    repeat (3 * W) begin la.push_back('0); lb.push_back('0); end
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1;
    rst_n = 1; ra_i = 0; rb_i = 0; cyc = 0; first_cyc = -1; nrows = 0;
    running = 1;
    while (got_q.size() < ref_q.size()) @(posedge clk);
    #1 running = 0;
    for (int k = 0; k < ref_q.size(); k++) begin
      checks++;
      if (got_q[k] !== ref_q[k]) begin
        failures++;
        if (failures < 10) $display("element %0d: %0d expected %0d", k, got_q[k], ref_q[k]);
      end
    end
    checks++;
    if (last_cyc - first_cyc + 1 != nrows) begin
      failures++; $display("%0d rows over %0d cycles", nrows, last_cyc - first_cyc + 1);
    end
    $display("run: %0d + %0d elements, first row after %0d cycles, %0d rows in %0d cycles",
             n_a, n_b, first_cyc, nrows, last_cyc - first_cyc + 1);
  endtask

  initial begin
    elem_t ta [10] = '{29, 26, 26, 17, 16, 11, 5, 4, 3, 3};
    elem_t tb [10] = '{22, 21, 19, 18, 15, 12, 9, 8, 7, 0};
    elem_t er [20] = '{29, 26, 26, 22, 21, 19, 18, 17, 16, 15, 12, 11, 9, 8, 7, 5, 4, 3, 3, 0};
    foreach (ta[k]) begin la.push_back(ta[k]); lb.push_back(tb[k]); end
    run(10, 10);
    foreach (er[k]) begin
      checks++;
      if (got_q[k] !== er[k]) begin failures++; $display("example element %0d: %0d expected %0d", k, got_q[k], er[k]); end
    end
    la.delete(); lb.delete();
    for (int k = 0; k < 2000; k++) la.push_back({$urandom, $urandom} | 64'd1);
    for (int k = 0; k < 1500; k++) lb.push_back({$urandom, $urandom} | 64'd1);
    la.rsort(); lb.rsort();
    run(2000, 1500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
