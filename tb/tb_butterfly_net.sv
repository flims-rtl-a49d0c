// tb_butterfly_net -- testbench of butterfly_net.
//
// Feeds W=8 chunks built the way the selector builds them: two random
// descending lists ta and tb of 8, elementwise max(ta[i], tb[7-i]) (a
// bitonic top-8), rotated by a random offset.  Every chunk must leave sorted
// in descending order exactly log2(8)=3 enabled cycles later; en is dropped
// at random to check that the pipeline holds.
module tb_butterfly_net;
  localparam int W = 8, DATA_W = 16, LOGW = 3, EW = DATA_W + 3 + LOGW;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, in_valid = 1'b0, out_valid;
  logic [EW-1:0] in_data [W];
  logic [EW-1:0] out_data [W];
  int checks = 0, failures = 0;
  int unsigned sent = 0, got = 0, en_cnt = 0;
  typedef logic [DATA_W-1:0] d_t;
  d_t exp_q [$];
  int unsigned t_q [$];

  always #5 clk = ~clk;

  butterfly_net #(.W(W), .DATA_W(DATA_W)) u_dut (
    .clk(clk), .rst_n(rst_n), .en(en), .in_valid(in_valid), .in_data(in_data),
    .out_valid(out_valid), .out_data(out_data));

  task automatic make_chunk();
    automatic int unsigned ta [W];
    automatic int unsigned tb [W];
    automatic int unsigned c [W];
    automatic int unsigned s [W];
    int r;
    foreach (ta[k]) begin ta[k] = $urandom % 200; tb[k] = $urandom % 200; end
    ta.rsort(); tb.rsort();
    foreach (c[k]) c[k] = (ta[k] > tb[W-1-k]) ? ta[k] : tb[W-1-k];
    r = $urandom % W;
    foreach (c[k]) in_data[k] = {d_t'(c[(k + r) % W]), {(3+LOGW){1'b0}}};
    s = c;
    s.rsort();
    foreach (s[k]) exp_q.push_back(d_t'(s[k]));
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && en) begin
        int unsigned t0;
        t0 = t_q.pop_front();
        checks++;
        if (en_cnt - t0 != LOGW) begin failures++; $display("latency %0d", en_cnt - t0); end
        for (int k = 0; k < W; k++) begin
          d_t e;
          e = exp_q.pop_front();
          checks++;
          if (out_data[k][EW-1 -: DATA_W] !== e) begin
            failures++; $display("out[%0d]=%0d expected %0d", k, out_data[k][EW-1 -: DATA_W], e);
          end
        end
        got++;
      end
      if (in_valid && en) t_q.push_back(en_cnt);
      if (en) en_cnt++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    while (sent < 300) begin
      @(negedge clk);
      // en still holds the value the last edge used
      if (!in_valid || en) begin
        in_valid = ($urandom % 3) != 0;
        if (in_valid) begin make_chunk(); sent++; end
      end
      en = ($urandom % 4) != 0;
    end
    @(negedge clk);
    in_valid = 1'b0;
    en = 1'b1;
    repeat (LOGW + 2) @(posedge clk);
    checks++;
    if (got != sent) begin failures++; $display("sent %0d chunks, got %0d", sent, got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
