// tb_banked_fifo -- testbench of banked_fifo.
//
// W=4 banks of depth 3 (not a power of two, so the pointers wrap) are
// written with random rows and drained bank by bank with random dequeues.
// A queue per bank in the testbench is the reference for head, avail and
// wr_ready; a row must be refused whenever a bank is full and not being
// dequeued in the same cycle, and accepted otherwise.  A second
// instance at the default depth 2 is filled to check that it holds exactly
// two rows.
module tb_banked_fifo;
  localparam int W = 4, DATA_W = 16, DEPTH = 3;
  typedef logic [DATA_W-1:0] d_t;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_valid = 1'b0, wr_ready;
  d_t wr_data [W];
  d_t head [W];
  logic [W-1:0] avail, deq = '0;
  logic wr_valid2 = 1'b0, wr_ready2;
  d_t head2 [W];
  logic [W-1:0] avail2;
  d_t q [W][$];
  int checks = 0, failures = 0, fulls = 0;

  always #5 clk = ~clk;

  banked_fifo #(.W(W), .DATA_W(DATA_W), .DEPTH(DEPTH)) u_dut (
    .clk(clk), .rst_n(rst_n), .wr_valid(wr_valid), .wr_ready(wr_ready), .wr_data(wr_data),
    .head(head), .avail(avail), .deq(deq));

  banked_fifo #(.W(W), .DATA_W(DATA_W)) u_dut2 (
    .clk(clk), .rst_n(rst_n), .wr_valid(wr_valid2), .wr_ready(wr_ready2), .wr_data(wr_data),
    .head(head2), .avail(avail2), .deq('0));

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      bit exp_ready;
      // drive at mid-cycle, check, then let the edge act
      wr_valid = ($urandom % 2) == 0;
      foreach (wr_data[j]) wr_data[j] = d_t'($urandom);
      for (int j = 0; j < W; j++) deq[j] = (q[j].size() > 0) && (($urandom % 3) == 0);
      #1;
      exp_ready = 1;
      for (int j = 0; j < W; j++) begin
        if (q[j].size() == DEPTH && !deq[j]) exp_ready = 0;
        checks++;
        if (avail[j] !== (q[j].size() > 0)) begin failures++; $display("avail[%0d] wrong", j); end
        if (q[j].size() > 0) begin
          checks++;
          if (head[j] !== q[j][0]) begin failures++; $display("head[%0d]=%h expected %h", j, head[j], q[j][0]); end
        end
      end
      checks++;
      if (wr_ready !== exp_ready) begin failures++; $display("wr_ready wrong"); end
      if (!exp_ready) fulls++;
      @(posedge clk);
      for (int j = 0; j < W; j++) if (deq[j]) void'(q[j].pop_front());
      if (wr_valid && exp_ready) for (int j = 0; j < W; j++) q[j].push_back(wr_data[j]);
      #1;
    end
    // depth-2 instance: two rows fit, the third does not
    wr_valid = 0;
    deq = '0;
    for (int r = 0; r < 3; r++) begin
      wr_valid2 = 1;
      #1;
      checks++;
      if (wr_ready2 !== (r < 2)) begin failures++; $display("depth-2 wr_ready wrong after %0d rows", r); end
      @(posedge clk); #1;
    end
    checks++;
    if (fulls == 0) begin failures++; $display("full condition never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
