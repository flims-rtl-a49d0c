// tb_flims_top -- end-to-end testbench of flims_top.
//
// Four configurations run side by side through the full path (input queues,
// merger, output queue) with random writer pauses and reader backpressure:
//   cfg 0  FLiMS,  w=4,  64-bit data (the defaults)
//   cfg 1  FLiMS with the skewness optimisation, w=8, duplicate-heavy keys
//   cfg 2  stable FLiMS, w=8, duplicate-heavy keys with payloads
//   cfg 3  FLiMSj (row dequeue), w=8
//   cfg 4  stable FLiMS merging ascending lists, w=4, duplicate-heavy keys
// Besides the merged data, every mechanism must have occurred at least once
// in each configuration where it exists: firing, firings mixing both lists
// (rotating bank offsets), input stalls, output backpressure, a full input
// queue, equal keys at a selector (cfg 1, 2 and 4), and A-row and
// B-row fetches (cfg 3).
module tb_flims_top;
  import flims_pkg::*;
  localparam int NC = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  int c [NC];
  int f [NC];
  bit d [NC];
  int ev [NC][8];
  int checks, failures;
  string ev_name [8] = '{"firings", "mixed firings", "input stalls", "output backpressure",
                         "full input queue", "equal keys", "A-row fetches", "B-row fetches"};

  always #5 clk = ~clk;

  top_check #(.NA(150), .NB(120)) u_c0 (
    .clk(clk), .rst_n(rst_n), .checks(c[0]), .failures(f[0]), .ev(ev[0]), .done(d[0]));
  top_check #(.W(8), .DATA_W(32), .KEY_W(16), .VARIANT(FLIMS_SKEW), .NA(300), .NB(300), .KEYMAX(6)) u_c1 (
    .clk(clk), .rst_n(rst_n), .checks(c[1]), .failures(f[1]), .ev(ev[1]), .done(d[1]));
  top_check #(.W(8), .DATA_W(32), .KEY_W(16), .VARIANT(FLIMS_STABLE), .NA(300), .NB(260), .KEYMAX(8)) u_c2 (
    .clk(clk), .rst_n(rst_n), .checks(c[2]), .failures(f[2]), .ev(ev[2]), .done(d[2]));
  top_check #(.W(8), .DATA_W(32), .ROW_DEQ(1), .NA(250), .NB(330)) u_c3 (
    .clk(clk), .rst_n(rst_n), .checks(c[3]), .failures(f[3]), .ev(ev[3]), .done(d[3]));

  top_check #(.W(4), .DATA_W(32), .KEY_W(16), .VARIANT(FLIMS_STABLE), .ASCENDING(1'b1), .NA(200), .NB(170), .KEYMAX(7)) u_c4 (
    .clk(clk), .rst_n(rst_n), .checks(c[4]), .failures(f[4]), .ev(ev[4]), .done(d[4]));

  task automatic finish(int extra);
    checks = 0; failures = extra;
    for (int k = 0; k < NC; k++) begin
      checks += c[k]; failures += f[k];
      $display("cfg %0d: %0d firings, %0d mixed, %0d input stalls, %0d backpressure, %0d full, %0d ties, %0d A rows, %0d B rows",
               k, ev[k][0], ev[k][1], ev[k][2], ev[k][3], ev[k][4], ev[k][5], ev[k][6], ev[k][7]);
      for (int e = 0; e < 8; e++) begin
        bit needed;
        needed = (e < 5) || (e == 5 && (k == 1 || k == 2 || k == 4)) || (e >= 6 && k == 3);
        if (needed) begin
          checks++;
          if (ev[k][e] == 0) begin failures++; $display("cfg %0d: %s never happened", k, ev_name[e]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    while (!(d[0] && d[1] && d[2] && d[3] && d[4])) @(posedge clk);
    repeat (2) @(posedge clk);
    finish(0);
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("tb_flims_top: watchdog expired");
    finish(1);
  end
endmodule
