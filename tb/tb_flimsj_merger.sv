// tb_flimsj_merger -- testbench of flimsj_merger (row-dequeue FLiMS).
//
// merger_check harnesses with ROW_DEQ=1: the w=4 worked example, random
// lists at w=4, 8 and 16, with and without input gaps and backpressure, and
// lists with many duplicate keys.  Each checks the merged order, that no
// element is lost, one chunk per cycle without stalls, and the latency of
// log2(w)+2 cycles.
module tb_flimsj_merger;
  import flims_pkg::*;

  localparam int NH = 5;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks, failures;
  int   hc [NH];
  int   hf [NH];
  bit   hd [NH];

  always #5 clk = ~clk;

  merger_check #(.W(4),  .DATA_W(8),  .ROW_DEQ(1), .NA(10),  .NB(10), .DIRECTED(1)) u_ex (
    .clk(clk), .rst_n(rst_n), .checks(hc[0]), .failures(hf[0]), .done(hd[0]));
  merger_check #(.W(4),  .DATA_W(32), .ROW_DEQ(1), .NA(300), .NB(200)) u_w4 (
    .clk(clk), .rst_n(rst_n), .checks(hc[1]), .failures(hf[1]), .done(hd[1]));
  merger_check #(.W(8),  .DATA_W(32), .ROW_DEQ(1), .NA(200), .NB(500), .STALL(1)) u_w8s (
    .clk(clk), .rst_n(rst_n), .checks(hc[2]), .failures(hf[2]), .done(hd[2]));
  merger_check #(.W(16), .DATA_W(32), .ROW_DEQ(1), .NA(400), .NB(400)) u_w16 (
    .clk(clk), .rst_n(rst_n), .checks(hc[3]), .failures(hf[3]), .done(hd[3]));
  merger_check #(.W(8),  .DATA_W(32), .KEY_W(16), .ROW_DEQ(1), .NA(300), .NB(300), .KEYMAX(5), .STALL(1)) u_dup (
    .clk(clk), .rst_n(rst_n), .checks(hc[4]), .failures(hf[4]), .done(hd[4]));

  function automatic bit all_done();
    foreach (hd[k]) if (!hd[k]) return 1'b0;
    return 1'b1;
  endfunction

  task automatic finish(int extra_fail);
    checks = 0; failures = extra_fail;
    foreach (hc[k]) begin checks += hc[k]; failures += hf[k]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    while (!all_done()) @(posedge clk);
    repeat (2) @(posedge clk);
    finish(0);
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("tb_flimsj_merger: watchdog expired, done=%p", hd);
    finish(1);
  end
endmodule
