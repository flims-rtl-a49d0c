// tb_flims_merger -- testbench of flims_merger.
//
// Runs several merger_check harnesses side by side: the w=4 worked example
// (exact chunks and one chunk per cycle), random lists at w=8 and w=16 with
// and without random input gaps and output backpressure, the skewness
// variant on lists full of duplicate keys with payloads (no element may be
// lost), and the stable variant (the output must keep A before B and the
// original order of equal keys).  Latency log2(w)+1 is checked throughout.
module tb_flims_merger;
  import flims_pkg::*;

  localparam int NH = 6;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks, failures;
  int   hc [NH];
  int   hf [NH];
  bit   hd [NH];

  always #5 clk = ~clk;

  merger_check #(.W(4),  .DATA_W(8),  .NA(10),  .NB(10), .DIRECTED(1)) u_ex (
    .clk(clk), .rst_n(rst_n), .checks(hc[0]), .failures(hf[0]), .done(hd[0]));
  merger_check #(.W(8),  .DATA_W(32), .NA(300), .NB(200)) u_w8 (
    .clk(clk), .rst_n(rst_n), .checks(hc[1]), .failures(hf[1]), .done(hd[1]));
  merger_check #(.W(16), .DATA_W(32), .NA(250), .NB(400), .STALL(1)) u_w16s (
    .clk(clk), .rst_n(rst_n), .checks(hc[2]), .failures(hf[2]), .done(hd[2]));
  merger_check #(.W(8),  .DATA_W(32), .KEY_W(16), .VARIANT(FLIMS_SKEW), .NA(300), .NB(300), .KEYMAX(6), .STALL(1)) u_skew (
    .clk(clk), .rst_n(rst_n), .checks(hc[3]), .failures(hf[3]), .done(hd[3]));
  merger_check #(.W(8),  .DATA_W(32), .KEY_W(16), .VARIANT(FLIMS_STABLE), .NA(300), .NB(250), .KEYMAX(9), .STALL(1)) u_stab (
    .clk(clk), .rst_n(rst_n), .checks(hc[4]), .failures(hf[4]), .done(hd[4]));
  merger_check #(.W(4),  .DATA_W(32), .KEY_W(16), .VARIANT(FLIMS_BASIC), .NA(200), .NB(200), .KEYMAX(5)) u_dup (
    .clk(clk), .rst_n(rst_n), .checks(hc[5]), .failures(hf[5]), .done(hd[5]));

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
    $display("tb_flims_merger: watchdog expired, done=%p", hd);
    finish(1);
  end
endmodule
