// tb_flims_widths -- FLiMS and FLiMSj at wider lane counts of the FPGA
// evaluation (w = 32 and 64, 64-bit elements).
//
// One merger_check harness per width and merger kind merges two random
// descending lists of a few rows each and checks the result, the latency
// (log2(w)+1 for FLiMS, log2(w)+2 for FLiMSj) and the rate of one w-element
// chunk per cycle.  Widths 4 to 16 are covered at length by the other
// testbenches.  Wider mergers (128 to 512) elaborate in both tools, but
// their simulation models take too long to build for a routine run.
module tb_flims_widths;
  import flims_pkg::*;
  localparam int NH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int hc [NH];
  int hf [NH];
  bit hd [NH];
  int checks, failures;

  always #5 clk = ~clk;

  for (genvar k = 0; k < 2; k++) begin : g_w
    localparam int unsigned WK = 32 << k;  // 32 and 64
    merger_check #(.W(WK), .DATA_W(64), .NA(3 * WK + 1), .NB(2 * WK + 3), .KEYMAX(1 << 30)) u_flims (
      .clk(clk), .rst_n(rst_n), .checks(hc[2*k]), .failures(hf[2*k]), .done(hd[2*k]));
    merger_check #(.W(WK), .DATA_W(64), .ROW_DEQ(1), .NA(2 * WK + 5), .NB(3 * WK), .KEYMAX(1 << 30)) u_flimsj (
      .clk(clk), .rst_n(rst_n), .checks(hc[2*k+1]), .failures(hf[2*k+1]), .done(hd[2*k+1]));
  end

  function automatic bit all_done();
    foreach (hd[k]) if (!hd[k]) return 1'b0;
    return 1'b1;
  endfunction

  task automatic finish(int extra);
    checks = 0; failures = extra;
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
    repeat (5000) @(posedge clk);
    $display("tb_flims_widths: watchdog expired, done=%p", hd);
    finish(1);
  end
endmodule
