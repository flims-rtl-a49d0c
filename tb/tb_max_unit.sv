// tb_max_unit -- testbench of max_unit.
//
// One max_unit_check harness per variant (basic, skewness-optimised,
// stable), each running a tie-heavy pair of streams with random firing and
// random bank gaps; every selected element and, in the stable variant, its
// tags are checked.  A harness that met no equal keys counts a failure, as
// the tie rules would then be untested.
module tb_max_unit;
  import flims_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int c [3];
  int f [3];
  int t [3];
  bit d [3];
  int checks, failures;

  always #5 clk = ~clk;

  max_unit_check #(.VARIANT(FLIMS_BASIC))  u_basic  (.clk(clk), .rst_n(rst_n), .checks(c[0]), .failures(f[0]), .ties(t[0]), .done(d[0]));
  max_unit_check #(.VARIANT(FLIMS_SKEW))   u_skew   (.clk(clk), .rst_n(rst_n), .checks(c[1]), .failures(f[1]), .ties(t[1]), .done(d[1]));
  max_unit_check #(.VARIANT(FLIMS_STABLE)) u_stable (.clk(clk), .rst_n(rst_n), .checks(c[2]), .failures(f[2]), .ties(t[2]), .done(d[2]));

  task automatic finish(int extra);
    checks = 0; failures = extra;
    for (int k = 0; k < 3; k++) begin
      checks += c[k] + 1; failures += f[k];
      if (t[k] == 0) begin failures++; $display("harness %0d met no ties", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    while (!(d[0] && d[1] && d[2])) @(posedge clk);
    repeat (3) @(posedge clk);
    finish(0);
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    $display("tb_max_unit: watchdog expired");
    finish(1);
  end
endmodule
