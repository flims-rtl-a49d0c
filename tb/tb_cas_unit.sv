// tb_cas_unit -- testbench of cas_unit.
//
// Two instances: key-only comparison (STABLE=0, KEY_W=6 of DATA_W=8, so the
// low data bits are payload) and stable comparison (STABLE=1).  Random and
// directed pairs are checked against a reference ordering written out here:
// the key decides; in stable mode equal keys are ordered by source (A first),
// then by the 2-bit batch order (3>2>1>0 but 0 beats 3), then by port.
module tb_cas_unit;
  localparam int DATA_W = 8, KEY_W = 6, LOGW = 2, EW = DATA_W + 3 + LOGW;
  logic [EW-1:0] x, y, hi0, lo0, hi1, lo1;
  int checks = 0, failures = 0;

  cas_unit #(.DATA_W(DATA_W), .KEY_W(KEY_W), .LOGW(LOGW), .STABLE(1'b0)) u_plain (
    .x(x), .y(y), .hi(hi0), .lo(lo0));
  cas_unit #(.DATA_W(DATA_W), .KEY_W(KEY_W), .LOGW(LOGW), .STABLE(1'b1)) u_stable (
    .x(x), .y(y), .hi(hi1), .lo(lo1));

  // 1 when a must leave on the upper output.
  function automatic bit first(logic [EW-1:0] a, logic [EW-1:0] b, bit stable);
    int ka, kb, oa, ob;
    ka = int'(a[EW-1 -: KEY_W]);  kb = int'(b[EW-1 -: KEY_W]);
    if (ka != kb) return ka > kb;
    if (!stable) return 1'b1;
    if (a[LOGW+2] != b[LOGW+2]) return a[LOGW+2];
    // rank of the order field: 0 is "newest wrap", counted as 4
    oa = int'(a[LOGW+1 -: 2]); ob = int'(b[LOGW+1 -: 2]);
    if (oa != ob) begin
      if (oa == 0 && ob == 3) return 1'b1;
      if (oa == 3 && ob == 0) return 1'b0;
      return oa > ob;
    end
    return a[LOGW-1:0] >= b[LOGW-1:0];
  endfunction

  task automatic check_pair(logic [EW-1:0] a, logic [EW-1:0] b);
    x = a; y = b;
    #1;
    checks += 2;
    if (first(a, b, 1'b0) ? (hi0 !== a || lo0 !== b) : (hi0 !== b || lo0 !== a)) begin
      failures++; $display("plain CAS wrong: x=%h y=%h hi=%h lo=%h", a, b, hi0, lo0);
    end
    if (first(a, b, 1'b1) ? (hi1 !== a || lo1 !== b) : (hi1 !== b || lo1 !== a)) begin
      failures++; $display("stable CAS wrong: x=%h y=%h hi=%h lo=%h", a, b, hi1, lo1);
    end
  endtask

  initial begin
    // directed: order 00 against 11 with equal keys and sources
    check_pair({8'h40, 1'b1, 2'b11, 2'd0}, {8'h40, 1'b1, 2'b00, 2'd3});
    check_pair({8'h40, 1'b0, 2'b00, 2'd0}, {8'h40, 1'b0, 2'b11, 2'd3});
    check_pair({8'h40, 1'b0, 2'b10, 2'd3}, {8'h40, 1'b1, 2'b01, 2'd0});
    check_pair({8'h10, 1'b1, 2'b00, 2'd0}, {8'h80, 1'b0, 2'b00, 2'd0});
    for (int k = 0; k < 4000; k++) begin
      logic [EW-1:0] a, b;
      a = EW'($urandom);
      b = EW'($urandom);
      if (k % 2 == 0) b[EW-1 -: KEY_W] = a[EW-1 -: KEY_W];   // many key ties
      if (k % 4 == 0) b[LOGW+2] = a[LOGW+2];                  // and source ties
      check_pair(a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
