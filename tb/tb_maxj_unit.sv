// tb_maxj_unit -- testbench of maxj_unit, built on the w=4 FLiMSj example.
//
// Four units (i = 0..3) are first brought into the example state
//   cA = 9 11 13 14,  cR = 16 17 16 13 (src = A B B B),  cB = 12 12 10 8
// by loads and one preparatory firing with dir0 held at 0.  Firing from
// there must select 16 17 16 14 with decisions A B B A; the units whose cR
// was consumed must take cA into cR, giving cR = 9 11 13 13.  After the next
// A row (1 3 5 7) is loaded, a second firing must select 12 12 13 13, which
// is only right if cR and src were updated as described.  Random streams
// are covered by tb_flimsj_merger.
module tb_maxj_unit;
  localparam int W = 4, DATA_W = 8;
  typedef logic [DATA_W-1:0] d_t;
  logic clk = 1'b0, rst_n = 1'b0;
  logic fire = 1'b0, dir0 = 1'b0, load_a = 1'b0, load_b = 1'b0, load_r = 1'b0;
  logic [W-1:0] dir;
  d_t a_in [W];
  d_t b_in [W];
  d_t in_o [W];
  int checks = 0, failures = 0;
  logic use_own_dir0 = 1'b0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < W; i++) begin : g_u
    maxj_unit #(.DATA_W(DATA_W)) u_dut (
      .clk(clk), .rst_n(rst_n), .fire(fire), .dir0(use_own_dir0 ? dir[0] : dir0), .dir(dir[i]),
      .load_a(load_a), .a_in(a_in[i]), .load_b(load_b), .load_r(load_r), .b_in(b_in[i]),
      .in_o(in_o[i]));
  end

  task automatic step();
    @(posedge clk);
    #1;
    fire = 0; load_a = 0; load_b = 0; load_r = 0;
  endtask

  task automatic expect_sel(d_t e0, d_t e1, d_t e2, d_t e3, string what);
    d_t e [W];
    e = '{e0, e1, e2, e3};
    for (int k = 0; k < W; k++) begin
      checks++;
      if (in_o[k] !== e[k]) begin failures++; $display("%s: in_%0d=%0d expected %0d", what, k, in_o[k], e[k]); end
    end
  endtask

  task automatic example(d_t va [W], d_t vr [W], d_t vb [W]);
    // cR <- first B row, all src = B
    b_in = '{100, vr[1], vr[2], vr[3]}; load_r = 1; step();
    // cA <- row that makes units 1..3 take cA and unit 0 take its cR
    a_in = '{vr[0], 200, 200, 200}; load_a = 1; step();
    use_own_dir0 = 0; dir0 = 0; fire = 1; step();      // unit 0: cR <- cA (= vr[0]), src <- A
    a_in = va; load_a = 1; b_in = vb; load_b = 1; step();
    use_own_dir0 = 1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    example('{9, 11, 13, 14}, '{16, 17, 16, 13}, '{12, 12, 10, 8});
    // compare top heads
    checks++;
    if (dir !== 4'b0110) begin failures++; $display("decisions %b expected 0110", dir); end
    fire = 1; a_in = '{1, 3, 5, 7}; load_a = 1; step();   // dir0 = A: fetch next A row
    expect_sel(16, 17, 16, 14, "first selection");
    checks += 4;
    if (g_u[0].u_dut.cr_q !== 9)  failures++;
    if (g_u[1].u_dut.cr_q !== 11) failures++;
    if (g_u[2].u_dut.cr_q !== 13) failures++;
    if (g_u[3].u_dut.cr_q !== 13) failures++;
    fire = 1; step();
    expect_sel(12, 12, 13, 13, "second selection");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
