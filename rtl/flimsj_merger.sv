// flimsj_merger -- FLiMSj: the FLiMS merger with one dequeue signal per
// input list, taking whole rows of w elements.
//
// w maxj_unit entities select the top w of the available heads each cycle, as
// in FLiMS, but the unconsumed elements of a partly used row are parked in the
// row buffer cR instead of waiting in the banks.  Each cycle exactly one row
// is fetched, from A or B as MAX_0's decision dir0 says.  The chosen chunk
// goes through one extra register (the extra cycle of FLiMSj's latency;
// where it sits is this design's choice) and the butterfly_net, giving
// log2(w)+2 cycles of latency and one w-element chunk per cycle.
//
// Inputs are row-level: a_row[k] is the head of bank k of list A, a_valid
// says a whole row is present, a_deq removes it; the same for B.  Flow
// control, reset and start-up (first B row into cR, then the first A row and
// the second B row) are this design's choices.  As in flims_merger, list ends
// are handled by sentinel values supplied by the producer.
//
// Every maxj_unit reports its decision on dir, but only dir[0] steers the
// row fetch; the other bits are used inside the units and are left unread
// here, which lint reports as unused.
module flimsj_merger #(
  parameter int unsigned W      = 4,
  parameter int unsigned DATA_W = 64,
  parameter int unsigned KEY_W  = DATA_W,
  localparam int unsigned LOGW  = $clog2(W),
  localparam int unsigned EW    = DATA_W + 3 + LOGW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] a_row [W],
  input  logic              a_valid,
  output logic              a_deq,
  input  logic [DATA_W-1:0] b_row [W],
  input  logic              b_valid,
  output logic              b_deq,
  input  logic              out_ready,
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data [W]
);

  logic              va_q, vb_q, vr_q;
  logic              fire;
  logic [W-1:0]      dir;
  logic              load_a, load_b, load_r;
  logic [DATA_W-1:0] unit_out [W];
  logic [EW-1:0]     pipe_q   [W];
  logic              sel_vld_q, pipe_vld_q;
  logic [EW-1:0]     net_out  [W];

  assign fire   = out_ready & va_q & vb_q & vr_q;
  assign a_deq  = a_valid & ((fire & ~dir[0]) | ~va_q);
  assign b_deq  = b_valid & ((fire & dir[0]) | ~vr_q | ~vb_q);
  assign load_a = a_deq;
  assign load_r = b_deq & ~vr_q;
  assign load_b = b_deq & vr_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      va_q <= 1'b0;
      vb_q <= 1'b0;
      vr_q <= 1'b0;
    end else begin
      if (load_a)                va_q <= 1'b1;
      else if (fire && !dir[0])  va_q <= 1'b0;
      if (load_b)                vb_q <= 1'b1;
      else if (fire && dir[0])   vb_q <= 1'b0;
      if (load_r)                vr_q <= 1'b1;
    end
  end

  for (genvar i = 0; i < W; i++) begin : g_max
    maxj_unit #(.DATA_W(DATA_W), .KEY_W(KEY_W)) u_max (
      .clk    (clk),
      .rst_n  (rst_n),
      .fire   (fire),
      .dir0   (dir[0]),
      .dir    (dir[i]),
      .load_a (load_a),
      .a_in   (a_row[i]),
      .load_b (load_b),
      .load_r (load_r),
      .b_in   (b_row[W-1-i]),
      .in_o   (unit_out[i])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel_vld_q  <= 1'b0;
      pipe_vld_q <= 1'b0;
    end else if (out_ready) begin
      sel_vld_q  <= fire;
      pipe_vld_q <= sel_vld_q;
    end
  end

  always_ff @(posedge clk) begin
    if (out_ready)
      for (int j = 0; j < W; j++) pipe_q[j] <= {unit_out[j], {(3+LOGW){1'b0}}};
  end

  butterfly_net #(.W(W), .DATA_W(DATA_W), .KEY_W(KEY_W), .STABLE(1'b0)) u_net (
    .clk       (clk),
    .rst_n     (rst_n),
    .en        (out_ready),
    .in_valid  (pipe_vld_q),
    .in_data   (pipe_q),
    .out_valid (out_valid),
    .out_data  (net_out)
  );

  always_comb begin
    for (int j = 0; j < W; j++) out_data[j] = net_out[j][EW-1 -: DATA_W];
  end

endmodule
