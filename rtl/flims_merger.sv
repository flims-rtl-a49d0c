// flims_merger -- FLiMS 2-way high-throughput merger of two descending lists.
//
// Both input lists arrive in w banks each (element k of a list in bank
// k mod w).  Stage 1 is the selector: w max_unit entities, MAX_i pairing bank
// A_i with bank B_{w-1-i}.  Each cycle they pick the top w of the 2w current
// heads and dequeue exactly those, one element per unit; because A and B are
// consumed in round-robin order, the bank offsets of the two lists always add
// up to 0 mod w and the fixed pairing stays correct without any rotation.
// The chosen w elements form a rotated bitonic sequence, which the
// butterfly_net (log2(w) CAS columns) sorts.  The output is one w-element
// chunk per cycle, out_data[0] the largest; latency log2(w)+1 cycles from the
// cycle the units fire.
//
// Flow control (this design's choice; the paper leaves it open): the units
// fire together when every one holds valid heads for both lists and
// out_ready is high; while out_ready is low the whole pipeline holds.  The
// end of a list is not detected: as the paper suggests, the producer appends
// sentinel values (for example 0 for natural numbers) so the last real
// elements are pushed out.
//
// VARIANT selects basic, skewness-optimised or stable selection; in the
// stable variant the tags the selector attaches also steer the CAS network.
module flims_merger
  import flims_pkg::*;
#(
  parameter int unsigned W       = 4,
  parameter int unsigned DATA_W  = 64,
  parameter int unsigned KEY_W   = DATA_W,
  parameter variant_e    VARIANT = FLIMS_BASIC,
  localparam int unsigned LOGW   = $clog2(W),
  localparam int unsigned EW     = DATA_W + 3 + LOGW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] a_head  [W],
  input  logic [W-1:0]      a_avail,
  output logic [W-1:0]      a_deq,
  input  logic [DATA_W-1:0] b_head  [W],
  input  logic [W-1:0]      b_avail,
  output logic [W-1:0]      b_deq,
  input  logic              out_ready,
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data [W]
);

  logic [W-1:0]  unit_ready;
  logic [EW-1:0] sel_q [W];
  logic          sel_vld_q;
  logic          fire;
  logic [EW-1:0] net_out [W];

  assign fire = out_ready & (&unit_ready);

  for (genvar i = 0; i < W; i++) begin : g_max
    max_unit #(.W(W), .DATA_W(DATA_W), .KEY_W(KEY_W), .I(i), .VARIANT(VARIANT)) u_max (
      .clk     (clk),
      .rst_n   (rst_n),
      .fire    (fire),
      .a_head  (a_head[i]),
      .a_avail (a_avail[i]),
      .a_deq   (a_deq[i]),
      .b_head  (b_head[W-1-i]),
      .b_avail (b_avail[W-1-i]),
      .b_deq   (b_deq[W-1-i]),
      .ready   (unit_ready[i]),
      .in_o    (sel_q[i])
    );
  end

  // Valid bit of the selector register stage (in_0..in_{w-1}).
  always_ff @(posedge clk) begin
    if (!rst_n)         sel_vld_q <= 1'b0;
    else if (out_ready) sel_vld_q <= fire;
  end

  butterfly_net #(.W(W), .DATA_W(DATA_W), .KEY_W(KEY_W), .STABLE(VARIANT == FLIMS_STABLE)) u_net (
    .clk       (clk),
    .rst_n     (rst_n),
    .en        (out_ready),
    .in_valid  (sel_vld_q),
    .in_data   (sel_q),
    .out_valid (out_valid),
    .out_data  (net_out)
  );

  always_comb begin
    for (int j = 0; j < W; j++) out_data[j] = net_out[j][EW-1 -: DATA_W];
  end

endmodule
