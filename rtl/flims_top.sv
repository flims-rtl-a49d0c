// flims_top -- complete FLiMS merger with its banked queues.
//
// List A and list B (each sorted in descending order) are written a row of W
// elements at a time into banked_fifo queues (element k of a row into bank k,
// the round-robin layout the merger expects).  The merger reads the banks,
// FLiMS with one dequeue per bank (ROW_DEQ=0) or FLiMSj with one dequeue per
// list (ROW_DEQ=1), and writes one merged, descending row of W elements per
// cycle into the banked output queue O, which is read a row at a time.
// Queue depths default to 2, the depth used in the paper's FPGA evaluation.
//
// ASCENDING=1 merges ascending lists instead.  The paper does this by
// reversing every comparator (and the order rule of the stable variant);
// here the key bits are complemented on the way into queues A and B and on
// the way out of queue O, which orders the keys the same way and leaves
// the merger, its tags and its tie rules untouched.  This costs one XOR
// layer on the input and output paths and no extra cycle.  With ASCENDING=1
// the end-of-list sentinels must have the largest key (all ones).
//
// All three queue ports use valid/ready handshakes.  The merger does not
// detect list ends: after its real data each list must be followed by enough
// sentinel elements (for example zeros, at least two rows) to push the last
// real elements out; the reader discards what follows the expected count.
// The AXI wrapper and host of the paper's evaluation platform are not part of
// this module; its queue ports take their place.
module flims_top
  import flims_pkg::*;
#(
  parameter int unsigned W         = 4,
  parameter int unsigned DATA_W    = 64,
  parameter int unsigned KEY_W     = DATA_W,
  parameter variant_e    VARIANT   = FLIMS_BASIC,
  parameter bit          ROW_DEQ   = 1'b0,
  parameter bit          ASCENDING = 1'b0,
  parameter int unsigned IN_DEPTH  = 2,
  parameter int unsigned OUT_DEPTH = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              a_wr_valid,
  output logic              a_wr_ready,
  input  logic [DATA_W-1:0] a_wr_data [W],
  input  logic              b_wr_valid,
  output logic              b_wr_ready,
  input  logic [DATA_W-1:0] b_wr_data [W],
  output logic              o_rd_valid,
  input  logic              o_rd_ready,
  output logic [DATA_W-1:0] o_rd_data [W]
);

  // Bits complemented for ascending order: the key field only.
  localparam logic [DATA_W-1:0] FLIP = ASCENDING ? ~({DATA_W{1'b1}} >> KEY_W) : '0;

  logic [DATA_W-1:0] a_in [W], b_in [W], o_q [W];
  logic [DATA_W-1:0] a_head [W], b_head [W], m_data [W];
  logic [W-1:0]      a_avail, b_avail, a_deq, b_deq, o_avail;
  logic              m_valid, m_ready;

  banked_fifo #(.W(W), .DATA_W(DATA_W), .DEPTH(IN_DEPTH)) u_fifo_a (
    .clk(clk), .rst_n(rst_n), .wr_valid(a_wr_valid), .wr_ready(a_wr_ready), .wr_data(a_in),
    .head(a_head), .avail(a_avail), .deq(a_deq));

  banked_fifo #(.W(W), .DATA_W(DATA_W), .DEPTH(IN_DEPTH)) u_fifo_b (
    .clk(clk), .rst_n(rst_n), .wr_valid(b_wr_valid), .wr_ready(b_wr_ready), .wr_data(b_in),
    .head(b_head), .avail(b_avail), .deq(b_deq));

  if (ROW_DEQ) begin : g_flimsj
    logic a_row_deq, b_row_deq;
    flimsj_merger #(.W(W), .DATA_W(DATA_W), .KEY_W(KEY_W)) u_merger (
      .clk(clk), .rst_n(rst_n),
      .a_row(a_head), .a_valid(&a_avail), .a_deq(a_row_deq),
      .b_row(b_head), .b_valid(&b_avail), .b_deq(b_row_deq),
      .out_ready(m_ready), .out_valid(m_valid), .out_data(m_data));
    assign a_deq = {W{a_row_deq}};
    assign b_deq = {W{b_row_deq}};
  end else begin : g_flims
    flims_merger #(.W(W), .DATA_W(DATA_W), .KEY_W(KEY_W), .VARIANT(VARIANT)) u_merger (
      .clk(clk), .rst_n(rst_n),
      .a_head(a_head), .a_avail(a_avail), .a_deq(a_deq),
      .b_head(b_head), .b_avail(b_avail), .b_deq(b_deq),
      .out_ready(m_ready), .out_valid(m_valid), .out_data(m_data));
  end

  // Output queue O: written and read one whole row at a time.
  banked_fifo #(.W(W), .DATA_W(DATA_W), .DEPTH(OUT_DEPTH)) u_fifo_o (
    .clk(clk), .rst_n(rst_n), .wr_valid(m_valid), .wr_ready(m_ready), .wr_data(m_data),
    .head(o_q), .avail(o_avail), .deq({W{o_rd_valid & o_rd_ready}}));

  assign o_rd_valid = &o_avail;

  always_comb begin
    for (int j = 0; j < W; j++) begin
      a_in[j]      = a_wr_data[j] ^ FLIP;
      b_in[j]      = b_wr_data[j] ^ FLIP;
      o_rd_data[j] = o_q[j] ^ FLIP;
    end
  end

endmodule
