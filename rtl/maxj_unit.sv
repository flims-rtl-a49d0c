// maxj_unit -- selector entity of FLiMSj, the FLiMS variant that dequeues
// whole rows of w elements from its inputs.
//
// Besides the heads cA_i (bank A_i) and cB_i (bank B_{w-1-i}) the unit holds a
// row-buffer register cR_i and a bit src_i saying which list cR_i belongs to
// (1: B, 0: A).  The A-side candidate is cR_i when src_i=0, else cA_i; the
// B-side candidate is cR_i when src_i=1, else cB_i.  On fire the greater goes
// to in_o and dir (combinational) tells which side won (1: B).  If the winner
// was cR_i, cR_i is refilled from the row register that MAX_0's decision dir0
// names (cB_i if dir0 else cA_i) and src_i follows dir0.  The merger then
// replaces that whole row (load_a or load_b), which is how all units share one
// dequeue signal per list.  This follows the paper's FLiMSj pseudocode.
// Initial fill is this design's choice: load_r puts the first B row in cR
// (src=1), after which cA takes the first A row and cB the second B row.
//
// Timing: dir is combinational from the registers; in_o, cA, cB, cR and src
// update at the clock edge.
module maxj_unit #(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned KEY_W  = DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fire,
  input  logic              dir0,
  output logic              dir,
  input  logic              load_a,
  input  logic [DATA_W-1:0] a_in,
  input  logic              load_b,
  input  logic              load_r,
  input  logic [DATA_W-1:0] b_in,
  output logic [DATA_W-1:0] in_o
);

  logic [DATA_W-1:0] ca_q, cb_q, cr_q;
  logic              src_q;
  logic [DATA_W-1:0] a_side, b_side;

  always_comb begin
    a_side = src_q ? ca_q : cr_q;
    b_side = src_q ? cr_q : cb_q;
    dir    = !(a_side[DATA_W-1 -: KEY_W] > b_side[DATA_W-1 -: KEY_W]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      src_q <= 1'b1;
    end else begin
      if (fire) begin
        in_o <= dir ? b_side : a_side;
        if (src_q == dir) begin
          src_q <= dir0;
          cr_q  <= dir0 ? cb_q : ca_q;
        end
      end
      if (load_r) begin
        cr_q  <= b_in;
        src_q <= 1'b1;
      end
      if (load_a) ca_q <= a_in;
      if (load_b) cb_q <= b_in;
    end
  end

  a_no_init_on_fire: assert property (@(posedge clk) disable iff (!rst_n) !(fire && load_r));

endmodule
