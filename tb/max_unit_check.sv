// max_unit_check -- harness around one max_unit (W=4, entity I=1) used by
// tb_max_unit.
//
// Bank A_i and bank B_{w-1-i} are modelled as queues holding descending
// streams of N elements with few distinct keys (many ties) and a payload
// {source, index} below the key, followed by sentinels.  The harness fires
// the unit at random whenever it is ready and hides bank heads at random.
// Each value leaving on in_o is compared with a reference built from the
// selection rule of the chosen variant: greater key wins; on equal keys B
// wins (basic), the side that lost last time wins (skew), or A wins
// (stable).  In the stable variant the tags must read {1, orderA, w-1-i}
// or {0, orderB, i} with the order counters starting at 0 and counting down.
module max_unit_check
  import flims_pkg::*;
#(
  parameter variant_e VARIANT = FLIMS_BASIC,
  parameter int       N       = 150
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   ties,
  output bit   done
);
  localparam int W = 4, I = 1, DATA_W = 16, KEY_W = 8, LOGW = 2, EW = DATA_W + 3 + LOGW;
  typedef logic [DATA_W-1:0] d_t;

  d_t la [N + 4];
  d_t lb [N + 4];
  int qa_i, qb_i;       // bank read pointers (what the unit has dequeued)
  int ra, rb;           // reference pointers
  bit rdir;
  logic [1:0] roa, rob;
  int nfired;
  logic [EW-1:0] exp_q [$];

  logic fire, ready, a_deq, b_deq, a_avail, b_avail, hide_a, hide_b;
  logic [EW-1:0] in_o;
  d_t a_head, b_head;

  max_unit #(.W(W), .DATA_W(DATA_W), .KEY_W(KEY_W), .I(I), .VARIANT(VARIANT)) u_dut (
    .clk(clk), .rst_n(rst_n), .fire(fire),
    .a_head(a_head), .a_avail(a_avail), .a_deq(a_deq),
    .b_head(b_head), .b_avail(b_avail), .b_deq(b_deq),
    .ready(ready), .in_o(in_o));

  initial begin
    automatic int unsigned ka [N];
    automatic int unsigned kb [N];
    foreach (ka[k]) begin ka[k] = 1 + $urandom % 6; kb[k] = 1 + $urandom % 6; end
    ka.rsort(); kb.rsort();
    for (int k = 0; k < N + 4; k++) begin
      la[k] = (k < N) ? {8'(ka[k]), 1'b1, 7'(k)} : '0;
      lb[k] = (k < N) ? {8'(kb[k]), 1'b0, 7'(k)} : '0;
    end
    checks = 0; failures = 0; ties = 0; done = 0;
  end

  assign a_avail = (qa_i < N + 4) && !hide_a;
  assign b_avail = (qb_i < N + 4) && !hide_b;
  assign a_head  = la[qa_i < N + 4 ? qa_i : 0];
  assign b_head  = lb[qb_i < N + 4 ? qb_i : 0];
  assign fire    = ready && !done && (($urandom % 4) != 0);

  always @(posedge clk) begin
    if (!rst_n) begin
      qa_i = 0; qb_i = 0; ra = 0; rb = 0; rdir = 0; roa = 0; rob = 0; nfired = 0;
      hide_a <= 0; hide_b <= 0;
    end else if (!done) begin
      // compare what the previous firing produced
      if (exp_q.size() > 0) begin
        logic [EW-1:0] e;
        e = exp_q.pop_front();
        checks++;
        if (in_o !== e) begin failures++; $display("max_unit(%s): in_o=%h expected %h", VARIANT.name(), in_o, e); end
      end
      if (fire) begin
        bit ta;
        logic [7:0] kka, kkb;
        kka = la[ra][15:8]; kkb = lb[rb][15:8];
        if (kka == kkb && ra < N && rb < N) ties++;
        case (VARIANT)
          FLIMS_SKEW:   ta = (kka > kkb) || (kka == kkb && rdir == 1'b1);
          FLIMS_STABLE: ta = kka >= kkb;
          default:      ta = kka > kkb;
        endcase
        if (ta) begin
          exp_q.push_back(VARIANT == FLIMS_STABLE ? {la[ra], 1'b1, roa, 2'(W - 1 - I)} : {la[ra], 5'b0});
          ra++; roa--; rdir = 0;
        end else begin
          exp_q.push_back(VARIANT == FLIMS_STABLE ? {lb[rb], 1'b0, rob, 2'(I)} : {lb[rb], 5'b0});
          rb++; rob--; rdir = 1;
        end
        nfired++;
        if (nfired == 2 * N) done <= 1'b1;
      end
      if (a_deq) qa_i++;
      if (b_deq) qb_i++;
      hide_a <= ($urandom % 5) == 0;
      hide_b <= ($urandom % 5) == 0;
    end
  end
endmodule
