// max_unit -- one selector entity MAX_i of the FLiMS selector stage.
//
// The unit pairs bank A_i of list A with bank B_{w-1-i} of list B.  It keeps
// the last head taken from each bank in cA / cB (each with a valid bit) and,
// on every cycle the merger fires, copies the greater of the two into the
// output register in_i and replaces that one by the next element of its bank;
// the other head stays for the next comparison.  Together the w units select
// the top w of the 2w candidate heads each cycle without any rotation, which
// is the half-cleaner stage of the bitonic partial merger turned into MAX
// units.
//
// VARIANT (flims_pkg::variant_e) picks the tie rule:
//   FLIMS_BASIC  : A wins only if cA > cB.
//   FLIMS_SKEW   : compares {cA, dir} > {cB, !dir}; dir remembers which side
//                  won last, so on duplicates the winner alternates and both
//                  lists drain at a similar rate.  dir resets to 0.
//   FLIMS_STABLE : A wins on ties; in_i carries {src, order, port} tags
//                  (A: {1, orderA, w-1-i}, B: {0, orderB, i}); orderA/orderB
//                  start at 0 and count down on each dequeue.
// These follow the paper's three MAX-unit pseudocodes.  The valid bits,
// refilling an empty cA/cB from its bank as soon as the bank has data, and
// the global `fire` (all units ready and downstream ready) are this design's
// choices; the paper leaves stalls and list endings open.
//
// Timing: ready is combinational from registers; a_deq/b_deq are
// combinational from fire, the comparison and the bank flags; in_o is a
// register updated on fire.
module max_unit
  import flims_pkg::*;
#(
  parameter int unsigned W       = 4,
  parameter int unsigned DATA_W  = 64,
  parameter int unsigned KEY_W   = DATA_W,
  parameter int unsigned I       = 0,
  parameter variant_e    VARIANT = FLIMS_BASIC,
  localparam int unsigned LOGW   = $clog2(W),
  localparam int unsigned EW     = DATA_W + 3 + LOGW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fire,
  // bank A_i
  input  logic [DATA_W-1:0] a_head,
  input  logic              a_avail,
  output logic              a_deq,
  // bank B_{w-1-i}
  input  logic [DATA_W-1:0] b_head,
  input  logic              b_avail,
  output logic              b_deq,
  output logic              ready,
  output logic [EW-1:0]     in_o
);

  localparam logic [LOGW-1:0] PORT_A = LOGW'(W - 1 - I);
  localparam logic [LOGW-1:0] PORT_B = LOGW'(I);

  logic [DATA_W-1:0] ca_q, cb_q;
  logic              va_q, vb_q;
  logic              dir_q;
  logic [1:0]        ord_a_q, ord_b_q;
  logic              take_a;
  logic [KEY_W-1:0]  ka, kb;

  always_comb begin
    ka = ca_q[DATA_W-1 -: KEY_W];
    kb = cb_q[DATA_W-1 -: KEY_W];
    unique case (VARIANT)
      FLIMS_SKEW:   take_a = {ka, dir_q} > {kb, ~dir_q};
      FLIMS_STABLE: take_a = ka >= kb;
      default:      take_a = ka > kb;
    endcase
  end

  assign ready = va_q & vb_q;
  assign a_deq = a_avail & ((fire & take_a) | ~va_q);
  assign b_deq = b_avail & ((fire & ~take_a) | ~vb_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      va_q    <= 1'b0;
      vb_q    <= 1'b0;
      dir_q   <= 1'b0;
      ord_a_q <= 2'b00;
      ord_b_q <= 2'b00;
    end else begin
      // A side: refill when consumed or empty
      if (a_deq) begin
        ca_q <= a_head;
        va_q <= 1'b1;
      end else if (fire && take_a) begin
        va_q <= 1'b0;
      end
      if (b_deq) begin
        cb_q <= b_head;
        vb_q <= 1'b1;
      end else if (fire && !take_a) begin
        vb_q <= 1'b0;
      end
      if (fire) begin
        if (take_a) begin
          in_o    <= (VARIANT == FLIMS_STABLE) ? {ca_q, 1'b1, ord_a_q, PORT_A} : {ca_q, {(3+LOGW){1'b0}}};
          ord_a_q <= ord_a_q - 2'd1;
          dir_q   <= 1'b0;
        end else begin
          in_o    <= (VARIANT == FLIMS_STABLE) ? {cb_q, 1'b0, ord_b_q, PORT_B} : {cb_q, {(3+LOGW){1'b0}}};
          ord_b_q <= ord_b_q - 2'd1;
          dir_q   <= 1'b1;
        end
      end
    end
  end

  // The merger only fires when every unit holds two valid heads.
  a_fire_needs_heads: assert property (@(posedge clk) disable iff (!rst_n) fire |-> ready);

endmodule
