// cas_unit -- compare-and-swap element of the FLiMS butterfly network.
//
// Purely combinational.  The greater of x and y leaves on hi (the upper wire
// of the network), the other on lo, so a column of these units sorts in
// descending order.  Only the upper KEY_W bits of the data field are compared;
// the rest of the data is payload that travels with its key.
//
// With STABLE=0 the comparison is on the key alone and ties keep x on hi.
// With STABLE=1 ties are broken by the tag bits below the data
// ({src, order[1:0], port}): source A (src=1) wins over B, then the 2-bit
// batch order decides (higher wins, except that 00 beats 11, because the
// order counters of the selector count down and wrap), then the higher port.
// This is the modified CAS of the stable-merge variation; using the tags as
// low-order tie-breakers is this design's choice.
//
// Element layout (EW = DATA_W + 3 + LOGW bits):
//   [EW-1 -: DATA_W]  data, key in its top KEY_W bits
//   [LOGW+2]          src   (1: list A, 0: list B)
//   [LOGW+1 : LOGW]   order (2-bit batch counter)
//   [LOGW-1 : 0]      port
module cas_unit #(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned KEY_W  = DATA_W,
  parameter int unsigned LOGW   = 2,
  parameter bit          STABLE = 1'b0,
  localparam int unsigned EW    = DATA_W + 3 + LOGW
) (
  input  logic [EW-1:0] x,
  input  logic [EW-1:0] y,
  output logic [EW-1:0] hi,
  output logic [EW-1:0] lo
);

  logic [KEY_W-1:0] kx, ky;
  logic             sx, sy;
  logic [1:0]       ox, oy;
  logic [LOGW-1:0]  px, py;
  logic             x_wins;

  always_comb begin
    kx = x[EW-1 -: KEY_W];
    ky = y[EW-1 -: KEY_W];
    sx = x[LOGW+2];
    sy = y[LOGW+2];
    ox = x[LOGW+1 -: 2];
    oy = y[LOGW+1 -: 2];
    px = x[LOGW-1:0];
    py = y[LOGW-1:0];
    if (kx != ky)                x_wins = kx > ky;
    else if (!STABLE)            x_wins = 1'b1;
    else if (sx != sy)           x_wins = sx;
    else if (ox != oy) begin
      if      (ox == 2'b00 && oy == 2'b11) x_wins = 1'b1;
      else if (ox == 2'b11 && oy == 2'b00) x_wins = 1'b0;
      else                                 x_wins = ox > oy;
    end
    else                         x_wins = px >= py;
    hi = x_wins ? x : y;
    lo = x_wins ? y : x;
  end

endmodule
