// butterfly_net -- pipelined CAS network of FLiMS (bitonic partial merger
// without its first, half-cleaner, stage).
//
// Input is the w-element chunk chosen by the selector stage: the top w of the
// 2w candidate heads, which form a rotated bitonic sequence.  log2(W) columns
// of cas_unit sort it into descending order: column s compares wires j and
// j+d with d = W/2^(s+1), the greater going to the lower index (for W=4:
// pairs (0,2),(1,3) then (0,1),(2,3)).  Every column ends in a register, so
// the latency is log2(W) cycles and one chunk can enter per cycle.  All
// stages hold while en is low.  The network is correct only for bitonic
// input; it is not a general sorting network.
//
// Ports: in_valid/in_data enter, out_valid/out_data leave log2(W) enabled
// cycles later, out_data[0] the largest.
module butterfly_net #(
  parameter int unsigned W      = 4,
  parameter int unsigned DATA_W = 64,
  parameter int unsigned KEY_W  = DATA_W,
  parameter bit          STABLE = 1'b0,
  localparam int unsigned LOGW  = $clog2(W),
  localparam int unsigned EW    = DATA_W + 3 + LOGW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          in_valid,
  input  logic [EW-1:0] in_data  [W],
  output logic          out_valid,
  output logic [EW-1:0] out_data [W]
);

  // stage_q[s] is the register after column s; stage_q[0..] fed from in_data.
  logic [EW-1:0] stage_d [LOGW][W];
  logic [EW-1:0] stage_q [LOGW][W];
  logic          vld_q   [LOGW];

  for (genvar s = 0; s < LOGW; s++) begin : g_col
    localparam int unsigned D = W >> (s + 1);
    for (genvar j = 0; j < W; j++) begin : g_wire
      if ((j & D) == 0) begin : g_cas
        if (s == 0) begin : g_first
          cas_unit #(.DATA_W(DATA_W), .KEY_W(KEY_W), .LOGW(LOGW), .STABLE(STABLE)) u_cas (
            .x(in_data[j]), .y(in_data[j+D]), .hi(stage_d[s][j]), .lo(stage_d[s][j+D]));
        end else begin : g_next
          cas_unit #(.DATA_W(DATA_W), .KEY_W(KEY_W), .LOGW(LOGW), .STABLE(STABLE)) u_cas (
            .x(stage_q[s-1][j]), .y(stage_q[s-1][j+D]), .hi(stage_d[s][j]), .lo(stage_d[s][j+D]));
        end
      end
    end

    always_ff @(posedge clk) begin
      if (en) stage_q[s] <= stage_d[s];
    end

    if (s == 0) begin : g_v0
      always_ff @(posedge clk) begin
        if (!rst_n)  vld_q[s] <= 1'b0;
        else if (en) vld_q[s] <= in_valid;
      end
    end else begin : g_vn
      always_ff @(posedge clk) begin
        if (!rst_n)  vld_q[s] <= 1'b0;
        else if (en) vld_q[s] <= vld_q[s-1];
      end
    end
  end

  assign out_data  = stage_q[LOGW-1];
  assign out_valid = vld_q[LOGW-1];

endmodule
