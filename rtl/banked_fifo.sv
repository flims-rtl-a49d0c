// banked_fifo -- w independent FIFO banks holding one list in round-robin
// order (element k of a row goes to bank k).
//
// Used for the input queues A and B of the merger and for its output queue
// O.  A row of W elements is written in one cycle through a valid/ready
// handshake; it is accepted only when every bank has room, where a full bank
// that is being dequeued in the same cycle counts as having room (so wr_ready
// depends combinationally on deq).  Without that pass-through, a depth-2
// queue feeding the merger loses about one cycle in twelve.  Each bank is read
// on its own: head[j] is its oldest element (valid when avail[j]), and deq[j]
// removes it.  A row-wide reader simply drives all deq bits together.  Each
// bank is a DEPTH-entry register array with read/write pointers; a write and
// a dequeue may happen in the same cycle.  The paper gives these queues as
// banked BRAM or distributed-memory FIFOs and sets their depth to 2 in its
// evaluation; the circular-buffer structure and the handshake are this
// design's own.
module banked_fifo #(
  parameter int unsigned W      = 4,
  parameter int unsigned DATA_W = 64,
  parameter int unsigned DEPTH  = 2,
  localparam int unsigned PW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [DATA_W-1:0] wr_data [W],
  output logic [DATA_W-1:0] head    [W],
  output logic [W-1:0]      avail,
  input  logic [W-1:0]      deq
);

  logic [DATA_W-1:0] mem_q [W][DEPTH];
  logic [PW-1:0]     rd_q  [W];
  logic [PW-1:0]     wr_q  [W];
  logic [CW-1:0]     cnt_q [W];
  logic [W-1:0]      room;
  logic [W-1:0]      pop;
  logic              push;

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    for (int j = 0; j < W; j++) begin
      avail[j] = cnt_q[j] != '0;
      pop[j]   = deq[j] & avail[j];
      room[j]  = (cnt_q[j] != CW'(DEPTH)) | pop[j];
      head[j]  = mem_q[j][rd_q[j]];
    end
  end

  assign wr_ready = &room;
  assign push     = wr_valid & wr_ready;

  for (genvar j = 0; j < W; j++) begin : g_bank
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        rd_q[j]  <= '0;
        wr_q[j]  <= '0;
        cnt_q[j] <= '0;
      end else begin
        if (push) begin
          mem_q[j][wr_q[j]] <= wr_data[j];
          wr_q[j]           <= next_ptr(wr_q[j]);
        end
        if (pop[j]) rd_q[j] <= next_ptr(rd_q[j]);
        cnt_q[j] <= cnt_q[j] + CW'(push) - CW'(pop[j]);
      end
    end
    a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) deq[j] |-> avail[j]);
  end

endmodule
