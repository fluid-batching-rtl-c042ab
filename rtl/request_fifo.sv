// request_fifo: the inference request queue.
//
// Each request carries a sample ID and is stamped with its arrival time on
// entry, so that the scheduler can compute how long the oldest sample of a
// batch has waited. The occupancy is the queue size N_Q that the scheduler
// reads. First-in first-out: the scheduler always takes samples from the
// head, which keeps batch forming O(1) as in the paper.
// Interface: push/push_id (ignored when full), pop (ignored when empty),
// head_id/head_time show the head entry combinationally, count = N_Q.
// The depth and the ID width are this design's choices.
module request_fifo #(
  parameter int unsigned DEPTH  = 32,
  parameter int unsigned ID_W   = 16,
  parameter int unsigned TIME_W = 32,
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned NW = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TIME_W-1:0] now,
  input  logic              push,
  input  logic [ID_W-1:0]   push_id,
  input  logic              pop,
  output logic [ID_W-1:0]   head_id,
  output logic [TIME_W-1:0] head_time,
  output logic [NW-1:0]     count,
  output logic              full,
  output logic              empty
);

  logic [ID_W-1:0]   ids   [DEPTH];
  logic [TIME_W-1:0] times [DEPTH];
  logic [PW-1:0]     rd_ptr, wr_ptr;

  assign full      = (count == NW'(DEPTH));
  assign empty     = (count == '0);
  assign head_id   = ids[rd_ptr];
  assign head_time = times[rd_ptr];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        ids[i]   <= '0;
        times[i] <= '0;
      end
    end else begin
      if (do_push) begin
        ids[wr_ptr]   <= push_id;
        times[wr_ptr] <= now;
        wr_ptr        <= inc(wr_ptr);
      end
      if (do_pop) rd_ptr <= inc(rd_ptr);
      count <= count + NW'(do_push) - NW'(do_pop);
    end
  end

endmodule
