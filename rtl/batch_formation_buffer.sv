// batch_formation_buffer: holds the active batch and, during a preemption,
// the parked one.
//
// Position s (0..act_cnt-1) of the active batch records the sample's ID, its
// arrival time and the physical activation slot (0..B_MAX-1) where its
// intermediate results live in off-chip memory. Slots are allocated from a
// free mask when a sample enters and freed when it exits, so the preempted
// and the new batch never overwrite each other's activations; since at most
// B_MAX samples are in flight, B_MAX slots suffice. This matches the paper's
// remark that activation buffers for B_MAX samples are allocated once at
// start-up.
// Operations (one at a time, issued by the scheduler and the layer runner):
//   load (n, park)   : if park, the active batch becomes the parked one,
//                      otherwise its slots are released; then
//                      n samples are taken from the head of the request queue,
//                      one per cycle (busy is high meanwhile).
//   exit (mask, merge): masked positions leave the batch (their IDs appear on
//                      cmpl_* for one cycle), the rest are compacted in order;
//                      with merge the parked batch is put in front of them.
// oldest_time is the earliest arrival time in the active batch.
// The slot scheme and the operation encoding are this design's choices.
module batch_formation_buffer #(
  parameter int unsigned B_MAX  = 8,
  parameter int unsigned ID_W   = 16,
  parameter int unsigned TIME_W = 32,
  localparam int unsigned CW = $clog2(B_MAX + 1),
  localparam int unsigned SW = (B_MAX > 1) ? $clog2(B_MAX) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // load
  input  logic              load,
  input  logic              park,
  input  logic [CW-1:0]     load_n,
  output logic              busy,
  // request queue head
  input  logic              q_empty,
  input  logic [ID_W-1:0]   q_id,
  input  logic [TIME_W-1:0] q_time,
  output logic              q_pop,
  // exit
  input  logic              exit_evt,
  input  logic [B_MAX-1:0]  exit_mask,
  input  logic              merge,
  output logic              cmpl_valid,
  output logic [B_MAX-1:0]  cmpl_mask,
  output logic [ID_W-1:0]   cmpl_id [B_MAX],
  // active batch
  output logic [CW-1:0]     act_cnt,
  output logic [ID_W-1:0]   act_id   [B_MAX],
  output logic [SW-1:0]     act_slot [B_MAX],
  output logic [TIME_W-1:0] oldest_time,
  output logic [CW-1:0]     old_cnt
);

  logic [TIME_W-1:0] act_time [B_MAX];
  logic [ID_W-1:0]   old_id   [B_MAX];
  logic [TIME_W-1:0] old_time [B_MAX];
  logic [SW-1:0]     old_slot [B_MAX];
  logic [B_MAX-1:0]  slot_used;
  logic [CW-1:0]     remaining;

  assign busy  = (remaining != '0);
  assign q_pop = busy && !q_empty;

  // lowest free slot
  logic [SW-1:0] free_slot;
  always_comb begin
    free_slot = '0;
    for (int i = B_MAX - 1; i >= 0; i--)
      if (!slot_used[i]) free_slot = SW'(i);
  end

  always_comb begin
    oldest_time = '1;
    for (int s = 0; s < B_MAX; s++)
      if (CW'(s) < act_cnt && act_time[s] < oldest_time) oldest_time = act_time[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_cnt <= '0; old_cnt <= '0; remaining <= '0; slot_used <= '0;
      cmpl_valid <= 1'b0; cmpl_mask <= '0;
      for (int s = 0; s < B_MAX; s++) begin
        act_id[s] <= '0; act_time[s] <= '0; act_slot[s] <= '0;
        old_id[s] <= '0; old_time[s] <= '0; old_slot[s] <= '0;
        cmpl_id[s] <= '0;
      end
    end else begin
      cmpl_valid <= 1'b0;
      if (load) begin
        remaining <= (load_n > CW'(B_MAX)) ? CW'(B_MAX) : load_n;
        act_cnt   <= '0;
        if (!park) begin
          // an abandoned active batch gives its slots back
          for (int s = 0; s < B_MAX; s++)
            if (CW'(s) < act_cnt) slot_used[act_slot[s]] <= 1'b0;
        end else begin
          old_cnt <= act_cnt;
          for (int s = 0; s < B_MAX; s++) begin
            old_id[s] <= act_id[s]; old_time[s] <= act_time[s];
            old_slot[s] <= act_slot[s];
          end
        end
      end else if (busy) begin
        if (q_empty) begin
          remaining <= '0;              // queue ran dry: keep what we have
        end else begin
          act_id[act_cnt[SW-1:0]]   <= q_id;
          act_time[act_cnt[SW-1:0]] <= q_time;
          act_slot[act_cnt[SW-1:0]] <= free_slot;
          slot_used[free_slot] <= 1'b1;
          act_cnt   <= act_cnt + CW'(1);
          remaining <= remaining - CW'(1);
        end
      end else if (exit_evt) begin
        automatic logic [CW-1:0] n = merge ? old_cnt : '0;
        cmpl_valid <= 1'b1;
        cmpl_mask  <= exit_mask;
        for (int s = 0; s < B_MAX; s++) cmpl_id[s] <= act_id[s];
        if (merge) begin
          for (int s = 0; s < B_MAX; s++) begin
            if (CW'(s) < old_cnt) begin
              act_id[s] <= old_id[s]; act_time[s] <= old_time[s];
              act_slot[s] <= old_slot[s];
            end
          end
          old_cnt <= '0;
        end
        for (int s = 0; s < B_MAX; s++) begin
          if (CW'(s) < act_cnt) begin
            if (exit_mask[s]) begin
              slot_used[act_slot[s]] <= 1'b0;
            end else if (32'(n) < B_MAX) begin
              act_id[n[SW-1:0]]   <= act_id[s];
              act_time[n[SW-1:0]] <= act_time[s];
              act_slot[n[SW-1:0]] <= act_slot[s];
              n = n + CW'(1);
            end
          end
        end
        act_cnt <= n;
      end
    end
  end

endmodule
