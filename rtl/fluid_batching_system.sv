// fluid_batching_system: exit-aware preemptive serving of an early-exit
// network on a Fluid Batching NPU.
//
// Requests (sample IDs) enter the request FIFO. The preemptive scheduler
// starts a batch of up to B_MAX samples, which the batch formation buffer
// takes from the FIFO. A layer runner then drives the NPU one layer at a
// time: for layer l of the model (from the layer table) and the active batch
// size B_act, both held by the Fluid Batching Engine's CU, the FBCB supplies
// <B_R, B_P, k>, and the NPU runs the layer over the whole batch with that
// batching policy and PE configuration. After an exit classifier the exit
// decision compares each sample's confidence with the threshold; exiting
// samples leave the batch (cmpl_*), B_exit goes to the CU and the scheduler,
// and the runner halts. The scheduler then either lets the batch continue
// to the next exit, or preempts it: the remaining samples are parked, a new
// batch of B_incr samples runs from layer 0 to the same exit, and the two are
// merged there. At the last exit all samples complete.
//
// Off-chip memory is outside this block (mem_* port, one word per cycle,
// read data one cycle after mem_re). Its layout:
//   request image of sample ID n : img_base + n << IMG_LOG2
//   output of layer l, slot q    : act_base + q << SLOT_LOG2 + l << REGION_LOG2
//   weights of layer l           : layer table w_base
// Each of the B_MAX slots belongs to one in-flight sample, so parked and new
// samples never share activation space. The configuration ports fill the
// layer table, the FBCB and the exit latency table; t_slo is the latency SLO
// in cycles. Counters report the mechanisms for monitoring.
// This design's own choices: the layer runner, the slot-based memory layout,
// the configuration ports, and running the scheduler in hardware (the paper
// runs it on the host CPU).
// rst_n is an asynchronous reset of every register; it also disables the
// handshake assertions in the sub-blocks, which lint reports as a reset used
// both synchronously and asynchronously. No register uses it synchronously.
module fluid_batching_system
  import fb_pkg::*;
#(
  parameter int unsigned N_LAYERS    = 62,
  parameter int unsigned N_EXITS     = 4,
  parameter int unsigned B_MAX       = 8,
  parameter int unsigned T_R         = 4652,
  parameter int unsigned T_P         = 7,
  parameter int unsigned T_C         = 128,
  parameter int unsigned Q_DEPTH     = 32,
  parameter int unsigned ID_W        = 16,
  parameter int unsigned THRESH      = 205,
  parameter int unsigned IMG_LOG2    = 20,
  parameter int unsigned REGION_LOG2 = 20,
  parameter int unsigned SLOT_LOG2   = 26,
  localparam int unsigned LW  = $clog2(N_LAYERS + 1),
  localparam int unsigned TLW = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1,
  localparam int unsigned EW  = (N_EXITS > 1) ? $clog2(N_EXITS) : 1,
  localparam int unsigned CW  = $clog2(B_MAX + 1),
  localparam int unsigned SW  = (B_MAX > 1) ? $clog2(B_MAX) : 1,
  localparam int unsigned NW  = $clog2(Q_DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration
  input  logic             lt_we,
  input  logic [TLW-1:0]   lt_idx,
  input  layer_desc_t      lt_desc,
  input  logic             fbcb_we,
  input  logic [TLW-1:0]   fbcb_layer,
  input  logic [CW-1:0]    fbcb_bsize,
  input  logic [CW-1:0]    fbcb_br,
  input  pe_mode_e         fbcb_k,
  input  logic             lat_we,
  input  logic [EW-1:0]    lat_exit,
  input  logic [CW-1:0]    lat_bsize,
  input  logic [31:0]      lat_val,
  input  logic [31:0]      t_slo,
  input  addr_t            img_base,
  input  addr_t            act_base,
  // requests
  input  logic             req_push,
  input  logic [ID_W-1:0]  req_id,
  output logic             req_full,
  output logic [NW-1:0]    queue_size,
  // completions
  output logic             cmpl_valid,
  output logic [B_MAX-1:0] cmpl_mask,
  output logic [ID_W-1:0]  cmpl_id [B_MAX],
  output logic [EW-1:0]    cmpl_exit,
  // off-chip memory
  output logic             mem_re,
  output logic             mem_we,
  output addr_t            mem_addr,
  output data_t            mem_wdata,
  input  data_t            mem_rdata,
  // monitoring
  output logic [31:0]      now,
  output logic             sched_idle,
  output logic [CW-1:0]    b_act,
  output logic [LW-1:0]    layer,
  output logic             layer_start,
  output logic [CW-1:0]    pol_br,
  output logic [CW-1:0]    pol_bp,
  output pe_mode_e         pol_k,
  output logic             exit_evt,
  output logic [CW-1:0]    b_exit,
  output logic             merge,
  output logic             parked,
  output logic [31:0]      n_preempt,
  output logic [31:0]      n_decline,
  output logic [31:0]      n_comp_cycles,
  output logic [31:0]      n_busy_cycles,
  output logic [EW-1:0]    sched_exit,
  output logic [CW-1:0]    act_cnt,
  output logic [CW-1:0]    old_cnt,
  output logic [CW-1:0]    b_old,
  output logic [LW-1:0]    l_old,
  output logic             preempt_err,
  output logic             npu_busy
);

  // ---------------- time base ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= '0;
    else        now <= now + 1;

  // ---------------- request FIFO ----------------
  logic            q_pop, q_empty;
  logic [ID_W-1:0] q_id;
  logic [31:0]     q_time;

  request_fifo #(.DEPTH(Q_DEPTH), .ID_W(ID_W), .TIME_W(32)) u_fifo (
    .clk, .rst_n, .now, .push(req_push), .push_id(req_id), .pop(q_pop),
    .head_id(q_id), .head_time(q_time), .count(queue_size), .full(req_full),
    .empty(q_empty));

  // ---------------- scheduler ----------------
  logic          start, preempt, proceed, bfb_busy;
  logic [CW-1:0] b_incr;
  logic [EW-1:0] exit_idx;
  logic [31:0]   oldest_time;

  preemptive_scheduler #(.N_EXITS(N_EXITS), .B_MAX(B_MAX), .Q_DEPTH(Q_DEPTH),
                         .TIME_W(32), .LAT_W(32)) u_sched (
    .clk, .rst_n, .now, .t_slo,
    .lat_we, .lat_exit, .lat_bsize, .lat_val,
    .n_q(queue_size), .bfb_busy, .b_act, .parked, .oldest_time,
    .start, .preempt, .b_incr, .proceed, .exit_evt, .exit_idx,
    .idle(sched_idle), .cur_exit(sched_exit), .n_preempt, .n_decline);

  // ---------------- batch formation buffer ----------------
  logic [B_MAX-1:0] exit_mask;
  logic [ID_W-1:0]  act_id   [B_MAX];
  logic [SW-1:0]    act_slot [B_MAX];

  batch_formation_buffer #(.B_MAX(B_MAX), .ID_W(ID_W), .TIME_W(32)) u_bfb (
    .clk, .rst_n, .load(start | preempt), .park(preempt), .load_n(b_incr),
    .busy(bfb_busy), .q_empty, .q_id, .q_time, .q_pop,
    .exit_evt, .exit_mask, .merge, .cmpl_valid, .cmpl_mask, .cmpl_id,
    .act_cnt, .act_id, .act_slot, .oldest_time, .old_cnt);

  // ---------------- Fluid Batching Engine ----------------
  logic          layer_done;

  fluid_batching_engine #(.N_LAYERS(N_LAYERS), .B_MAX(B_MAX)) u_fbe (
    .clk, .rst_n, .start, .preempt, .b_incr, .layer_done, .exit_evt, .b_exit,
    .cfg_we(fbcb_we), .cfg_layer(fbcb_layer), .cfg_bsize(fbcb_bsize),
    .cfg_br(fbcb_br), .cfg_k(fbcb_k),
    .b_act, .layer, .b_old, .l_old, .parked, .merge, .preempt_err,
    .pol_br, .pol_bp, .pol_k);

  // ---------------- layer table ----------------
  layer_desc_t ltab [N_LAYERS];
  layer_desc_t cur;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LAYERS; l++) ltab[l] <= '0;
    end else if (lt_we && 32'(lt_idx) < N_LAYERS) begin
      ltab[lt_idx] <= lt_desc;
    end
  end
  assign cur = (32'(layer) < N_LAYERS) ? ltab[TLW'(layer)] : '0;

  // ---------------- NPU ----------------
  logic  npu_done;
  addr_t in_base  [B_MAX];
  addr_t out_base [B_MAX];
  data_t conf     [B_MAX];

  always_comb begin
    for (int s = 0; s < B_MAX; s++) begin
      if (cur.src_img)
        in_base[s] = img_base + (addr_t'(act_id[s]) << IMG_LOG2);
      else
        in_base[s] = act_base + (addr_t'(act_slot[s]) << SLOT_LOG2)
                              + (addr_t'(cur.src_layer) << REGION_LOG2);
      out_base[s] = act_base + (addr_t'(act_slot[s]) << SLOT_LOG2)
                             + (addr_t'(layer) << REGION_LOG2);
    end
  end

  npu_core #(.T_R(T_R), .T_P(T_P), .T_C(T_C), .B_MAX(B_MAX), .DIM_W(16)) u_npu (
    .clk, .rst_n, .start(layer_start),
    .dim_r(cur.r), .dim_p(cur.p), .dim_c(cur.c), .w_base(cur.w_base), .geom(cur.geom),
    .in_base, .out_base, .b_act, .pol_br, .pol_k,
    .busy(npu_busy), .done(npu_done),
    .mem_re, .mem_we, .mem_addr, .mem_wdata, .mem_rdata,
    .conf, .n_comp_cycles, .n_busy_cycles);

  // ---------------- exit decision ----------------
  logic is_final;
  assign is_final = (32'(cur.exit_idx) >= N_EXITS - 1);

  exit_decision #(.B_MAX(B_MAX), .THRESH(THRESH)) u_exit (
    .conf, .b_act, .final_exit(is_final), .exit_mask, .b_exit);

  // ---------------- layer runner ----------------
  typedef enum logic [2:0] {R_HALT, R_ISSUE, R_WAIT, R_NEXT, R_EXIT} run_e;
  run_e rstate;

  assign exit_idx = EW'(cur.exit_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate <= R_HALT; layer_start <= 1'b0; layer_done <= 1'b0;
      exit_evt <= 1'b0; cmpl_exit <= '0;
    end else begin
      layer_start <= 1'b0;
      layer_done  <= 1'b0;
      exit_evt    <= 1'b0;
      unique case (rstate)
        R_HALT:  if (proceed) rstate <= R_ISSUE;
        R_ISSUE: begin
          layer_start <= 1'b1;
          rstate      <= R_WAIT;
        end
        R_WAIT: if (npu_done) begin
          if (cur.is_exit) begin
            // exit decision is combinational on conf; fire next cycle
            rstate <= R_EXIT;
          end else begin
            layer_done <= 1'b1;
            rstate     <= R_NEXT;
          end
        end
        R_NEXT: rstate <= R_ISSUE;       // l has advanced
        R_EXIT: begin
          layer_done <= 1'b1;
          exit_evt   <= 1'b1;
          cmpl_exit  <= exit_idx;
          rstate     <= R_HALT;
        end
        default: rstate <= R_HALT;
      endcase
    end
  end

endmodule
