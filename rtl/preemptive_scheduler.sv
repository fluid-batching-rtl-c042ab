// preemptive_scheduler: exit-aware, SLO-aware preemptive batch scheduler.
//
// A state machine that carries out the paper's scheduling algorithm:
//  * When idle and the queue is not empty, it starts a batch of
//    min(N_Q, B_MAX) samples and lets the NPU run to the first exit.
//  * At exit i of the active batch (i below the last exit), with
//    B_rem = B_act - B_exit samples left and room in the batch, it forms
//    B_incr = min(N_Q, B_MAX - B_rem) and evaluates the criterion
//        T_overhead < T_slack, where
//        T_overhead = sum_{e<=i} LAT[e][B_incr] + sum_{e>i} LAT[e][B_rem+B_incr]
//        T_slack    = T_SLO - (now - arrival of the oldest active sample).
//    If it holds, it preempts: the remaining batch is parked and the new one
//    runs from layer 0 to exit i; exits on the way only shrink it (no nested
//    preemption). At exit i the two merge and the check repeats at the same
//    exit, as in the inner loop of the algorithm. Otherwise execution moves on
//    to the next exit.
//  * At the last exit every sample leaves and the scheduler is idle again.
// The criterion sum is formed over N_EXITS cycles from the two read ports of
// the latency table (exit_latency_lut, instantiated here). Times are in clock
// cycles from a free-running counter (now).
// Handshakes (this design's choice): start/preempt with b_incr load the batch
// buffer and the FBE CU; proceed tells the layer runner to run to the next
// exit; exit_evt/exit_idx report that the runner stopped at an exit.
// The paper runs this algorithm in software on the host CPU; here it is a
// hardware state machine. When the batch empties completely at an
// intermediate exit, or the queue is empty, no backfill is attempted and the
// scheduler goes idle or moves on (the paper does not say).
module preemptive_scheduler #(
  parameter int unsigned N_EXITS = 4,
  parameter int unsigned B_MAX   = 8,
  parameter int unsigned Q_DEPTH = 32,
  parameter int unsigned TIME_W  = 32,
  parameter int unsigned LAT_W   = 32,
  localparam int unsigned EW = (N_EXITS > 1) ? $clog2(N_EXITS) : 1,
  localparam int unsigned CW = $clog2(B_MAX + 1),
  localparam int unsigned NW = $clog2(Q_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TIME_W-1:0] now,
  input  logic [TIME_W-1:0] t_slo,
  // latency table fill port
  input  logic              lat_we,
  input  logic [EW-1:0]     lat_exit,
  input  logic [CW-1:0]     lat_bsize,
  input  logic [LAT_W-1:0]  lat_val,
  // system state
  input  logic [NW-1:0]     n_q,
  input  logic              bfb_busy,
  input  logic [CW-1:0]     b_act,
  input  logic              parked,
  input  logic [TIME_W-1:0] oldest_time,
  // commands
  output logic              start,
  output logic              preempt,
  output logic [CW-1:0]     b_incr,
  output logic              proceed,
  input  logic              exit_evt,
  input  logic [EW-1:0]     exit_idx,
  // status
  output logic              idle,
  output logic [EW-1:0]     cur_exit,
  output logic [31:0]       n_preempt,
  output logic [31:0]       n_decline
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_LOADW, S_RUN, S_SETTLE, S_CHECK, S_SUM, S_DECIDE,
    S_NEXT, S_PROCEED
  } state_e;

  state_e state;
  logic [EW-1:0]   sum_e;
  logic [LAT_W+EW:0] overhead;
  logic [CW-1:0]   b_rem;
  logic [LAT_W-1:0] lat_a, lat_b;

  exit_latency_lut #(.N_EXITS(N_EXITS), .B_MAX(B_MAX), .LAT_W(LAT_W)) u_lut (
    .clk, .rst_n, .cfg_we(lat_we), .cfg_exit(lat_exit), .cfg_bsize(lat_bsize),
    .cfg_lat(lat_val),
    .rd_exit_a(sum_e), .rd_b_a(b_incr), .lat_a,
    .rd_exit_b(sum_e), .rd_b_b(b_rem + b_incr), .lat_b);

  localparam int unsigned SXW = (TIME_W > LAT_W + EW + 1 ? TIME_W : LAT_W + EW + 1) + 2;
  logic signed [SXW-1:0] slack, ovh_s;
  assign slack = $signed(SXW'(t_slo)) - $signed(SXW'(now - oldest_time));
  assign ovh_s = $signed(SXW'(overhead));

  logic [CW-1:0] room;
  assign room = CW'(B_MAX) - b_act;

  assign idle = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; start <= 1'b0; preempt <= 1'b0; proceed <= 1'b0;
      b_incr <= '0; b_rem <= '0; cur_exit <= '0; sum_e <= '0; overhead <= '0;
      n_preempt <= '0; n_decline <= '0;
    end else begin
      start <= 1'b0; preempt <= 1'b0; proceed <= 1'b0;
      unique case (state)
        S_IDLE: if (n_q != '0 && !bfb_busy) begin
          b_incr   <= (32'(n_q) > B_MAX) ? CW'(B_MAX) : CW'(n_q);
          start    <= 1'b1;
          cur_exit <= '0;
          state    <= S_LOAD;
        end
        S_LOAD:  state <= S_LOADW;           // batch buffer raises busy
        S_LOADW: if (!bfb_busy) state <= S_PROCEED;
        S_PROCEED: begin
          proceed <= 1'b1;
          state   <= S_RUN;
        end
        S_RUN: if (exit_evt) begin
          if (parked && exit_idx != cur_exit)
            state <= S_PROCEED;             // catching up: no nested preemption
          else if (!parked && 32'(exit_idx) == N_EXITS - 1)
            state <= S_IDLE;                // last exit: everyone leaves
          else
            state <= S_SETTLE;              // wait for B_act / merge to settle
        end
        S_SETTLE: begin
          if (b_act == '0) state <= S_IDLE;
          else             state <= S_CHECK;
        end
        S_CHECK: begin
          if (b_act < CW'(B_MAX) && n_q != '0) begin
            b_rem    <= b_act;
            b_incr   <= (32'(n_q) > 32'(room)) ? room : CW'(n_q);
            sum_e    <= '0;
            overhead <= '0;
            state    <= S_SUM;
          end else begin
            state <= S_NEXT;
          end
        end
        S_SUM: begin
          overhead <= overhead + ((sum_e <= cur_exit) ? (LAT_W+EW+1)'(lat_a)
                                                      : (LAT_W+EW+1)'(lat_b));
          if (32'(sum_e) == N_EXITS - 1) state <= S_DECIDE;
          else sum_e <= sum_e + EW'(1);
        end
        S_DECIDE: begin
          if (ovh_s < slack) begin
            preempt   <= 1'b1;
            n_preempt <= n_preempt + 1;
            state     <= S_LOAD;
          end else begin
            n_decline <= n_decline + 1;
            state     <= S_NEXT;
          end
        end
        S_NEXT: begin
          cur_exit <= cur_exit + EW'(1);
          state    <= S_PROCEED;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
