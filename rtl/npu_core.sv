// npu_core: the GEMM NPU with Fluid Batching DMA and Stackable PEs.
//
// One layer is a matrix product: every sample's R x P input matrix times the
// layer's P x C weight matrix gives its R x C output matrix (the Toeplitz /
// im2col form of a convolution; a fully-connected layer has R = 1). The
// engine has T_C processing elements, each a MAC tree of width T_P, built as
// T_C/2 stackable pairs. A tile of T_R rows is pipelined through them, one
// row per cycle, and on-chip buffers hold an input tile (T_R x T_P words), a
// weight tile (T_P x T_C words) and an output tile of T_R x T_C accumulators.
//
// Per layer the Fluid Batching Engine supplies <B_R, k> (B_P follows).
//  * Fluid Batching: the DMA forms one matrix from the whole active batch
//    (fb_dma_agen): R_hat = B_R * R rows, B_P column blocks, guard zeros
//    padding each sample's P columns to a whole number of P-tiles. With a
//    convolution geometry the sample's R x P Toeplitz matrix is formed on
//    the fly from its stored feature map (zero where a tap is in padding).
//  * Stackable PEs: the effective engine shape is <T_R, T_P, T_C> for k = 1,
//    <T_R/2, 2*T_P, T_C/2> for k = 2 and <T_R/2, floor(T_P/2), 2*T_C> for
//    k = 1/2; all three fit the same buffers.
// Loop nest: row tile (T_Re rows of R_hat) > column block cb > output-column
// tile (T_Ce) > P-tile (T_Pe). For each P-tile the weight tile is loaded
// (T_Pe * nc cycles), then the input tile (nr * T_Pe cycles, plus two), then
// nr compute cycles accumulate into the output tile; after the last P-tile
// the nr * nc results are requantised to Q8.8 and written to each sample's
// output matrix, one word per cycle. Only the rows and columns that exist
// are moved (nr, nc clip the last tiles), so a small layer runs quickly even
// at full engine size.
// Memory port: one access per cycle; mem_re, mem_addr and mem_we are
// registered, and read data is expected on mem_rdata one cycle after mem_re
// is seen (two cycles after the request is formed); the off-chip memory
// itself is outside this block.
// conf[s] captures the value written to row 0, column 0 of sample s, which
// an exit head uses to hand its confidence to the exit decision.
// Following the paper: the engine shape, the per-layer <B_R, k> control,
// Eq. 1's matrix dimensions and the tile shapes under k. This design's own
// choices: the loop order, one memory word per cycle, no double buffering
// (the paper's buffers are double-buffered), guard padding to a multiple of
// the P-tile width, Q8.8 requantisation.
// Lint notes: the top bit of the address generator's sample index is never
// used because a valid element always has sample < B_MAX; the pairs'
// y_valid flags are not read because the output mapping below already
// selects the outputs that k makes valid; the weight placement is worked
// out at dimension width and only its low bits index the weight buffer,
// because a placement always lies inside the T_C x T_P buffer.
module npu_core
  import fb_pkg::*;
#(
  parameter int unsigned T_R   = 4652,
  parameter int unsigned T_P   = 7,
  parameter int unsigned T_C   = 128,
  parameter int unsigned B_MAX = 8,
  parameter int unsigned DIM_W = 16,
  localparam int unsigned CW = $clog2(B_MAX + 1),
  localparam int unsigned SW = (B_MAX > 1) ? $clog2(B_MAX) : 1,
  localparam int unsigned RHW = DIM_W + CW
) (
  input  logic             clk,
  input  logic             rst_n,
  // layer command
  input  logic             start,
  input  logic [DIM_W-1:0] dim_r,
  input  logic [DIM_W-1:0] dim_p,
  input  logic [DIM_W-1:0] dim_c,
  input  addr_t            w_base,
  input  conv_geom_t       geom,
  input  addr_t            in_base  [B_MAX],
  input  addr_t            out_base [B_MAX],
  input  logic [CW-1:0]    b_act,
  input  logic [CW-1:0]    pol_br,
  input  pe_mode_e         pol_k,
  output logic             busy,
  output logic             done,
  // off-chip memory port
  output logic             mem_re,
  output logic             mem_we,
  output addr_t            mem_addr,
  output data_t            mem_wdata,
  input  data_t            mem_rdata,
  // exit-head confidence and activity counters
  output data_t            conf [B_MAX],
  output logic [31:0]      n_comp_cycles,
  output logic [31:0]      n_busy_cycles
);

  localparam int unsigned NPAIR = T_C / 2;
  localparam int unsigned H     = T_P / 2;
  localparam int unsigned IBUF  = T_R * T_P;
  localparam int unsigned OBUF  = T_R * T_C;
  localparam int unsigned IW    = $clog2(IBUF + 1);
  localparam int unsigned OW    = $clog2(OBUF + 1);
  localparam int unsigned PEW   = (T_C > 1) ? $clog2(T_C) : 1;
  localparam int unsigned LNW   = (T_P > 1) ? $clog2(T_P) : 1;

  typedef enum logic [2:0] {S_IDLE, S_LW, S_LI, S_LID, S_LID2, S_COMP, S_WB, S_DONE} state_e;
  state_e state;

  // ---------------- layer registers ----------------
  logic [DIM_W-1:0] R, P, C, t_re, t_pe, t_ce, p_pad;
  logic [RHW-1:0]   r_hat_n;
  logic [CW-1:0]    br, bp, bact;
  pe_mode_e         k;
  addr_t            wb;
  conv_geom_t       gm;
  addr_t            ibase [B_MAX];
  addr_t            obase [B_MAX];

  // loop counters
  logic [RHW-1:0]   rt;          // row-tile start in R_hat
  logic [CW-1:0]    cb;          // column block
  logic [DIM_W-1:0] ct;          // output-column tile start
  logic [DIM_W-1:0] pt;          // P-tile start inside the padded segment
  logic [DIM_W-1:0] ii, jj;      // inner counters
  logic [DIM_W-1:0] nr, nc;      // rows / columns in this tile

  // ---------------- buffers ----------------
  data_t ibuf [IBUF];
  data_t wbuf [T_C][T_P];
  acc_t  obuf [OBUF];

  // ---------------- effective shape for a given k ----------------
  function automatic logic [DIM_W-1:0] eff_tr(pe_mode_e m);
    return (m == K_ONE) ? DIM_W'(T_R) : DIM_W'(T_R / 2);
  endfunction
  function automatic logic [DIM_W-1:0] eff_tp(pe_mode_e m);
    return (m == K_TWO) ? DIM_W'(2 * T_P) : (m == K_HALF) ? DIM_W'(H) : DIM_W'(T_P);
  endfunction
  function automatic logic [DIM_W-1:0] eff_tc(pe_mode_e m);
    return (m == K_TWO) ? DIM_W'(T_C / 2) : (m == K_HALF) ? DIM_W'(2 * T_C) : DIM_W'(T_C);
  endfunction

  function automatic logic [DIM_W-1:0] min_d(logic [DIM_W-1:0] a, logic [DIM_W-1:0] b);
    return (a < b) ? a : b;
  endfunction

  // ---------------- DMA address generator ----------------
  logic [RHW-1:0]   ag_rhat;
  logic [DIM_W-1:0] ag_col, ag_len, ag_row;
  logic             ag_valid;
  logic [CW-1:0]    ag_s;
  addr_t            ag_addr;
  addr_t            ag_base [B_MAX];
  conv_geom_t       ag_geom;

  always_comb begin
    ag_rhat = rt + RHW'(ii);
    if (state == S_WB) begin
      ag_col  = ct + jj;
      ag_len  = C;
      ag_base = obase;
      ag_geom = '0;
    end else begin
      ag_col  = pt + jj;
      ag_len  = P;
      ag_base = ibase;
      ag_geom = gm;
    end
  end

  fb_dma_agen #(.B_MAX(B_MAX), .DIM_W(DIM_W)) u_agen (
    .r_hat(ag_rhat), .cb, .col(ag_col), .n_rows(R), .row_len(ag_len),
    .b_act(bact), .b_r(br), .base(ag_base), .geom(ag_geom),
    .valid(ag_valid), .sample(ag_s), .row(ag_row), .addr(ag_addr));

  // ---------------- weight placement under k ----------------
  // weight (p, cc) of the tile -> PE and lane
  logic [DIM_W-1:0] wl_p, wl_c;
  logic [DIM_W-1:0] wl_pe, wl_lane;
  assign wl_p = ii;   // row of the weight tile
  assign wl_c = jj;   // column of the weight tile
  always_comb begin
    unique case (k)
      K_TWO: begin
        wl_pe   = DIM_W'(2) * wl_c + ((wl_p >= DIM_W'(T_P)) ? DIM_W'(1) : DIM_W'(0));
        wl_lane = (wl_p >= DIM_W'(T_P)) ? wl_p - DIM_W'(T_P) : wl_p;
      end
      K_HALF: begin
        wl_pe   = DIM_W'(2) * (wl_c / DIM_W'(4)) + ((wl_c % DIM_W'(4)) / DIM_W'(2));
        wl_lane = ((wl_c % DIM_W'(2)) * DIM_W'(H)) + wl_p;
      end
      default: begin
        wl_pe   = wl_c;
        wl_lane = wl_p;
      end
    endcase
  end

  // ---------------- PE array ----------------
  data_t x     [2*T_P];
  data_t pe_a  [T_C][T_P];
  acc_t  pair_y [NPAIR][4];
  logic [3:0] pair_v [NPAIR];
  acc_t  col_y [2*T_C];

  always_comb begin
    for (int j = 0; j < 2 * T_P; j++) begin
      x[j] = '0;
      if (DIM_W'(j) < t_pe && 32'(ii) * 32'(t_pe) + 32'(j) < IBUF)
        x[j] = ibuf[32'(ii) * 32'(t_pe) + 32'(j)];
    end
    for (int pe = 0; pe < T_C; pe++) begin
      for (int l = 0; l < T_P; l++) begin
        unique case (k)
          K_TWO:   pe_a[pe][l] = x[(pe % 2) * T_P + l];
          K_HALF:  pe_a[pe][l] = (l < 2 * H) ? x[l % (H > 0 ? H : 1)] : data_t'(0);
          default: pe_a[pe][l] = x[l];
        endcase
      end
    end
  end

  for (genvar g = 0; g < NPAIR; g++) begin : g_pair
    stackable_pe_pair #(.T_P(T_P)) u_pair (
      .k, .a0(pe_a[2*g]), .w0(wbuf[2*g]), .a1(pe_a[2*g+1]), .w1(wbuf[2*g+1]),
      .y(pair_y[g]), .y_valid(pair_v[g]));
  end

  // output column of each pair result under k
  always_comb begin
    for (int c = 0; c < 2 * T_C; c++) col_y[c] = '0;
    for (int g = 0; g < NPAIR; g++) begin
      unique case (k)
        K_TWO:  col_y[g] = pair_y[g][0];
        K_HALF: for (int m = 0; m < 4; m++) col_y[4*g+m] = pair_y[g][m];
        default: begin
          col_y[2*g]   = pair_y[g][0];
          col_y[2*g+1] = pair_y[g][1];
        end
      endcase
    end
  end

  // ---------------- memory read pipeline ----------------
  // stage 1 holds the request while the address is on the port, stage 2
  // while the memory answers
  logic             rd_pend, rd_zero, rd_isw;
  logic [PEW-1:0]   rd_a;
  logic [LNW-1:0]   rd_b;   // weight: PE, lane
  logic [IW-1:0]    rd_idx;       // input: buffer index
  logic             rd2_pend, rd2_zero, rd2_isw;
  logic [PEW-1:0]   rd2_a;
  logic [LNW-1:0]   rd2_b;
  logic [IW-1:0]    rd2_idx;

  // ---------------- control ----------------
  logic [OW-1:0] o_idx;
  assign o_idx = OW'(32'(ii) * 32'(t_ce) + 32'(jj));

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      mem_re <= 1'b0; mem_we <= 1'b0; mem_addr <= '0; mem_wdata <= '0;
      R <= '0; P <= '0; C <= '0; t_re <= '0; t_pe <= '0; t_ce <= '0; p_pad <= '0;
      r_hat_n <= '0; br <= '0; bp <= '0; bact <= '0; k <= K_ONE; wb <= '0; gm <= '0;
      rt <= '0; cb <= '0; ct <= '0; pt <= '0; ii <= '0; jj <= '0; nr <= '0; nc <= '0;
      rd_pend <= 1'b0; rd_zero <= 1'b0; rd_isw <= 1'b0; rd_a <= '0; rd_b <= '0; rd_idx <= '0;
      rd2_pend <= 1'b0; rd2_zero <= 1'b0; rd2_isw <= 1'b0; rd2_a <= '0; rd2_b <= '0; rd2_idx <= '0;
      n_comp_cycles <= '0; n_busy_cycles <= '0;
      for (int s = 0; s < B_MAX; s++) begin
        ibase[s] <= '0; obase[s] <= '0; conf[s] <= '0;
      end
      for (int c = 0; c < T_C; c++)
        for (int l = 0; l < T_P; l++) wbuf[c][l] <= '0;
    end else begin
      done   <= 1'b0;
      mem_re <= 1'b0;
      mem_we <= 1'b0;
      if (state != S_IDLE) n_busy_cycles <= n_busy_cycles + 1;

      // land the read whose data is on mem_rdata now
      rd_pend  <= 1'b0;
      rd2_pend <= rd_pend; rd2_zero <= rd_zero; rd2_isw <= rd_isw;
      rd2_a <= rd_a; rd2_b <= rd_b; rd2_idx <= rd_idx;
      if (rd2_pend) begin
        if (rd2_isw) wbuf[rd2_a][rd2_b] <= rd2_zero ? data_t'(0) : mem_rdata;
        else         ibuf[rd2_idx] <= rd2_zero ? data_t'(0) : mem_rdata;
      end

      unique case (state)
        S_IDLE: if (start) begin
          automatic logic [DIM_W-1:0] tp = eff_tp(pol_k);
          automatic logic [CW-1:0]    b  = (pol_br == '0) ? CW'(1) :
                                           (pol_br > b_act) ? b_act : pol_br;
          R <= dim_r; P <= dim_p; C <= dim_c; wb <= w_base; gm <= geom;
          k <= pol_k; bact <= b_act; br <= b;
          bp <= b_act - b + CW'(1);
          t_re <= eff_tr(pol_k); t_pe <= tp; t_ce <= eff_tc(pol_k);
          p_pad <= ((dim_p + tp - DIM_W'(1)) / tp) * tp;
          r_hat_n <= RHW'(b) * RHW'(dim_r);
          ibase <= in_base; obase <= out_base;
          rt <= '0; cb <= '0; ct <= '0; pt <= '0; ii <= '0; jj <= '0;
          nr <= min_d(eff_tr(pol_k), DIM_W'(RHW'(b) * RHW'(dim_r)));
          nc <= min_d(eff_tc(pol_k), dim_c);
          if (b_act == '0 || dim_r == '0 || dim_p == '0 || dim_c == '0) state <= S_DONE;
          else                                                       state <= S_LW;
        end

        // weight tile: ii = row p in tile (0..t_pe-1), jj = column (0..nc-1)
        S_LW: begin
          rd_pend <= 1'b1;
          rd_isw  <= 1'b1;
          rd_a    <= PEW'(wl_pe);
          rd_b    <= LNW'(wl_lane);
          rd_zero <= !(pt + ii < P);
          if (pt + ii < P) begin
            mem_re   <= 1'b1;
            mem_addr <= wb + ADDR_W'(pt + ii) * ADDR_W'(C) + ADDR_W'(ct + jj);
          end
          if (jj + DIM_W'(1) == nc) begin
            jj <= '0;
            if (ii + DIM_W'(1) == t_pe) begin ii <= '0; state <= S_LI; end
            else ii <= ii + DIM_W'(1);
          end else jj <= jj + DIM_W'(1);
        end

        // input tile: ii = row in tile (0..nr-1), jj = column (0..t_pe-1)
        S_LI: begin
          rd_pend <= 1'b1;
          rd_isw  <= 1'b0;
          rd_idx  <= IW'(32'(ii) * 32'(t_pe) + 32'(jj));
          rd_zero <= !ag_valid;
          if (ag_valid) begin
            mem_re   <= 1'b1;
            mem_addr <= ag_addr;
          end
          if (jj + DIM_W'(1) == t_pe) begin
            jj <= '0;
            if (ii + DIM_W'(1) == nr) begin ii <= '0; state <= S_LID; end
            else ii <= ii + DIM_W'(1);
          end else jj <= jj + DIM_W'(1);
        end

        S_LID:  state <= S_LID2;  // last input word is being read
        S_LID2: state <= S_COMP;  // and lands in the buffer

        // one pipelined row per cycle: ii = row in tile
        S_COMP: begin
          n_comp_cycles <= n_comp_cycles + 1;
          for (int c = 0; c < 2 * T_C; c++) begin
            if (DIM_W'(c) < t_ce && 32'(ii) * 32'(t_ce) + 32'(c) < OBUF) begin
              if (pt == '0) obuf[32'(ii) * 32'(t_ce) + 32'(c)] <= col_y[c];
              else obuf[32'(ii) * 32'(t_ce) + 32'(c)] <=
                     obuf[32'(ii) * 32'(t_ce) + 32'(c)] + col_y[c];
            end
          end
          if (ii + DIM_W'(1) == nr) begin
            ii <= '0;
            if (pt + t_pe >= p_pad) begin
              pt <= '0; state <= S_WB;
            end else begin
              pt <= pt + t_pe; state <= S_LW;
            end
          end else ii <= ii + DIM_W'(1);
        end

        // write back: ii = row in tile, jj = column in tile
        S_WB: begin
          if (ag_valid) begin
            mem_we    <= 1'b1;
            mem_addr  <= ag_addr;
            mem_wdata <= requant(obuf[o_idx]);
            if (ag_row == '0 && ct + jj == '0) conf[ag_s[SW-1:0]] <= requant(obuf[o_idx]);
          end
          if (jj + DIM_W'(1) == nc) begin
            jj <= '0;
            if (ii + DIM_W'(1) == nr) begin
              ii <= '0;
              // advance: column tile > column block > row tile
              if (ct + t_ce < C) begin
                ct <= ct + t_ce;
                nc <= min_d(t_ce, C - (ct + t_ce));
                state <= S_LW;
              end else begin
                ct <= '0;
                nc <= min_d(t_ce, C);
                if (cb + CW'(1) < bp) begin
                  cb <= cb + CW'(1);
                  state <= S_LW;
                end else begin
                  cb <= '0;
                  if (rt + RHW'(t_re) < r_hat_n) begin
                    rt <= rt + RHW'(t_re);
                    nr <= min_d(t_re, DIM_W'(r_hat_n - (rt + RHW'(t_re))));
                    state <= S_LW;
                  end else begin
                    state <= S_DONE;
                  end
                end
              end
            end else ii <= ii + DIM_W'(1);
          end else jj <= jj + DIM_W'(1);
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
